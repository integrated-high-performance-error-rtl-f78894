// erase_lane - one check row of the residual-bit-error correction
// (combinational).
//
// Read phase, edge k: from the row's bit u and its suspicious flag e
// (|LLR| < Delta) it keeps a saturating count of suspicious bits in the row
// (0, 1, 2 = "two or more"), the edge holding the suspicious bit, the parity
// of the reliable bits XOR the syndrome bit (the row's entry of
// s_c = s XOR s_ebar), and the parity of all bits XOR the syndrome bit
// (0 means the row is satisfied).
// Write phase, edge k: if the row holds exactly one suspicious bit and it
// sits on edge k, that bit is set to s_c and marked reliable.
module erase_lane #(
  parameter int KW = 2
) (
  input  logic [KW-1:0] k,
  input  logic          syn,
  input  logic          u_rot,     // hard decision of edge k
  input  logic          e_rot,     // suspicious flag of edge k
  input  logic [1:0]    cnt,
  input  logic [KW-1:0] kpos,
  input  logic          sc,
  input  logic          sa,
  output logic [1:0]    cnt_n,
  output logic [KW-1:0] kpos_n,
  output logic          sc_n,
  output logic          sa_n,
  input  logic          fix_en,    // write phase, fixing allowed
  output logic          fix,       // this row fixes the bit on edge k
  output logic          u_new,
  output logic          e_new
);

  always_comb begin
    if (k == '0) begin
      cnt_n  = {1'b0, e_rot};
      kpos_n = '0;
      sc_n   = syn ^ (u_rot & ~e_rot);
      sa_n   = syn ^ u_rot;
    end else begin
      cnt_n  = (cnt == 2'd2) ? 2'd2 : cnt + {1'b0, e_rot};
      kpos_n = (e_rot && cnt == 2'd0) ? k : kpos;
      sc_n   = sc ^ (u_rot & ~e_rot);
      sa_n   = sa ^ u_rot;
    end
    fix   = fix_en && (cnt == 2'd1) && (kpos == k);
    u_new = fix ? sc : u_rot;
    e_new = fix ? 1'b0 : e_rot;
  end

endmodule
