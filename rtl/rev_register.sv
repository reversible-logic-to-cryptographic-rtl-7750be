// rev_register: W-bit storage register of reversible D latches.
//
// One rev_d_latch per bit, all enabled by the same clock line cp: while cp
// is 1 the register is transparent and q follows i, while cp is 0 it holds.
// The published register has four bits (inputs I1..I4, outputs A1..A4, one
// common clock); that is the default width here.
//
// Interface: cp, i[W-1:0] in; q[W-1:0] out.
// Timing: level sensitive, as rev_d_latch.
module rev_register #(
  parameter int unsigned W = 4
) (
  input  logic         cp,
  input  logic [W-1:0] i,
  output logic [W-1:0] q
);
  logic [W-1:0] q_copy, e_out, garbage;
  for (genvar b = 0; b < W; b++) begin : g_bit
    rev_d_latch u_latch (
      .e(cp), .d(i[b]), .q(q[b]), .q_copy(q_copy[b]),
      .e_out(e_out[b]), .garbage(garbage[b])
    );
  end
endmodule
