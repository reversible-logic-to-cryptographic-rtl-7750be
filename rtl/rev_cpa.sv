// rev_cpa: reversible ripple carry propagate adder built from TSG full adders.
//
// Bit i is one TSG gate in full-adder configuration with inputs
// (X[i], Y[i], 0, carry-in); its carry output feeds bit i+1, bit 0 takes the
// adder's carry-in and the last carry is the adder's carry-out. Each bit has
// two garbage outputs (g1 = X[i], g0 = X[i] xor Y[i]), returned as vectors.
// The structure is the published four-bit adder, generalised to W bits;
// the width parameter is this design's addition.
//
// Interface: x, y (W bits), cin in; s (W bits), cout, g1, g0 out.
// Timing: combinational, W gate delays along the carry chain.
module rev_cpa #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout,
  output logic [W-1:0] g1,
  output logic [W-1:0] g0
);
  logic [W:0] c;
  assign c[0] = cin;
  for (genvar i = 0; i < W; i++) begin : g_bit
    tsg_full_adder u_fa (
      .a(x[i]), .b(y[i]), .cin(c[i]),
      .sum(s[i]), .cout(c[i+1]), .g_p(g1[i]), .g_q(g0[i])
    );
  end
  assign cout = c[W];
endmodule
