// csa_5to2_row: W columns of csa_5to2 slices reducing five W-bit operands
// (plus one carry-in bit) to a sum vector and a carry vector.
//
// Column j passes cout1/cout2 to column j+1 as cin1/cin2; column 0 takes
// cin as cin1 and 0 as cin2.
//   a + b + c + d + e + cin = s + 2*cv + 2^W * (cout1 + cout2)
// The caller zero-extends its operands far enough that both couts are 0.
// A row of the published slice; the row itself is this design's helper.
// Combinational, three gate delays.
module csa_5to2_row #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  input  logic [W-1:0] d,
  input  logic [W-1:0] e,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic [W-1:0] cv,
  output logic         cout1,
  output logic         cout2
);
  logic [W:0] k1, k2;
  assign k1[0] = cin;
  assign k2[0] = 1'b0;
  for (genvar j = 0; j < W; j++) begin : g_col
    logic [5:0] g;
    csa_5to2 u_slice (.i1(a[j]), .i2(b[j]), .i3(c[j]), .i4(d[j]), .i5(e[j]),
                      .cin1(k1[j]), .cin2(k2[j]),
                      .sum(s[j]), .carry(cv[j]), .cout1(k1[j+1]), .cout2(k2[j+1]),
                      .g(g));
  end
  assign cout1 = k1[W];
  assign cout2 = k2[W];
endmodule
