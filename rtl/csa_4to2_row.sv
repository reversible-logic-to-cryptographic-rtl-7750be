// csa_4to2_row: W columns of csa_4to2 slices reducing four W-bit operands
// (plus one carry-in bit) to a sum vector and a carry vector.
//
// Column j passes its cout to column j+1 as cin; column 0 takes cin.
//   a + b + c + d + cin = s + 2*cv + 2^W * cout
// where cv[j] is column j's carry. The caller zero-extends its operands
// far enough that cout is 0. A row of the published slice; the row
// itself is this design's helper. Combinational, two gate delays.
module csa_4to2_row #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  input  logic [W-1:0] d,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic [W-1:0] cv,
  output logic         cout
);
  logic [W:0] k;   // inter-column carries
  assign k[0] = cin;
  for (genvar j = 0; j < W; j++) begin : g_col
    logic [3:0] g;
    csa_4to2 u_slice (.i1(a[j]), .i2(b[j]), .i3(c[j]), .i4(d[j]), .cin(k[j]),
                      .sum(s[j]), .carry(cv[j]), .cout(k[j+1]), .g(g));
  end
  assign cout = k[W];
endmodule
