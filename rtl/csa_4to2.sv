// csa_4to2: reversible four-to-two carry save compressor (one bit slice).
//
// Two TSG full adders. The first adds i1, i2 and i3 (gate inputs
// A=i3, B=i2, C=0, D=i1); its carry leaves the slice as cout, to become the
// cin of the next more significant slice. The second adds its sum to i4 and
// the cin from the less significant slice (A=i4, B=cin, C=0, D=first sum)
// and gives the slice's sum and carry. Hence
//   i1 + i2 + i3 + i4 + cin = sum + 2*(carry + cout).
// Because cout does not depend on cin, a row of slices has no ripple.
// The gate-level wiring follows the published four-to-two compressor.
//
// Interface: i1..i4, cin in; sum, carry, cout and garbage g[3:0] out.
// Timing: combinational, two gate delays.
module csa_4to2 (
  input  logic       i1,
  input  logic       i2,
  input  logic       i3,
  input  logic       i4,
  input  logic       cin,
  output logic       sum,
  output logic       carry,
  output logic       cout,
  output logic [3:0] g
);
  logic s1;
  tsg_gate u_tsg1 (.a(i3), .b(i2), .c(1'b0), .d(i1),
                   .p(g[0]), .q(g[1]), .r(s1), .s(cout));
  tsg_gate u_tsg2 (.a(i4), .b(cin), .c(1'b0), .d(s1),
                   .p(g[2]), .q(g[3]), .r(sum), .s(carry));
endmodule
