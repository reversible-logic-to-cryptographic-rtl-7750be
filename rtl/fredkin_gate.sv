// fredkin_gate: the 3x3 conservative reversible Fredkin (controlled-swap) gate.
//
//   y1 = x1
//   y2 = x1'.x2 + x1.x3
//   y3 = x1.x2  + x1'.x3
// When x1 is 0 the two data lines pass straight through to y2/y3 crosswise,
// when x1 is 1 they are swapped, so the number of ones is preserved. With one
// data input tied to 0 the gate gives an AND; with x1 as a select it is a
// 2:1 multiplexer. The equations are the gate's standard definition.
//
// Interface: x1 (control), x2, x3 in; y1, y2, y3 out. Combinational.
module fredkin_gate (
  input  logic x1,
  input  logic x2,
  input  logic x3,
  output logic y1,
  output logic y2,
  output logic y3
);
  always_comb begin
    y1 = x1;
    y2 = (~x1 & x2) | (x1 & x3);
    y3 = (x1 & x2) | (~x1 & x3);
  end
endmodule
