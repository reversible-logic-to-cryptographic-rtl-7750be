// rev_d_latch: reversible D latch made of one Fredkin gate and one Feynman gate.
//
// The latch's characteristic equation Q+ = D.E + E'.Q is exactly the third
// output of a Fredkin gate whose inputs are (E, D, Q). The gate's output is
// copied by a Feynman gate with its second input at 0: one copy is the
// latch output, the other is fed back to the Fredkin gate's third input.
// The Fredkin gate's first output passes E on (e_out, usable to chain the
// enable to the next latch) and its second output (E'.D + E.Q) is garbage.
//
// The feedback wire is the storage node. Written literally, the gate
// network is a combinational loop, which simulators and synthesis tools
// handle badly. Here the stored value is instead a level-sensitive
// always_latch that takes D while E is 1 and keeps its value while E is 0;
// it feeds the Fredkin gate's third input in place of the looped-back copy.
// Q is therefore the same function of (E, D, stored value) as in the gate
// network. This way of writing the storage is this design's choice; the
// gates are the published ones. Tools report the intended latch here.
//
// Interface: e (enable / clock), d in; q and its Feynman copy q_copy,
// e_out, garbage out.
// Timing: transparent while e is 1 (q follows d after two gate delays),
// holds while e is 0.
module rev_d_latch (
  input  logic e,
  input  logic d,
  output logic q,
  output logic q_copy,
  output logic e_out,
  output logic garbage
);
  logic q_fb;     // stored value on the feedback wire
  logic q_next;   // Fredkin output D.E + E'.Q

  fredkin_gate u_f (.x1(e), .x2(d), .x3(q_fb),
                    .y1(e_out), .y2(garbage), .y3(q_next));
  feynman_gate u_fg (.a(q_next), .b(1'b0), .p(q), .q(q_copy));

  always_latch begin
    if (e) q_fb = d;
  end
endmodule
