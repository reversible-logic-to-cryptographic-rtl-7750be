// rev_shift_register: W-stage reversible right shift register.
//
// A chain of rev_ms_dff flip-flops. The serial input si enters the most
// significant (leftmost) stage, every clock pulse moves the contents one
// position to the right and the least significant stage is the serial
// output so. The clock is fanned out to the stages through a chain of
// Feynman gates with their second input at 0, as in the published
// four-stage register (the default width here).
//
// Added in this design: a parallel load. In front of each stage a Fredkin
// gate acts as a 2:1 multiplexer with load as its control: load = 0 gives
// the published shift, load = 1 takes pin into the register in the same
// clock. The multi-bit datapaths that use this register need it to take a
// whole word at once.
//
// Interface: cp, si, load, pin[W-1:0] in; q[W-1:0], so out.
// Timing: q changes just after each falling edge of cp (see rev_ms_dff);
// si, load and pin must be stable before that edge.
//
// When pin is computed from q (as in rev_mont_mult), simulators and
// synthesis tools report a combinational loop through q. The loop runs
// through the master and slave latches, which are never open together, so
// it is the intended storage path and is kept.
module rev_shift_register #(
  parameter int unsigned W = 4
) (
  input  logic         cp,
  input  logic         si,
  input  logic         load,
  input  logic [W-1:0] pin,
  output logic [W-1:0] q,
  output logic         so
);
  logic [W:0]   cp_chain;   // copies of the clock along the Feynman chain
  logic [W-1:0] d;
  logic [W-1:0] mux_y1, mux_y3;
  logic [W:0]   shift_in;   // value each stage takes when shifting

  assign cp_chain[0] = cp;
  assign shift_in = {si, q};

  for (genvar b = 0; b < W; b++) begin : g_stage
    logic cp_stage;
    feynman_gate u_clk (.a(cp_chain[b]), .b(1'b0), .p(cp_chain[b+1]), .q(cp_stage));
    // y2 = load' . shift + load . pin
    fredkin_gate u_mux (.x1(load), .x2(shift_in[b+1]), .x3(pin[b]),
                        .y1(mux_y1[b]), .y2(d[b]), .y3(mux_y3[b]));
    rev_ms_dff u_ff (.cp(cp_stage), .d(d[b]), .q(q[b]));
  end
  assign so = q[0];
endmodule
