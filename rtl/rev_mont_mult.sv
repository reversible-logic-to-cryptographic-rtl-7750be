// rev_mont_mult: Montgomery modular multiplier built from the reversible parts.
//
// Computes P = X * Y * 2^-N mod M for odd M and 0 <= X, Y < M, with the
// bit-serial carry-save form of Montgomery's algorithm:
//   S = C = 0
//   for i = 0 .. N-1:
//     S,C = S + C + x_i*Y          (first carry save adder)
//     S,C = S + C + s_0*M          (second carry save adder)
//     S = S div 2; C = C div 2
//   P = S + C; if P >= M then P = P - M
//
// Datapath, as the published multiplier describes it:
//  * x_i*Y and s_0*M are bitwise ANDs, each a Fredkin gate with one data
//    input tied to 0.
//  * Each carry save adder is one row of TSG full adders (3 inputs -> sum
//    and carry vectors, no carry ripple).
//  * The first adder's outputs go into the latch registers S and C
//    (rev_register); s_0 is the least significant bit of register S.
//  * The second adder's outputs go into shift registers (rev_shift_register)
//    that hold S div 2 and C div 2 for the next iteration.
//  * X sits in a third shift register whose serial output is x_i.
//  * The final P = S + C and the conditional subtraction are two rev_cpa
//    adders (P + ~M + 1; its carry-out says P >= M) and a Fredkin
//    multiplexer per bit. The paper only says these can be reversible too;
//    their form here is this design's choice.
// S and C are W = N+2 bits wide: S + C stays below 2M, and the sums inside
// an iteration stay below 4M < 2^(N+2).
//
// Clocking (this design's choice; the paper gives no timing). One loop
// iteration per clock period of cp. The shift registers take their input at
// the falling edge of cp. The S/C latch registers are enabled by cp', so
// they pass the first adder's result while cp is 0 and hold it while cp is 1,
// when the second adder's result settles into the shift registers' master
// latches. The "div 2" is the one-position right shift applied as the
// shift registers are loaded. The sequencer is ordinary clocked logic on
// the rising edge of cp; the paper allows control to be irreversible.
// Every path from a shift register's output back to its input passes a
// pair of latches that are open in opposite phases of cp, so the design is
// free of races; tools that treat latches as combinational logic report
// this path as a combinational loop (circular logic through u_sshift.q),
// which is expected here.
//
// Interface: start (one cycle, sampled on a rising edge of cp while idle or
// done) starts a multiplication of x, y mod m. x is captured at the start;
// y and m must stay constant until done. busy is high during the N+1 cycles
// of work; done rises at the (N+2)-th rising edge after the one that took
// start, and p is then valid and held until the next start. rst_n is an
// asynchronous active-low reset of the sequencer only.
module rev_mont_mult
  import rev_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic         cp,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  input  logic [N-1:0] m,
  output logic [N-1:0] p,
  output logic         busy,
  output logic         done
);
  localparam int unsigned W  = N + 2;
  localparam int unsigned CW = $clog2(N + 1);

  // ---------------- sequencer (conventional logic) ----------------
  mont_state_t    state;
  logic [CW-1:0]  iter;
  logic           clr, run;

  always_ff @(posedge cp or negedge rst_n) begin
    if (!rst_n) begin
      state <= MM_IDLE;
      iter  <= '0;
    end else begin
      unique case (state)
        MM_IDLE, MM_DONE: if (start) state <= MM_INIT;
        MM_INIT: begin
          state <= MM_RUN;
          iter  <= '0;
        end
        MM_RUN: begin
          if (iter == CW'(N - 1)) state <= MM_DONE;
          iter <= iter + 1'b1;
        end
      endcase
    end
  end

  assign clr  = (state == MM_INIT);
  assign run  = (state == MM_RUN);
  assign busy = clr | run;
  assign done = (state == MM_DONE);

  // Montgomery reduction needs an odd modulus.
  a_m_odd: assert property (@(posedge cp) disable iff (!rst_n)
                            (start && (state == MM_IDLE || state == MM_DONE)) |-> m[0])
    else $error("rev_mont_mult: even modulus");

  // ---------------- clock copies ----------------
  logic cp_t, cp_n;
  feynman_gate u_clkinv (.a(cp), .b(1'b1), .p(cp_t), .q(cp_n));

  // ---------------- X shift register: x_i ----------------
  logic [N-1:0] x_q;
  logic         xi;
  rev_shift_register #(.W(N)) u_xreg (
    .cp(cp_t), .si(1'b0), .load(clr), .pin(x), .q(x_q), .so(xi)
  );

  // ---------------- first CSA: S + C + x_i*Y ----------------
  logic [W-1:0] s_sh, c_sh;          // S div 2, C div 2 from the shift registers
  logic [W-1:0] y_w, m_w;
  logic [W-1:0] xy, sum1, car1, c1;
  logic [W-1:0] s_reg, c_reg;
  logic         s0;
  logic [W-1:0] sm, sum2, car2;
  logic [W-1:0] s_half, c_half, s_hold, c_hold, s_next, c_next;

  assign y_w = {2'b00, y};
  assign m_w = {2'b00, m};

  for (genvar j = 0; j < W; j++) begin : g_csa1
    logic and_y1, and_y2, fa_gp, fa_gq;
    fredkin_gate u_and (.x1(xi), .x2(y_w[j]), .x3(1'b0),
                        .y1(and_y1), .y2(and_y2), .y3(xy[j]));
    tsg_full_adder u_fa (.a(s_sh[j]), .b(c_sh[j]), .cin(xy[j]),
                         .sum(sum1[j]), .cout(car1[j]), .g_p(fa_gp), .g_q(fa_gq));
  end
  assign c1 = {car1[W-2:0], 1'b0};

  // ---------------- registers S and C (latches, open while cp is 0) ----------------
  rev_register #(.W(W)) u_sreg (.cp(cp_n), .i(sum1), .q(s_reg));
  rev_register #(.W(W)) u_creg (.cp(cp_n), .i(c1),   .q(c_reg));
  assign s0 = s_reg[0];

  // ---------------- second CSA: S + C + s_0*M ----------------
  for (genvar j = 0; j < W; j++) begin : g_csa2
    logic and_y1, and_y2, fa_gp, fa_gq;
    fredkin_gate u_and (.x1(s0), .x2(m_w[j]), .x3(1'b0),
                        .y1(and_y1), .y2(and_y2), .y3(sm[j]));
    tsg_full_adder u_fa (.a(s_reg[j]), .b(c_reg[j]), .cin(sm[j]),
                         .sum(sum2[j]), .cout(car2[j]), .g_p(fa_gp), .g_q(fa_gq));
  end

  // div 2: sum2[0] is always 0 here (S + C + s_0*M is even and the carry
  // vector's LSB is 0); the carry vector is car2 shifted up by one, so its
  // half is car2 itself.
  assign s_half = {1'b0, sum2[W-1:1]};
  assign c_half = {1'b0, car2[W-2:0]};

  // Next value of the S/C shift registers:
  //   run ? half : (clr ? 0 : hold current value)
  for (genvar j = 0; j < W; j++) begin : g_next
    logic hs_y1, hs_y3, hc_y1, hc_y3, ns_y1, ns_y3, nc_y1, nc_y3;
    fredkin_gate u_hold_s (.x1(clr), .x2(s_sh[j]), .x3(1'b0),
                           .y1(hs_y1), .y2(s_hold[j]), .y3(hs_y3));
    fredkin_gate u_hold_c (.x1(clr), .x2(c_sh[j]), .x3(1'b0),
                           .y1(hc_y1), .y2(c_hold[j]), .y3(hc_y3));
    fredkin_gate u_sel_s  (.x1(run), .x2(s_hold[j]), .x3(s_half[j]),
                           .y1(ns_y1), .y2(s_next[j]), .y3(ns_y3));
    fredkin_gate u_sel_c  (.x1(run), .x2(c_hold[j]), .x3(c_half[j]),
                           .y1(nc_y1), .y2(c_next[j]), .y3(nc_y3));
  end

  // ---------------- shift registers S div 2 and C div 2 ----------------
  logic s_so, c_so;
  rev_shift_register #(.W(W)) u_sshift (
    .cp(cp_t), .si(1'b0), .load(1'b1), .pin(s_next), .q(s_sh), .so(s_so)
  );
  rev_shift_register #(.W(W)) u_cshift (
    .cp(cp_t), .si(1'b0), .load(1'b1), .pin(c_next), .q(c_sh), .so(c_so)
  );

  // ---------------- P = S + C; if P >= M then P = P - M ----------------
  logic [W-1:0] psum, pg1, pg0, m_inv, minv_p, diff, dg1, dg0, pres;
  logic [W-1:0] r_y1, r_y3;
  logic         pcout, ge;

  rev_cpa #(.W(W)) u_add (.x(s_sh), .y(c_sh), .cin(1'b0),
                          .s(psum), .cout(pcout), .g1(pg1), .g0(pg0));
  for (genvar j = 0; j < W; j++) begin : g_inv
    feynman_gate u_not (.a(m_w[j]), .b(1'b1), .p(minv_p[j]), .q(m_inv[j]));
  end
  rev_cpa #(.W(W)) u_sub (.x(psum), .y(m_inv), .cin(1'b1),
                          .s(diff), .cout(ge), .g1(dg1), .g0(dg0));
  for (genvar j = 0; j < W; j++) begin : g_sel
    fredkin_gate u_mux (.x1(ge), .x2(psum[j]), .x3(diff[j]),
                        .y1(r_y1[j]), .y2(pres[j]), .y3(r_y3[j]));
  end
  assign p = pres[N-1:0];
endmodule
