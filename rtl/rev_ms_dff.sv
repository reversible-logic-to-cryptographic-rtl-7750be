// rev_ms_dff: reversible master-slave D flip-flop.
//
// A Feynman gate with inputs (CP, 1) makes CP and its complement. The
// master rev_d_latch is enabled by CP and the slave, which takes the
// master's output, by CP'. While CP is 1 the master follows D and the slave
// holds; when CP falls the master freezes and the slave passes the frozen
// value to Q. The flip-flop therefore takes D on the falling edge of CP.
// The gate network (two Fredkin latches and the clock Feynman gate) is the
// published one; which latch gets CP and which CP' follows the printed CP'
// label on the slave.
//
// Interface: cp, d in; q out. Timing: Q changes just after CP falls; D must
// be stable before that edge.
module rev_ms_dff (
  input  logic cp,
  input  logic d,
  output logic q
);
  logic cp_t, cp_n;
  logic qm, qm_copy, qs_copy, em_out, es_out, gm, gs;

  feynman_gate u_clk (.a(cp), .b(1'b1), .p(cp_t), .q(cp_n));

  rev_d_latch u_master (.e(cp_t), .d(d), .q(qm), .q_copy(qm_copy),
                        .e_out(em_out), .garbage(gm));
  rev_d_latch u_slave  (.e(cp_n), .d(qm), .q(q), .q_copy(qs_copy),
                        .e_out(es_out), .garbage(gs));
endmodule
