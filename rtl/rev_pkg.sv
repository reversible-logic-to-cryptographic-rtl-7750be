// rev_pkg: types shared by the reversible crypto-ALU modules.
//
// alu_op_t selects the operation of the crypto-ALU; mont_state_t is the
// state of the Montgomery multiplier's (conventional) sequencer. Both
// encodings are this design's choice.
package rev_pkg;
  typedef enum logic [1:0] {
    OP_ADD     = 2'd0,  // a + b + cin, ripple carry propagate adder
    OP_ADD4    = 2'd1,  // a + b + c + d + cin, four-to-two compressor row
    OP_ADD5    = 2'd2,  // a + b + c + d + e + cin, five-to-two compressor row
    OP_MONTMUL = 2'd3   // a * b * 2^-N mod m, Montgomery multiplier
  } alu_op_t;

  typedef enum logic [1:0] {
    MM_IDLE = 2'd0,
    MM_INIT = 2'd1,     // clear S and C, load X
    MM_RUN  = 2'd2,     // one iteration of the Montgomery loop per clock
    MM_DONE = 2'd3      // result valid, held until the next start
  } mont_state_t;
endpackage
