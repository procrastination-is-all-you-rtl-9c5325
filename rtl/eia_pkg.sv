// eia_pkg: types shared by the exponent indexed accumulator (EIA) modules.
//
// An EIA adds numbers of the form m*2^e by keeping one partial sum per
// exponent group (accumulation phase) and combining the partial sums with a
// shift-and-add pass afterwards (reconstruction phase).  This package holds
// the reconstruction mode word and the reconstruction sequencer states, the
// only things that several modules share.
package eia_pkg;

  // Width of the "how many groups below the maximum" field of a truncated
  // reconstruction.  16 bits covers every group count the modules can have.
  localparam int unsigned DEPTH_W = 16;

  // How a reconstruction pass is run.
  //   truncate : start only `depth` groups below the highest group that was
  //              written (fast, inexact); otherwise start at the lowest group
  //              written (exact).  The skipped groups are cleared all at once.
  //   keep     : do not clear the partial sums, so more numbers can be added
  //              on top of the current ones afterwards.
  typedef struct packed {
    logic               truncate;
    logic               keep;
    logic [DEPTH_W-1:0] depth;
  } recon_mode_t;

  // States of the reconstruction sequencer.
  typedef enum logic [0:0] {
    SEQ_ACCUM = 1'b0,   // accepting numbers, tracking min/max group
    SEQ_READ  = 1'b1    // stepping through the partial sums
  } seq_state_t;

endpackage
