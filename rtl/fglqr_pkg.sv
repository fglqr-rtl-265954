// fglqr_pkg: sizes, command codes and record formats shared by the blocks
// of the factor-graph LQR accelerator.
//
// The default problem is the one the accelerator is evaluated on: a
// 5-dimensional state, a 2-dimensional control and a horizon of 50 steps.
// The number of Update units of the QR block is not given by the reference
// design; 4 is this design's choice.
package fglqr_pkg;

  localparam int NX_DEF    = 5;   // state dimension
  localparam int NU_DEF    = 2;   // control dimension
  localparam int N_DEF     = 50;  // time horizon
  localparam int N_UPD_DEF = 4;   // Update units per partial-QR block

  // engine commands
  typedef enum logic [1:0] {
    OP_SWEEP   = 2'd0,  // eliminate this engine's half of the graph
    OP_MID     = 2'd1,  // eliminate the middle state (left engine only)
    OP_BACKSUB = 2'd2   // back-substitute a range of conditionals
  } eng_op_e;

  // Header of one conditional (one eliminated variable): where its own
  // solution goes and where the separator values are read from, as word
  // addresses of the solution memory. The separator columns are the
  // concatenation of two address runs.
  typedef struct packed {
    logic [15:0] front_base;
    logic [3:0]  nf;         // frontal dimension (rows of the conditional)
    logic [3:0]  ns;         // separator dimension
    logic [15:0] sep0_base;
    logic [3:0]  sep0_len;
    logic [15:0] sep1_base;
  } cond_hdr_t;

endpackage
