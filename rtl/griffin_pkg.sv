// griffin_pkg: types and constants shared by the Griffin sparse GEMM core.
//
// The core multiplies INT8 matrices (C += A x B) on an M0 x N0 array of
// processing elements, each a K0-wide dot-product unit.  It runs in one of
// four modes: dense, conf.B = Sparse.B(8,0,1) for weight-only sparsity,
// conf.A = Sparse.A(2,1,1) for activation-only sparsity and
// conf.AB = Sparse.AB(2,0,0,2,0,1) for dual sparsity.  The buffer depths and
// MUX fan-ins below are the ones that mode set requires (9-entry ABUF,
// 3-entry BBUF, 9-input AMUX, 5-input BMUX).  The accumulator width, the
// per-lane select bundle and the compressed-B row header are this design's
// own choices.
package griffin_pkg;

  typedef enum logic [1:0] {
    MODE_DENSE = 2'd0,   // no skipping, one K-step per cycle
    MODE_B     = 2'd1,   // conf.B:  Sparse.B(8,0,1), B preprocessed
    MODE_A     = 2'd2,   // conf.A:  Sparse.A(2,1,1), A zeros skipped on the fly
    MODE_AB    = 2'd3    // conf.AB: Sparse.AB(2,0,0,2,0,1)
  } mode_e;

  localparam int unsigned DW      = 8;   // INT8 operands
  localparam int unsigned ACCW    = 32;  // accumulator width
  localparam int unsigned ABUF_D  = 9;   // ABUF entries (K-steps) per lane
  localparam int unsigned BBUF_D  = 3;   // BBUF entries (B rows) per lane
  localparam int unsigned AMUX_N  = 9;   // AMUX fan-in
  localparam int unsigned BMUX_N  = 5;   // BMUX fan-in (conf.A)
  localparam int unsigned ADV_W   = 4;   // width of a B row's advance header
  localparam int unsigned TW      = 16;  // K-step / row pointer width

  // One element of a (compressed) B row.  val = 0 marks an empty slot.
  // aoff: K-step offset of the A operand from the row's own K-step (0..8).
  // col : the element belongs to the next column (db3 borrow); its product
  //       goes through the extra adder tree to the neighbour's accumulator.
  typedef struct packed {
    logic signed [DW-1:0] val;
    logic [3:0]           aoff;
    logic                 col;
  } bent_t;

  localparam int unsigned BENT_W = $bits(bent_t);  // 13

  // Per-lane operand selection driven into a PE.
  typedef struct packed {
    logic       en;    // lane multiplies this cycle
    logic [3:0] asel;  // AMUX input 0..8
    logic [2:0] bsel;  // BMUX input 0..4
    logic       adt;   // 0: own adder tree, 1: extra adder tree
  } lsel_t;


endpackage
