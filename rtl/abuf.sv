// abuf: A buffer of one PE row.
//
// Holds the window of D (= 9) consecutive K-steps of the row's A vectors,
// K0 INT8 lanes each, as read from the A SRAM (the SRAM's read registers are
// the storage; this block is the logic on them).  Each K-step is passed
// through the load-balancing shuffler (rotation = K-step mod 4), K-steps at or
// past k1 read as zero, and a non-zero mask is produced for the zero-skipping
// logic (step 2 of the paper's dual-sparse flow).
//
// It also builds the nine AMUX inputs of every lane k (view):
//   dense, conf.B, conf.AB : view[i][k] = A at K-step base+i, lane k, i = 0..8
//   conf.A (Sparse.A(2,1,1)): view[0..2][k] = own lane, K-steps 0..2
//                             view[3..4][k] = lane k+1, K-steps 1..2 (da2)
//                             view[5..6][k] = next PE row, lane k,
//                                             K-steps 1..2 (da3, nbr_dat)
// The paper copies the neighbour row's two entries into the ABUF; here they
// are wired in through nbr_dat instead.  Purely combinational.
module abuf
  import griffin_pkg::*;
#(
  parameter int unsigned K0 = 16,
  parameter int unsigned D  = ABUF_D
) (
  input  mode_e                         mode,
  input  logic                          shuffle_en,
  input  logic [TW-1:0]                 base,
  input  logic [TW-1:0]                 k1,
  input  logic [D-1:0][K0-1:0][DW-1:0]  win,
  input  logic [1:0][K0-1:0][DW-1:0]    nbr_dat,
  output logic [D-1:0][K0-1:0][DW-1:0]  dat,
  output logic [D-1:0][K0-1:0]          nz,
  output logic [AMUX_N-1:0][K0-1:0][DW-1:0] view
);
  logic [D-1:0][K0-1:0][DW-1:0] shuf;

  for (genvar i = 0; i < D; i++) begin : g_shuf
    logic [1:0] t;  // rotation = K-step mod 4
    assign t = base[1:0] + 2'(i);
    shuffler #(.K0(K0), .W(DW)) u_shuf (
      .en(shuffle_en), .rot(t[1:0]), .din(win[i]), .dout(shuf[i]));
  end

  always_comb begin
    for (int unsigned i = 0; i < D; i++) begin
      for (int unsigned k = 0; k < K0; k++) begin
        dat[i][k] = (base + TW'(i) < k1) ? shuf[i][k] : '0;
        nz[i][k]  = dat[i][k] != '0;
      end
    end
    view = '0;
    if (mode == MODE_A) begin
      for (int unsigned k = 0; k < K0; k++) begin
        view[0][k] = dat[0][k];
        view[1][k] = dat[1][k];
        view[2][k] = dat[2][k];
        if (k + 1 < K0) begin
          view[3][k] = dat[1][k+1];
          view[4][k] = dat[2][k+1];
        end
        view[5][k] = nbr_dat[0][k];
        view[6][k] = nbr_dat[1][k];
      end
    end else begin
      for (int unsigned i = 0; i < AMUX_N && i < D; i++) view[i] = dat[i];
    end
  end
endmodule
