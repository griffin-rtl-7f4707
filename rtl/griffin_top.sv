// griffin_top: the Griffin hybrid sparse GEMM core.
//
// Computes one output tile C[M0][N0] += A[M0][K] x B[K][N0] (INT8 operands,
// 32-bit accumulators, output-stationary) on M0 x N0 processing elements of
// K0 multipliers each (4 x 16 x 16 = 1024 MACs by default).  K is processed
// as k1 K-steps of K0 elements.  The same hardware morphs into four
// configurations (mode):
//   MODE_DENSE: one K-step per cycle, no skipping.
//   MODE_B    : conf.B = Sparse.B(8,0,1).  B was compressed offline: each slot
//               of a compressed row holds a non-zero B element from up to 8
//               K-steps ahead (db1) in the same lane, or from the next column
//               (db3); its metadata drives the AMUX directly.  One compressed
//               row per cycle; only BBUF row 0 is used.
//   MODE_A    : conf.A = Sparse.A(2,1,1).  B is dense; zero A entries are
//               skipped on the fly by one arbiter per PE row (da1 = 2,
//               da2 = 1, da3 = 1 into the next row).
//   MODE_AB   : conf.AB = Sparse.AB(2,0,0,2,0,1).  Compressed B as in conf.B
//               (db1 = 2, db3 = 1) and a control unit per PE that also skips
//               zero A operands, borrowing up to 2 BBUF rows ahead (da1 = 2).
// shuffle_en applies the lane-rotation load balancing to A and to raw B; for
// compressed B the same rotation must be applied by the offline compressor.
//
// Structure: per PE row an A SRAM bank (window of 9 K-steps per cycle), an
// ABUF and a row arbiter; one B SRAM (window of 3 rows for all columns); per
// PE column a BBUF; per PE a control unit and the PE; one controller.  The
// extra adder tree of PE(m,n) feeds PE(m,n+1) in conf.B/conf.AB and
// PE(m+1,n) in conf.A.
//
// Interface: the host writes A (a_we per row, one K-step vector per address)
// and B (one row per address: bits [BW-1 -: 4] = advance header, below that
// bent_t entries [N0][K0]; in raw modes only the val fields are used and row
// t is K-step t), then pulses start with mode, shuffle_en, k1 and b_rows
// stable until done.  done pulses one cycle after the last run cycle; c_out
// then holds the tile and cycles the number of run cycles.  Sizes follow the
// paper (K0,N0,M0 = 16,16,4; 512 kB ASRAM; 32 kB BSRAM of B values); the
// SRAM banking, the header field and the handshake are this design's own.
//
// Lint notes: the upper bits of a_rbase/b_rbase are unused on purpose (the
// SRAMs are addressed modulo their depth); adat (the ABUF window is used
// through its AMUX view), a_take/a_used and the last row's
// a_brw outputs are not needed at this level (the bottom row has no
// row below to borrow from, the top row is borrowed from by nobody).
module griffin_top
  import griffin_pkg::*;
#(
  parameter int unsigned M0      = 4,
  parameter int unsigned N0      = 16,
  parameter int unsigned K0      = 16,
  parameter int unsigned A_DEPTH = 8192,
  parameter int unsigned B_DEPTH = 128,
  localparam int unsigned AAW    = $clog2(A_DEPTH),
  localparam int unsigned BAW    = $clog2(B_DEPTH),
  localparam int unsigned BW     = ADV_W + N0 * K0 * BENT_W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  mode_e                             mode,
  input  logic                              shuffle_en,
  input  logic [TW-1:0]                     k1,
  input  logic [TW-1:0]                     b_rows,
  input  logic [M0-1:0]                     a_we,
  input  logic [AAW-1:0]                    a_waddr,
  input  logic [K0-1:0][DW-1:0]             a_wdata,
  input  logic                              b_we,
  input  logic [BAW-1:0]                    b_waddr,
  input  logic [BW-1:0]                     b_wdata,
  output logic                              busy,
  output logic                              stall,
  output logic                              done,
  output logic [31:0]                       cycles,
  output logic [M0-1:0][N0-1:0][ACCW-1:0]   c_out
);
  // ---------------- controller
  logic                        run, clr;
  logic [TW-1:0]               a_base, b_base, a_rbase, b_rbase;
  logic [1:0]                  a_adv, b_adv;
  logic [BBUF_D-1:0][3:0]      off;
  logic [BBUF_D-1:0][ADV_W-1:0] hdr;
  logic [2:0]                  done_a;
  logic [BBUF_D-1:0]           done_ab;

  griffin_ctrl u_ctrl (
    .clk, .rst_n, .start, .mode, .k1, .b_rows, .hdr, .done_a, .done_ab,
    .busy, .run, .clr, .a_base, .b_base, .a_rbase, .b_rbase, .a_adv, .b_adv,
    .off, .stall, .done, .cycles);

  // ---------------- A side: SRAM bank, ABUF, arbiter per row
  logic [M0-1:0][ABUF_D-1:0][K0-1:0][DW-1:0]  awin, adat;
  logic [M0-1:0][ABUF_D-1:0][K0-1:0]          anz;
  logic [M0-1:0][AMUX_N-1:0][K0-1:0][DW-1:0]  aview;
  logic [M0-1:0][2:0][K0-1:0]                 a_take, a_brw, a_used;
  logic [M0-1:0][2:0]                         a_done;
  lsel_t [M0-1:0][K0-1:0]                     a_sel;

  for (genvar m = 0; m < M0; m++) begin : g_row
    logic [1:0][K0-1:0][DW-1:0] nbr_dat;
    logic [2:0][K0-1:0]         nbr_nz, nbr_take, nbr_used, brw_in;

    win_sram #(.WIDTH(K0*DW), .DEPTH(A_DEPTH), .NWIN(ABUF_D), .NSUB(16)) u_asram (
      .clk, .we(a_we[m]), .waddr(a_waddr), .wdata(a_wdata),
      .rbase(a_rbase[AAW-1:0]), .rwin(awin[m]));

    if (m + 1 < M0) begin : g_nbr
      assign nbr_dat  = {adat[m+1][2], adat[m+1][1]};
      assign nbr_nz   = {anz[m+1][2], anz[m+1][1], anz[m+1][0]};
      assign nbr_take = a_take[m+1];
      assign nbr_used = a_used[m+1];
    end else begin : g_last
      assign nbr_dat  = '0;
      assign nbr_nz   = '0;
      assign nbr_take = '0;
      assign nbr_used = '0;
    end
    if (m > 0) begin : g_up
      assign brw_in = a_brw[m-1];
    end else begin : g_top
      assign brw_in = '0;
    end

    abuf #(.K0(K0)) u_abuf (
      .mode, .shuffle_en, .base(a_base), .k1, .win(awin[m]), .nbr_dat,
      .dat(adat[m]), .nz(anz[m]), .view(aview[m]));

    row_arbiter #(.K0(K0)) u_arb (
      .clk, .rst_n, .en(run && mode == MODE_A), .clr,
      .nz({anz[m][2], anz[m][1], anz[m][0]}), .nbr_nz, .nbr_take, .nbr_used,
      .brw_in, .adv(a_adv), .sel(a_sel[m]), .take(a_take[m]),
      .brw_out(a_brw[m]), .used(a_used[m]), .done(a_done[m]));
  end

  always_comb begin
    done_a = '1;
    for (int unsigned m = 0; m < M0; m++) done_a &= a_done[m];
  end

  // ---------------- B side: one SRAM, BBUF per column
  logic [BBUF_D-1:0][BW-1:0]                  bwin;
  bent_t [N0-1:0][BBUF_D-1:0][K0-1:0]         bcol, bent;
  logic [N0-1:0][BBUF_D-1:0][K0-1:0]          bnz;
  logic [N0-1:0][BMUX_N-1:0][K0-1:0][DW-1:0]  bview;
  logic [TW-1:0]                              b_limit;

  win_sram #(.WIDTH(BW), .DEPTH(B_DEPTH), .NWIN(BBUF_D), .NSUB(4)) u_bsram (
    .clk, .we(b_we), .waddr(b_waddr), .wdata(b_wdata),
    .rbase(b_rbase[BAW-1:0]), .rwin(bwin));

  assign b_limit = (mode == MODE_DENSE || mode == MODE_A) ? k1 : b_rows;

  always_comb begin
    for (int unsigned j = 0; j < BBUF_D; j++) begin
      bent_t [N0-1:0][K0-1:0] row;
      row    = bwin[j][N0*K0*BENT_W-1:0];
      hdr[j] = bwin[j][BW-1 -: ADV_W];
      for (int unsigned n = 0; n < N0; n++) bcol[n][j] = row[n];
    end
  end

  for (genvar n = 0; n < N0; n++) begin : g_col
    bbuf #(.K0(K0)) u_bbuf (
      .mode, .shuffle_en, .base(b_base), .limit(b_limit), .win(bcol[n]),
      .ent(bent[n]), .bnz(bnz[n]), .bview(bview[n]));
  end

  // ---------------- PE array
  logic signed [M0-1:0][N0-1:0][ACCW-1:0] extra_out, acc;
  logic [M0-1:0][N0-1:0][BBUF_D-1:0]      pe_done;

  for (genvar m = 0; m < M0; m++) begin : g_pr
    for (genvar n = 0; n < N0; n++) begin : g_pc
      lsel_t [K0-1:0]         ctl_sel, sel;
      logic signed [ACCW-1:0] extra_in;

      pe_ctrl #(.K0(K0)) u_ctl (
        .clk, .rst_n, .en(run && mode == MODE_AB), .clr,
        .ent(bent[n]), .bnz(bnz[n]), .anz(anz[m]), .off, .b_adv,
        .sel(ctl_sel), .done(pe_done[m][n]));

      always_comb begin
        for (int unsigned k = 0; k < K0; k++) begin
          unique case (mode)
            MODE_DENSE: sel[k] = '{en: 1'b1, asel: 4'd0, bsel: 3'd0, adt: 1'b0};
            MODE_B:     sel[k] = '{en: bnz[n][0][k], asel: bent[n][0][k].aoff,
                                   bsel: 3'd0, adt: bent[n][0][k].col};
            MODE_A:     sel[k] = a_sel[m][k];
            default:    sel[k] = ctl_sel[k];
          endcase
        end
        if (mode == MODE_A) extra_in = (m > 0) ? extra_out[(m > 0) ? m-1 : 0][n] : '0;
        else                extra_in = (n > 0) ? extra_out[m][(n > 0) ? n-1 : 0] : '0;
      end

      pe #(.K0(K0)) u_pe (
        .clk, .rst_n, .aview(aview[m]), .bview(bview[n]), .sel,
        .acc_clr(clr), .acc_en(run), .extra_in, .extra_out(extra_out[m][n]),
        .acc(acc[m][n]));
    end
  end

  always_comb begin
    done_ab = '1;
    for (int unsigned m = 0; m < M0; m++)
      for (int unsigned n = 0; n < N0; n++) done_ab &= pe_done[m][n];
  end

  assign c_out = acc;
endmodule
