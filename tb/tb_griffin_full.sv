// tb_griffin_full: end-to-end self-checking testbench of the Griffin core,
// at the default (paper) size: 4 x 16 PEs of 16 INT8 lanes, 512 kB A SRAM, 32 kB B SRAM, one full tile of K = 2048 (128 K-steps) per mode,
// then one tile at the (B, A) zero ratios of each benchmark of Table 4.
//
// For each mode it generates random sparse A and B, loads the SRAMs
// (B compressed by the behavioural compressor in conf.B and conf.AB), runs
// one output tile and compares all of C with a golden GEMM.  The cycle count
// is checked against the mode's rate (dense: one K-step per cycle; conf.B:
// one compressed row per cycle; conf.A / conf.AB: between one and three
// K-steps / rows per cycle).  Monitors count every borrowing mechanism
// (db1, db3 with the extra adder tree, da1, da2, da3, multi-step window
// advance, shuffle) and a mechanism that never fires counts as a failure.
module tb_griffin_full;
  import griffin_pkg::*;

  localparam int unsigned M0 = 4, N0 = 16, K0 = 16, A_DEPTH = 8192, B_DEPTH = 128, KMAX = 128;
  localparam int unsigned BW = ADV_W + N0 * K0 * BENT_W;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                            start = 1'b0;
  mode_e                           mode = MODE_DENSE;
  logic                            shuffle_en = 1'b1;
  logic [TW-1:0]                   k1_i = '0, b_rows = '0;
  logic [M0-1:0]                   a_we = '0;
  logic [$clog2(A_DEPTH)-1:0]      a_waddr = '0;
  logic [K0-1:0][DW-1:0]           a_wdata = '0;
  logic                            b_we = 1'b0;
  logic [$clog2(B_DEPTH)-1:0]      b_waddr = '0;
  logic [BW-1:0]                   b_wdata = '0;
  logic                            busy, stall, done;
  logic [31:0]                     cycles;
  logic [M0-1:0][N0-1:0][ACCW-1:0] c_out;

  griffin_top dut (
    .clk, .rst_n, .start, .mode, .shuffle_en, .k1(k1_i), .b_rows,
    .a_we, .a_waddr, .a_wdata, .b_we, .b_waddr, .b_wdata,
    .busy, .stall, .done, .cycles, .c_out);

`include "griffin_tb_body.svh"

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // sparsity ratios in the range of the paper's benchmarks (Table 4:
    // weights ~80% zero, activations ~45% zero)
    check_mode(MODE_DENSE, 128, 0, 0, 1'b1);
    check_mode(MODE_B, 128, 0, 81, 1'b1);
    check_mode(MODE_A, 128, 45, 0, 1'b1);
    check_mode(MODE_AB, 128, 45, 81, 1'b1);
    // the Table 4 (B, A) zero ratios of each benchmark, one full tile each
    // in conf.AB (CNNs) and conf.B (BERT, dense activations)
    check_mode(MODE_AB, 128, 53, 89, 1'b1);   // AlexNet
    check_mode(MODE_AB, 128, 37, 82, 1'b1);   // GoogleNet
    check_mode(MODE_AB, 128, 43, 81, 1'b1);   // ResNet50
    check_mode(MODE_AB, 128, 46, 79, 1'b1);   // InceptionV3
    check_mode(MODE_AB, 128, 52, 81, 1'b1);   // MobileNetV2
    check_mode(MODE_B, 128, 0, 82, 1'b1);     // BERT
    report_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
