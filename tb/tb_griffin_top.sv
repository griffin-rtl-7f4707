// tb_griffin_top: end-to-end self-checking testbench of the Griffin core,
// at reduced size (2 x 4 PEs of 8 lanes) so that every mode runs several tiles quickly.
//
// For each mode it generates random sparse A and B, loads the SRAMs
// (B compressed by the behavioural compressor in conf.B and conf.AB), runs
// one output tile and compares all of C with a golden GEMM.  The cycle count
// is checked against the mode's rate (dense: one K-step per cycle; conf.B:
// one compressed row per cycle; conf.A / conf.AB: between one and three
// K-steps / rows per cycle).  Monitors count every borrowing mechanism
// (db1, db3 with the extra adder tree, da1, da2, da3, multi-step window
// advance, shuffle) and a mechanism that never fires counts as a failure.
module tb_griffin_top;
  import griffin_pkg::*;

  localparam int unsigned M0 = 2, N0 = 4, K0 = 8, A_DEPTH = 256, B_DEPTH = 64, KMAX = 48;
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

  griffin_top #(.M0(M0), .N0(N0), .K0(K0), .A_DEPTH(A_DEPTH), .B_DEPTH(B_DEPTH)) dut (
    .clk, .rst_n, .start, .mode, .shuffle_en, .k1(k1_i), .b_rows,
    .a_we, .a_waddr, .a_wdata, .b_we, .b_waddr, .b_wdata,
    .busy, .stall, .done, .cycles, .c_out);

`include "griffin_tb_body.svh"

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 2; rep++) begin
      check_mode(MODE_DENSE, 40, 0, 0, 1'b1);
      check_mode(MODE_DENSE, 17, 30, 30, 1'b0);
      check_mode(MODE_B, 48, 0, 80, 1'b1);      // DNN.B-like: pruned weights
      check_mode(MODE_B, 33, 20, 50, 1'b0);
      check_mode(MODE_A, 48, 50, 0, 1'b1);      // DNN.A-like: ReLU activations
      check_mode(MODE_A, 30, 80, 10, 1'b0);
      check_mode(MODE_AB, 48, 45, 80, 1'b1);    // DNN.AB-like
      check_mode(MODE_AB, 29, 20, 40, 1'b0);
    end
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
