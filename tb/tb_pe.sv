// tb_pe: self-checking testbench of the processing element.
// Random AMUX/BMUX inputs and per-lane selects (enable, AMUX index 0..8,
// BMUX index 0..4, adder tree); checks the extra adder tree output every
// cycle and the accumulator (own tree + extra_in) after each cycle, with
// clears in between, against sums computed here with signed INT8 products.
module tb_pe;
  import griffin_pkg::*;
  localparam int unsigned K0 = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [AMUX_N-1:0][K0-1:0][DW-1:0] aview;
  logic [BMUX_N-1:0][K0-1:0][DW-1:0] bview;
  lsel_t [K0-1:0] sel;
  logic acc_clr = 0, acc_en = 0;
  logic signed [ACCW-1:0] extra_in = '0, extra_out, acc;
  longint ref_acc = 0;

  pe #(.K0(K0)) dut (.clk, .rst_n, .aview, .bview, .sel, .acc_clr, .acc_en, .extra_in, .extra_out, .acc);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      automatic longint own = 0, ext = 0;
      @(negedge clk);
      for (int i = 0; i < AMUX_N; i++) for (int k = 0; k < K0; k++) aview[i][k] = DW'($urandom);
      for (int i = 0; i < BMUX_N; i++) for (int k = 0; k < K0; k++) bview[i][k] = DW'($urandom);
      for (int k = 0; k < K0; k++) begin
        sel[k].en = 1'($urandom_range(3) != 0); sel[k].asel = 4'($urandom_range(8));
        sel[k].bsel = 3'($urandom_range(4)); sel[k].adt = 1'($urandom_range(1));
        if (sel[k].en) begin
          automatic longint p = longint'($signed(aview[sel[k].asel][k])) * longint'($signed(bview[sel[k].bsel][k]));
          if (sel[k].adt) ext += p; else own += p;
        end
      end
      extra_in = ACCW'($signed(16'($urandom)));
      acc_clr = ($urandom_range(30) == 0);
      acc_en = 1'($urandom_range(4) != 0);
      #1;
      checks++;
      if (longint'(extra_out) != ext) begin failures++; $display("extra_out %0d want %0d", extra_out, ext); end
      if (acc_clr) ref_acc = 0;
      else if (acc_en) ref_acc = longint'(signed'(32'(ref_acc + own + longint'(extra_in))));
      @(posedge clk); #1;
      checks++;
      if (longint'(acc) != ref_acc) begin
        failures++;
        if (failures < 8) $display("acc %0d want %0d", acc, ref_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
