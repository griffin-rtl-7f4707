// tb_win_sram: self-checking testbench of the windowed SRAM bank.
// Fills the array through the write port, then reads random windows (with
// wrap-around) and checks each of the NWIN words one cycle later against a
// reference array; also writes while reading.
module tb_win_sram;
  localparam int unsigned WIDTH = 24, DEPTH = 64, NWIN = 9, NSUB = 16;
  localparam int unsigned AW = $clog2(DEPTH);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic                       we = 0;
  logic [AW-1:0]              waddr = '0, rbase = '0;
  logic [WIDTH-1:0]           wdata = '0;
  logic [NWIN-1:0][WIDTH-1:0] rwin;
  logic [WIDTH-1:0]           ref_mem [DEPTH];

  win_sram #(.WIDTH(WIDTH), .DEPTH(DEPTH), .NWIN(NWIN), .NSUB(NSUB)) dut (
    .clk, .we, .waddr, .wdata, .rbase, .rwin);

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = WIDTH'($urandom); ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 300; it++) begin
      logic [AW-1:0] b;
      @(negedge clk);
      b = AW'($urandom); rbase = b;
      // concurrent write to a word outside the window being read
      we = 1'($urandom_range(1)); waddr = b + AW'(NWIN + $urandom_range(DEPTH - NWIN - 1));
      wdata = WIDTH'($urandom);
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      @(negedge clk); we = 0;
      for (int i = 0; i < NWIN; i++) begin
        checks++;
        if (rwin[i] !== ref_mem[AW'(b + AW'(i))]) begin
          failures++;
          if (failures < 5) $display("base %0d slot %0d: got %h want %h", b, i, rwin[i], ref_mem[AW'(b + AW'(i))]);
        end
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
