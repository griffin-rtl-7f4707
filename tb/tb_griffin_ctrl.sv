// tb_griffin_ctrl: self-checking testbench of the global controller.
// Runs tiles in every mode with the done flags and advance headers either
// held constant (directed rate checks: dense k1 cycles, conf.B one
// compressed row per cycle, conf.A up to three K-steps per cycle, conf.AB
// up to three B rows per cycle) or random, and compares the window bases,
// the row offsets, the retire counts, the stall flag, the done pulse and the
// cycle count with a reference model kept here.
module tb_griffin_ctrl;
  import griffin_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  mode_e mode = MODE_DENSE;
  logic [TW-1:0] k1 = '0, b_rows = '0;
  logic [BBUF_D-1:0][ADV_W-1:0] hdr = '0;
  logic [2:0] done_a = '0, done_ab = '0;
  logic busy, run, clr, stall, done;
  logic [TW-1:0] a_base, b_base, a_rbase, b_rbase;
  logic [1:0] a_adv, b_adv;
  logic [BBUF_D-1:0][3:0] off;
  logic [31:0] cycles;
  int n_stall = 0;

  griffin_ctrl dut (.clk, .rst_n, .start, .mode, .k1, .b_rows, .hdr, .done_a, .done_ab,
    .busy, .run, .clr, .a_base, .b_base, .a_rbase, .b_rbase, .a_adv, .b_adv, .off,
    .stall, .done, .cycles);

  task automatic chk(int got, int want, string what);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("%s: got %0d want %0d (mode %0d)", what, got, want, mode);
    end
  endtask

  function automatic int lead(logic [2:0] d);
    return d[0] ? (d[1] ? (d[2] ? 3 : 2) : 1) : 0;
  endfunction

  // rnd: 0 = hold inputs, 1 = new random flags/headers every cycle
  task automatic tile(mode_e md, int kk, int rows, bit rnd, int want_cyc);
    int ab = 0, bb = 0, n = 0, na, nb, l;
    @(negedge clk);
    mode = md; k1 = TW'(kk); b_rows = TW'(rows);
    start = 1;
    #1 chk(clr, 1, "clr");
    @(negedge clk); start = 0;
    chk(busy, 1, "busy"); chk(run, 0, "prime");
    @(negedge clk);
    while (1) begin
      if (rnd) begin
        for (int j = 0; j < 3; j++) hdr[j] = ADV_W'($urandom_range(0, 3));
        done_a = 3'($urandom); done_ab = 3'($urandom);
      end
      #1;
      chk(run, 1, "run");
      chk(a_base, ab, "a_base"); chk(b_base, bb, "b_base");
      chk(off[0], 0, "off0"); chk(off[1], hdr[0], "off1"); chk(off[2], hdr[0] + hdr[1], "off2");
      case (md)
        MODE_DENSE: begin na = 1; nb = 1; l = 0; end
        MODE_B:     begin na = hdr[0]; nb = 1; l = 0; end
        MODE_A:     begin l = lead(done_a); na = l; nb = l; end
        default: begin
          l = lead(done_ab); nb = l; na = 0;
          for (int j = 0; j < l; j++) na += hdr[j];
        end
      endcase
      chk(a_adv, (md == MODE_A) ? l : 0, "a_adv");
      chk(b_adv, (md == MODE_AB) ? l : 0, "b_adv");
      chk(stall, na == 0 && nb == 0, "stall");
      if (stall) n_stall++;
      chk(a_rbase, ab + na, "a_rbase"); chk(b_rbase, bb + nb, "b_rbase");
      ab += na; bb += nb; n++;
      @(negedge clk);
      if ((md == MODE_DENSE && ab >= kk) || (md == MODE_A && ab >= kk) ||
          ((md == MODE_B || md == MODE_AB) && bb >= rows)) break;
      if (n > 100000) break;
    end
    chk(done, 1, "done");
    chk(int'(cycles), n, "cycles");
    if (want_cyc >= 0) chk(n, want_cyc, "rate");
    @(negedge clk);
    chk(busy, 0, "idle");
    chk(done, 0, "done pulse");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed rates
    tile(MODE_DENSE, 10, 0, 0, 10);
    hdr = '{4'd1, 4'd2, 4'd3};                     // hdr[0] = 3
    tile(MODE_B, 100, 5, 0, 5);
    done_a = 3'b011;
    tile(MODE_A, 12, 0, 0, 6);
    done_a = 3'b111;
    tile(MODE_A, 12, 0, 0, 4);
    done_ab = 3'b001; hdr = '{4'd2, 4'd2, 4'd2};
    tile(MODE_AB, 100, 7, 0, 7);
    done_ab = 3'b111;
    tile(MODE_AB, 100, 9, 0, 3);
    // random flags
    for (int r = 0; r < 40; r++) begin
      tile(MODE_A, $urandom_range(1, 40), 0, 1, -1);
      tile(MODE_AB, 0, $urandom_range(1, 40), 1, -1);
      tile(MODE_B, 0, $urandom_range(1, 40), 1, -1);
    end
    checks++;
    if (n_stall == 0) failures++;
    $display("stall cycles seen %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
