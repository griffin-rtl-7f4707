// tb_bbuf: self-checking testbench of the B buffer logic.
// Random rows, modes, bases and limits; checks that raw rows (dense, conf.A)
// are shuffled and stripped of metadata, compressed rows (conf.B, conf.AB)
// pass unchanged, rows past the limit are empty, and the five BMUX inputs of
// every lane are rows 0..2 of lane k and rows 1..2 of lane k+1.
module tb_bbuf;
  import griffin_pkg::*;
  localparam int unsigned K0 = 8, D = 3;
  int checks = 0, failures = 0;
  mode_e mode;
  logic shuffle_en;
  logic [TW-1:0] base, limit;
  bent_t [D-1:0][K0-1:0] win, ent;
  logic  [D-1:0][K0-1:0] bnz;
  logic  [BMUX_N-1:0][K0-1:0][DW-1:0] bview;

  bbuf #(.K0(K0), .D(D)) dut (.mode, .shuffle_en, .base, .limit, .win, .ent, .bnz, .bview);

  function automatic bent_t expd(int j, int k);
    int t = int'(base) + j;
    bit raw = (mode == MODE_DENSE || mode == MODE_A);
    int src = (shuffle_en && raw) ? (k / 4) * 4 + ((k % 4) - (t % 4) + 4) % 4 : k;
    if (t >= int'(limit)) return '0;
    if (raw) return '{val: win[j][src].val, aoff: 4'd0, col: 1'b0};
    return win[j][k];
  endfunction

  task automatic chk(logic [15:0] got, logic [15:0] want, string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 8) $display("%s: got %h want %h (mode %s)", what, got, want, mode.name());
    end
  endtask

  initial begin
    for (int it = 0; it < 400; it++) begin
      mode = mode_e'($urandom_range(3)); shuffle_en = 1'($urandom_range(1));
      base = TW'($urandom_range(30)); limit = TW'($urandom_range(35));
      for (int j = 0; j < D; j++) for (int k = 0; k < K0; k++)
        win[j][k] = ($urandom_range(2) == 0) ? bent_t'(BENT_W'($urandom) & 13'h1f) : bent_t'(BENT_W'($urandom));
      #1;
      for (int j = 0; j < D; j++) for (int k = 0; k < K0; k++) begin
        automatic bent_t e = expd(j, k);
        chk(16'(ent[j][k]), 16'(e), "ent");
        chk(16'(bnz[j][k]), 16'(e.val != 0), "bnz");
      end
      for (int k = 0; k < K0; k++) begin
        for (int j = 0; j < 3; j++) chk(16'(bview[j][k]), 16'($unsigned(expd(j, k).val)), "bview lane k");
        chk(16'(bview[3][k]), (k + 1 < K0) ? 16'($unsigned(expd(1, k + 1).val)) : 16'h0, "bview lane k+1 row1");
        chk(16'(bview[4][k]), (k + 1 < K0) ? 16'($unsigned(expd(2, k + 1).val)) : 16'h0, "bview lane k+1 row2");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
