// tb_abuf: self-checking testbench of the A buffer logic.
// Random windows, bases, lengths, modes and shuffle settings; checks the
// shuffled and range-masked window, the non-zero mask and the nine AMUX
// inputs of every lane (including the conf.A remapping to lane k+1 and to
// the neighbouring row) against values computed here from the raw window.
module tb_abuf;
  import griffin_pkg::*;
  localparam int unsigned K0 = 8, D = 9;
  int checks = 0, failures = 0;
  mode_e mode;
  logic shuffle_en;
  logic [TW-1:0] base, k1;
  logic [D-1:0][K0-1:0][DW-1:0] win, dat;
  logic [1:0][K0-1:0][DW-1:0]   nbr_dat;
  logic [D-1:0][K0-1:0]         nz;
  logic [AMUX_N-1:0][K0-1:0][DW-1:0] view;

  abuf #(.K0(K0), .D(D)) dut (.mode, .shuffle_en, .base, .k1, .win, .nbr_dat, .dat, .nz, .view);

  function automatic logic [DW-1:0] expd(int i, int k);
    int t = int'(base) + i;
    int src = shuffle_en ? (k / 4) * 4 + ((k % 4) - (t % 4) + 4) % 4 : k;
    return (t < int'(k1)) ? win[i][src] : '0;
  endfunction

  task automatic chk(logic [DW-1:0] got, logic [DW-1:0] want, string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 8) $display("%s: got %h want %h (mode %s base %0d k1 %0d)", what, got, want, mode.name(), base, k1);
    end
  endtask

  initial begin
    for (int it = 0; it < 400; it++) begin
      mode = mode_e'($urandom_range(3)); shuffle_en = 1'($urandom_range(1));
      base = TW'($urandom_range(40)); k1 = TW'($urandom_range(50));
      for (int i = 0; i < D; i++) for (int k = 0; k < K0; k++)
        win[i][k] = ($urandom_range(2) == 0) ? '0 : DW'($urandom);
      for (int i = 0; i < 2; i++) for (int k = 0; k < K0; k++) nbr_dat[i][k] = DW'($urandom);
      #1;
      for (int i = 0; i < D; i++) for (int k = 0; k < K0; k++) begin
        chk(dat[i][k], expd(i, k), "dat");
        chk(DW'(nz[i][k]), DW'(expd(i, k) != 0), "nz");
      end
      for (int k = 0; k < K0; k++) begin
        if (mode == MODE_A) begin
          for (int j = 0; j < 3; j++) chk(view[j][k], expd(j, k), "view own");
          chk(view[3][k], (k + 1 < K0) ? expd(1, k + 1) : '0, "view da2 slot1");
          chk(view[4][k], (k + 1 < K0) ? expd(2, k + 1) : '0, "view da2 slot2");
          chk(view[5][k], nbr_dat[0][k], "view da3 slot1");
          chk(view[6][k], nbr_dat[1][k], "view da3 slot2");
        end else begin
          for (int j = 0; j < 9; j++) chk(view[j][k], expd(j, k), "view");
        end
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
