// tb_row_arbiter: self-checking testbench of the conf.A row arbiter.
// Two arbiters are chained as two PE rows (row 0 may borrow from row 1).
// Random non-zero masks are driven each cycle, the window is retired like
// the controller does (leading K-steps finished in both rows), and every
// lane's choice, the take/borrow bits and the done flags are checked against
// a reference that applies the candidate order
// (t,k) (t+1,k) (t+2,k) (t+1,k+1) (t+2,k+1), then the next row's (t+1,k),(t+2,k).
module tb_row_arbiter;
  import griffin_pkg::*;
  localparam int unsigned K0 = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, clr = 0;
  logic [2:0][K0-1:0] nz0 = '0, nz1 = '0;
  logic [2:0][K0-1:0] take0, take1, brw0, brw1, used0, used1;
  lsel_t [K0-1:0] sel0, sel1;
  logic [2:0] done0, done1;
  logic [1:0] adv = '0;
  bit   u [2][3][K0];
  int   n_own = 0, n_da1 = 0, n_da2 = 0, n_da3 = 0;

  row_arbiter #(.K0(K0)) r0 (.clk, .rst_n, .en, .clr, .nz(nz0), .nbr_nz(nz1), .nbr_take(take1),
    .nbr_used(used1), .brw_in('0), .adv, .sel(sel0), .take(take0), .brw_out(brw0), .used(used0), .done(done0));
  row_arbiter #(.K0(K0)) r1 (.clk, .rst_n, .en, .clr, .nz(nz1), .nbr_nz('0), .nbr_take('0),
    .nbr_used('0), .brw_in(brw0), .adv, .sel(sel1), .take(take1), .brw_out(brw1), .used(used1), .done(done1));

  task automatic chk(int got, int want, string what);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 8) $display("%s: got %0d want %0d", what, got, want);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (u[r, j, k]) u[r][j][k] = 0;
    clr = 1; @(negedge clk); clr = 0;   // clear the used bits
    @(negedge clk); en = 1;
    for (int it = 0; it < 800; it++) begin
      bit nz [2][3][K0];
      bit tk [2][3][K0];
      int s_en [2][K0], s_a [2][K0], s_b [2][K0], s_t [2][K0];
      bit dn [2][3];
      int lead;
      @(negedge clk);
      for (int j = 0; j < 3; j++) for (int k = 0; k < K0; k++) begin
        nz0[j][k] = ($urandom_range(99) < 45); nz1[j][k] = ($urandom_range(99) < 45);
        nz[0][j][k] = nz0[j][k]; nz[1][j][k] = nz1[j][k];
        tk[0][j][k] = 0; tk[1][j][k] = 0;
      end
      // own selection of both rows
      for (int r = 0; r < 2; r++) for (int k = 0; k < K0; k++) begin
        s_en[r][k] = 0; s_a[r][k] = 0; s_b[r][k] = 0; s_t[r][k] = 0;
        for (int c = 0; c < 5; c++) begin
          automatic int j = (c < 3) ? c : c - 2;
          automatic int l = (c < 3) ? k : k + 1;
          if ((s_en[r][k] == 0) && l < K0 && nz[r][j][l] && !u[r][j][l] && !tk[r][j][l]) begin
            s_en[r][k] = 1; s_a[r][k] = c; s_b[r][k] = c; tk[r][j][l] = 1;
          end
        end
      end
      // row 0 borrows from row 1
      for (int k = 0; k < K0; k++)
        for (int j = 1; j < 3; j++)
          if ((s_en[0][k] == 0) && nz[1][j][k] && !u[1][j][k] && !tk[1][j][k]) begin
            s_en[0][k] = 1; s_a[0][k] = 4 + j; s_b[0][k] = j; s_t[0][k] = 1;
            u[1][j][k] = 1;   // consumed by row 0
          end
      #1;
      for (int k = 0; k < K0; k++) begin
        chk(int'(sel0[k].en), s_en[0][k], "row0 en"); chk(int'(sel1[k].en), s_en[1][k], "row1 en");
        if (s_en[0][k] != 0) begin
          chk(int'(sel0[k].asel), s_a[0][k], "row0 asel"); chk(int'(sel0[k].bsel), s_b[0][k], "row0 bsel");
          chk(int'(sel0[k].adt), s_t[0][k], "row0 adt");
          if (s_t[0][k] != 0) n_da3++; else if (s_a[0][k] >= 3) n_da2++; else if (s_a[0][k] > 0) n_da1++; else n_own++;
        end
        if (s_en[1][k] != 0) begin
          chk(int'(sel1[k].asel), s_a[1][k], "row1 asel"); chk(int'(sel1[k].adt), 0, "row1 adt");
        end
      end
      for (int r = 0; r < 2; r++) for (int j = 0; j < 3; j++) begin
        dn[r][j] = 1;
        for (int k = 0; k < K0; k++) if (nz[r][j][k] && !u[r][j][k] && !tk[r][j][k]) dn[r][j] = 0;
      end
      for (int j = 0; j < 3; j++) begin chk(int'(done0[j]), int'(dn[0][j]), "done0"); chk(int'(done1[j]), int'(dn[1][j]), "done1"); end
      lead = (dn[0][0] && dn[1][0]) ? ((dn[0][1] && dn[1][1]) ? ((dn[0][2] && dn[1][2]) ? 3 : 2) : 1) : 0;
      adv = 2'(lead);
      @(posedge clk);
      for (int r = 0; r < 2; r++) begin
        bit nu [3][K0];
        for (int j = 0; j < 3; j++) for (int k = 0; k < K0; k++) nu[j][k] = u[r][j][k] | tk[r][j][k];
        for (int j = 0; j < 3; j++) for (int k = 0; k < K0; k++)
          u[r][j][k] = (j + lead < 3) ? nu[j + lead][k] : 0;
      end
    end
    checks++;
    if (n_da1 == 0 || n_da2 == 0 || n_da3 == 0) failures++;
    $display("lane choices: own %0d, da1 %0d, da2 %0d, da3 %0d", n_own, n_da1, n_da2, n_da3);
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
