// tb_pe_ctrl: self-checking testbench of the per-PE dual-sparsity control unit.
// Each cycle it drives random BBUF entries (value, A offset 0..2, column bit),
// a random ABUF non-zero mask and row offsets as the controller would make
// them, retires rows like the controller (leading finished rows), and checks
// every lane's selection (first unused effectual pair, nearest row first),
// the AMUX/BMUX indices, the adder-tree bit and the done flags against a
// reference kept here.
module tb_pe_ctrl;
  import griffin_pkg::*;
  localparam int unsigned K0 = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, clr = 0;
  bent_t [BBUF_D-1:0][K0-1:0] ent = '0;
  logic  [BBUF_D-1:0][K0-1:0] bnz = '0;
  logic  [ABUF_D-1:0][K0-1:0] anz = '0;
  logic  [BBUF_D-1:0][3:0]    off;
  logic  [1:0]                b_adv = '0;
  lsel_t [K0-1:0]             sel;
  logic  [BBUF_D-1:0]         done;
  bit    used [BBUF_D][K0];
  int    n_sel = 0, n_far = 0, n_col = 0;

  pe_ctrl #(.K0(K0)) dut (.clk, .rst_n, .en, .clr, .ent, .bnz, .anz, .off, .b_adv, .sel, .done);

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
    foreach (used[j, k]) used[j][k] = 0;
    clr = 1; @(negedge clk); clr = 0;   // clear the used bits
    @(negedge clk); en = 1;
    for (int it = 0; it < 800; it++) begin
      bit    un [BBUF_D][K0];
      bit    rdone [BBUF_D];
      int    lead;
      int    h1, h2;
      @(negedge clk);
      clr = ($urandom_range(50) == 0);
      h1 = $urandom_range(1, 3); h2 = $urandom_range(1, 3);
      off[0] = 4'd0; off[1] = 4'(h1); off[2] = 4'(h1 + h2);
      for (int j = 0; j < BBUF_D; j++) for (int k = 0; k < K0; k++) begin
        ent[j][k] = '{val: ($urandom_range(2) == 0) ? 8'd0 : 8'($urandom_range(1, 255)),
                      aoff: 4'($urandom_range(2)), col: 1'($urandom_range(1))};
        bnz[j][k] = ent[j][k].val != 0;
      end
      for (int i = 0; i < ABUF_D; i++) for (int k = 0; k < K0; k++) anz[i][k] = 1'($urandom_range(1));
      // reference selection
      for (int j = 0; j < BBUF_D; j++) for (int k = 0; k < K0; k++) un[j][k] = used[j][k];
      for (int k = 0; k < K0; k++) begin
        automatic int pick = -1;
        for (int j = 0; j < BBUF_D; j++) begin
          automatic int idx = int'(off[j]) + int'(ent[j][k].aoff);
          if (pick < 0 && bnz[j][k] && anz[idx][k] && !used[j][k]) pick = j;
        end
        #0;
        if (clr) continue;
        chk(int'((sel[k].en)), int'(pick >= 0), "en");
        if (pick >= 0) begin
          chk(int'((sel[k].bsel)), pick, "bsel");
          chk(int'((sel[k].asel)), int'(off[pick]) + int'(ent[pick][k].aoff), "asel");
          chk(int'((sel[k].adt)), int'(ent[pick][k].col), "adt");
          un[pick][k] = 1;
          n_sel++; if (pick > 0) n_far++; if (ent[pick][k].col) n_col++;
        end
      end
      #1;
      for (int j = 0; j < BBUF_D; j++) begin
        rdone[j] = 1;
        for (int k = 0; k < K0; k++) begin
          automatic int idx = int'(off[j]) + int'(ent[j][k].aoff);
          if (bnz[j][k] && anz[idx][k] && !un[j][k]) rdone[j] = 0;
        end
        if (!clr) chk(int'((done[j])), int'(rdone[j]), "done");
      end
      lead = rdone[0] ? (rdone[1] ? (rdone[2] ? 3 : 2) : 1) : 0;
      b_adv = 2'(lead);
      @(posedge clk);
      for (int j = 0; j < BBUF_D; j++) for (int k = 0; k < K0; k++)
        used[j][k] = clr ? 0 : ((j + lead < BBUF_D) ? un[j + lead][k] : 0);
    end
    checks++;
    if (n_far == 0 || n_col == 0) failures++;
    $display("selections %0d, from a later BBUF row %0d, to the extra tree %0d", n_sel, n_far, n_col);
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
