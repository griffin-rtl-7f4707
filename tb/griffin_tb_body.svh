// griffin_tb_body.svh: common testbench body for the Griffin core.
//
// Included inside a testbench module that declares the localparams M0, N0,
// K0, A_DEPTH, B_DEPTH, KMAX, the clock clk, the DUT port signals and a DUT
// instance named dut.  It provides:
//   * random sparse A and B generation (zero probability per operand),
//   * a golden GEMM  C[m][n] = sum_t sum_k A[m][t][k] * B[t][n][k],
//   * a behavioural model of the offline B compressor (Sparse.B(db1,0,1)
//     with the lane-rotation shuffle), producing rows of bent_t entries and
//     an advance header per row,
//   * tasks to load the SRAMs and run one tile in a given mode, checking
//     c_out against the golden result and the cycle count against the rate
//     expected for that mode,
//   * monitors counting how often each borrowing mechanism fires.

int checks = 0, failures = 0;

logic signed [DW-1:0] A  [M0][KMAX][K0];
logic signed [DW-1:0] Bm [KMAX][N0][K0];
bent_t                crow [B_DEPTH][N0][K0];
int                   chdr [B_DEPTH];
int                   nrows;
longint               gold [M0][N0];

// mechanism counters
int n_mode[4];
int n_da1, n_da2, n_da3, n_db1, n_db3, n_ab_da1, n_stall, n_multi, n_shuf;

function automatic logic signed [DW-1:0] rnd_val(int pz);
  if ($urandom_range(99) < pz) return '0;
  return DW'($urandom_range(1, 255));
endfunction

task automatic gen(int k1, int pza, int pzb);
  for (int m = 0; m < M0; m++) for (int t = 0; t < KMAX; t++) for (int k = 0; k < K0; k++)
    A[m][t][k] = (t < k1) ? rnd_val(pza) : '0;
  for (int t = 0; t < KMAX; t++) for (int n = 0; n < N0; n++) for (int k = 0; k < K0; k++)
    Bm[t][n][k] = (t < k1) ? rnd_val(pzb) : '0;
  for (int m = 0; m < M0; m++) for (int n = 0; n < N0; n++) begin
    gold[m][n] = 0;
    for (int t = 0; t < k1; t++) for (int k = 0; k < K0; k++)
      gold[m][n] += longint'(A[m][t][k]) * longint'(Bm[t][n][k]);
  end
endtask

// lane of element k of K-step t after the rotation shuffle
function automatic int shuf_lane(int k, int t, bit en);
  return en ? (k / 4) * 4 + ((k % 4) + t) % 4 : k;
endfunction

// Offline B compressor: Sparse.B(db1, 0, 1).  Slot (n,k) of a compressed row
// based at K-step T takes the first unused non-zero of lane k among
// (T+d, column n) and (T+d, column n+1), d = 0..db1, own column first.
// The row then advances past every leading K-step with nothing left.
task automatic compress(int k1, int db1, bit shuf);
  logic signed [DW-1:0] bs [KMAX][N0][K0];
  bit                   left [KMAX][N0][K0];
  int T;
  for (int t = 0; t < k1; t++) for (int n = 0; n < N0; n++) for (int k = 0; k < K0; k++)
    bs[t][n][shuf_lane(k, t, shuf)] = Bm[t][n][k];
  for (int t = 0; t < k1; t++) for (int n = 0; n < N0; n++) for (int k = 0; k < K0; k++)
    left[t][n][k] = bs[t][n][k] != 0;
  T = 0; nrows = 0;
  while (T < k1) begin
    int adv;
    for (int n = 0; n < N0; n++) for (int k = 0; k < K0; k++) begin
      bit got = 0;
      crow[nrows][n][k] = '0;
      for (int d = 0; d <= db1 && !got; d++)
        for (int c = 0; c < 2 && !got; c++)
          if (T + d < k1 && n + c < N0 && left[T+d][n+c][k]) begin
            crow[nrows][n][k] = '{val: bs[T+d][n+c][k], aoff: 4'(d), col: 1'(c)};
            left[T+d][n+c][k] = 0;
            got = 1;
          end
    end
    adv = 0;
    while (adv <= db1 && T + adv < k1) begin
      bit any = 0;
      for (int n = 0; n < N0; n++) for (int k = 0; k < K0; k++) any |= left[T+adv][n][k];
      if (any) break;
      adv++;
    end
    if (adv == 0) begin $display("compressor: no progress"); failures++; adv = 1; end
    chdr[nrows] = adv;
    T += adv;
    nrows++;
    if (nrows > B_DEPTH) begin $display("compressor: B SRAM too small"); failures++; break; end
  end
endtask

task automatic load_a(int k1);
  for (int m = 0; m < M0; m++)
    for (int t = 0; t < k1; t++) begin
      @(negedge clk);
      a_we = '0; a_we[m] = 1'b1; a_waddr = $bits(a_waddr)'(t);
      for (int k = 0; k < K0; k++) a_wdata[k] = A[m][t][k];
    end
  @(negedge clk); a_we = '0;
endtask

task automatic load_b(bit raw, int rows);
  for (int r = 0; r < rows; r++) begin
    @(negedge clk);
    b_we = 1'b1; b_waddr = $bits(b_waddr)'(r); b_wdata = '0;
    for (int n = 0; n < N0; n++) for (int k = 0; k < K0; k++)
      b_wdata[(n*K0 + k)*BENT_W +: BENT_W] =
        raw ? BENT_W'({Bm[r][n][k], 5'd0}) : BENT_W'(crow[r][n][k]);
    b_wdata[$bits(b_wdata)-1 -: ADV_W] = raw ? '0 : ADV_W'(chdr[r]);
  end
  @(negedge clk); b_we = 1'b0;
endtask

// Run one tile.  Returns the cycle count.
task automatic run_tile(mode_e md, int k1, bit shuf, output int cyc);
  int wd;
  @(negedge clk);
  mode = md; shuffle_en = shuf; k1_i = TW'(k1); b_rows = TW'(nrows); start = 1'b1;
  @(negedge clk); start = 1'b0;
  wd = 0;
  while (!done && wd < 100000) begin @(posedge clk); wd++; end
  cyc = int'(cycles);
  n_mode[md]++;
  for (int m = 0; m < M0; m++) for (int n = 0; n < N0; n++) begin
    checks++;
    if (longint'(signed'(c_out[m][n])) != gold[m][n]) begin
      failures++;
      if (failures < 10) $display("mode %s C[%0d][%0d] = %0d, expected %0d",
                                  md.name(), m, n, signed'(c_out[m][n]), gold[m][n]);
    end
  end
endtask

// Full check of one mode on fresh random data, with the mode's rate rule.
task automatic check_mode(mode_e md, int k1, int pza, int pzb, bit shuf);
  int cyc, lo, hi;
  gen(k1, pza, pzb);
  load_a(k1);
  if (md == MODE_B) compress(k1, 8, shuf);
  else if (md == MODE_AB) compress(k1, 2, shuf);
  else nrows = 0;
  load_b(md == MODE_DENSE || md == MODE_A, (md == MODE_DENSE || md == MODE_A) ? k1 : nrows);
  run_tile(md, k1, shuf, cyc);
  case (md)
    MODE_DENSE: begin lo = k1; hi = k1; end                 // one K-step per cycle
    MODE_B:     begin lo = nrows; hi = nrows; end           // one compressed row per cycle
    MODE_A:     begin lo = (k1 + 2) / 3; hi = k1; end       // 1..3 K-steps per cycle
    default:    begin lo = (nrows + 2) / 3; hi = 3 * nrows; end
  endcase
  checks++;
  if (cyc < lo || cyc > hi) begin
    failures++;
    $display("mode %s: %0d cycles, expected %0d..%0d", md.name(), cyc, lo, hi);
  end
  $display("mode %-10s k1=%0d zeroA=%0d%% zeroB=%0d%% rows=%0d cycles=%0d speedup=%0.2f",
           md.name(), k1, pza, pzb, nrows, cyc, real'(k1) / real'(cyc));
endtask

// ---------------- mechanism monitors
always @(posedge clk) if (dut.run) begin
  if (dut.stall) n_stall++;
  if (dut.a_rbase > dut.a_base + 1 && dut.mode != MODE_B) n_multi++;
  if (dut.shuffle_en && dut.a_base[1:0] != 2'd0) n_shuf++;
end

for (genvar m = 0; m < M0; m++) begin : g_mon_r
  always @(posedge clk) if (dut.run && dut.mode == MODE_A)
    for (int k = 0; k < K0; k++) if (dut.a_sel[m][k].en) begin
      if (dut.a_sel[m][k].asel inside {4'd1, 4'd2}) n_da1++;
      if (dut.a_sel[m][k].asel inside {4'd3, 4'd4}) n_da2++;
      if (dut.a_sel[m][k].asel inside {4'd5, 4'd6}) n_da3++;
    end
  for (genvar n = 0; n < N0; n++) begin : g_mon_c
    always @(posedge clk) if (dut.run)
      for (int k = 0; k < K0; k++) begin
        if (dut.mode == MODE_B && dut.bnz[n][0][k] && dut.bent[n][0][k].aoff != 0) n_db1++;
        if (dut.mode != MODE_A && dut.g_pr[m].g_pc[n].sel[k].en && dut.g_pr[m].g_pc[n].sel[k].adt) n_db3++;
        if (dut.mode == MODE_AB && dut.g_pr[m].g_pc[n].sel[k].en && dut.g_pr[m].g_pc[n].sel[k].bsel != 0) n_ab_da1++;
      end
  end
end

task automatic report_mechanisms();
  string nm [10] = '{"dense run", "conf.B run", "conf.A run", "conf.AB run",
                     "db1 borrow (conf.B)", "db3 borrow + extra adder tree",
                     "da1 borrow (conf.A)", "da2 borrow (conf.A)", "da3 borrow (conf.A)",
                     "da1 borrow (conf.AB)"};
  int cnt [10];
  cnt = '{n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_db1, n_db3, n_da1, n_da2, n_da3, n_ab_da1};
  for (int i = 0; i < 10; i++) begin
    $display("mechanism %-32s : %0d", nm[i], cnt[i]);
    checks++;
    if (cnt[i] == 0) begin failures++; $display("  never happened"); end
  end
  $display("mechanism %-32s : %0d", "synchronisation stall", n_stall);
  $display("mechanism %-32s : %0d", "multi-step window advance", n_multi);
  $display("mechanism %-32s : %0d", "non-zero shuffle rotation", n_shuf);
  checks += 2;
  if (n_multi == 0) begin failures++; $display("  multi-step advance never happened"); end
  if (n_shuf == 0)  begin failures++; $display("  shuffle rotation never happened"); end
endtask
