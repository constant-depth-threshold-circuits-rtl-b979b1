// End-to-end test body for epistasis_top, shared by tb_epistasis_top (a
// reduced size that builds quickly) and tb_epistasis_full (the defaults: 16
// SNPs, 64 samples, parts of 8, 2-input sums). With FULL set the engine is
// instantiated with no parameter overrides.
//
// Two runs, as for the case and the control half of a study: each loads a
// fresh genotype table through the load port, starts the engine and checks
// every table entry that comes out (order, tags, count) against counts
// computed here directly from the table. It also checks that entries come one
// per cycle without gaps, that the first entry leaves 2 + 3 + 1 + 3 + 2*D
// cycles after the first trigger (D sum levels), and that the 9 entries of
// every pair add up to the number of samples. The tables are shaped so that
// every mechanism of the engine is exercised: constant SNPs give counts of 0
// and of all samples, random ones give counts that need carries between the
// parts of the population count; the three Y replays per pair, the
// back-to-back repeater bursts and the reload between runs are counted too,
// and a mechanism never seen counts as a failure.
module epistasis_e2e #(
  parameter bit FULL  = 1'b0,
  parameter int N_SNP = 6,
  parameter int M     = 16,
  parameter int L     = 4
);
  import snn_pkg::*;
  localparam int NPAIR = N_SNP * (N_SNP - 1) / 2;
  localparam int D     = $clog2(M / L);          // 2-input sum levels
  localparam int LAT   = 2 + 3 + 1 + 3 + 2 * D;
  localparam int SW    = $clog2(N_SNP);
  localparam int MW    = $clog2(M);
  localparam int CW    = $clog2(M + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic load_we, start, busy;
  logic [SW-1:0] load_snp;
  logic [MW-1:0] load_sample;
  genotype_e load_gt;
  logic entry_valid, entry_last;
  logic [SW-1:0] entry_x, entry_y;
  logic [1:0] entry_gx, entry_gy;
  logic [CW-1:0] entry_count;

  if (FULL) begin : g_dut
    epistasis_top dut (
      .clk(clk), .rst_n(rst_n),
      .load_we(load_we), .load_snp(load_snp), .load_sample(load_sample), .load_gt(load_gt),
      .start(start), .busy(busy),
      .entry_valid(entry_valid), .entry_last(entry_last), .entry_x(entry_x), .entry_y(entry_y),
      .entry_gx(entry_gx), .entry_gy(entry_gy), .entry_count(entry_count));
  end else begin : g_dut
    epistasis_top #(.N_SNP(N_SNP), .M(M), .POPC_L(L), .SUM_N(2)) dut (
      .clk(clk), .rst_n(rst_n),
      .load_we(load_we), .load_snp(load_snp), .load_sample(load_sample), .load_gt(load_gt),
      .start(start), .busy(busy),
      .entry_valid(entry_valid), .entry_last(entry_last), .entry_x(entry_x), .entry_y(entry_y),
      .entry_gx(entry_gx), .entry_gy(entry_gy), .entry_count(entry_count));
  end

  genotype_e gt [N_SNP][M];

  // mechanism counters
  int n_y_replays = 0, n_b2b_bursts = 0, n_carry = 0, n_full = 0, n_zero = 0, n_runs = 0;
  int last_sync = -100;
  always @(posedge clk) if (rst_n) begin
    if (|g_dut.dut.trig_y && !(|g_dut.dut.trig_x)) n_y_replays++;
    if (g_dut.dut.rep_sync) begin
      if (cycle - last_sync == 9) n_b2b_bursts++;
      last_sync = cycle;
    end
  end

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 12) $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  task automatic make_table(int run);
    for (int j = 0; j < N_SNP; j++) begin
      int p0, p1;
      p0 = $urandom_range(5, 80);
      p1 = $urandom_range(0, 100 - p0);
      for (int i = 0; i < M; i++) begin
        int r;
        r = $urandom_range(0, 99);
        gt[j][i] = (r < p0) ? GT_HOM_MAJOR : (r < p0 + p1) ? GT_HET : GT_HOM_MINOR;
      end
    end
    // constant SNPs: every sample in one combination
    for (int i = 0; i < M; i++) begin
      gt[run][i]     = GT_HOM_MAJOR;
      gt[run + 3][i] = GT_HOM_MINOR;
    end
  endtask

  task automatic load_table();
    for (int j = 0; j < N_SNP; j++)
      for (int i = 0; i < M; i++) begin
        load_we = 1'b1; load_snp = SW'(j); load_sample = MW'(i); load_gt = gt[j][i];
        @(negedge clk);
      end
    load_we = 1'b0;
  endtask

  task automatic run_and_check();
    int exp_cnt [N_SNP][N_SNP][3][3];
    int a, b, k, t_start, t_first, pair_sum;
    for (int x = 0; x < N_SNP; x++) for (int y = 0; y < N_SNP; y++)
      for (int gx = 0; gx < 3; gx++) for (int gy = 0; gy < 3; gy++) exp_cnt[x][y][gx][gy] = 0;
    for (int x = 0; x < N_SNP; x++) for (int y = x + 1; y < N_SNP; y++)
      for (int i = 0; i < M; i++) exp_cnt[x][y][int'(gt[x][i])][int'(gt[y][i])]++;
    start = 1'b1;
    t_start = cycle;
    @(negedge clk);
    start = 1'b0;
    while (!entry_valid) @(negedge clk);
    t_first = cycle;
    // start sampled at cycle t_start's edge; first trigger in cycle t_start+1
    check("first entry latency", t_first - (t_start + 1) == LAT);
    a = 0; b = 1; k = 0; pair_sum = 0;
    for (int e = 0; e < NPAIR * 9; e++) begin
      int gx, gy;
      gx = k / 3; gy = k % 3;
      check("entry valid without gaps", entry_valid);
      check("entry tag", entry_x == SW'(a) && entry_y == SW'(b) &&
                         entry_gx == 2'(gx) && entry_gy == 2'(gy));
      check("entry count", int'(entry_count) == exp_cnt[a][b][gx][gy]);
      if (int'(entry_count) != exp_cnt[a][b][gx][gy] && failures < 12)
        $display("  pair %0d,%0d gx %0d gy %0d: got %0d exp %0d", a, b, gx, gy,
                 entry_count, exp_cnt[a][b][gx][gy]);
      check("entry_last", entry_last == (e == NPAIR * 9 - 1));
      if (entry_count > CW'(L)) n_carry++;
      if (entry_count == CW'(M)) n_full++;
      if (entry_count == 0) n_zero++;
      pair_sum += int'(entry_count);
      k++;
      if (k == 9) begin
        check("pair entries add up to M", pair_sum == M);
        pair_sum = 0;
        k = 0;
        b++;
        if (b == N_SNP) begin a++; b = a + 1; end
      end
      @(negedge clk);
    end
    check("no entry after the last", !entry_valid);
    check("idle after the run", !busy);
    n_runs++;
  endtask

  initial begin
    load_we = 0; start = 0; load_snp = '0; load_sample = '0; load_gt = GT_HOM_MAJOR;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int run = 0; run < 2; run++) begin
      make_table(run);
      load_table();
      repeat (2) @(negedge clk);
      run_and_check();
    end
    $display("mechanisms: Y replays %0d, back-to-back repeater bursts %0d, counts above one part %0d, full counts %0d, zero counts %0d, runs with reload %0d",
             n_y_replays, n_b2b_bursts, n_carry, n_full, n_zero, n_runs);
    check("Y replayed three times per pair", n_y_replays == 2 * 2 * NPAIR);
    check("back-to-back repeater bursts seen", n_b2b_bursts > 0);
    check("carries between parts seen", n_carry > 0);
    check("full count seen", n_full > 0);
    check("zero count seen", n_zero > 0);
    check("two runs with reload", n_runs == 2);
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
