// Self-checking testbench for pair_controller.
//
// Runs the controller for 6 SNPs twice and checks, cycle by cycle, against a
// schedule computed here: pairs (a, b), a < b, in lexicographic order, 9
// cycles each; X trigger of a in cycle 0 of the pair, Y trigger of b in
// cycles 0, 3 and 6; repeater sync 2 cycles after each X trigger; the entry
// tags; and the length of the run, 9 * 15 cycles.
module tb_pair_controller;
  localparam int N = 6, R = 3;
  localparam int NPAIR = N * (N - 1) / 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic start, busy, rep_sync, tag_valid, tag_last;
  logic [N-1:0] trig_x, trig_y;
  logic [2:0] tag_x, tag_y;
  logic [1:0] tag_gx, tag_gy;

  pair_controller #(.N_SNP(N), .R(R), .STACK_LAT(2)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .trig_x(trig_x), .trig_y(trig_y),
    .rep_sync(rep_sync), .tag_valid(tag_valid), .tag_last(tag_last),
    .tag_x(tag_x), .tag_y(tag_y), .tag_gx(tag_gx), .tag_gy(tag_gy));

  task automatic check(string what, logic cond, int c);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s cycle %0d", what, c);
    end
  endtask

  initial begin
    int a [NPAIR], b [NPAIR];
    int p;
    p = 0;
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++) begin a[p] = i; b[p] = j; p++; end
    start = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int run = 0; run < 2; run++) begin
      repeat (4) @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      for (int c = 0; c < NPAIR * R * R + 4; c++) begin
        int pr, q;
        logic [N-1:0] ex, ey;
        logic es;
        pr = c / (R * R); q = c % (R * R);
        ex = '0; ey = '0;
        if (pr < NPAIR) begin
          if (q == 0) ex[a[pr]] = 1'b1;
          if (q % R == 0) ey[b[pr]] = 1'b1;
        end
        es = (c >= 2) && ((c - 2) % (R * R) == 0) && ((c - 2) / (R * R) < NPAIR);
        check("busy", busy == (pr < NPAIR), c);
        check("trig_x", trig_x == ex, c);
        check("trig_y", trig_y == ey, c);
        check("sync", rep_sync == es, c);
        check("tag_valid", tag_valid == (pr < NPAIR), c);
        check("tag_last", tag_last == (c == NPAIR * R * R - 1), c);
        if (pr < NPAIR)
          check("tag", tag_x == 3'(a[pr]) && tag_y == 3'(b[pr]) &&
                       tag_gx == 2'(q / R) && tag_gy == 2'(q % R), c);
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
