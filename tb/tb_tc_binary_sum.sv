// Self-checking testbench for tc_binary_sum.
//
// Sums of 2 four-bit, 3 three-bit and 4 four-bit numbers, new random operands
// (with extra weight on all-ones operands, which make the longest carries)
// every cycle; each sum is compared two cycles later with the integer sum.
module tb_tc_binary_sum;
  localparam int NCYC = 3000, S_PR = 8, N_PR = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [1:0][3:0] ya; logic [2:0][2:0] yb; logic [3:0][3:0] yc;
  logic [4:0] sa; logic [4:0] sb; logic [5:0] sc;
  logic [1:0][3:0] qa [NCYC]; logic [2:0][2:0] qb [NCYC]; logic [3:0][3:0] qc [NCYC];

  tc_binary_sum #(.N_IN(2), .W(4), .S_PR(S_PR), .N_PR(N_PR)) dut_a (
    .clk(clk), .rst_n(rst_n), .y(ya), .sum(sa));
  tc_binary_sum #(.N_IN(3), .W(3), .S_PR(S_PR), .N_PR(N_PR)) dut_b (
    .clk(clk), .rst_n(rst_n), .y(yb), .sum(sb));
  tc_binary_sum #(.N_IN(4), .W(4), .S_PR(S_PR), .N_PR(N_PR)) dut_c (
    .clk(clk), .rst_n(rst_n), .y(yc), .sum(sc));

  function automatic int tot(logic [15:0] v, int n, int w);
    int s = 0;
    for (int j = 0; j < n; j++) s += (v >> (j * w)) & ((1 << w) - 1);
    return s;
  endfunction

  task automatic check(string what, int got, int exp, int c);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s cycle %0d got %0d exp %0d", what, c, got, exp);
    end
  endtask

  initial begin
    ya = '0; yb = '0; yc = '0;
    for (int c = 0; c < NCYC; c++) begin
      qa[c] = ($urandom_range(0, 4) == 0) ? '1 : 8'($urandom);
      qb[c] = ($urandom_range(0, 4) == 0) ? '1 : 9'($urandom);
      qc[c] = ($urandom_range(0, 4) == 0) ? '1 : 16'($urandom);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      if (c >= 2) begin
        check("2x4", int'(sa), tot(16'(qa[c-2]), 2, 4), c);
        check("3x3", int'(sb), tot(16'(qb[c-2]), 3, 3), c);
        check("4x4", int'(sc), tot(16'(qc[c-2]), 4, 4), c);
      end
      ya = qa[c]; yb = qb[c]; yc = qc[c];
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
