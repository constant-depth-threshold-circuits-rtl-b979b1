// Self-checking testbench for popc_tree.
//
// Two trees: the default 64 inputs in parts of 8 with 2-input sums (three
// sum levels), and 27 inputs in parts of 3 with 3-input sums. Random vectors
// of varying density every cycle, including all ones (the largest count and
// the longest carry chains); each count is compared with $countones after the
// tree's latency, 3 + 2 * levels cycles (9 and 7).
module tb_popc_tree;
  import snn_pkg::*;
  localparam int NCYC = 2000;
  localparam int LAT_A = 9, LAT_B = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, full_a = 0;
  logic [63:0] xa; logic [26:0] xb;
  logic [6:0] ca; logic [5:0] cb;
  logic [63:0] qa [NCYC]; logic [26:0] qb [NCYC];

  popc_tree dut_a (.clk(clk), .rst_n(rst_n), .x(xa), .count(ca));
  popc_tree #(.M(27), .L(3), .N_SUM(3), .S_PR(8), .N_PR(16)) dut_b (
    .clk(clk), .rst_n(rst_n), .x(xb), .count(cb));

  initial begin
    xa = '0; xb = '0;
    checks++;
    if (tree_latency(64, 8, 2) != LAT_A || tree_latency(27, 3, 3) != LAT_B) failures++;
    for (int c = 0; c < NCYC; c++) begin
      case ($urandom_range(0, 5))
        0: begin qa[c] = '1; qb[c] = '1; end
        1: begin qa[c] = {$urandom, $urandom} & {$urandom, $urandom}; qb[c] = 27'($urandom) & 27'($urandom); end
        2: begin qa[c] = {$urandom, $urandom} | {$urandom, $urandom}; qb[c] = 27'($urandom) | 27'($urandom); end
        3: begin qa[c] = '0; qb[c] = '0; end
        default: begin qa[c] = {$urandom, $urandom}; qb[c] = 27'($urandom); end
      endcase
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      if (c >= LAT_A) begin
        checks++;
        if (ca !== 7'($countones(qa[c-LAT_A]))) begin
          failures++;
          if (failures < 10) $display("FAIL 64 cycle %0d got %0d exp %0d", c, ca, $countones(qa[c-LAT_A]));
        end
        if (ca == 7'd64) full_a++;
      end
      if (c >= LAT_B) begin
        checks++;
        if (cb !== 6'($countones(qb[c-LAT_B]))) begin
          failures++;
          if (failures < 10) $display("FAIL 27 cycle %0d got %0d exp %0d", c, cb, $countones(qb[c-LAT_B]));
        end
      end
      xa = qa[c]; xb = qb[c];
      @(negedge clk);
    end
    checks++;
    if (full_a == 0) failures++;
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
