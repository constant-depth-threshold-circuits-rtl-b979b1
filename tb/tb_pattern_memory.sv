// Self-checking testbench for pattern_memory.
//
// Stores every 3-bit string and some random strings of the maximum length
// S_PR-2, triggers the memory (once, and also every 3 cycles back to back for
// the 3-bit strings) and checks that the replayed spikes equal the stored bits,
// first bit two cycles after the trigger, silence everywhere else.
module tb_pattern_memory;
  localparam int S_PR = 8;
  localparam int N_PR = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic we, trigger, spike;
  logic [S_PR-1:0] wdata;

  pattern_memory #(.S_PR(S_PR), .N_PR(N_PR)) dut (
    .clk(clk), .rst_n(rst_n), .we(we), .wdata(wdata), .trigger(trigger), .spike(spike));

  // Drive trigger for one cycle, then check the spike of the following cycle.
  task automatic step(logic trig, logic expect_bit);
    trigger = trig;
    @(posedge clk);
    #1;
    checks++;
    if (spike !== expect_bit) begin
      failures++;
      if (failures < 10) $display("FAIL spike=%0b expected %0b at %0t", spike, expect_bit, $time);
    end
    @(negedge clk);
  endtask

  // Replay a string of len bits n_rep times, triggered every len cycles.
  task automatic replay(logic [S_PR-3:0] bits, int len, int n_rep);
    logic e [$];
    // weight: sign 0, next bit 0, string from bit S_PR-3 down
    @(negedge clk);
    we = 1'b1;
    wdata = {2'b00, bits};
    @(negedge clk);
    we = 1'b0;
    e = {};
    e.push_back(1'b0);  // cycle after the trigger: weight enters the current
    for (int r = 0; r < n_rep; r++)
      for (int k = 0; k < len; k++) e.push_back(bits[S_PR-3-k]);
    for (int k = 0; k < 4; k++) e.push_back(1'b0);
    for (int c = 0; c < e.size(); c++)
      step((c < n_rep * len) && (c % len == 0), e[c]);
  endtask

  initial begin
    we = 1'b0; trigger = 1'b0; wdata = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int p = 0; p < 8; p++) begin
      replay({p[2:0], 3'b000}, 3, 1);
      replay({p[2:0], 3'b000}, 3, 3);
    end
    for (int n = 0; n < 20; n++) replay(6'($urandom), S_PR - 2, 1);
    for (int n = 0; n < 10; n++) replay(6'($urandom), S_PR - 2, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
