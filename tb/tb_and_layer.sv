// Self-checking testbench for and_layer.
//
// Random spikes on both inputs of every column; the AND neuron must fire in
// cycle t+1 exactly when the repeater input fired in cycle t and the Y input
// fired in cycle t-3 (synaptic delay 3).
module tb_and_layer;
  localparam int M = 16, NCYC = 2000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [M-1:0] x_rep, y_in, match;
  logic [M-1:0] xs [NCYC], ys [NCYC];

  and_layer #(.M(M), .Y_DELAY(3), .N_PR(12)) dut (
    .clk(clk), .rst_n(rst_n), .x_rep(x_rep), .y_in(y_in), .match(match));

  initial begin
    logic [M-1:0] e;
    x_rep = '0; y_in = '0;
    for (int c = 0; c < NCYC; c++) begin
      xs[c] = M'($urandom);
      ys[c] = M'($urandom);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      // output now shows cycle c, caused by x in c-1 and y in c-4
      e = (c >= 4) ? (xs[c-1] & ys[c-4]) : ((c >= 1) ? '0 : match);
      checks++;
      if (c >= 1 && match !== e) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d match=%h exp=%h", c, match, e);
      end
      x_rep = xs[c]; y_in = ys[c];
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
