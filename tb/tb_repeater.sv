// Self-checking testbench for repeater.
//
// Builds a stimulus schedule of R-bit sequences (back to back every R*R
// cycles, and with random gaps), for R = 3 and R = 4, and checks that the
// output in every cycle equals bit k of the sequence started at t_sync when
// the cycle is t_sync + 3 + k*R + q, and 0 outside the repeated bursts.
module tb_repeater;
  localparam int NCYC = 3000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic sync3, in3, out3, sync4, in4, out4;
  logic s3 [NCYC], i3 [NCYC], e3 [NCYC];
  logic s4 [NCYC], i4 [NCYC], e4 [NCYC];
  int   bursts3 = 0, bursts4 = 0;

  repeater #(.R(3)) dut3 (.clk(clk), .rst_n(rst_n), .sync(sync3), .in(in3), .out(out3));
  repeater #(.R(4)) dut4 (.clk(clk), .rst_n(rst_n), .sync(sync4), .in(in4), .out(out4));

  // Fill one schedule for sequence length r.
  task automatic plan(int r, ref logic s [NCYC], ref logic i [NCYC], ref logic e [NCYC],
                      ref int bursts);
    int t;
    for (int c = 0; c < NCYC; c++) begin s[c] = 0; i[c] = $urandom_range(0, 1); e[c] = 0; end
    t = 5;
    while (t + r * r + 4 < NCYC) begin
      s[t] = 1;
      for (int k = 0; k < r; k++) begin
        i[t + k] = $urandom_range(0, 1);
        for (int q = 0; q < r; q++) e[t + 3 + k * r + q] = i[t + k];
      end
      bursts++;
      t += r * r + (($urandom_range(0, 3) == 0) ? $urandom_range(1, 5) : 0);
    end
  endtask

  initial begin
    sync3 = 0; in3 = 0; sync4 = 0; in4 = 0;
    plan(3, s3, i3, e3, bursts3);
    plan(4, s4, i4, e4, bursts4);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      sync3 = s3[c]; in3 = i3[c]; sync4 = s4[c]; in4 = i4[c];
      #1;
      checks += 2;
      if (out3 !== e3[c]) begin
        failures++;
        if (failures < 10) $display("FAIL R=3 cycle %0d out=%0b exp=%0b", c, out3, e3[c]);
      end
      if (out4 !== e4[c]) begin
        failures++;
        if (failures < 10) $display("FAIL R=4 cycle %0d out=%0b exp=%0b", c, out4, e4[c]);
      end
      @(negedge clk);
    end
    $display("bursts: R=3 %0d, R=4 %0d", bursts3, bursts4);
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
