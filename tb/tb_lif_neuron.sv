// Self-checking testbench for lif_neuron.
//
// Drives random synaptic currents into three neurons (a leaky integrator that
// resets on a spike, a doubling neuron without reset, and a narrow neuron that
// saturates) and compares spike and current every cycle with a reference
// model of u(t+1) = m*u(t) + b + I(t), spike when u > T.
module tb_lif_neuron;
  localparam int N_PR = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic signed [N_PR-1:0] i_a, i_b, i_c;
  logic sp_a, sp_b, sp_c;
  logic signed [N_PR-1:0] u_a, u_b, u_c;

  lif_neuron #(.N_PR(N_PR), .T(20), .M_LEAK(1), .B(1), .RESET_ON_SPIKE(1'b1)) dut_a (
    .clk(clk), .rst_n(rst_n), .i_syn(i_a), .spike(sp_a), .u(u_a));
  lif_neuron #(.N_PR(N_PR), .T(63), .M_LEAK(2), .B(0), .RESET_ON_SPIKE(1'b0)) dut_b (
    .clk(clk), .rst_n(rst_n), .i_syn(i_b), .spike(sp_b), .u(u_b));
  lif_neuron #(.N_PR(N_PR), .T(0), .M_LEAK(0), .B(-1), .RESET_ON_SPIKE(1'b1)) dut_c (
    .clk(clk), .rst_n(rst_n), .i_syn(i_c), .spike(sp_c), .u(u_c));

  longint ua, ub, uc;
  logic ea, eb, ec;

  function automatic longint sat(longint v);
    longint mx = (64'sd1 <<< (N_PR - 1)) - 1;
    longint mn = -(64'sd1 <<< (N_PR - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    $timeformat(-9, 0, " ns", 8);
    i_a = '0; i_b = '0; i_c = '0;
    ua = 0; ub = 0; uc = 0; ea = 0; eb = 0; ec = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      i_a = N_PR'($signed($urandom_range(0, 14)) - 4);
      i_b = (n % 7 == 0) ? N_PR'($urandom_range(0, 40)) : (sp_b ? -N_PR'(64) : '0);
      i_c = N_PR'($signed($urandom_range(0, 4000)) - 2000);
      // reference update for the coming edge
      ua = sat(ua + 1 + longint'(i_a)); ea = (ua > 20); if (ea) ua = 0;
      ub = sat(2 * ub + longint'(i_b)); eb = (ub > 63);
      @(posedge clk);
      #1;
      check("a spike", sp_a == ea);
      check("a current", longint'(u_a) == ua);
      check("b spike", sp_b == eb);
      check("b current", longint'(u_b) == ub);
      @(negedge clk);
    end
    // saturation: drive extreme currents into neuron c
    for (int n = 0; n < 200; n++) begin
      i_c = (n % 2) ? N_PR'((1 << (N_PR - 1)) - 1) : N_PR'(-(1 << (N_PR - 1)));
      uc = sat(-1 + longint'(i_c));
      ec = (uc > 0);
      if (ec) uc = 0;
      @(posedge clk);
      #1;
      check("c spike", sp_c == ec);
      check("c current", longint'(u_c) == uc);
      @(negedge clk);
    end
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
