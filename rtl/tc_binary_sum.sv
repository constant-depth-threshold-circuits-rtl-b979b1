// Constant-depth threshold-gate sum of N_IN binary numbers of W bits.
//
// Output bit k is computed by its own parity circuit (tc_parity, ODD = 1).
// Its weight-1 inputs are bit k of every operand; every lower bit i < k of
// every operand reaches it with weight 1/2^(k-i), so the circuit sees the
// carries into position k as the whole part of its input current. Bit k of
// the sum is the parity of floor(sum over i <= k, j of y_i^(j) / 2^(k-i)).
//
// Fractional weights are integers scaled by 2^(S_PR-1), as the paper proposes:
// 1/2^d becomes 2^(S_PR-1-d). This needs WO-1 <= S_PR-2, the paper's bound
// clog2(m) <= S_PR-2, which is checked at elaboration. Each parity circuit has
// N_IN level-1 neurons, enough because the scaled current stays below 2*N_IN.
// The output neuron is the odd-detecting variant described in tc_parity
// (the paper draws the even-detecting one of its parity circuit).
//
// Interface: y sampled in cycle t, sum valid in cycle t+2; fully pipelined.
module tc_binary_sum #(
  parameter int unsigned N_IN = 2,    // number of operands
  parameter int unsigned W    = 4,    // operand width
  parameter int unsigned S_PR = 8,    // synaptic weight precision
  parameter int unsigned N_PR = 24,
  localparam int unsigned WO  = W + $clog2(N_IN)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_IN-1:0][W-1:0]   y,
  output logic [WO-1:0]            sum
);

  localparam int unsigned FRAC = S_PR - 1;

  if (WO - 1 > S_PR - 2) begin : g_bad
    $error("tc_binary_sum: %0d output bits need weights below 1/2^(S_PR-2)", WO);
  end

  for (genvar k = 0; k < WO; k++) begin : g_bit
    logic [N_IN-1:0]        xk;
    logic signed [N_PR-1:0] carry;
    for (genvar j = 0; j < N_IN; j++) begin : g_op
      if (k < W) begin : g_own
        assign xk[j] = y[j][k];
      end else begin : g_none
        assign xk[j] = 1'b0;   // position above every operand: carries only
      end
    end
    always_comb begin
      carry = '0;
      for (int j = 0; j < N_IN; j++) begin
        for (int i = 0; i < k && i < W; i++)
          if (y[j][i]) carry = carry + (N_PR'(1) << (FRAC - (k - i)));
      end
    end
    tc_parity #(.N(N_IN), .NL1(N_IN), .FRAC(FRAC), .ODD(1'b1), .N_PR(N_PR)) u_par (
      .clk(clk), .rst_n(rst_n), .x(xk), .carry(carry), .z(sum[k]));
  end

endmodule
