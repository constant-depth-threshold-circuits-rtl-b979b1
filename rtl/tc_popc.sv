// Constant-depth threshold-gate population count.
//
// Counts the spikes of L inputs and gives the count in binary, in three
// levels of neurons, as in the paper:
//   level 1: L neurons, neuron j (from 1) has threshold j-1 and a weight-1
//            synapse from every input, so the first c neurons fire for c
//            input spikes (a thermometer code);
//   level 2: L neurons, neuron j gets +1 from level-1 neuron j and -1 from
//            every level-1 neuron above it, threshold 0, so only neuron c
//            fires (one-hot code);
//   level 3: clog2(L+1) output neurons, threshold 0; output bit i has a
//            weight-1 synapse from every level-2 neuron whose index has bit i
//            set.
// All synapses have delay 0 and no neuron has leakage or bias.
//
// Interface: x sampled in cycle t, count valid in cycle t+3; fully pipelined.
module tc_popc #(
  parameter int unsigned L    = 8,
  parameter int unsigned N_PR = 24,
  localparam int unsigned WO  = $clog2(L + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [L-1:0]  x,
  output logic [WO-1:0] count
);

  logic [L:1] s1, s2;
  logic signed [N_PR-1:0] i1;

  always_comb begin
    i1 = '0;
    for (int k = 0; k < L; k++) i1 = i1 + N_PR'(x[k]);
  end

  for (genvar j = 1; j <= L; j++) begin : g_lvl
    logic signed [N_PR-1:0] i2, u1_unused, u2_unused;
    lif_neuron #(.N_PR(N_PR), .T(j - 1)) u_l1 (
      .clk(clk), .rst_n(rst_n), .i_syn(i1), .spike(s1[j]), .u(u1_unused));
    always_comb begin
      i2 = N_PR'(s1[j]);
      for (int k = j + 1; k <= L; k++) i2 = i2 - N_PR'(s1[k]);
    end
    lif_neuron #(.N_PR(N_PR), .T(0)) u_l2 (
      .clk(clk), .rst_n(rst_n), .i_syn(i2), .spike(s2[j]), .u(u2_unused));
  end

  for (genvar b = 0; b < WO; b++) begin : g_out
    logic signed [N_PR-1:0] i3, u3_unused;
    always_comb begin
      i3 = '0;
      for (int j = 1; j <= L; j++) if (((j >> b) & 1) == 1) i3 = i3 + N_PR'(s2[j]);
    end
    lif_neuron #(.N_PR(N_PR), .T(0)) u_l3 (
      .clk(clk), .rst_n(rst_n), .i_syn(i3), .spike(count[b]), .u(u3_unused));
  end

endmodule
