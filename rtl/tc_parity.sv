// Constant-depth threshold-gate parity circuit, with optional carry input.
//
// Level 1 has NL1 neurons; neuron j (from 1) fires when the input current is
// at least 2j, so the number of level-1 spikes is floor(c/2), c being the
// current. The level-2 neuron compares twice that number with c itself, which
// reaches it through synapses of delay 1: the two match exactly when c is
// even. With ODD = 0 the output neuron is the paper's (threshold 0, bias 1,
// weight 2 from level 1, weight -1 from the inputs) and spikes when c is even.
// With ODD = 1 the signs are swapped (weight -2 from level 1, +1 from the
// inputs, threshold just below 1) and it spikes when c is odd, which is the
// form a binary adder needs.
//
// For the binary sum the current may also hold fractional contributions of
// lower-significance bits. Currents are then scaled by 2^FRAC (FRAC = S_PR-1
// in the sum circuit) and the caller supplies the scaled fractional part on
// carry; c means floor of the scaled current / 2^FRAC. The level-1 thresholds
// are 2j*2^FRAC - 1, so neuron j fires for c >= 2j also when the current is not
// a whole number. With FRAC = 0 and no carry this is exactly threshold 2j-1 as
// in the paper. (Scaling the paper's threshold 2j-1 by 2^FRAC instead would
// let a current such as 3.5 fire neuron 2 and give the wrong parity.)
//
// Interface: x and carry are sampled in cycle t; z is valid in cycle t+2, and a
// new input may be given every cycle.
module tc_parity #(
  parameter int unsigned N    = 8,                      // input bits
  parameter int unsigned NL1  = (N / 2 > 0) ? N / 2 : 1, // level-1 neurons
  parameter int unsigned FRAC = 0,                      // current scale exponent
  parameter bit          ODD  = 1'b0,                   // 1: spike on odd count
  parameter int unsigned N_PR = 24
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N-1:0]           x,      // weight-1 inputs
  input  logic signed [N_PR-1:0] carry,  // scaled fractional input current
  output logic                   z
);

  localparam int SCALE = 1 << FRAC;

  logic signed [N_PR-1:0] i1;       // level-1 current
  logic signed [N_PR-1:0] i1_d;     // same current through the delay-1 synapses
  logic [NL1-1:0]         s1;       // level-1 spikes
  logic signed [N_PR-1:0] i2;

  always_comb begin
    i1 = carry;
    for (int k = 0; k < N; k++) if (x[k]) i1 = i1 + N_PR'(SCALE);
  end

  for (genvar j = 1; j <= NL1; j++) begin : g_l1
    logic signed [N_PR-1:0] u_unused;
    lif_neuron #(.N_PR(N_PR), .T(2 * j * SCALE - 1)) u_n (
      .clk(clk), .rst_n(rst_n), .i_syn(i1), .spike(s1[j-1]), .u(u_unused));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) i1_d <= '0;
    else        i1_d <= i1;
  end

  always_comb begin
    i2 = '0;
    for (int j = 0; j < NL1; j++) if (s1[j]) i2 = i2 + N_PR'(2 * SCALE);
    i2 = ODD ? (i1_d - i2) : (i2 - i1_d);
  end

  logic signed [N_PR-1:0] u2_unused;
  lif_neuron #(
    .N_PR(N_PR), .T(ODD ? SCALE - 1 : 0), .B(ODD ? 0 : SCALE)
  ) u_out (
    .clk(clk), .rst_n(rst_n), .i_syn(i2), .spike(z), .u(u2_unused));

endmodule
