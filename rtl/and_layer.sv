// AND layer: one AND neuron per sample column.
//
// Each neuron has threshold 1, no leakage and no bias, and two weight-1
// synapses: one from the column's repeater output (delay 0) and one from the
// column's Y memory output with synaptic delay Y_DELAY (3 in the paper, to
// make up for the repeater's 3-cycle overhead). It fires only when both spikes
// arrive in the same timestep, i.e. when the sample has the X genotype and the
// Y genotype of the current table entry.
//
// Timing: a repeater spike in cycle t and a Y spike in cycle t-Y_DELAY give
// an output spike in cycle t+1.
module and_layer #(
  parameter int unsigned M       = 64,
  parameter int unsigned Y_DELAY = 3,
  parameter int unsigned N_PR    = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [M-1:0] x_rep,   // repeater outputs
  input  logic [M-1:0] y_in,    // Y memory outputs
  output logic [M-1:0] match    // AND neuron spikes
);

  // Synaptic delay line of the Y synapses.
  logic [Y_DELAY:0][M-1:0] y_line;
  assign y_line[0] = y_in;
  for (genvar d = 1; d <= Y_DELAY; d++) begin : g_delay
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) y_line[d] <= '0;
      else        y_line[d] <= y_line[d-1];
    end
  end

  for (genvar i = 0; i < M; i++) begin : g_and
    logic signed [N_PR-1:0] i_syn;
    logic signed [N_PR-1:0] u_unused;
    assign i_syn = N_PR'(x_rep[i]) + N_PR'(y_line[Y_DELAY][i]);
    lif_neuron #(.N_PR(N_PR), .T(1), .M_LEAK(0), .B(0)) u_and (
      .clk(clk), .rst_n(rst_n), .i_syn(i_syn), .spike(match[i]), .u(u_unused));
  end

endmodule
