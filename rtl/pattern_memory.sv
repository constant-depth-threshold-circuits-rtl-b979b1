// Pattern memory (synaptic stack): a neuron that replays a stored bit string.
//
// A bit string is held in the weight of the synapse from a trigger neuron to a
// replay neuron. The weight is a signed S_PR-bit integer whose sign bit and
// next bit are 0; the string starts one bit below them, so it can be up to
// S_PR-2 bits long. When the trigger spikes, the weight is added to the replay
// neuron's current. The replay neuron has leakage 2 (its current is shifted
// left each timestep), threshold 2^(S_PR-2)-1 (so it fires exactly when bit
// S_PR-2 of its current is set) and an inhibitory self-synapse of weight
// -2^(S_PR-1) that removes the bit that has just fired once it has been shifted
// up. The string thus pops out one bit per timestep, and the weight itself is
// never disturbed, so the memory can be replayed any number of times.
//
// The neuron structure, threshold, leakage and self-synapse follow the paper's
// pattern memory circuit. The replay neuron does not reset on a spike, as the
// self-synapse does that work; the write port that programs the weight is
// this design's own.
//
// Timing: trigger in cycle t puts the weight into the current in cycle t+1;
// bit 1 of the string appears on spike in cycle t+2, bit k in cycle t+1+k. A
// new trigger may come every GENOTYPES cycles for a 3-bit string: the strings
// then follow each other without a gap. The weight resets to 0.
module pattern_memory #(
  parameter int unsigned S_PR = 8,   // synaptic weight precision
  parameter int unsigned N_PR = 24   // neuron current precision
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,        // write the stored weight
  input  logic [S_PR-1:0] wdata,     // weight: 0, 0, then the bit string
  input  logic            trigger,   // level-0 trigger neuron spike
  output logic            spike      // replayed bit
);

  localparam int TH = (1 << (S_PR - 2)) - 1;

  logic signed [S_PR-1:0] weight;
  logic signed [N_PR-1:0] i_syn;
  logic signed [N_PR-1:0] u_unused;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  weight <= '0;
    else if (we) weight <= wdata;
  end

  // Synapses: trigger -> neuron (delay 0, stored weight) and the inhibitory
  // self-synapse (delay 0, weight -2^(S_PR-1)).
  always_comb begin
    i_syn = '0;
    if (trigger) i_syn = i_syn + N_PR'(weight);
    if (spike)   i_syn = i_syn - (N_PR'(1) << (S_PR - 1));
  end

  lif_neuron #(
    .N_PR(N_PR), .T(TH), .M_LEAK(2), .B(0), .RESET_ON_SPIKE(1'b0)
  ) u_replay (
    .clk(clk), .rst_n(rst_n), .i_syn(i_syn), .spike(spike), .u(u_unused)
  );

  // The stored string must leave the sign bit and the bit below it at 0.
  a_weight_format: assert property (@(posedge clk) disable iff (!rst_n)
    we |-> (wdata[S_PR-1 -: 2] == 2'b00));

endmodule
