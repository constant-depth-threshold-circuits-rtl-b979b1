// Discrete-time leaky integrate-and-fire neuron.
//
// Every neuron of the engine is an instance of this module. It implements the
// update u(t+1) = M_LEAK*u(t) + B + I(t), where I(t) is the weighted sum of
// the spikes that reach the neuron in timestep t (computed by the caller, which
// owns the synapses). The neuron spikes in timestep t+1 when u(t+1) is strictly
// greater than the threshold T. With RESET_ON_SPIKE set the current is then
// cleared to 0, as in the network model; pattern-memory neurons clear it
// instead through an inhibitory self-synapse and keep RESET_ON_SPIKE at 0.
// With M_LEAK = 0 the neuron is a plain threshold gate.
//
// Currents are signed N_PR-bit integers. An update that would leave that range
// saturates at its limit (a choice of this design; the network model does not
// say what happens on overflow).
//
// Interface: i_syn is sampled every cycle; spike and u are registered, so a
// spike arriving in cycle t is seen on spike in cycle t+1. Reset clears u and
// spike.
module lif_neuron #(
  parameter int unsigned N_PR           = 24,  // current and threshold precision
  parameter int          T              = 0,   // threshold
  parameter int          M_LEAK         = 0,   // leakage (multiplier) constant
  parameter int          B              = 0,   // bias
  parameter bit          RESET_ON_SPIKE = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [N_PR-1:0] i_syn,   // synaptic input current of this timestep
  output logic                   spike,   // spike of this neuron
  output logic signed [N_PR-1:0] u        // membrane current
);

  // The update is formed EW bits wide, enough for |M_LEAK| and |B| below
  // 2^(EW-N_PR-2), and then saturated to N_PR bits.
  localparam int unsigned EW = N_PR + 8;
  localparam logic signed [EW-1:0] UMAX = (EW'(1) <<< (N_PR - 1)) - EW'(1);
  localparam logic signed [EW-1:0] UMIN = -(EW'(1) <<< (N_PR - 1));

  logic signed [EW-1:0]   u_wide;
  logic signed [N_PR-1:0] u_next;
  logic                   fire;

  always_comb begin
    u_wide = EW'(M_LEAK) * EW'(u) + EW'(B) + EW'(i_syn);
    if (u_wide > UMAX)      u_next = UMAX[N_PR-1:0];
    else if (u_wide < UMIN) u_next = UMIN[N_PR-1:0];
    else                    u_next = u_wide[N_PR-1:0];
    fire = (u_next > N_PR'(T));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u     <= '0;
      spike <= 1'b0;
    end else begin
      spike <= fire;
      u     <= (fire && RESET_ON_SPIKE) ? '0 : u_next;
    end
  end

endmodule
