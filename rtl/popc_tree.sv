// Fan-in limited population count of M spikes.
//
// The M inputs are cut into parts of L (L is bounded by the neurons' fan-in);
// each part is counted by a constant-depth tc_popc, and the part counts are
// added in a tree of tc_binary_sum circuits that take N_SUM operands each,
// one width-growing level after another, as in the paper's restricted
// population-count circuit. M must be L * N_SUM^D for a whole number D of
// sum levels; the result has tree_width(M, L, N_SUM) bits, which is
// clog2(M+1) for the default sizes.
//
// Interface: x sampled in cycle t, count valid in cycle
// t + tree_latency(M, L, N_SUM) = t + 3 + 2*D; fully pipelined.
module popc_tree
  import snn_pkg::*;
#(
  parameter int unsigned M     = 64,
  parameter int unsigned L     = 8,
  parameter int unsigned N_SUM = 2,
  parameter int unsigned S_PR  = 8,
  parameter int unsigned N_PR  = 24,
  localparam int unsigned WOUT = tree_width(M, L, N_SUM)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [M-1:0]    x,
  output logic [WOUT-1:0] count
);

  localparam int unsigned D  = tree_levels(M, L, N_SUM);
  localparam int unsigned G0 = M / L;
  localparam int unsigned W0 = $clog2(L + 1);
  localparam int unsigned WS = $clog2(N_SUM);

  if (L * (N_SUM ** D) != M) begin : g_bad
    $error("popc_tree: M=%0d is not L*N_SUM^D", M);
  end

  // node[d][g]: count of group g at level d, zero-extended to WOUT bits.
  logic [D:0][G0-1:0][WOUT-1:0] node;

  for (genvar g = 0; g < G0; g++) begin : g_leaf
    logic [W0-1:0] c;
    tc_popc #(.L(L), .N_PR(N_PR)) u_popc (
      .clk(clk), .rst_n(rst_n), .x(x[g*L +: L]), .count(c));
    assign node[0][g] = WOUT'(c);
  end

  for (genvar d = 1; d <= D; d++) begin : g_level
    localparam int unsigned GD = G0 / (N_SUM ** d);   // sums at this level
    localparam int unsigned WI = W0 + (d - 1) * WS;    // operand width
    for (genvar g = 0; g < G0; g++) begin : g_node
      if (g < GD) begin : g_sum
        logic [N_SUM-1:0][WI-1:0] ops;
        logic [WI+WS-1:0]         s;
        for (genvar j = 0; j < N_SUM; j++) begin : g_op
          assign ops[j] = node[d-1][g*N_SUM + j][WI-1:0];
        end
        tc_binary_sum #(.N_IN(N_SUM), .W(WI), .S_PR(S_PR), .N_PR(N_PR)) u_sum (
          .clk(clk), .rst_n(rst_n), .y(ops), .sum(s));
        assign node[d][g] = WOUT'(s);
      end else begin : g_idle
        assign node[d][g] = '0;
      end
    end
  end

  assign count = node[D][0];

endmodule
