// SNP dataset memory: the whole genotype table embedded in pattern memories.
//
// The dataset has N_SNP SNPs (rows) and M samples (columns). Each (SNP, sample)
// genotype is held, as its one-hot string, in a pattern-memory neuron; all M
// neurons of a SNP share one trigger, so a trigger spike for SNP j replays the
// genotype of SNP j in every sample column at once.
//
// Two roles are needed at the same time: the first SNP of a pair (X) feeds
// the repeaters and the second (Y) feeds the AND neurons directly. This design
// gives every SNP one pattern-memory neuron per role, written with the same
// weight, and OR-merges each role's outputs per column (only one SNP per role
// is triggered at a time, so the merge is a relay neuron with threshold 0).
// The paper draws both paths leaving each stored SNP but does not say how the
// two roles are kept apart; the duplicated memory is this design's choice.
//
// Interface: a write (we, w_snp, w_sample, wdata) programs both roles of one
// cell. trig_x/trig_y are one-hot (or zero) trigger spikes. x_out/y_out carry
// the replayed strings, two cycles after the trigger (see pattern_memory).
module snp_memory #(
  parameter int unsigned N_SNP = 16,
  parameter int unsigned M     = 64,
  parameter int unsigned S_PR  = 8,
  parameter int unsigned N_PR  = 24,
  localparam int unsigned SW   = (N_SNP > 1) ? $clog2(N_SNP) : 1,
  localparam int unsigned MW   = (M > 1) ? $clog2(M) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [SW-1:0]    w_snp,
  input  logic [MW-1:0]    w_sample,
  input  logic [S_PR-1:0]  wdata,
  input  logic [N_SNP-1:0] trig_x,
  input  logic [N_SNP-1:0] trig_y,
  output logic [M-1:0]     x_out,
  output logic [M-1:0]     y_out
);

  logic [N_SNP-1:0][M-1:0] sx, sy;

  for (genvar j = 0; j < N_SNP; j++) begin : g_snp
    for (genvar i = 0; i < M; i++) begin : g_sample
      logic cell_we;
      assign cell_we = we && (w_snp == SW'(j)) && (w_sample == MW'(i));
      pattern_memory #(.S_PR(S_PR), .N_PR(N_PR)) u_x (
        .clk(clk), .rst_n(rst_n), .we(cell_we), .wdata(wdata),
        .trigger(trig_x[j]), .spike(sx[j][i]));
      pattern_memory #(.S_PR(S_PR), .N_PR(N_PR)) u_y (
        .clk(clk), .rst_n(rst_n), .we(cell_we), .wdata(wdata),
        .trigger(trig_y[j]), .spike(sy[j][i]));
    end
  end

  always_comb begin
    x_out = '0;
    y_out = '0;
    for (int j = 0; j < N_SNP; j++) begin
      x_out |= sx[j];
      y_out |= sy[j];
    end
  end

  a_one_x: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(trig_x));
  a_one_y: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(trig_y));

endmodule
