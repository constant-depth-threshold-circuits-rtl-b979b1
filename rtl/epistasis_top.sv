// Second-order epistasis contingency-table engine.
//
// The genotype table (N_SNP SNPs by M samples of one class, cases or controls)
// is embedded in pattern-memory synapses. For every pair of SNPs (X, Y) and
// every genotype combination (gx, gy) the engine counts the samples whose
// SNP X has genotype gx and whose SNP Y has genotype gy, and delivers one such
// count per cycle, 9 per pair, with no gap between pairs.
//
// Data path, one lane per sample column:
//   pair_controller -> snp_memory (X role) -> repeater --\
//                   -> snp_memory (Y role) ------------- and_layer -> popc_tree
// X's one-hot string (3 bits) is stretched by the repeater to 9 bits (each bit
// three times); Y's string is replayed three times; the AND neuron of a column
// fires in the cycles where both are 1, so in each of the 9 cycles of a pair
// exactly the samples of one table entry fire. The population-count tree adds
// them up.
//
// Timing: table entry q of a pair whose X trigger fires in cycle T comes out in
// cycle T + q + LAT with LAT = 2 (pattern memory) + 3 (repeater) + 1 (AND) +
// tree_latency(M, POPC_L, SUM_N) (15 for the defaults). entry_valid marks
// those cycles and entry_x/y/gx/gy name the entry; entry_last marks the last
// one of the run. The whole run takes 9*N_SNP*(N_SNP-1)/2 + LAT cycles.
//
// What follows the paper: the data path of its second-order circuit (pattern
// memories, a repeater per column, AND neurons with a delay-3 Y synapse and
// the fan-in limited population count), the one-hot genotype encoding and the
// one-entry-per-timestep pipeline. This design's own choices: the sizes, the
// two-role memory, the pair order, the load port and the entry tags.
//
// Host side: genotypes are written one cell per cycle through load_* before
// start; the paper builds the case and control tables in separate runs, which
// the host does by reloading the memory. Entries are meant to be collected by
// an external controller as they come out; none are stored here.
module epistasis_top
  import snn_pkg::*;
#(
  parameter int unsigned N_SNP  = 16,  // SNPs in the dataset
  parameter int unsigned M      = 64,  // samples (columns) of one class
  parameter int unsigned S_PR   = 8,   // synaptic weight precision
  parameter int unsigned N_PR   = 24,  // neuron current precision
  parameter int unsigned POPC_L = 8,   // part size of the population count (<= fan-in)
  parameter int unsigned SUM_N  = 2,   // operands per binary-sum circuit
  localparam int unsigned SW    = (N_SNP > 1) ? $clog2(N_SNP) : 1,
  localparam int unsigned MW    = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned CW    = tree_width(M, POPC_L, SUM_N)
) (
  input  logic            clk,
  input  logic            rst_n,
  // genotype loading
  input  logic            load_we,
  input  logic [SW-1:0]   load_snp,
  input  logic [MW-1:0]   load_sample,
  input  genotype_e       load_gt,
  // run control
  input  logic            start,
  output logic            busy,
  // table entry stream
  output logic            entry_valid,
  output logic            entry_last,
  output logic [SW-1:0]   entry_x,
  output logic [SW-1:0]   entry_y,
  output logic [1:0]      entry_gx,
  output logic [1:0]      entry_gy,
  output logic [CW-1:0]   entry_count
);

  localparam int unsigned R         = GENOTYPES;
  localparam int unsigned STACK_LAT = 2;
  localparam int unsigned REP_LAT   = 3;
  localparam int unsigned LAT       = STACK_LAT + REP_LAT + 1 + tree_latency(M, POPC_L, SUM_N);

  typedef struct packed {
    logic          valid;
    logic          last;
    logic [SW-1:0] x;
    logic [SW-1:0] y;
    logic [1:0]    gx;
    logic [1:0]    gy;
  } tag_t;

  logic [N_SNP-1:0] trig_x, trig_y;
  logic             rep_sync, ctl_busy;
  logic [M-1:0]     x_bits, y_bits, x_rep, match;
  tag_t             tag_in;
  tag_t [LAT:0]     tag_line;
  logic [S_PR-1:0]  wdata;

  assign wdata = S_PR'(genotype_weight(load_gt, S_PR));

  pair_controller #(.N_SNP(N_SNP), .R(R), .STACK_LAT(STACK_LAT)) u_ctl (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(ctl_busy),
    .trig_x(trig_x), .trig_y(trig_y), .rep_sync(rep_sync),
    .tag_valid(tag_in.valid), .tag_last(tag_in.last),
    .tag_x(tag_in.x), .tag_y(tag_in.y), .tag_gx(tag_in.gx), .tag_gy(tag_in.gy));

  snp_memory #(.N_SNP(N_SNP), .M(M), .S_PR(S_PR), .N_PR(N_PR)) u_mem (
    .clk(clk), .rst_n(rst_n),
    .we(load_we), .w_snp(load_snp), .w_sample(load_sample), .wdata(wdata),
    .trig_x(trig_x), .trig_y(trig_y), .x_out(x_bits), .y_out(y_bits));

  for (genvar i = 0; i < M; i++) begin : g_col
    repeater #(.R(R)) u_rep (
      .clk(clk), .rst_n(rst_n), .sync(rep_sync), .in(x_bits[i]), .out(x_rep[i]));
  end

  and_layer #(.M(M), .Y_DELAY(REP_LAT), .N_PR(N_PR)) u_and (
    .clk(clk), .rst_n(rst_n), .x_rep(x_rep), .y_in(y_bits), .match(match));

  popc_tree #(.M(M), .L(POPC_L), .N_SUM(SUM_N), .S_PR(S_PR), .N_PR(N_PR)) u_popc (
    .clk(clk), .rst_n(rst_n), .x(match), .count(entry_count));

  // Entry tags travel alongside the spikes.
  assign tag_line[0] = tag_in;
  for (genvar d = 1; d <= LAT; d++) begin : g_tag
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) tag_line[d] <= '0;
      else        tag_line[d] <= tag_line[d-1];
    end
  end

  always_comb begin
    busy = ctl_busy;
    for (int d = 1; d <= LAT; d++) busy |= tag_line[d].valid;
  end

  assign entry_valid = tag_line[LAT].valid;
  assign entry_last  = tag_line[LAT].last;
  assign entry_x     = tag_line[LAT].x;
  assign entry_y     = tag_line[LAT].y;
  assign entry_gx    = tag_line[LAT].gx;
  assign entry_gy    = tag_line[LAT].gy;

  // The memory may only be written while no run is in flight.
  a_no_load_in_run: assert property (@(posedge clk) disable iff (!rst_n) load_we |-> !busy);

endmodule
