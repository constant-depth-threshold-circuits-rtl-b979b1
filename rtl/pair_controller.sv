// Pair controller: the programmed trigger neurons that walk through all SNP
// pairs.
//
// For a second-order table every pair (X, Y) with X < Y is visited once, in
// lexicographic order, one pair every R*R cycles with no gap between pairs.
// In the first cycle of a pair the X trigger of SNP X fires once; the Y
// trigger of SNP Y fires in cycles 0, R, 2R of the pair, so Y's string is
// replayed R times back to back while the repeater stretches X's string.
// STACK_LAT cycles after the X trigger (when X's first bit leaves its pattern
// memory) the controller fires the repeater's programmed sync spike.
//
// The paper says only that pairs are selected by control spikes following a
// pre-determined activation order; the order, the gapless schedule and the
// tag outputs are this design's choices. The tag names the table entry whose
// spikes enter the network in this cycle: in cycle q of a pair the entry is
// (X genotype q / R, Y genotype q mod R). The top delays it to the cycle in
// which that entry's count comes out.
//
// Interface: a start pulse while idle begins a run; busy is high while
// triggers are being sent; tag_last marks the final entry of the run.
module pair_controller #(
  parameter int unsigned N_SNP     = 16,
  parameter int unsigned R         = 3,
  parameter int unsigned STACK_LAT = 2,
  localparam int unsigned SW       = (N_SNP > 1) ? $clog2(N_SNP) : 1,
  localparam int unsigned GW       = (R > 1) ? $clog2(R) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic [N_SNP-1:0] trig_x,
  output logic [N_SNP-1:0] trig_y,
  output logic             rep_sync,
  output logic             tag_valid,
  output logic             tag_last,
  output logic [SW-1:0]    tag_x,
  output logic [SW-1:0]    tag_y,
  output logic [GW-1:0]    tag_gx,
  output logic [GW-1:0]    tag_gy
);

  logic [SW-1:0] snp_a, snp_b;
  logic [GW-1:0] gx, gy;
  logic [STACK_LAT-1:0] sync_line;
  logic          last_pair, last_phase;

  assign last_pair  = (snp_a == SW'(N_SNP - 2)) && (snp_b == SW'(N_SNP - 1));
  assign last_phase = (gx == GW'(R - 1)) && (gy == GW'(R - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      snp_a <= '0;
      snp_b <= '0;
      gx    <= '0;
      gy    <= '0;
    end else if (!busy) begin
      if (start) begin
        busy  <= 1'b1;
        snp_a <= '0;
        snp_b <= SW'(1);
        gx    <= '0;
        gy    <= '0;
      end
    end else begin
      if (gy == GW'(R - 1)) begin
        gy <= '0;
        if (gx == GW'(R - 1)) begin
          gx <= '0;
          if (last_pair) begin
            busy <= 1'b0;
          end else if (snp_b == SW'(N_SNP - 1)) begin
            snp_a <= snp_a + SW'(1);
            snp_b <= snp_a + SW'(2);
          end else begin
            snp_b <= snp_b + SW'(1);
          end
        end else begin
          gx <= gx + GW'(1);
        end
      end else begin
        gy <= gy + GW'(1);
      end
    end
  end

  // Programmed trigger neurons: they fire as a function of the schedule.
  always_comb begin
    trig_x = '0;
    trig_y = '0;
    if (busy) begin
      trig_x[snp_a] = (gx == '0) && (gy == '0);
      trig_y[snp_b] = (gy == '0);
    end
  end

  // The repeater's programmed neuron fires when X's first bit comes out.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync_line <= '0;
    else        sync_line <= STACK_LAT'({sync_line, |trig_x});
  end
  assign rep_sync = sync_line[STACK_LAT-1];

  assign tag_valid = busy;
  assign tag_last  = busy && last_pair && last_phase;
  assign tag_x     = snp_a;
  assign tag_y     = snp_b;
  assign tag_gx    = gx;
  assign tag_gy    = gy;

endmodule
