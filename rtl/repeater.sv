// Repeater: replays each bit of an R-bit spike sequence R times.
//
// When the input neuron fires the sequence b1 b2 ... bR (one bit per cycle,
// starting in the cycle in which the programmed sync spike arrives), the
// output fires b1 R times, then b2 R times, and so on: R*R cycles in all,
// starting 3 cycles after b1 came in. With R = 3 and the input 010 the output
// is 000111000. In the engine this turns the genotype string of SNP X into
// the slow-changing operand that is matched against three replays of SNP Y.
//
// The paper builds this from a ring of R-1 spike-repeater neurons, a neuron
// that moves the last bit into the ring, R sequentially activated gating
// neurons and R-1 gate neurons. Its figure does not fix every connection, so
// this module keeps the paper's function and timing (each bit R times, a fixed
// 3-cycle overhead, one sequence every R*R cycles) but realises it in the
// simplest way: the input bits are captured into one of two R-bit registers
// (alternating, so that the next sequence can arrive while the previous one
// is still being played) and a bit/repeat counter pair plays them out.
//
// Interface: sync marks the cycle of bit 1 (the paper's programmed neuron
// that fires at a fixed timestep). A new sync may come R*R cycles after the
// previous one at the earliest. out is registered: bit k, repeat q (both from
// 0) appears in cycle t_sync + 3 + k*R + q.
module repeater #(
  parameter int unsigned R = 3   // sequence length (and repeat count)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sync,   // programmed spike, coincident with bit 1 of the input
  input  logic in,     // input sequence
  output logic out     // repeated sequence
);

  localparam int unsigned CW = (R > 1) ? $clog2(R) : 1;

  logic [1:0][R-1:0] bank;        // two capture registers
  logic              wr_sel;      // bank the current capture writes
  logic              capturing;
  logic [CW-1:0]     cap_pos;
  logic [1:0]        sync_d;      // sync delayed by 1 and 2 cycles
  logic [1:0]        sel_d;       // wr_sel of those syncs
  logic              playing;
  logic              play_sel;
  logic [CW-1:0]     bit_i, rep_i;

  // Capture: bit 1 in the sync cycle, bits 2..R in the cycles after it.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank      <= '0;
      wr_sel    <= 1'b1;
      capturing <= 1'b0;
      cap_pos   <= '0;
    end else if (sync) begin
      wr_sel           <= ~wr_sel;
      bank[~wr_sel][0] <= in;
      capturing        <= (R > 1);
      cap_pos          <= CW'(1);
    end else if (capturing) begin
      bank[wr_sel][cap_pos] <= in;
      capturing             <= (cap_pos != CW'(R - 1));
      cap_pos               <= cap_pos + CW'(1);
    end
  end

  // Playback starts two cycles after sync, so the first output is registered
  // into the third cycle after it.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_d   <= '0;
      sel_d    <= '0;
      playing  <= 1'b0;
      play_sel <= 1'b0;
      bit_i    <= '0;
      rep_i    <= '0;
      out      <= 1'b0;
    end else begin
      sync_d <= {sync_d[0], sync};
      sel_d  <= {sel_d[0], ~wr_sel};
      if (sync_d[1]) begin
        out      <= bank[sel_d[1]][0];
        play_sel <= sel_d[1];
        playing  <= (R > 1);
        bit_i    <= '0;
        rep_i    <= CW'(1);
      end else if (playing) begin
        out <= bank[play_sel][bit_i];
        if (rep_i == CW'(R - 1)) begin
          rep_i   <= '0;
          bit_i   <= bit_i + CW'(1);
          playing <= (bit_i != CW'(R - 1));
        end else begin
          rep_i <= rep_i + CW'(1);
        end
      end else begin
        out <= 1'b0;
      end
    end
  end

  // Two sequences may not overlap by more than the two capture registers allow.
  a_sync_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    sync |=> !sync [* (R*R-1)]);

endmodule
