// cand_select: second-step sequencer. For every seed of an event it
// gathers the four regions of the seed's neighbourhood into the
// candidate arrays.
//
// When seeds_valid pulses, the 16 seeds and the buffer bank holding their
// event (done_bank) are latched. The unit then walks the seeds in Seeds
// order, one per cycle: region_locator turns the seed into the row/column
// form of its 2x2 neighbourhood and cand_preselect reads those four
// regions from the buffer through its small multiplexers. The result is
// registered and presented on out_* for one cycle, together with the seed,
// its position in Seeds and the grid ids of the four regions.
//
// The source describes what is gathered per seed and how the regions are
// addressed; the one-seed-per-cycle schedule, the latching and the output
// framing are this design's choice. An event occupies the unit for
// N_SEEDS cycles, well inside the 36-cycle spacing of events, so a new
// seeds_valid never meets a busy unit (checked by an assertion).
//
// Timing: out_valid for seed s rises s + 1 cycles after the edge that
// latched the seeds; out_last marks seed N_SEEDS-1.
module cand_select
  import tau_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                seeds_valid,
  input  seed_t               seeds [N_SEEDS],
  input  logic                done_bank,
  // buffer read port
  output logic                rd_bank,
  input  region_t             rd_track    [4][8],
  input  region_t             rd_last_row [N_COLS],
  // candidate arrays of one seed per cycle
  output logic                out_valid,
  output logic                out_last,
  output logic [3:0]          out_seed_num,
  output seed_t               out_seed,
  output logic [REGION_W-1:0] out_region_id [N_NEIGHBOURS],
  output region_t             out_cand      [N_NEIGHBOURS]
);

  seed_t               seeds_q [N_SEEDS];
  logic                busy;
  logic [3:0]          cnt;
  seed_t               cur_seed;
  nbhd_t               nb;
  logic [REGION_W-1:0] region_id [N_NEIGHBOURS];
  region_t             cand      [N_NEIGHBOURS];

  assign cur_seed = seeds_q[cnt];

  region_locator u_locate (
    .seed      (cur_seed),
    .nb        (nb),
    .region_id (region_id)
  );

  cand_preselect u_pre (
    .track    (rd_track),
    .last_row (rd_last_row),
    .nb       (nb),
    .cand     (cand)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      rd_bank   <= 1'b0;
      seeds_q   <= '{default: '0};
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= busy;
      out_last  <= busy && (cnt == 4'(N_SEEDS - 1));
      if (seeds_valid) begin
        seeds_q <= seeds;
        rd_bank <= done_bank;
        busy    <= 1'b1;
        cnt     <= '0;
      end else if (busy) begin
        cnt <= cnt + 4'd1;
        if (cnt == 4'(N_SEEDS - 1)) busy <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy) begin
      out_seed_num  <= cnt;
      out_seed      <= cur_seed;
      out_region_id <= region_id;
      out_cand      <= cand;
    end
  end

  a_not_busy: assert property (@(posedge clk) disable iff (!rst_n)
    seeds_valid |-> !busy);

endmodule
