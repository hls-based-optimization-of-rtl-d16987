// event_buffer: input buffering of an event and extraction of its seed
// candidates (first step of the trigger, buffering half).
//
// Regions stream in one per valid cycle, region 0 first. A counter gives
// each beat its region id r = 4*row + col. The region is written into
// the storage layout that lets the second step select neighbourhoods
// with small multiplexers: rows 0..7 of the 9x4 grid go into a 4 x 8
// array track[row/2][4*(row%2) + col] (each array row holds an even grid
// row on its left half and the following odd grid row on its right half),
// grid row 8 goes into the separate trackLastRow[col]. This layout is the
// one of the source publication; its figure shows it for tracks and the
// same layout is used here for the whole region (charged, photon and
// neutral tracks together).
//
// Two banks (this design's choice) let the second step read the event
// just completed while the next one is written; done_bank names the bank
// of the most recent complete event and rd_bank selects the bank seen on
// the read port. A bank is rewritten two events later, i.e. 72 cycles
// after its event started at one region per cycle.
//
// On the same cycle a region is written, its first SEEDS_PER_REGION
// charged tracks leave on cand[] as seed candidates with index
// 4*r + slot, framed by cand_first (r == 0) and cand_last (r == 35). The
// source takes the first four tracks of a region as its seed candidates
// and states they arrive sorted by pT; they are forwarded unchanged.
//
// Timing: cand_* are combinational from the input beat; the stored region
// is visible on the read port from the next cycle; event_done pulses
// the cycle after the last region has been written.
module event_buffer
  import tau_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    region_valid,
  input  region_t region_in,
  // seed candidate stream
  output logic    cand_valid,
  output logic    cand_first,
  output logic    cand_last,
  output seed_t   cand [SEEDS_PER_REGION],
  // event status
  output logic    event_done,
  output logic    done_bank,
  // read port
  input  logic    rd_bank,
  output region_t rd_track    [4][8],
  output region_t rd_last_row [N_COLS]
);

  region_t track_q    [2][4][8];
  region_t last_row_q [2][N_COLS];

  logic [REGION_W-1:0] region_cnt;
  logic                wr_bank;
  logic [3:0]          row;
  logic [1:0]          col;

  assign row = 4'(region_cnt >> 2);
  assign col = region_cnt[1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      region_cnt <= '0;
      wr_bank    <= 1'b0;
      done_bank  <= 1'b0;
      event_done <= 1'b0;
    end else begin
      event_done <= 1'b0;
      if (region_valid) begin
        if (region_cnt == REGION_W'(N_REGIONS - 1)) begin
          region_cnt <= '0;
          wr_bank    <= ~wr_bank;
          done_bank  <= wr_bank;
          event_done <= 1'b1;
        end else begin
          region_cnt <= region_cnt + 1'b1;
        end
      end
    end
  end

  // Storage: no reset, every entry is written before it is read.
  always_ff @(posedge clk) begin
    if (region_valid) begin
      if (row == 4'(N_ROWS - 1))
        last_row_q[wr_bank][col] <= region_in;
      else
        track_q[wr_bank][row[2:1]][{row[0], col}] <= region_in;
    end
  end

  assign rd_track    = track_q[rd_bank];
  assign rd_last_row = last_row_q[rd_bank];

  always_comb begin
    cand_valid = region_valid;
    cand_first = region_valid && (region_cnt == '0);
    cand_last  = region_valid && (region_cnt == REGION_W'(N_REGIONS - 1));
    for (int s = 0; s < int'(SEEDS_PER_REGION); s++) begin
      cand[s].idx = IDX_W'(region_cnt) * IDX_W'(SEEDS_PER_REGION) + IDX_W'(s);
      cand[s].trk = region_in.charged[s];
    end
  end

endmodule
