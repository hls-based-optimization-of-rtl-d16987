// spatial_sorter: streaming selection of the N_SEEDS highest-pT seed
// candidates of an event (the modified spatial insertion sorter).
//
// The event arrives one region per valid cycle as four candidates already
// sorted by pT. An input register stage hands them to a chain of
// N_SEEDS/2 sort_cell2 cells; cell k keeps Seeds[2k] and Seeds[2k+1] and
// passes the four smaller of its six values on to cell k+1. Because a new
// region can enter every cycle, all cells work on different regions at
// once and the whole chain behaves as a systolic insertion sorter whose
// contents, read top to bottom, are the best N_SEEDS candidates in
// descending pT order (ties: earlier candidate first).
//
// When a cell has processed the last region of an event it copies its
// pair into the Seeds output array; when the last cell has done so,
// seeds_valid pulses for one cycle and Seeds holds the complete sorted
// result. The next event may start on the cycle after the last region of
// the previous one.
//
// Timing, as in the source publication (36 + 1 + 8 = 45 cycles): counting
// the clock edge that samples region 0 as edge 1, seeds_valid rises
// after edge N_REGIONS + 1 + N_OUT/2, i.e. 36 regions + 1 input stage +
// 8 cells = 45 at the defaults. The in_first/in_last framing and the
// output capture registers are this design's choice.
module spatial_sorter
  import tau_pkg::*;
#(
  parameter int unsigned N_OUT = N_SEEDS   // Seeds[16]; must be even
)(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   in_first,
  input  logic   in_last,
  input  seed_t  in_cand [4],
  output seed_t  seeds   [N_OUT],
  output logic   seeds_valid
);

  localparam int unsigned N_CELLS = N_OUT / 2;

  // Input stage: the first region reaches cell 0 on the second cycle.
  logic  s_valid [N_CELLS+1];
  logic  s_first [N_CELLS+1];
  logic  s_last  [N_CELLS+1];
  seed_t s_cand  [N_CELLS+1][4];
  seed_t keep    [N_CELLS][2];
  logic  keep_final [N_CELLS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_valid[0] <= 1'b0;
      s_first[0] <= 1'b0;
      s_last[0]  <= 1'b0;
      s_cand[0]  <= '{default: '0};
    end else begin
      s_valid[0] <= in_valid;
      s_first[0] <= in_valid & in_first;
      s_last[0]  <= in_valid & in_last;
      if (in_valid) s_cand[0] <= in_cand;
    end
  end

  for (genvar k = 0; k < N_CELLS; k++) begin : g_cell
    sort_cell2 u_cell (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (s_valid[k]),
      .in_first  (s_first[k]),
      .in_last   (s_last[k]),
      .in_cand   (s_cand[k]),
      .out_valid (s_valid[k+1]),
      .out_first (s_first[k+1]),
      .out_last  (s_last[k+1]),
      .out_cand  (s_cand[k+1]),
      .keep      (keep[k]),
      .keep_final(keep_final[k])
    );

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        seeds[2*k]   <= '0;
        seeds[2*k+1] <= '0;
      end else if (keep_final[k]) begin
        seeds[2*k]   <= keep[k][0];
        seeds[2*k+1] <= keep[k][1];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) seeds_valid <= 1'b0;
    else        seeds_valid <= keep_final[N_CELLS-1];
  end

  // What the last cell pushes out is discarded: the 4 smallest of the
  // running comparison, never a member of the top N_OUT.

endmodule
