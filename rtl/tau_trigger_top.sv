// tau_trigger_top: front end of the tau-lepton trigger - event
// buffering, selection of the 16 highest-pT seeds out of 144 candidates,
// and gathering of each seed's four-region neighbourhood.
//
// Data flow:
//   region stream -> event_buffer -> (first 4 charged tracks per region)
//                 -> spatial_sorter (8 two-register insertion cells)
//                 -> Seeds[16] -> cand_select (region_locator +
//                 cand_preselect, reading event_buffer) -> candidate arrays
// One region enters per valid cycle; an event is 36 consecutive regions
// and a new event may start on the next cycle. Seeds of an event are out
// 45 cycles after its region 0 was sampled, and the 16 candidate-array
// beats follow on the next 16 cycles.
//
// The two later steps of the trigger (picking up to 30 tau candidates in
// each neighbourhood, and reconstructing tau objects from them) are not
// part of this RTL; out_cand and its companions are where they attach.
module tau_trigger_top
  import tau_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                region_valid,
  input  region_t             region_in,
  output seed_t               seeds [N_SEEDS],
  output logic                seeds_valid,
  output logic                event_done,
  output logic                cand_valid,
  output logic                cand_last,
  output logic [3:0]          cand_seed_num,
  output seed_t               cand_seed,
  output logic [REGION_W-1:0] cand_region_id [N_NEIGHBOURS],
  output region_t             cand_regions   [N_NEIGHBOURS]
);

  logic    sc_valid, sc_first, sc_last;
  seed_t   sc_cand [SEEDS_PER_REGION];
  logic    done_bank, rd_bank;
  region_t rd_track    [4][8];
  region_t rd_last_row [N_COLS];

  event_buffer u_buffer (
    .clk          (clk),
    .rst_n        (rst_n),
    .region_valid (region_valid),
    .region_in    (region_in),
    .cand_valid   (sc_valid),
    .cand_first   (sc_first),
    .cand_last    (sc_last),
    .cand         (sc_cand),
    .event_done   (event_done),
    .done_bank    (done_bank),
    .rd_bank      (rd_bank),
    .rd_track     (rd_track),
    .rd_last_row  (rd_last_row)
  );

  spatial_sorter #(.N_OUT(N_SEEDS)) u_sorter (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (sc_valid),
    .in_first    (sc_first),
    .in_last     (sc_last),
    .in_cand     (sc_cand),
    .seeds       (seeds),
    .seeds_valid (seeds_valid)
  );

  cand_select u_select (
    .clk           (clk),
    .rst_n         (rst_n),
    .seeds_valid   (seeds_valid),
    .seeds         (seeds),
    .done_bank     (done_bank),
    .rd_bank       (rd_bank),
    .rd_track      (rd_track),
    .rd_last_row   (rd_last_row),
    .out_valid     (cand_valid),
    .out_last      (cand_last),
    .out_seed_num  (cand_seed_num),
    .out_seed      (cand_seed),
    .out_region_id (cand_region_id),
    .out_cand      (cand_regions)
  );

endmodule
