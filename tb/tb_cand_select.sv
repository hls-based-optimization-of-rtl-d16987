// tb_cand_select: test of the second-step sequencer.
//
// A behavioural two-bank buffer (a flat 2 x 36 array of random regions,
// presented in the track/last-row layout for the bank the unit selects)
// feeds the unit. Three seed sets are applied, each naming a different
// done_bank. For every set the test checks: 16 output beats on the 16
// cycles after the seeds were latched, in Seeds order, with out_last on
// the 16th; each beat carries its seed unchanged; its four region ids
// form a 2x2 block of adjacent grid rows (wrapping) and adjacent columns
// that contains the seed's own region; and each candidate array equals
// the region its id names in the bank of that event.
module tb_cand_select;
  import tau_pkg::*;

  logic                clk = 1'b0, rst_n = 1'b0;
  logic                seeds_valid = 1'b0;
  seed_t               seeds [N_SEEDS];
  logic                done_bank = 1'b0;
  logic                rd_bank;
  region_t             rd_track    [4][8];
  region_t             rd_last_row [N_COLS];
  logic                out_valid, out_last;
  logic [3:0]          out_seed_num;
  seed_t               out_seed;
  logic [REGION_W-1:0] out_region_id [N_NEIGHBOURS];
  region_t             out_cand      [N_NEIGHBOURS];
  int                  checks = 0, failures = 0;

  cand_select dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  region_t gold [2][N_REGIONS];

  always_comb begin
    for (int g = 0; g < 8; g++)
      for (int c = 0; c < 4; c++) rd_track[g/2][4*(g%2) + c] = gold[rd_bank][4*g + c];
    for (int c = 0; c < 4; c++) rd_last_row[c] = gold[rd_bank][32 + c];
  end

  function automatic region_t rnd_region();
    region_t r;
    for (int i = 0; i < N_CHARGED; i++) r.charged[i] = track_t'({$urandom, $urandom});
    for (int i = 0; i < N_PHOTON;  i++) r.photon[i]  = track_t'({$urandom, $urandom});
    for (int i = 0; i < N_NEUTRAL; i++) r.neutral[i] = track_t'({$urandom, $urandom});
    return r;
  endfunction

  function automatic bit adjacent_rows(int a, int b);
    return ((a + 1) % 9 == b) || ((b + 1) % 9 == a);
  endfunction

  initial begin
    seed_t s;
    int    rows [4], cols [4];
    bit    own;
    int    bank;
    for (int b = 0; b < 2; b++)
      for (int id = 0; id < N_REGIONS; id++) gold[b][id] = rnd_region();
    seeds = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int set = 0; set < 3; set++) begin
      bank = (set == 1) ? 1 : 0;
      for (int k = 0; k < N_SEEDS; k++) begin
        s.idx = IDX_W'($urandom_range(N_CANDIDATES - 1, 0));
        s.trk = track_t'({$urandom, $urandom});
        seeds[k] <= s;
      end
      done_bank   <= bank[0];
      seeds_valid <= 1'b1;
      @(posedge clk);                 // seeds latched here
      seeds_valid <= 1'b0;
      for (int k = 0; k < N_SEEDS; k++) begin
        @(posedge clk);
        #1;
        check("beat valid", out_valid);
        check("seed number", int'(out_seed_num) == k);
        check("seed carried", out_seed == seeds[k]);
        check("out_last", out_last == (k == N_SEEDS - 1));
        own = 0;
        for (int n = 0; n < 4; n++) begin
          rows[n] = int'(out_region_id[n]) / 4;
          cols[n] = int'(out_region_id[n]) % 4;
          if (int'(out_region_id[n]) == int'(seeds[k].idx) / 4) own = 1;
          check("candidate array = named region of the event's bank",
                out_cand[n] == gold[bank][out_region_id[n]]);
        end
        check("own region", own);
        check("2x2 rows", rows[0] == rows[1] && rows[2] == rows[3] && adjacent_rows(rows[0], rows[2]));
        check("2x2 cols", cols[0] == cols[2] && cols[1] == cols[3] &&
                          (cols[0] - cols[1] == 1 || cols[1] - cols[0] == 1));
      end
      @(posedge clk);
      #1;
      check("idle after 16 beats", !out_valid);
      repeat (5) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
