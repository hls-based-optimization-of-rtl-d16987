// tb_event_buffer: self-checking test of the event buffer.
//
// Streams four events of random regions (with occasional idle cycles).
// Every beat it checks the seed-candidate outputs: the first four charged
// tracks of the region, index 4*region + slot, first/last framing. After
// each event it checks event_done, that done_bank alternates, and reads
// the completed bank back through the read port, comparing every entry
// of the 4 x 8 track array and of the last-row array with where the
// region must sit: grid row g < 8 at track[g/2][4*(g%2) + col], row 8 at
// last_row[col]. While the next event is being written, the previous
// bank is read again to show it is not disturbed.
module tb_event_buffer;
  import tau_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    region_valid = 1'b0;
  region_t region_in;
  logic    cand_valid, cand_first, cand_last, event_done, done_bank;
  seed_t   cand [SEEDS_PER_REGION];
  logic    rd_bank = 1'b0;
  region_t rd_track    [4][8];
  region_t rd_last_row [N_COLS];
  int      checks = 0, failures = 0;

  event_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
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

  region_t gold [2][N_REGIONS];   // per bank

  function automatic region_t rnd_region();
    region_t r;
    for (int i = 0; i < N_CHARGED; i++) r.charged[i] = track_t'({$urandom, $urandom});
    for (int i = 0; i < N_PHOTON;  i++) r.photon[i]  = track_t'({$urandom, $urandom});
    for (int i = 0; i < N_NEUTRAL; i++) r.neutral[i] = track_t'({$urandom, $urandom});
    return r;
  endfunction

  task automatic check_bank(int b);
    rd_bank <= b[0];
    #1;
    for (int g = 0; g < 8; g++)
      for (int c = 0; c < 4; c++)
        check("track layout", rd_track[g/2][4*(g%2) + c] == gold[b][4*g + c]);
    for (int c = 0; c < 4; c++)
      check("last row", rd_last_row[c] == gold[b][32 + c]);
  endtask

  initial begin
    region_t r;
    int bank = 0;
    region_in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int ev = 0; ev < 4; ev++) begin
      for (int id = 0; id < N_REGIONS; id++) begin
        r = rnd_region();
        gold[bank][id] = r;
        region_valid <= 1'b1;
        region_in    <= r;
        #1;
        check("cand_valid", cand_valid);
        check("cand_first", cand_first == (id == 0));
        check("cand_last",  cand_last == (id == N_REGIONS - 1));
        for (int s = 0; s < 4; s++) begin
          check("cand idx", cand[s].idx == IDX_W'(4*id + s));
          check("cand trk", cand[s].trk == r.charged[s]);
        end
        // The previous bank stays readable while this one is written.
        if (ev > 0 && id == 17) check_bank(1 - bank);
        @(posedge clk);
        if ($urandom_range(4, 0) == 0) begin
          region_valid <= 1'b0;
          #1;
          check("no cand when idle", !cand_valid);
          @(posedge clk);
        end
      end
      region_valid <= 1'b0;
      #1;
      check("event_done", event_done);
      check("done_bank", done_bank == bank[0]);
      check_bank(bank);
      @(posedge clk);
      #1;
      check("event_done one cycle", !event_done);
      bank = 1 - bank;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
