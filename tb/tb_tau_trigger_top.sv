// tb_tau_trigger_top: end-to-end test of the trigger front end at its
// default size (36 regions, 22/13/10 tracks, 16 seeds).
//
// Streams N_EVENTS events of random regions, mostly back to back, some
// with idle cycles. Each event's first four charged tracks per region are
// generated already sorted by pT, as the sorter expects. Some events put
// their highest-pT tracks in the top or bottom grid row so that
// neighbourhoods cross the wrap between rows 8 and 0.
//
// Checked against references computed here from the generated event:
//   * Seeds[16]: descending pT equal to the 16 best of the 144 candidates,
//     each seed the genuine candidate its index names, no index twice;
//   * latency: seeds_valid 45 edges after the edge that sampled region 0
//     (gap-free events), first candidate beat 2 edges later;
//   * candidate arrays: 16 beats per event in Seeds order; for each the
//     four region ids equal an independently derived neighbourhood and
//     each array equals the named region of that event.
// Mechanisms counted, each must occur: back-to-back events, idle gaps,
// reads from both buffer banks, last row as odd row (wrap pair 8,0), last
// row as even row (pair 7,8), column clamping at a grid edge, pT ties.
module tb_tau_trigger_top;
  import tau_pkg::*;

  localparam int N_EVENTS = 12;

  logic                clk = 1'b0, rst_n = 1'b0;
  logic                region_valid = 1'b0;
  region_t             region_in;
  seed_t               seeds [N_SEEDS];
  logic                seeds_valid, event_done;
  logic                cand_valid, cand_last;
  logic [3:0]          cand_seed_num;
  seed_t               cand_seed;
  logic [REGION_W-1:0] cand_region_id [N_NEIGHBOURS];
  region_t             cand_regions   [N_NEIGHBOURS];
  int                  checks = 0, failures = 0;

  tau_trigger_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N_EVENTS * 60 + 500) @(posedge clk);
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

  // Reference store, indexed by event number.
  region_t gold     [N_EVENTS][N_REGIONS];
  int      exp_pt   [N_EVENTS][N_SEEDS];
  int      start_at [N_EVENTS];
  bit      no_gaps  [N_EVENTS];
  int      cyc = 0;
  int      ev_seeds = 0, ev_cands = 0;
  int      seeds_at;
  seed_t   ev_seed_list [N_SEEDS];

  // Mechanism counters.
  int n_back_to_back = 0, n_gap = 0, n_bank [2] = '{0, 0};
  int n_last_odd = 0, n_last_even = 0, n_col_clamp = 0, n_tie = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic track_t rnd_track(int unsigned maxpt);
    track_t t;
    t = track_t'({$urandom, $urandom});
    t.pt = PT_W'($urandom_range(maxpt, 0));
    return t;
  endfunction

  // Neighbourhood reference: same rule as the design's documentation,
  // derived on grid coordinates.
  task automatic ref_nbhd(input seed_t s, output int ids [4], output bit last_odd,
                          output bit last_even, output bit clamp);
    int reg_id, row, col, nrow, ncol, er, orr, ec, oc;
    reg_id = int'(s.idx) / 4;
    row = reg_id / 4;
    col = reg_id % 4;
    nrow = s.trk.phi[7] ? (row + 8) % 9 : (row + 1) % 9;
    clamp = 0;
    if (!s.trk.eta[7]) begin ncol = (col == 3) ? 2 : col + 1; clamp = (col == 3); end
    else               begin ncol = (col == 0) ? 1 : col - 1; clamp = (col == 0); end
    last_odd = 0; last_even = 0;
    if ((row == 8 && nrow == 0) || (row == 0 && nrow == 8)) begin er = 0; orr = 8; last_odd = 1; end
    else if (row % 2 == 0) begin er = row; orr = nrow; end
    else begin er = nrow; orr = row; end
    if (er == 8) last_even = 1;
    ec = (col % 2 == 0) ? col : ncol;
    oc = (col % 2 == 0) ? ncol : col;
    ids[0] = 4*er + ec;  ids[1] = 4*er + oc;
    ids[2] = 4*orr + ec; ids[3] = 4*orr + oc;
  endtask

  task automatic send_event(int ev, bit gaps);
    region_t r;
    track_t  t;
    int      pts [N_CANDIDATES];
    int      tmp;
    int unsigned maxpt;
    maxpt = (ev % 4 == 1) ? 40 : 65535;         // narrow range: ties
    for (int id = 0; id < N_REGIONS; id++) begin
      for (int i = 0; i < N_CHARGED; i++) r.charged[i] = rnd_track(maxpt);
      for (int i = 0; i < N_PHOTON;  i++) r.photon[i]  = rnd_track(maxpt);
      for (int i = 0; i < N_NEUTRAL; i++) r.neutral[i] = rnd_track(maxpt);
      if (ev % 4 == 2 && (id >= 32 || id < 4)) r.charged[0].pt = PT_W'(65535 - $urandom_range(200, 0));
      if (ev % 4 == 3 && id >= 28 && id < 32)  r.charged[0].pt = PT_W'(65535 - $urandom_range(200, 0));
      // Seed candidates arrive sorted by pT.
      for (int a = 1; a < 4; a++)
        for (int b = a; b > 0 && r.charged[b].pt > r.charged[b-1].pt; b--) begin
          t = r.charged[b]; r.charged[b] = r.charged[b-1]; r.charged[b-1] = t;
        end
      if (ev % 4 == 3 && id >= 28 && id < 32) r.charged[0].phi = 8'sd20;   // towards row 8
      for (int j = 0; j < 4; j++) pts[4*id + j] = int'(r.charged[j].pt);
      gold[ev][id] = r;
      if (id == 0) start_at[ev] = cyc + 1;   // cyc as the sampling edge will read it
      region_valid <= 1'b1;
      region_in    <= r;
      @(posedge clk);
      if (gaps && id % 7 == 3) begin
        region_valid <= 1'b0;
        n_gap++;
        @(posedge clk);
      end
    end
    no_gaps[ev] = !gaps;
    for (int a = 1; a < N_CANDIDATES; a++)
      for (int b = a; b > 0 && pts[b] > pts[b-1]; b--) begin
        tmp = pts[b]; pts[b] = pts[b-1]; pts[b-1] = tmp;
      end
    for (int k = 0; k < N_SEEDS; k++) exp_pt[ev][k] = pts[k];
    for (int k = 1; k < N_SEEDS + 1; k++) if (pts[k] == pts[k-1]) begin n_tie++; break; end
  endtask

  // Seeds checker.
  always @(posedge clk) begin
    if (rst_n && seeds_valid) begin
      int ev;
      ev = ev_seeds;
      if (ev >= N_EVENTS) begin
        checks++; failures++;
      end else begin
        for (int k = 0; k < N_SEEDS; k++) begin
          int rid, slot;
          rid  = int'(seeds[k].idx) / 4;
          slot = int'(seeds[k].idx) % 4;
          check("seed pT", int'(seeds[k].trk.pt) == exp_pt[ev][k]);
          check("seed is its candidate", seeds[k].trk == gold[ev][rid].charged[slot]);
          for (int m = 0; m < k; m++)
            if (seeds[m].idx == seeds[k].idx) begin checks++; failures++; end
          ev_seed_list[k] = seeds[k];
        end
        if (no_gaps[ev]) check("seed latency 45", cyc - start_at[ev] == 45);
        seeds_at = cyc;
      end
      ev_seeds++;
    end
  end

  // Candidate-array checker.
  always @(posedge clk) begin
    if (rst_n && cand_valid) begin
      int ids [4];
      bit lo, le, cl;
      int ev, k;
      ev = ev_cands;
      k  = int'(cand_seed_num);
      if (k == 0) check("first beat 2 edges after seeds", cyc - seeds_at == 2);
      check("beat order", int'(cand_seed_num) == (cyc - seeds_at - 2));
      check("beat seed", cand_seed == ev_seed_list[k]);
      ref_nbhd(cand_seed, ids, lo, le, cl);
      n_last_odd  += int'(lo);
      n_last_even += int'(le);
      n_col_clamp += int'(cl);
      n_bank[dut.rd_bank]++;
      for (int n = 0; n < 4; n++) begin
        check("region id", int'(cand_region_id[n]) == ids[n]);
        check("candidate array", cand_regions[n] == gold[ev][ids[n]]);
      end
      if (cand_last) ev_cands++;
    end
  end

  initial begin
    region_in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int ev = 0; ev < N_EVENTS; ev++) begin
      send_event(ev, ev % 3 == 2);
      if (ev % 5 == 4) begin
        region_valid <= 1'b0;
        repeat (4) @(posedge clk);
      end else begin
        n_back_to_back++;
      end
    end
    region_valid <= 1'b0;
    repeat (100) @(posedge clk);
    check("all seed sets", ev_seeds == N_EVENTS);
    check("all candidate sets", ev_cands == N_EVENTS);
    $display("mechanisms: back_to_back=%0d gaps=%0d bank0=%0d bank1=%0d last_odd=%0d last_even=%0d col_clamp=%0d ties=%0d",
             n_back_to_back, n_gap, n_bank[0], n_bank[1], n_last_odd, n_last_even, n_col_clamp, n_tie);
    check("back-to-back events happened", n_back_to_back > 0);
    check("idle gaps happened", n_gap > 0);
    check("bank 0 read", n_bank[0] > 0);
    check("bank 1 read", n_bank[1] > 0);
    check("last row as odd row", n_last_odd > 0);
    check("last row as even row", n_last_even > 0);
    check("column clamp", n_col_clamp > 0);
    check("pT ties", n_tie > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
