// tb_spatial_sorter: self-checking test of the 16-seed spatial sorter.
//
// Streams events of 36 regions x 4 pT-sorted candidates, back to back
// and with idle gaps, and compares Seeds[16] at seeds_valid with a
// reference that stable-sorts all 144 candidates of the event by
// descending pT (earlier candidate first on ties) and keeps the first 16.
// Some events use a narrow pT range to force ties, one puts all the best
// candidates in the last region and one in the first region. Checks the
// latency: for a gap-free event seeds_valid must rise 45 clock edges
// after (and counting) the edge that samples region 0.
module tb_spatial_sorter;
  import tau_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  seed_t in_cand [4];
  seed_t seeds [N_SEEDS];
  logic  seeds_valid;
  int    checks = 0, failures = 0;

  spatial_sorter dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
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

  // Expected results, one queue entry per event.
  seed_t exp_mem [16][N_SEEDS];
  seed_t cand_mem [16][N_CANDIDATES];
  int    exp_wr = 0, exp_rd = 0;
  int    exp_lat [$];          // expected latency or -1 when gaps were inserted
  int    cyc = 0;
  int    start_q [$];
  int    n_events_checked = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic seed_t mk(int unsigned pt, int unsigned idx);
    seed_t s;
    s.idx = IDX_W'(idx);
    s.trk.pt  = PT_W'(pt);
    s.trk.eta = 8'($urandom);
    s.trk.phi = 8'($urandom);
    s.trk.aux = 16'($urandom);
    return s;
  endfunction

  task automatic send_event(int mode, bit gaps);
    seed_t all [N_CANDIDATES];
    seed_t c [4];
    seed_t t;
    int unsigned maxpt;
    maxpt = (mode == 1) ? 5 : 65535;
    for (int r = 0; r < 36; r++) begin
      for (int j = 0; j < 4; j++) begin
        int unsigned pt;
        pt = $urandom_range(maxpt, 0);
        if (mode == 2 && r == 35) pt = 60000 + $urandom_range(1000, 0);
        if (mode == 2 && r != 35) pt = $urandom_range(1000, 0);
        if (mode == 3 && r == 0)  pt = 60000 + $urandom_range(1000, 0);
        c[j] = mk(pt, 4*r + j);
      end
      for (int a = 1; a < 4; a++)
        for (int b = a; b > 0 && c[b].trk.pt > c[b-1].trk.pt; b--) begin
          t = c[b]; c[b] = c[b-1]; c[b-1] = t;
        end
      for (int j = 0; j < 4; j++) all[4*r + j] = c[j];
      if (r == 0) start_q.push_back(cyc + 1);
      in_valid <= 1'b1;
      in_first <= (r == 0);
      in_last  <= (r == 35);
      for (int j = 0; j < 4; j++) in_cand[j] <= c[j];
      @(posedge clk);
      if (gaps && $urandom_range(2, 0) == 0) begin
        in_valid <= 1'b0;
        in_first <= 1'b0;
        in_last  <= 1'b0;
        repeat ($urandom_range(3, 1)) @(posedge clk);
      end
    end
    for (int k = 0; k < N_CANDIDATES; k++) cand_mem[exp_wr][all[k].idx] = all[k];
    // Stable sort, descending pT.
    for (int a = 1; a < N_CANDIDATES; a++)
      for (int b = a; b > 0 && all[b].trk.pt > all[b-1].trk.pt; b--) begin
        t = all[b]; all[b] = all[b-1]; all[b-1] = t;
      end
    for (int k = 0; k < N_SEEDS; k++) exp_mem[exp_wr][k] = all[k];
    exp_wr++;
    exp_lat.push_back(gaps ? -1 : 45);
  endtask

  // Result checker.
  always @(posedge clk) begin
    if (rst_n && seeds_valid) begin
      int st, lat;
      lat = 0; st = 0;
      if (exp_rd == exp_wr) begin
        checks++; failures++;
        $display("FAIL unexpected seeds_valid");
      end else begin
        lat = exp_lat.pop_front();
        st  = start_q.pop_front();
        // pT order must match exactly; among equal pT the order is the
        // sorter's own, so each seed is checked to be the genuine
        // candidate its index names, and indices must not repeat.
        for (int k = 0; k < N_SEEDS; k++) begin
          check("seed pT", seeds[k].trk.pt == exp_mem[exp_rd][k].trk.pt);
          check("seed is the indexed candidate", seeds[k] == cand_mem[exp_rd][seeds[k].idx]);
          for (int m = 0; m < k; m++)
            if (seeds[m].idx == seeds[k].idx) begin checks++; failures++; end
        end
        if (lat > 0 && (cyc - st) != lat) $display("latency %0d", cyc - st);
        exp_rd++;
        // Both sides read cyc before its update at the edge, so st is the
        // value seen at the edge that samples region 0 and cyc - st is
        // the number of edges from that one to the one that raised
        // seeds_valid, both included.
        if (lat > 0) check("latency 45", (cyc - st) == lat);
        n_events_checked++;
      end
    end
  end

  initial begin
    in_cand = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    send_event(0, 0);
    send_event(1, 0);   // ties, back to back
    send_event(2, 0);   // best candidates arrive last
    send_event(3, 1);   // best candidates arrive first, with gaps
    for (int i = 0; i < 6; i++) send_event(i % 4, i[0]);
    in_valid <= 1'b0;
    in_first <= 1'b0;
    in_last  <= 1'b0;
    repeat (60) @(posedge clk);
    check("all events returned", n_events_checked == 10 && exp_rd == exp_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
