// tb_sort_cell2: self-checking test of one modified insertion cell.
//
// Drives several events of random regions (each four candidates sorted
// by pT, some with a narrow pT range so ties occur) and compares, every
// cycle, the cell's OUT[4], its REG0/REG1 and the forwarded flags with a
// reference that stable-sorts {REG0, REG1, IN[0..3]} by descending pT.
// Also checks the one-cycle latency, that in_first empties the
// registers for a new event, and, whenever the six values are distinct,
// that REG0/REG1 follow the published selection rules for out1 and out2
// written out literally (out1 is the larger of REG0 and IN[0]; out2 is
// REG1 if REG1 > IN[0], else IN[0] if REG1 < IN[0] < REG0, else IN[1] if
// IN[1] > REG0, else REG0).
module tb_sort_cell2;
  import tau_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  seed_t in_cand [4];
  logic  out_valid, out_first, out_last, keep_final;
  seed_t out_cand [4];
  seed_t keep [2];
  int    checks = 0, failures = 0;

  sort_cell2 dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  seed_t ref_reg [2];
  seed_t rule_out1, rule_out2;
  bit    rule_valid;
  int    n_rule = 0;
  seed_t exp_out [4];

  function automatic seed_t rnd_seed(int unsigned maxpt, int unsigned idx);
    seed_t s;
    s.idx = IDX_W'(idx);
    s.trk.pt  = PT_W'($urandom_range(maxpt, 0));
    s.trk.eta = 8'($urandom);
    s.trk.phi = 8'($urandom);
    s.trk.aux = 16'($urandom);
    return s;
  endfunction

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Stable descending sort of 6 values: REG0, REG1, IN0..IN3.
  task automatic ref_step(input seed_t in_c [4], input logic first);
    seed_t l [6];
    seed_t t;
    l[0] = first ? '0 : ref_reg[0];
    l[1] = first ? '0 : ref_reg[1];
    for (int j = 0; j < 4; j++) l[2+j] = in_c[j];
    for (int a = 1; a < 6; a++)
      for (int b = a; b > 0 && l[b].trk.pt > l[b-1].trk.pt; b--) begin
        t = l[b]; l[b] = l[b-1]; l[b-1] = t;
      end
    ref_reg[0] = l[0];
    ref_reg[1] = l[1];
    for (int k = 0; k < 4; k++) exp_out[k] = l[2+k];
  endtask

  initial begin
    seed_t c [4];
    seed_t t;
    int unsigned maxpt;
    ref_reg = '{default: '0};
    in_cand = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int ev = 0; ev < 12; ev++) begin
      maxpt = (ev % 3 == 0) ? 7 : 65535;
      for (int r = 0; r < 36; r++) begin
        for (int j = 0; j < 4; j++) c[j] = rnd_seed(maxpt, 4*r + j);
        for (int a = 1; a < 4; a++)
          for (int b = a; b > 0 && c[b].trk.pt > c[b-1].trk.pt; b--) begin
            t = c[b]; c[b] = c[b-1]; c[b-1] = t;
          end
        in_valid <= 1'b1;
        in_first <= (r == 0);
        in_last  <= (r == 35);
        for (int j = 0; j < 4; j++) in_cand[j] <= c[j];
        begin
          int p0, p1, q0, q1;
          bit distinct;
          seed_t all6 [6];
          all6[0] = (r == 0) ? '0 : ref_reg[0];
          all6[1] = (r == 0) ? '0 : ref_reg[1];
          for (int j = 0; j < 4; j++) all6[2+j] = c[j];
          distinct = 1;
          for (int a = 0; a < 6; a++)
            for (int b = a + 1; b < 6; b++) if (all6[a].trk.pt == all6[b].trk.pt) distinct = 0;
          rule_valid = distinct;
          p0 = all6[0].trk.pt; p1 = all6[1].trk.pt; q0 = c[0].trk.pt; q1 = c[1].trk.pt;
          rule_out1 = (p0 > q0) ? all6[0] : c[0];
          if (p1 > q0)                rule_out2 = all6[1];
          else if (q0 < p0 && q0 > p1) rule_out2 = c[0];
          else if (q1 > p0)           rule_out2 = c[1];
          else                        rule_out2 = all6[0];
        end
        ref_step(c, r == 0);
        @(posedge clk);
        // Gap cycles now and then: the cell must hold its state.
        if ($urandom_range(3, 0) == 0) begin
          in_valid <= 1'b0;
          in_first <= 1'b0;
          in_last  <= 1'b0;
          #1;
          check("valid after one cycle", out_valid == 1'b1);
          @(posedge clk);
          #1;
          check("idle", out_valid == 1'b0);
          check("hold REG0", keep[0] == ref_reg[0]);
          check("hold REG1", keep[1] == ref_reg[1]);
          continue;
        end
        #1;
        check("out_valid", out_valid == 1'b1);
        check("out_first", out_first == (r == 0));
        check("out_last",  out_last == (r == 35));
        check("keep_final", keep_final == (r == 35));
        check("REG0", keep[0] == ref_reg[0]);
        check("REG1", keep[1] == ref_reg[1]);
        if (rule_valid) begin
          n_rule++;
          check("published out1 rule", keep[0] == rule_out1);
          check("published out2 rule", keep[1] == rule_out2);
        end
        for (int k = 0; k < 4; k++) check("OUT", out_cand[k] == exp_out[k]);
      end
    end
    in_valid <= 1'b0;
    @(posedge clk);
    check("published rules exercised", n_rule > 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
