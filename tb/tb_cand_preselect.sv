// tb_cand_preselect: test of the neighbourhood multiplexers.
//
// Fills a complete event of 36 random regions into the buffer layout
// (grid row g < 8 at track[g/2][4*(g%2) + col], row 8 in last_row) and
// applies every legal row/column selection: 4 even rows x 4 odd rows
// with the last row unused, the last row as even row with each odd row,
// the last row as odd row with each even row, each with all 4 column
// combinations. The four outputs must equal the regions at the grid
// coordinates the selection names, looked up in a flat 36-entry copy of
// the event.
module tb_cand_preselect;
  import tau_pkg::*;

  region_t track    [4][8];
  region_t last_row [N_COLS];
  nbhd_t   nb;
  region_t cand     [N_NEIGHBOURS];
  region_t gold     [N_REGIONS];
  int      checks = 0, failures = 0;
  logic    clk = 1'b0;

  cand_preselect dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s nb=%b", what, nb);
    end
  endtask

  function automatic region_t rnd_region();
    region_t r;
    for (int i = 0; i < N_CHARGED; i++) r.charged[i] = track_t'({$urandom, $urandom});
    for (int i = 0; i < N_PHOTON;  i++) r.photon[i]  = track_t'({$urandom, $urandom});
    for (int i = 0; i < N_NEUTRAL; i++) r.neutral[i] = track_t'({$urandom, $urandom});
    return r;
  endfunction

  task automatic try_sel(int mode, int er, int orr, int ec, int oc);
    int ger, gor;
    nb.last_used   = (mode != 0);
    nb.last_is_odd = (mode == 2);
    nb.even_row    = 2'(er);
    nb.odd_row     = 2'(orr);
    nb.even_col    = ec[0];
    nb.odd_col     = oc[0];
    ger = (mode == 1) ? 8 : 2*er;
    gor = (mode == 2) ? 8 : 2*orr + 1;
    #1;
    check("even row, even col", cand[0] == gold[4*ger + 2*ec]);
    check("even row, odd col",  cand[1] == gold[4*ger + 2*oc + 1]);
    check("odd row, even col",  cand[2] == gold[4*gor + 2*ec]);
    check("odd row, odd col",   cand[3] == gold[4*gor + 2*oc + 1]);
  endtask

  initial begin
    for (int id = 0; id < N_REGIONS; id++) gold[id] = rnd_region();
    for (int g = 0; g < 8; g++)
      for (int c = 0; c < 4; c++) track[g/2][4*(g%2) + c] = gold[4*g + c];
    for (int c = 0; c < 4; c++) last_row[c] = gold[32 + c];
    nb = '0;
    for (int ec = 0; ec < 2; ec++)
      for (int oc = 0; oc < 2; oc++) begin
        for (int er = 0; er < 4; er++)
          for (int orr = 0; orr < 4; orr++) try_sel(0, er, orr, ec, oc);
        for (int orr = 0; orr < 4; orr++) try_sel(1, 0, orr, ec, oc);
        for (int er = 0; er < 4; er++)  try_sel(2, er, 0, ec, oc);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
