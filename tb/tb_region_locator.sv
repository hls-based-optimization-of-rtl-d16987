// tb_region_locator: exhaustive test of the neighbourhood locator.
//
// For every region (36) and every combination of the signs of the seed's
// local eta and phi (4) it derives the expected 2x2 neighbourhood
// directly on the 9x4 grid - next/previous row with wrap-around,
// next/previous column clamped at the edges - and checks the four
// region ids (in even-row/odd-row x even-col/odd-col order) and every
// field of the row/column form, including the last-row flags. Two cases
// are also checked against fixed expectations: region 4 towards +eta
// and +phi gives regions 4, 5, 8, 9, and region 0 towards -phi reaches
// across the wrap to regions 32 and 33.
module tb_region_locator;
  import tau_pkg::*;

  seed_t               seed;
  nbhd_t               nb;
  logic [REGION_W-1:0] region_id [N_NEIGHBOURS];
  int                  checks = 0, failures = 0;
  logic                clk = 1'b0;

  region_locator dut (.*);

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
      if (failures < 10) $display("FAIL %s region %0d", what, seed.idx >> 2);
    end
  endtask

  function automatic bit has(int id);
    for (int k = 0; k < 4; k++) if (int'(region_id[k]) == id) return 1;
    return 0;
  endfunction

  initial begin
    int row, col, nrow, ncol, er, orr, ec, oc;
    seed = '0;
    for (int reg_id = 0; reg_id < 36; reg_id++) begin
      for (int dir = 0; dir < 4; dir++) begin
        seed.idx     = IDX_W'(4*reg_id + $urandom_range(3, 0));
        seed.trk.pt  = PT_W'($urandom);
        seed.trk.eta = dir[0] ? -8'sd1 - 8'($urandom_range(100, 0)) : 8'($urandom_range(127, 0));
        seed.trk.phi = dir[1] ? -8'sd1 - 8'($urandom_range(100, 0)) : 8'($urandom_range(127, 0));
        row  = reg_id / 4;
        col  = reg_id % 4;
        nrow = dir[1] ? (row + 8) % 9 : (row + 1) % 9;
        if (!dir[0]) ncol = (col == 3) ? 2 : col + 1;
        else         ncol = (col == 0) ? 1 : col - 1;
        // Even / odd slot of the rows: by index, except the wrap pair
        // (8, 0) where the last row takes the odd slot.
        if ((row == 8 && nrow == 0) || (row == 0 && nrow == 8)) begin
          er = 0; orr = 8;
        end else if (row % 2 == 0) begin
          er = row; orr = nrow;
        end else begin
          er = nrow; orr = row;
        end
        ec = (col % 2 == 0) ? col : ncol;
        oc = (col % 2 == 0) ? ncol : col;
        #1;
        check("id even/even", int'(region_id[0]) == 4*er + ec);
        check("id even/odd",  int'(region_id[1]) == 4*er + oc);
        check("id odd/even",  int'(region_id[2]) == 4*orr + ec);
        check("id odd/odd",   int'(region_id[3]) == 4*orr + oc);
        check("own region included", has(reg_id));
        check("last_used", nb.last_used == (er == 8 || orr == 8));
        if (orr == 8) check("last as odd", nb.last_is_odd == 1'b1);
        if (er == 8)  check("last as even", nb.last_is_odd == 1'b0);
        if (er != 8)  check("even_row", int'(nb.even_row) == er / 2);
        if (orr != 8) check("odd_row", int'(nb.odd_row) == (orr - 1) / 2);
        check("even_col", int'(nb.even_col) == ec / 2);
        check("odd_col",  int'(nb.odd_col) == (oc - 1) / 2);
      end
    end
    // Fixed cases.
    seed.idx = IDX_W'(4*4); seed.trk.eta = 8'sd10; seed.trk.phi = 8'sd10;
    #1;
    check("4,5,8,9", has(4) && has(5) && has(8) && has(9));
    seed.idx = IDX_W'(0); seed.trk.eta = 8'sd10; seed.trk.phi = -8'sd10;
    #1;
    check("0,1,32,33", has(0) && has(1) && has(32) && has(33));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
