// region_locator: neighbourhood of a seed in row/column form.
//
// A seed's neighbourhood is a 2x2 block of regions: the seed's own region
// plus the adjacent row and the adjacent column on the side of the grid
// towards which the seed lies inside its region. The side is taken from
// the signs of the seed's local phi (row direction: phi >= 0 -> next row,
// else previous row) and eta (column direction: eta >= 0 -> next column,
// else previous column); this rule is this design's choice, the source
// only says the three extra regions depend on the seed's location in its
// region. Rows wrap around (row 8 neighbours row 0, so region 0 touches
// 32 and 33); columns do not, so a seed in an edge column always pairs
// with the single inner neighbour.
//
// Any two adjacent rows are one even and one odd row. Rows 0..7 are
// named by parity and number inside the parity (even 0,2,4,6 -> 0..3,
// odd 1,3,5,7 -> 0..3). Row 8 is the special last row: last_used says it
// is in the neighbourhood and last_is_odd whether it takes the place of
// the odd row (pair 8,0) or of the even row (pair 7,8). Columns are
// named the same way: even 0,2 -> 0..1, odd 1,3 -> 0..1. Parity follows
// the grid index, as the storage layout does.
//
// region_id lists the four grid ids in the order the candidate arrays
// use: (even row, even col), (even row, odd col), (odd row, even col),
// (odd row, odd col). Purely combinational.
module region_locator
  import tau_pkg::*;
(
  input  seed_t               seed,
  output nbhd_t               nb,
  output logic [REGION_W-1:0] region_id [N_NEIGHBOURS]
);

  logic [REGION_W-1:0] region;
  logic [3:0]          row, nrow, erow_g, orow_g;
  logic [2:0]          other_row;
  logic [1:0]          col, ncol, ecol_g, ocol_g;

  always_comb begin
    region = idx_region(seed.idx);
    row    = 4'(region >> 2);
    col    = region[1:0];

    // Adjacent row (torus) and column (no wrap).
    if (!seed.trk.phi[7]) nrow = (row == 4'(N_ROWS - 1)) ? 4'd0 : row + 4'd1;
    else                  nrow = (row == 4'd0) ? 4'(N_ROWS - 1) : row - 4'd1;
    if (!seed.trk.eta[7]) ncol = (col == 2'(N_COLS - 1)) ? col - 2'd1 : col + 2'd1;
    else                  ncol = (col == 2'd0) ? 2'd1 : col - 2'd1;

    nb = '0;
    if (row == 4'(N_ROWS - 1) || nrow == 4'(N_ROWS - 1)) begin
      nb.last_used = 1'b1;
      other_row    = (row == 4'(N_ROWS - 1)) ? nrow[2:0] : row[2:0];   // 7 or 0
      if (other_row[0]) begin            // pair (7,8): row 8 acts as the even row
        nb.last_is_odd = 1'b0;
        nb.odd_row     = other_row[2:1];
      end else begin                     // pair (8,0): row 8 acts as the odd row
        nb.last_is_odd = 1'b1;
        nb.even_row    = other_row[2:1];
      end
    end else begin
      other_row = nrow[2:0];
      nb.even_row = row[0] ? nrow[2:1] : row[2:1];
      nb.odd_row  = row[0] ? row[2:1]  : nrow[2:1];
    end
    ecol_g      = col[0] ? ncol : col;
    ocol_g      = col[0] ? col  : ncol;
    nb.even_col = ecol_g[1];
    nb.odd_col  = ocol_g[1];

    // Grid coordinates of the four selected regions.
    erow_g = (nb.last_used && !nb.last_is_odd) ? 4'(N_ROWS - 1) : {1'b0, nb.even_row, 1'b0};
    orow_g = (nb.last_used &&  nb.last_is_odd) ? 4'(N_ROWS - 1) : {1'b0, nb.odd_row, 1'b1};
    region_id[0] = REGION_W'({erow_g, ecol_g});
    region_id[1] = REGION_W'({erow_g, ocol_g});
    region_id[2] = REGION_W'({orow_g, ecol_g});
    region_id[3] = REGION_W'({orow_g, ocol_g});
  end

endmodule
