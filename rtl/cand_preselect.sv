// cand_preselect: copies the four neighbourhood regions of one seed out
// of the event buffer.
//
// The buffer keeps grid rows 0..7 in a 4 x 8 array whose row k holds
// even grid row 2k on its left half and odd grid row 2k+1 on its right
// half, and grid row 8 in a separate 4-entry last-row array. Selection is
// done in two levels, as the source publication prescribes:
//   1. rows: tRowEven takes the left half of array row even_row (4-to-1),
//      tRowOdd the right half of array row odd_row (4-to-1); when the
//      last row belongs to the neighbourhood it replaces one of them
//      (2-to-1). Each is viewed as a 2x2 array whose first column holds
//      the even grid columns (0,2) and second column the odd ones (1,3).
//   2. columns: one 2-to-1 multiplexer per output picks the even column
//      (even_col) or the odd column (odd_col) from that view.
// No multiplexer has more than 4 inputs; the naive 36-to-1 region select
// is avoided.
//
// cand[] order: (even row, even col), (even row, odd col),
// (odd row, even col), (odd row, odd col). Purely combinational.
module cand_preselect
  import tau_pkg::*;
(
  input  region_t track    [4][8],
  input  region_t last_row [N_COLS],
  input  nbhd_t   nb,
  output region_t cand     [N_NEIGHBOURS]
);

  region_t t_row_even [2][2];   // [column pair][0: even col, 1: odd col]
  region_t t_row_odd  [2][2];

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      for (int q = 0; q < 2; q++) begin
        t_row_even[p][q] = (nb.last_used && !nb.last_is_odd) ? last_row[2*p+q]
                                                             : track[nb.even_row][2*p+q];
        t_row_odd[p][q]  = (nb.last_used &&  nb.last_is_odd) ? last_row[2*p+q]
                                                             : track[nb.odd_row][4+2*p+q];
      end
    end
    cand[0] = t_row_even[nb.even_col][0];
    cand[1] = t_row_even[nb.odd_col][1];
    cand[2] = t_row_odd[nb.even_col][0];
    cand[3] = t_row_odd[nb.odd_col][1];
  end

endmodule
