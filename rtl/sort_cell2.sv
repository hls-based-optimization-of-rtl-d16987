// sort_cell2: one cell of the modified spatial insertion sorter.
//
// The cell owns two positions of the Seeds array, kept in REG0 >= REG1.
// Each valid cycle it receives IN[0..3], four seed candidates already
// sorted by pT (largest first), and merges the two sorted lists into six
// ordered outputs out1..out6. out1/out2 are written back to REG0/REG1,
// out3..out6 leave the cell as OUT[0..3] for the next cell, so OUT is
// again sorted and nothing is lost.
//
// The merge uses a comparison-counting matrix (one comparator per
// REG/IN pair, eight in all): the output position of REG[i] is i plus
// the number of inputs strictly larger than it, the position of IN[j]
// is j plus the number of registers larger or equal. Every output is then
// a one-hot selection among the candidates that can reach it (out1 can
// only be REG0 or IN[0], out2 only REG0, REG1, IN[0] or IN[1], and so on),
// which is the rule set the source publication describes. Ties are
// resolved in favour of the register, i.e. the earlier arrival.
//
// Events: in_first marks region 0 of an event; for that beat REG0/REG1
// are treated as empty (pT 0), so events may follow back to back.
// in_last marks the last region; on the cycle after it has been
// processed keep_final is high and keep holds the cell's final pair.
//
// Timing: one register stage. OUT/out_valid/flags follow IN by one
// clock. Reset is synchronous, active low (this design's choice).
module sort_cell2
  import tau_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  logic     in_first,
  input  logic     in_last,
  input  seed_t    in_cand  [4],
  output logic     out_valid,
  output logic     out_first,
  output logic     out_last,
  output seed_t    out_cand [4],
  output seed_t    keep     [2],
  output logic     keep_final
);

  seed_t       reg_q [2];
  seed_t       cur   [2];
  seed_t       merged [6];
  logic        ge [2][4];     // ge[i][j]: REG[i].pt >= IN[j].pt
  logic [2:0]  pos_r [2];
  logic [2:0]  pos_i [4];

  always_comb begin
    cur[0] = in_first ? '0 : reg_q[0];
    cur[1] = in_first ? '0 : reg_q[1];
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 4; j++)
        ge[i][j] = cur[i].trk.pt >= in_cand[j].trk.pt;
    for (int i = 0; i < 2; i++) begin
      pos_r[i] = 3'(i);
      for (int j = 0; j < 4; j++) pos_r[i] += 3'(!ge[i][j]);
    end
    for (int j = 0; j < 4; j++) begin
      pos_i[j] = 3'(j);
      for (int i = 0; i < 2; i++) pos_i[j] += 3'(ge[i][j]);
    end
    for (int k = 0; k < 6; k++) begin
      merged[k] = '0;
      for (int i = 0; i < 2; i++) if (pos_r[i] == 3'(k)) merged[k] |= cur[i];
      for (int j = 0; j < 4; j++) if (pos_i[j] == 3'(k)) merged[k] |= in_cand[j];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      reg_q      <= '{default: '0};
      out_cand   <= '{default: '0};
      out_valid  <= 1'b0;
      out_first  <= 1'b0;
      out_last   <= 1'b0;
      keep_final <= 1'b0;
    end else begin
      out_valid  <= in_valid;
      out_first  <= in_valid & in_first;
      out_last   <= in_valid & in_last;
      keep_final <= in_valid & in_last;
      if (in_valid) begin
        reg_q[0] <= merged[0];
        reg_q[1] <= merged[1];
        for (int k = 0; k < 4; k++) out_cand[k] <= merged[k+2];
      end
    end
  end

  assign keep = reg_q;

  // The cell relies on its input being sorted.
  a_in_sorted: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (in_cand[0].trk.pt >= in_cand[1].trk.pt) &&
                 (in_cand[1].trk.pt >= in_cand[2].trk.pt) &&
                 (in_cand[2].trk.pt >= in_cand[3].trk.pt));

endmodule
