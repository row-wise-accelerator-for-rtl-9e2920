// pe_block: one processing-element block of the row-wise array.
//
// 7 PE rows of 4 multipliers.  The 4 weights of the block are broadcast
// from top to bottom to the same MAC column of every row; each MAC gets its
// own input from the input bank of its column (in[c] holds the 7 row
// inputs of column c).  Within a row the 4 products are added from left to
// right, so each row yields one 4-element dot product per cycle:
//   psum[r] = sum_c w[c] * in[c][r]
// This structure is the paper's (its PE block figure).  The row results are
// registered once (1-cycle latency, enable `en`), which is this design's
// choice; the following accumulator plays the role of the per-row buffer.
module pe_block
  import vit_pkg::*;
(
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              en,
  input  logic [N_MAC-1:0][DW-1:0]          w,     // w[c]: weight of column c
  input  logic [N_MAC-1:0][N_ROW-1:0][DW-1:0] in,  // in[c][r]: input of row r, column c
  output psum_t                             psum [N_ROW]
);

  psum_t row_sum [N_ROW];

  always_comb begin
    for (int r = 0; r < N_ROW; r++) begin
      row_sum[r] = '0;
      for (int c = 0; c < N_MAC; c++)
        row_sum[r] += psum_t'(act_t'(w[c])) * psum_t'(act_t'(in[c][r]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_ROW; r++) psum[r] <= '0;
    end else if (en) begin
      for (int r = 0; r < N_ROW; r++) psum[r] <= row_sum[r];
    end
  end

endmodule
