// adder_tree: sums the accumulator outputs of the PE blocks.
//
// For each of the 7 rows, adds the finished sums of the 12 PE blocks
// selected by `blk_mask` and registers the result (1-cycle latency,
// `out_valid` follows `in_valid`).  The paper names the adder tree and its
// job (combining the PE blocks for layers with many input channels); the
// mask, used to leave out the 4 idle blocks in the multi-head attention
// mapping, and the single pipeline register are this design's choices.
// The tree is written as a pairwise reduction so that its depth is
// ceil(log2(12)) = 4 adders.
module adder_tree
  import vit_pkg::*;
#(
  parameter int unsigned N = N_BLK
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [N-1:0] blk_mask,
  input  acc_t         acc [N][N_ROW],
  output logic         out_valid,
  output acc_t         sum [N_ROW]
);

  localparam int unsigned NP = 1 << $clog2(N);  // leaves padded to a power of 2

  acc_t tree [N_ROW][2*NP];
  acc_t sum_d [N_ROW];

  always_comb begin
    for (int r = 0; r < N_ROW; r++) begin
      for (int i = 0; i < 2*NP; i++) tree[r][i] = '0;
      for (int i = 0; i < int'(N); i++)
        tree[r][NP+i] = blk_mask[i] ? acc[i][r] : acc_t'(0);
      for (int i = NP-1; i >= 1; i--)
        tree[r][i] = tree[r][2*i] + tree[r][2*i+1];
      sum_d[r] = tree[r][1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int r = 0; r < N_ROW; r++) sum[r] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int r = 0; r < N_ROW; r++) sum[r] <= sum_d[r];
    end
  end

endmodule
