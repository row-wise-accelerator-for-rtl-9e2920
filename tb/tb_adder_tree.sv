// tb_adder_tree: self-checking test of the adder tree.
// Random accumulator values (including extremes) and random block masks
// (all 12, the 8-block attention mask, single blocks); checks each row's
// masked sum and valid one cycle later.
module tb_adder_tree;
  import vit_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [N_BLK-1:0] blk_mask;
  acc_t acc [N_BLK][N_ROW];
  logic out_valid;
  acc_t sum [N_ROW];
  int checks = 0, failures = 0;

  adder_tree dut (.clk, .rst_n, .in_valid, .blk_mask, .acc, .out_valid, .sum);

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [N_ROW];
    blk_mask = '1;
    for (int b = 0; b < N_BLK; b++) for (int r = 0; r < N_ROW; r++) acc[b][r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = 1'b1;
      case (t % 4)
        0: blk_mask = '1;
        1: blk_mask = 12'h0ff;
        2: blk_mask = 12'(1) << ($urandom % N_BLK);
        default: blk_mask = 12'($urandom);
      endcase
      for (int r = 0; r < N_ROW; r++) begin
        e[r] = 0;
        for (int b = 0; b < N_BLK; b++) begin
          acc[b][r] = (t % 10 == 0) ? acc_t'(-(1 << 26)) : acc_t'($signed($urandom) >>> 6);
          if (blk_mask[b]) e[r] += int'(acc[b][r]);
        end
      end
      @(posedge clk); #1;
      checks++;
      if (!out_valid) failures++;
      for (int r = 0; r < N_ROW; r++) begin
        checks++;
        if (int'(sum[r]) != e[r]) begin
          failures++;
          if (failures < 10) $display("row %0d got %0d expected %0d mask %h", r, sum[r], e[r], blk_mask);
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      @(posedge clk); #1;
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
