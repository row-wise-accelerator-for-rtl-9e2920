// tb_pe_block: self-checking test of one PE block.
// Drives random 8-bit weights (one per MAC column, shared by all 7 rows)
// and random inputs, and checks every row's registered dot product
// sum_c w[c]*in[c][r] one cycle later, plus that a disabled block holds.
module tb_pe_block;
  import vit_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [N_MAC-1:0][DW-1:0]            w;
  logic [N_MAC-1:0][N_ROW-1:0][DW-1:0] in;
  psum_t psum [N_ROW];
  int checks = 0, failures = 0;

  pe_block dut (.clk, .rst_n, .en, .w, .in, .psum);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_row(int r);
    int s = 0;
    for (int c = 0; c < N_MAC; c++) s += int'($signed(w[c])) * int'($signed(in[c][r]));
    return s;
  endfunction

  int exp_row [N_ROW];

  initial begin
    w = '0; in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int c = 0; c < N_MAC; c++) begin
        // include the extreme values now and then
        w[c] = (t % 7 == 0) ? 8'h80 : 8'($urandom);
        for (int r = 0; r < N_ROW; r++) in[c][r] = (t % 11 == 0) ? 8'h80 : 8'($urandom);
      end
      en = 1'b1;
      for (int r = 0; r < N_ROW; r++) exp_row[r] = ref_row(r);
      @(posedge clk); #1;
      for (int r = 0; r < N_ROW; r++) begin
        checks++;
        if (int'(psum[r]) != exp_row[r]) begin
          failures++;
          if (failures < 10) $display("row %0d: got %0d expected %0d", r, psum[r], exp_row[r]);
        end
      end
      // hold when disabled
      @(negedge clk);
      en = 1'b0;
      w = ~w;
      @(posedge clk); #1;
      for (int r = 0; r < N_ROW; r++) begin
        checks++;
        if (int'(psum[r]) != exp_row[r]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
