// tb_weight_sram: self-checking test of one 12-bank weight buffer set.
// Fills every (bank, address) with a distinct word, reads every address
// back and checks the 12 banks' words one cycle after the read, then
// overwrites one bank and checks that only that bank changed.
module tb_weight_sram;
  import vit_pkg::*;

  localparam int NB = N_BLK, D = W_DEPTH;

  logic clk = 1'b0, rst_n = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [3:0] wbank;
  logic [W_AW-1:0] waddr, raddr;
  logic [WVEC_W-1:0] wdata;
  logic [NB-1:0][WVEC_W-1:0] rdata;
  int checks = 0, failures = 0;

  weight_sram dut (.clk, .rst_n, .we, .wbank, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WVEC_W-1:0] pat(int b, int a);
    return 32'(b * 2246822519 + a * 3266489917 + 1);
  endfunction

  initial begin
    wbank = '0; waddr = '0; raddr = '0; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NB; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        we = 1'b1; wbank = 4'(b); waddr = W_AW'(a); wdata = pat(b, a);
      end
    @(negedge clk);
    we = 1'b0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      re = 1'b1; raddr = W_AW'(a);
      @(posedge clk); #1;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rdata[b] != pat(b, a)) begin
          failures++;
          if (failures < 10) $display("bank %0d addr %0d got %h", b, a, rdata[b]);
        end
      end
    end
    // overwrite bank 5, address 17
    @(negedge clk);
    re = 1'b0; we = 1'b1; wbank = 4'd5; waddr = W_AW'(17); wdata = 32'hdeadbeef;
    @(negedge clk);
    we = 1'b0; re = 1'b1; raddr = W_AW'(17);
    @(posedge clk); #1;
    for (int b = 0; b < NB; b++) begin
      checks++;
      if (rdata[b] != ((b == 5) ? 32'hdeadbeef : pat(b, 17))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
