// tb_input_sram: self-checking test of the 48-bank input buffer.
// Writes a distinct pseudo-random word into every (bank, address), then
// reads every address and checks all 48 banks' words, one cycle after the
// read, plus that rdata holds while re is low.
module tb_input_sram;
  import vit_pkg::*;

  localparam int NB = N_IBANK, D = IN_DEPTH;

  logic clk = 1'b0, rst_n = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [5:0] wbank;
  logic [IN_AW-1:0] waddr, raddr;
  logic [ROW_W-1:0] wdata;
  logic [NB-1:0][ROW_W-1:0] rdata;
  int checks = 0, failures = 0;

  input_sram dut (.clk, .rst_n, .we, .wbank, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ROW_W-1:0] pat(int b, int a);
    return {24'(b * 7919 + a * 104729), 32'(b * 31 + a * 2654435761)};
  endfunction

  initial begin
    wbank = '0; waddr = '0; raddr = '0; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NB; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        we = 1'b1; wbank = 6'(b); waddr = IN_AW'(a); wdata = pat(b, a);
      end
    @(negedge clk);
    we = 1'b0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      re = 1'b1; raddr = IN_AW'(a);
      @(posedge clk); #1;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rdata[b] != pat(b, a)) begin
          failures++;
          if (failures < 10) $display("bank %0d addr %0d got %h", b, a, rdata[b]);
        end
      end
    end
    @(negedge clk);
    re = 1'b0; raddr = '0;
    @(posedge clk); #1;
    checks++;
    if (rdata[0] != pat(0, D - 1)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
