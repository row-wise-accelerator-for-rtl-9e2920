// tb_output_sram: self-checking test of the result buffer.
// Random writes and reads against a reference array, including a read and
// a write of the same address in one cycle (the read returns the old word).
module tb_output_sram;
  import vit_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [OUT_AW-1:0] waddr, raddr;
  logic [ROW_W-1:0] wdata, rdata;
  logic [ROW_W-1:0] model [OUT_DEPTH];
  int checks = 0, failures = 0;

  output_sram dut (.clk, .rst_n, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [ROW_W-1:0] expv;
    waddr = '0; raddr = '0; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < OUT_DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = OUT_AW'(a); wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      re = 1'b1; raddr = OUT_AW'($urandom);
      we = ($urandom % 2) == 1;
      waddr = (t % 5 == 0) ? raddr : OUT_AW'($urandom);
      wdata = {$urandom, $urandom};
      expv = model[raddr];
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata != expv) begin
        failures++;
        if (failures < 10) $display("addr %0d got %h expected %h", raddr, rdata, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
