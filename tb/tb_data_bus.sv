// tb_data_bus: self-checking test of the data bus decoder.
// Issues writes to each target and checks that exactly the addressed
// SRAM write port fires one cycle later with the bank, address and data;
// issues reads and checks the read request one cycle later and
// bus_rvalid/bus_rdata two cycles later (the SRAM is modelled here), and
// that no read request reaches the SRAM while post_busy is high.
module tb_data_bus;
  import vit_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic bus_we = 1'b0, bus_re = 1'b0, post_busy = 1'b0;
  bus_target_e bus_target;
  logic [5:0] bus_bank;
  logic [9:0] bus_addr;
  logic [ROW_W-1:0] bus_wdata, bus_rdata, out_rdata;
  logic [OUT_AW-1:0] bus_raddr, out_raddr;
  logic bus_rvalid, in_we, out_re;
  logic [5:0] in_wbank;
  logic [IN_AW-1:0] in_waddr;
  logic [ROW_W-1:0] in_wdata;
  logic [1:0] w_we;
  logic [3:0] w_wbank;
  logic [W_AW-1:0] w_waddr;
  logic [WVEC_W-1:0] w_wdata;
  int checks = 0, failures = 0;

  data_bus dut (.*);

  always #5 clk = ~clk;

  // result SRAM model: word = address pattern
  always @(posedge clk) if (out_re) out_rdata <= {46'h3a5, out_raddr};

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c);
    checks++;
    if (!c) failures++;
  endtask

  initial begin
    bus_target = BUS_INPUT; bus_bank = '0; bus_addr = '0; bus_wdata = '0; bus_raddr = '0;
    out_rdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      int tg;
      tg = t % 3;
      @(negedge clk);
      bus_we = 1'b1;
      bus_target = bus_target_e'(tg);
      bus_bank = 6'($urandom % ((tg == 0) ? 48 : 12));
      bus_addr = 10'($urandom % ((tg == 0) ? IN_DEPTH : W_DEPTH));
      bus_wdata = {$urandom, $urandom};
      @(posedge clk); #1;
      chk(in_we == (tg == 0));
      chk(w_we == ((tg == 1) ? 2'b01 : (tg == 2) ? 2'b10 : 2'b00));
      if (tg == 0) chk(in_wbank == bus_bank && in_waddr == IN_AW'(bus_addr) && in_wdata == bus_wdata);
      else         chk(w_wbank == bus_bank[3:0] && w_waddr == W_AW'(bus_addr) && w_wdata == bus_wdata[31:0]);
    end
    @(negedge clk);
    bus_we = 1'b0;
    @(posedge clk); #1;
    chk(!in_we && w_we == 2'b00);
    for (int t = 0; t < 100; t++) begin
      logic [OUT_AW-1:0] a;
      @(negedge clk);
      bus_re = 1'b1; a = OUT_AW'($urandom); bus_raddr = a;
      @(negedge clk);
      bus_re = 1'b0;
      chk(out_re && out_raddr == a);
      @(posedge clk); #1;
      chk(bus_rvalid && bus_rdata == {46'h3a5, a});
      @(posedge clk); #1;
      chk(!bus_rvalid);
    end
    // while the post-processing units own the read port, no request passes
    post_busy = 1'b1;
    repeat (5) begin
      @(posedge clk); #1;
      chk(!out_re && !bus_rvalid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
