// tb_row_scheduler: self-checking test of the row-wise sequencer.
// For several (n_k, n_g, n_oc) including the paper's cases (convolution
// n_k=1, 96-channel fully connected n_k=2, attention n_k=1), it records the
// issued read addresses and the write-back tags and compares them with the
// loop nest: output channel outermost, then token group, then input chunk.
// It also checks the timing: one issue per cycle for n_oc*n_g*n_k cycles,
// pe_* tags PE_DLY=2 cycles after the read, write-back WB_DLY=5 cycles after
// the read of the last chunk, done right after the last write-back.
module tb_row_scheduler;
  import vit_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [9:0] n_k, n_g, n_oc;
  logic [IN_AW-1:0] in_base;
  logic [W_AW-1:0] w_base;
  logic [OUT_AW-1:0] out_base;
  logic busy, done, rd_en, pe_valid, pe_first, pe_last, wb_we;
  logic [IN_AW-1:0] in_addr;
  logic [W_AW-1:0] w_addr;
  logic [OUT_AW-1:0] wb_addr;
  int checks = 0, failures = 0;

  row_scheduler dut (.clk, .rst_n, .start, .n_k, .n_g, .n_oc, .in_base, .w_base, .out_base,
                     .busy, .done, .rd_en, .in_addr, .w_addr, .pe_valid, .pe_first, .pe_last,
                     .wb_we, .wb_addr);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // logs sampled each cycle
  int rd_cyc [$], rd_in [$], rd_w [$];
  int pe_cyc [$], pe_fl [$];
  int wb_cyc [$], wb_a [$];
  int done_cyc;
  always @(posedge clk) if (rst_n) begin
    if (rd_en) begin rd_cyc.push_back(cyc); rd_in.push_back(in_addr); rd_w.push_back(w_addr); end
    if (pe_valid) begin pe_cyc.push_back(cyc); pe_fl.push_back({pe_first, pe_last}); end
    if (wb_we) begin wb_cyc.push_back(cyc); wb_a.push_back(wb_addr); end
    if (done) done_cyc = cyc;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(int k, int g, int oc, int ib, int wb, int ob);
    int i, t0;
    rd_cyc.delete(); rd_in.delete(); rd_w.delete();
    pe_cyc.delete(); pe_fl.delete(); wb_cyc.delete(); wb_a.delete();
    @(negedge clk);
    start = 1'b1; n_k = 10'(k); n_g = 10'(g); n_oc = 10'(oc);
    in_base = IN_AW'(ib); w_base = W_AW'(wb); out_base = OUT_AW'(ob);
    @(negedge clk);
    start = 1'b0;
    wait (done === 1'b1);
    @(posedge clk);
    @(negedge clk);
    check("issue count", rd_cyc.size(), k * g * oc);
    check("pe count", pe_cyc.size(), k * g * oc);
    check("wb count", wb_cyc.size(), g * oc);
    if (rd_cyc.size() != k * g * oc || wb_cyc.size() != g * oc) return;
    t0 = rd_cyc[0];
    i = 0;
    for (int o = 0; o < oc; o++)
      for (int gg = 0; gg < g; gg++) begin
        for (int kk = 0; kk < k; kk++) begin
          check("issue cycle", rd_cyc[i], t0 + i);
          check("in addr", rd_in[i], (ib + gg * k + kk) % IN_DEPTH);
          check("w addr", rd_w[i], (wb + o * k + kk) % W_DEPTH);
          check("pe cycle", pe_cyc[i], rd_cyc[i] + 2);
          check("first/last", pe_fl[i], {kk == 0, kk == k - 1});
          i++;
        end
        check("wb cycle", wb_cyc[o * g + gg], rd_cyc[i - 1] + 5);
        check("wb addr", wb_a[o * g + gg], (ob + gg * oc + o) % OUT_DEPTH);
      end
    check("done cycle", done_cyc, wb_cyc[g * oc - 1] + 1);
  endtask

  initial begin
    n_k = '0; n_g = '0; n_oc = '0; in_base = '0; w_base = '0; out_base = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(1, 8, 4, 0, 0, 0);        // convolution-like: one chunk per output
    run(2, 5, 6, 10, 100, 7);     // 96-channel fully connected
    run(1, 7, 7, 3, 40, 500);     // Q*K^T of a 7x7 window, 7 queries
    run(8, 3, 2, 200, 700, 1000); // 384 channels, top of the input buffer
    run(1, 1, 1, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
