// tb_layernorm: self-checking test of the LayerNorm unit.
// The testbench holds the result-buffer contents (1-cycle read latency,
// as the real buffer), fills vectors with random 8-bit values, runs the
// unit over them and compares every written word with a reference model
// of the same integer arithmetic.  It also checks that the normalised
// outputs of a wide-spread vector have a mean near 0 and an RMS near 32
// (1.0 with 5 fraction bits), that words outside the vector are untouched,
// and that the unit reads each word exactly twice.
module tb_layernorm;
  import vit_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [OUT_AW-1:0] base, stride;
  logic [OUT_AW:0] len;
  logic busy, done, mem_re, mem_we;
  logic [OUT_AW-1:0] mem_raddr, mem_waddr;
  logic [ROW_W-1:0] mem_rdata, mem_wdata;
  logic [ROW_W-1:0] mem [OUT_DEPTH];
  int reads = 0;
  int checks = 0, failures = 0;

  layernorm dut (.clk, .rst_n, .start, .base, .stride, .len, .busy, .done,
                 .mem_re, .mem_raddr, .mem_rdata, .mem_we, .mem_waddr, .mem_wdata);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (mem_re) begin mem_rdata <= mem[mem_raddr]; reads++; end
    if (mem_we) mem[mem_waddr] <= mem_wdata;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat8(longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  task automatic run(int b, int s, int n, int spread);
    logic [ROW_W-1:0] prev_mem [OUT_DEPTH];
    longint sum, sq, mean, v, sd, rcp, y;
    int exp_w [N_ROW][];
    int ysum, ysq, yv;
    for (int i = 0; i < n; i++)
      for (int r = 0; r < N_ROW; r++)
        mem[(b + i * s) % OUT_DEPTH][r*8 +: 8] = 8'(int'($urandom % (2 * spread + 1)) - spread + r);
    prev_mem = mem;
    // reference
    for (int r = 0; r < N_ROW; r++) begin
      exp_w[r] = new[n];
      sum = 0; sq = 0;
      for (int i = 0; i < n; i++) begin
        v = longint'($signed(mem[(b + i * s) % OUT_DEPTH][r*8 +: 8]));
        sum += v; sq += v * v;
      end
      mean = (sum * 16) / n;                 // truncates toward zero
      v = (sq * 256) / n - mean * mean;
      if (v < 0) v = 0;
      v += 1;
      sd = 0;
      while ((sd + 1) * (sd + 1) <= v) sd++;
      rcp = (longint'(1) << 20) / sd;
      ysum = 0; ysq = 0;
      for (int i = 0; i < n; i++) begin
        y = ((16 * longint'($signed(mem[(b + i * s) % OUT_DEPTH][r*8 +: 8])) - mean) * rcp) >>> 15;
        yv = sat8(y);
        exp_w[r][i] = yv;
        ysum += yv;
        ysq += yv * yv;
      end
      if (spread >= 40 && n > 1) begin
        checks++;
        if (ysum / n > 2 || ysum / n < -2 || ysq / n < 900 || ysq / n > 1150) begin
          failures++;
          $display("lane %0d: output mean %0d mean square %0d", r, ysum / n, ysq / n);
        end
      end
    end
    reads = 0;
    @(negedge clk);
    start = 1'b1; base = OUT_AW'(b); stride = OUT_AW'(s); len = (OUT_AW+1)'(n);
    @(negedge clk);
    start = 1'b0;
    wait (done === 1'b1);
    @(negedge clk);
    checks++;
    if (reads != 2 * n) begin failures++; $display("reads %0d", reads); end
    for (int i = 0; i < n; i++)
      for (int r = 0; r < N_ROW; r++) begin
        checks++;
        if (int'($signed(mem[(b + i * s) % OUT_DEPTH][r*8 +: 8])) != exp_w[r][i]) begin
          failures++;
          if (failures < 10) $display("word %0d lane %0d got %0d expected %0d", i, r,
                                      $signed(mem[(b + i * s) % OUT_DEPTH][r*8 +: 8]), exp_w[r][i]);
        end
      end
    for (int a = 0; a < OUT_DEPTH; a++) begin
      bit in_vec = 0;
      for (int i = 0; i < n; i++) if ((b + i * s) % OUT_DEPTH == a) in_vec = 1;
      if (!in_vec) begin
        checks++;
        if (mem[a] != prev_mem[a]) failures++;
      end
    end
  endtask

  initial begin
    base = '0; stride = '0; len = '0; mem_rdata = '0;
    for (int a = 0; a < OUT_DEPTH; a++) mem[a] = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(0, 1, 96, 100);     // 96 channels, contiguous
    run(5, 7, 96, 60);      // strided
    run(100, 1, 16, 3);     // small spread: saturating outputs
    run(300, 2, 192, 120);
    run(900, 1, 1, 50);     // single element: var = eps
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
