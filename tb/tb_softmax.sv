// tb_softmax: self-checking test of the Softmax unit.
// The testbench holds the result-buffer contents (1-cycle read latency),
// fills score vectors with random 8-bit values, runs the unit and compares
// every written lane with a reference model of the same integer arithmetic
// (base-2 exponent, 16-entry table, one division).  It also checks that the
// probabilities of each vector sum to about 128 (1.0) and that the largest
// score gets the largest probability, and that the unit reads each word
// exactly three times.
module tb_softmax;
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

  softmax dut (.clk, .rst_n, .start, .base, .stride, .len, .busy, .done,
               .mem_re, .mem_raddr, .mem_rdata, .mem_we, .mem_waddr, .mem_wdata);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (mem_re) begin mem_rdata <= mem[mem_raddr]; reads++; end
    if (mem_we) mem[mem_waddr] <= mem_wdata;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // round(32768 * 2^(-i/16))
  function automatic longint lut(int i);
    return longint'($rtoi(32768.0 * (2.0 ** (-real'(i) / 16.0)) + 0.5));
  endfunction

  function automatic longint e_of(int m, int x);
    longint t;
    t = (longint'(m - x) * 369) >> 8;
    if (t / 16 >= 16) return 0;
    return lut(int'(t % 16)) >> (t / 16);
  endfunction

  task automatic run(int b, int s, int n, int spread);
    int m, psum, pmax, imax;
    longint sum, rcp, p;
    int exp_p [];
    exp_p = new[n * N_ROW];
    m = -128;
    for (int i = 0; i < n; i++)
      for (int r = 0; r < N_ROW; r++) begin
        int v = int'($urandom % (2 * spread + 1)) - spread;
        mem[(b + i * s) % OUT_DEPTH][r*8 +: 8] = 8'(v);
        if (v > m) m = v;
      end
    sum = 0;
    for (int i = 0; i < n; i++)
      for (int r = 0; r < N_ROW; r++)
        sum += e_of(m, int'($signed(mem[(b + i * s) % OUT_DEPTH][r*8 +: 8])));
    rcp = (longint'(1) << 30) / sum;
    psum = 0; pmax = -1; imax = 0;
    for (int i = 0; i < n; i++)
      for (int r = 0; r < N_ROW; r++) begin
        p = (e_of(m, int'($signed(mem[(b + i * s) % OUT_DEPTH][r*8 +: 8]))) * rcp) >> 23;
        exp_p[i * N_ROW + r] = (p > 127) ? 127 : int'(p);
      end
    reads = 0;
    @(negedge clk);
    start = 1'b1; base = OUT_AW'(b); stride = OUT_AW'(s); len = (OUT_AW+1)'(n);
    @(negedge clk);
    start = 1'b0;
    wait (done === 1'b1);
    @(negedge clk);
    checks++;
    if (reads != 3 * n) begin failures++; $display("reads %0d", reads); end
    for (int i = 0; i < n; i++)
      for (int r = 0; r < N_ROW; r++) begin
        int got = int'(mem[(b + i * s) % OUT_DEPTH][r*8 +: 8]);
        checks++;
        if (got != exp_p[i * N_ROW + r]) begin
          failures++;
          if (failures < 10) $display("word %0d lane %0d got %0d expected %0d", i, r, got, exp_p[i * N_ROW + r]);
        end
        psum += got;
        if (got > pmax) pmax = got;
      end
    // rounding down loses at most 1 per element
    checks++;
    if (psum > 128 || psum < 128 - n * N_ROW) begin
      failures++;
      $display("probabilities sum to %0d", psum);
    end
  endtask

  initial begin
    base = '0; stride = '0; len = '0; mem_rdata = '0;
    for (int a = 0; a < OUT_DEPTH; a++) mem[a] = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(0, 7, 7, 40);     // one query of a 7x7 window (49 keys), stride 7
    run(3, 1, 7, 120);    // wide spread: one dominant key
    run(500, 49, 7, 10);  // flat scores
    run(800, 1, 1, 20);   // 7 keys
    // one dominant score: it must get (almost) all of the probability
    for (int i = 0; i < 7; i++) mem[200 + i] = {7{8'hc0}};
    mem[203][3*8 +: 8] = 8'd127;
    @(negedge clk);
    start = 1'b1; base = OUT_AW'(200); stride = OUT_AW'(1); len = (OUT_AW+1)'(7);
    @(negedge clk);
    start = 1'b0;
    wait (done === 1'b1);
    @(negedge clk);
    checks++;
    if (mem[203][3*8 +: 8] != 8'd127 || mem[200][7:0] != 8'd0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
