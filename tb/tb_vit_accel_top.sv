// tb_vit_accel_top: end-to-end test of the accelerator at its default size.
//
// Acting as the memory controller, the testbench loads the buffers over the
// data bus, issues commands and reads the results back over the bus.  It
// runs the three layer mappings of the row-wise schedule and both
// post-processing units, and checks every result word against a model that
// works from the layer's own definition (direct convolution, matrix
// products, layernorm and softmax formulas), not from the buffer layout:
//   1. patch-embedding convolution, 4x4x3 kernels, stride 4, on an 8x56
//      RGB strip (28 outputs = 4 token groups) for 4 output channels:
//      12 PE blocks, 1 cycle per 7 outputs;
//   2. fully connected layer, 96 input channels, 14 tokens, 6 output
//      channels, weights from set 1 while set 0 is refilled over the bus:
//      2 accumulated cycles per 7 outputs;
//   3. layernorm of the FC outputs of each token over its 6 channels;
//   4. Q*K^T of one 7x7 window (49 tokens, head dimension 32) for 7 queries
//      on 8 PE blocks (4 idle blocks hold junk weights), 7 cycles per query
//      row, then softmax of each query row over its 49 keys.
// Each command's cycle count is checked (issue cycles + 6).  Mechanisms
// counted, each must happen at least once: convolution pass, multi-cycle
// accumulation, 8-block mask, weight-set switch, bus write during a pass,
// requantisation saturation, layernorm, softmax, bus read-out.
module tb_vit_accel_top;
  import vit_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready, busy, done;
  cmd_t cmd;
  logic bus_we = 1'b0, bus_re = 1'b0, bus_rvalid;
  bus_target_e bus_target;
  logic [5:0] bus_bank;
  logic [9:0] bus_addr;
  logic [ROW_W-1:0] bus_wdata, bus_rdata;
  logic [OUT_AW-1:0] bus_raddr;

  vit_accel_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_conv = 0, n_accum = 0, n_mask8 = 0, n_wswitch = 0, n_bus_during = 0;
  int n_sat = 0, n_ln = 0, n_sm = 0, n_readout = 0;

  always @(posedge clk) if (busy && bus_we) n_bus_during++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------ bus access
  task automatic bus_write(bus_target_e tg, int bank, int addr, logic [ROW_W-1:0] data);
    @(negedge clk);
    bus_we = 1'b1; bus_target = tg; bus_bank = 6'(bank); bus_addr = 10'(addr); bus_wdata = data;
    @(negedge clk);
    bus_we = 1'b0;
  endtask

  task automatic bus_read(int addr, output logic [ROW_W-1:0] data);
    @(negedge clk);
    bus_re = 1'b1; bus_raddr = OUT_AW'(addr);
    @(negedge clk);
    bus_re = 1'b0;
    @(negedge clk);
    chk("bus rvalid", bus_rvalid, 1);
    data = bus_rdata;
    n_readout++;
  endtask

  // ------------------------------------------------------------ commands
  function automatic cmd_t mm_cmd(int nk, int ng, int noc, int mask, int sh, int ws,
                                  int ib, int wb, int ob);
    cmd_t c = '0;
    c.op = OP_MATMUL; c.n_k = 10'(nk); c.n_g = 10'(ng); c.n_oc = 10'(noc);
    c.blk_mask = N_BLK'(mask); c.shift = 5'(sh); c.wsel = ws[0];
    c.in_base = IN_AW'(ib); c.w_base = W_AW'(wb); c.out_base = OUT_AW'(ob);
    return c;
  endfunction

  function automatic cmd_t vec_cmd(op_e op, int b, int s, int n);
    cmd_t c = '0;
    c.op = op; c.out_base = OUT_AW'(b); c.stride = OUT_AW'(s); c.len = (OUT_AW+1)'(n);
    return c;
  endfunction

  // returns cycles from acceptance to done
  task automatic run_cmd(cmd_t c, output int cycles);
    int t0;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1'b1; cmd = c;
    t0 = cyc;
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  function automatic int sat8(longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  function automatic int rq(longint v, int sh);
    int r = sat8(v >>> sh);
    if (r == 127 || r == -128) n_sat++;
    return r;
  endfunction

  function automatic int lane(logic [ROW_W-1:0] w, int r);
    return int'($signed(w[r*8 +: 8]));
  endfunction

  function automatic int rnd(int a);  // uniform in [-a, a]
    return int'($urandom % (2 * a + 1)) - a;
  endfunction

  // ------------------------------------------------------------ data
  // 1. convolution
  localparam int CH = 3, IH = 8, IW = 56, OC_CV = 4, OW = IW / 4, OH = IH / 4;
  int img [CH][IH][IW];
  int kcv [OC_CV][CH][4][4];
  // 2. fully connected
  localparam int TOK = 14, CIN = 96, OC_FC = 6;
  int xfc [TOK][CIN];
  int wfc [OC_FC][CIN];
  // 4. attention
  localparam int NQ = 7, NK = 49, HD = 32;
  int qm [NQ][HD];
  int km [NK][HD];

  int cv_out [OC_CV][OH][OW];
  int fc_out [TOK][OC_FC];
  int sc_out [NQ][NK];

  // softmax reference (same integer formulation as the unit)
  function automatic longint lut(int i);
    return longint'($rtoi(32768.0 * (2.0 ** (-real'(i) / 16.0)) + 0.5));
  endfunction
  function automatic longint e_of(int m, int x);
    longint t = (longint'(m - x) * 369) >> 8;
    if (t / 16 >= 16) return 0;
    return lut(int'(t % 16)) >> (t / 16);
  endfunction

  initial begin
    int cycles;
    logic [ROW_W-1:0] word;
    cmd = '0; bus_target = BUS_INPUT; bus_bank = '0; bus_addr = '0; bus_wdata = '0; bus_raddr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ================= 1. convolution (Sec. mapping: block = ch*4 + kernel row,
    // MAC column = kernel column, PE row = output pixel of a 7-pixel group)
    for (int c = 0; c < CH; c++) for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++)
      img[c][y][x] = rnd(40);
    for (int o = 0; o < OC_CV; o++) for (int c = 0; c < CH; c++)
      for (int ky = 0; ky < 4; ky++) for (int kx = 0; kx < 4; kx++) kcv[o][c][ky][kx] = rnd(40);
    // input words: group g = (output row oy, 7-pixel chunk gx)
    for (int oy = 0; oy < OH; oy++) for (int gx = 0; gx < OW / 7; gx++)
      for (int c = 0; c < CH; c++) for (int ky = 0; ky < 4; ky++) for (int kx = 0; kx < 4; kx++) begin
        logic [ROW_W-1:0] w;
        w = '0;
        for (int p = 0; p < 7; p++) w[p*8 +: 8] = 8'(img[c][4*oy+ky][4*(7*gx+p)+kx]);
        bus_write(BUS_INPUT, (c*4 + ky)*4 + kx, oy*(OW/7) + gx, w);
      end
    for (int o = 0; o < OC_CV; o++) for (int c = 0; c < CH; c++) for (int ky = 0; ky < 4; ky++) begin
      logic [ROW_W-1:0] w;
      w = '0;
      for (int kx = 0; kx < 4; kx++) w[kx*8 +: 8] = 8'(kcv[o][c][ky][kx]);
      bus_write(BUS_WEIGHT0, c*4 + ky, o, w);
    end
    run_cmd(mm_cmd(1, OH*OW/7, OC_CV, 12'hfff, 6, 0, 0, 0, 0), cycles);
    chk("conv cycles", cycles, OC_CV*OH*OW/7 + 6);
    n_conv++;
    for (int o = 0; o < OC_CV; o++) for (int oy = 0; oy < OH; oy++) for (int ox = 0; ox < OW; ox++) begin
      longint s;
      s = 0;
      for (int c = 0; c < CH; c++) for (int ky = 0; ky < 4; ky++) for (int kx = 0; kx < 4; kx++)
        s += img[c][4*oy+ky][4*ox+kx] * kcv[o][c][ky][kx];
      cv_out[o][oy][ox] = rq(s, 6);
    end
    for (int o = 0; o < OC_CV; o++) for (int g = 0; g < OH*OW/7; g++) begin
      bus_read(g*OC_CV + o, word);
      for (int p = 0; p < 7; p++)
        chk("conv out", lane(word, p), cv_out[o][g / (OW/7)][(g % (OW/7))*7 + p]);
    end

    // ================= 2. fully connected, 96 channels, weights from set 1
    for (int t = 0; t < TOK; t++) for (int i = 0; i < CIN; i++) xfc[t][i] = rnd(60);
    for (int o = 0; o < OC_FC; o++) for (int i = 0; i < CIN; i++) wfc[o][i] = rnd(60);
    // cycle kk of group g reads channels 48*kk + 4*blk + col
    for (int g = 0; g < TOK/7; g++) for (int kk = 0; kk < 2; kk++)
      for (int b = 0; b < N_IBANK; b++) begin
        logic [ROW_W-1:0] w;
        w = '0;
        for (int p = 0; p < 7; p++) w[p*8 +: 8] = 8'(xfc[7*g+p][48*kk + b]);
        bus_write(BUS_INPUT, b, g*2 + kk, w);
      end
    for (int o = 0; o < OC_FC; o++) for (int kk = 0; kk < 2; kk++) for (int k = 0; k < N_BLK; k++) begin
      logic [ROW_W-1:0] w;
      w = '0;
      for (int c = 0; c < 4; c++) w[c*8 +: 8] = 8'(wfc[o][48*kk + 4*k + c]);
      bus_write(BUS_WEIGHT1, k, 10 + o*2 + kk, w);
    end
    fork
      run_cmd(mm_cmd(2, TOK/7, OC_FC, 12'hfff, 9, 1, 0, 10, 100), cycles);
      // meanwhile refill weight set 0 (ping-pong): junk that must not be used
      begin
        repeat (3) @(negedge clk);
        for (int i = 0; i < 8; i++) bus_write(BUS_WEIGHT0, i, 10 + i, {$urandom, $urandom});
      end
    join
    chk("fc cycles", cycles, 2*OC_FC*TOK/7 + 6);
    n_accum++; n_wswitch++;
    for (int t = 0; t < TOK; t++) for (int o = 0; o < OC_FC; o++) begin
      longint s;
      s = 0;
      for (int i = 0; i < CIN; i++) s += xfc[t][i] * wfc[o][i];
      fc_out[t][o] = rq(s, 9);
    end
    for (int g = 0; g < TOK/7; g++) for (int o = 0; o < OC_FC; o++) begin
      bus_read(100 + g*OC_FC + o, word);
      for (int p = 0; p < 7; p++) chk("fc out", lane(word, p), fc_out[7*g+p][o]);
    end

    // ================= 3. layernorm of each token over the 6 FC channels
    for (int g = 0; g < TOK/7; g++) begin
      run_cmd(vec_cmd(OP_LAYERNORM, 100 + g*OC_FC, 1, OC_FC), cycles);
      n_ln++;
    end
    for (int t = 0; t < TOK; t++) begin
      longint sum, sq, mean, v, sd, rcp;
      sum = 0; sq = 0; sd = 0;
      for (int o = 0; o < OC_FC; o++) begin sum += fc_out[t][o]; sq += fc_out[t][o] * fc_out[t][o]; end
      mean = (sum * 16) / OC_FC;
      v = (sq * 256) / OC_FC - mean * mean;
      if (v < 0) v = 0;
      v += 1;
      while ((sd + 1) * (sd + 1) <= v) sd++;
      rcp = (longint'(1) << 20) / sd;
      for (int o = 0; o < OC_FC; o++) begin
        bus_read(100 + (t/7)*OC_FC + o, word);
        chk("layernorm out", lane(word, t % 7), sat8(((16 * fc_out[t][o] - mean) * rcp) >>> 15));
      end
    end

    // ================= 4. Q*K^T on 8 PE blocks, then softmax
    for (int q = 0; q < NQ; q++) for (int d = 0; d < HD; d++) qm[q][d] = rnd(30);
    for (int k = 0; k < NK; k++) for (int d = 0; d < HD; d++) km[k][d] = rnd(30);
    // Q rows are the weights: 4 columns of Q per PE block
    for (int q = 0; q < NQ; q++) for (int b = 0; b < N_BLK; b++) begin
      logic [ROW_W-1:0] w;
      w = '0;
      for (int c = 0; c < 4; c++) w[c*8 +: 8] = (b < 8) ? 8'(qm[q][4*b + c]) : 8'($urandom);
      bus_write(BUS_WEIGHT0, b, 200 + q, w);
    end
    // K rows are the inputs: 7 keys x 8 PE blocks per group
    for (int g = 0; g < NK/7; g++) for (int b = 0; b < N_IBANK; b++) begin
      logic [ROW_W-1:0] w;
      w = '0;
      for (int p = 0; p < 7; p++) w[p*8 +: 8] = (b < 32) ? 8'(km[7*g+p][b]) : 8'($urandom);
      bus_write(BUS_INPUT, b, 50 + g, w);
    end
    run_cmd(mm_cmd(1, NK/7, NQ, 12'h0ff, 7, 0, 50, 200, 300), cycles);
    chk("qk cycles (7 per query row)", cycles, 7*NQ + 6);
    n_mask8++; n_wswitch++;
    for (int q = 0; q < NQ; q++) for (int k = 0; k < NK; k++) begin
      longint s;
      s = 0;
      for (int d = 0; d < HD; d++) s += qm[q][d] * km[k][d];
      sc_out[q][k] = rq(s, 7);
    end
    for (int q = 0; q < NQ; q++) for (int g = 0; g < NK/7; g++) begin
      bus_read(300 + g*NQ + q, word);
      for (int p = 0; p < 7; p++) chk("qk out", lane(word, p), sc_out[q][7*g+p]);
    end
    for (int q = 0; q < NQ; q++) begin
      int m;
      longint sum, rcp;
      m = -128; sum = 0;
      run_cmd(vec_cmd(OP_SOFTMAX, 300 + q, NQ, NK/7), cycles);
      n_sm++;
      for (int k = 0; k < NK; k++) if (sc_out[q][k] > m) m = sc_out[q][k];
      for (int k = 0; k < NK; k++) sum += e_of(m, sc_out[q][k]);
      rcp = (longint'(1) << 30) / sum;
      for (int g = 0; g < NK/7; g++) begin
        bus_read(300 + g*NQ + q, word);
        for (int p = 0; p < 7; p++) begin
          longint pr;
          pr = (e_of(m, sc_out[q][7*g+p]) * rcp) >> 23;
          chk("softmax out", int'(word[p*8 +: 8]), (pr > 127) ? 127 : pr);
        end
      end
    end

    $display("mechanisms: conv=%0d accumulate=%0d mask8=%0d wswitch=%0d bus_during_pass=%0d saturate=%0d layernorm=%0d softmax=%0d readout=%0d",
             n_conv, n_accum, n_mask8, n_wswitch, n_bus_during, n_sat, n_ln, n_sm, n_readout);
    chk("conv happened", n_conv > 0, 1);
    chk("accumulate happened", n_accum > 0, 1);
    chk("mask8 happened", n_mask8 > 0, 1);
    chk("weight switch happened", n_wswitch > 0, 1);
    chk("bus write during pass happened", n_bus_during > 0, 1);
    chk("saturation happened", n_sat > 0, 1);
    chk("layernorm happened", n_ln > 0, 1);
    chk("softmax happened", n_sm > 0, 1);
    chk("readout happened", n_readout > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
