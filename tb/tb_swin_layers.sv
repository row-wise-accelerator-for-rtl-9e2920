// tb_swin_layers: Swin-T layers at their real sizes on the default-size
// accelerator, checked against direct models of the layers.
//
//   1. Patch embedding: 4x4x3 convolution, stride 4, 96 output channels,
//      on one input tile of 112 x 224 RGB pixels (half of a 224x224 image;
//      the 224-word input banks hold 224 groups of 7 outputs).  The pass
//      writes 96 x 224 = 21504 result words, more than the 1024-word result
//      buffer holds, so the testbench drains them over the data bus while
//      the pass runs (one word per cycle, 8 cycles behind the write; the
//      buffer address simply wraps).  Checks 224 cycles per output channel
//      (448 for the whole image in two tiles) and every output.
//   2. MLP first layer of stage 1: fully connected 96 -> 384 for 14 tokens.
//      384 channels x 2 chunks fill the 768-word weight banks exactly.
//   3. One attention head of one 7x7 window (49 tokens, head dimension 32):
//      Q*K^T on 8 PE blocks (7 cycles per query row), softmax of all 49
//      rows, then P*V as a fully connected pass (49 keys padded to 96
//      channels, 32 output channels) after the host re-lays P out as input
//      words.
// The host side (buffer layout, requantisation shifts) is the testbench's;
// the reference models use plain loops over the layer definitions.
module tb_swin_layers;
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

  initial begin
    repeat (400000) @(posedge clk);
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

  // back-to-back bus writes, one per cycle; the next access drops bus_we
  task automatic bus_write(bus_target_e tg, int bank, int addr, logic [ROW_W-1:0] data);
    @(negedge clk);
    bus_we = 1'b1; bus_target = tg; bus_bank = 6'(bank); bus_addr = 10'(addr); bus_wdata = data;
  endtask
  task automatic bus_idle();
    @(negedge clk);
    bus_we = 1'b0; bus_re = 1'b0;
  endtask

  task automatic bus_read(int addr, output logic [ROW_W-1:0] data);
    @(negedge clk);
    bus_we = 1'b0;
    bus_re = 1'b1; bus_raddr = OUT_AW'(addr);
    @(negedge clk);
    bus_re = 1'b0;
    @(negedge clk);
    chk("bus rvalid", bus_rvalid, 1);
    data = bus_rdata;
  endtask

  function automatic cmd_t mm_cmd(int nk, int ng, int noc, int mask, int sh, int ws,
                                  int ib, int wb, int ob);
    cmd_t c = '0;
    c.op = OP_MATMUL; c.n_k = 10'(nk); c.n_g = 10'(ng); c.n_oc = 10'(noc);
    c.blk_mask = N_BLK'(mask); c.shift = 5'(sh); c.wsel = ws[0];
    c.in_base = IN_AW'(ib); c.w_base = W_AW'(wb); c.out_base = OUT_AW'(ob);
    return c;
  endfunction

  task automatic run_cmd(cmd_t c, output int cycles);
    int t0;
    @(negedge clk);
    bus_we = 1'b0;
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
  function automatic int lane(logic [ROW_W-1:0] w, int r);
    return int'($signed(w[r*8 +: 8]));
  endfunction
  function automatic int rnd(int a);
    return int'($urandom % (2 * a + 1)) - a;
  endfunction

  function automatic longint lut(int i);
    return longint'($rtoi(32768.0 * (2.0 ** (-real'(i) / 16.0)) + 0.5));
  endfunction
  function automatic longint e_of(int m, int x);
    longint t = (longint'(m - x) * 369) >> 8;
    if (t / 16 >= 16) return 0;
    return lut(int'(t % 16)) >> (t / 16);
  endfunction

  // 1. patch embedding
  localparam int IH = 112, IW = 224, OCV = 96, OW = IW / 4, NG = (IH / 4) * OW / 7;
  byte img [3][IH][IW];
  byte kcv [OCV][3][4][4];
  // 2. MLP fc1
  localparam int TOK = 14, CIN = 96, COUT = 384;
  byte xfc [TOK][CIN];
  byte wfc [COUT][CIN];
  // 3. attention
  localparam int NT = 49, HD = 32;
  byte qm [NT][HD];
  byte km [NT][HD];
  byte vm [NT][HD];
  int  sc [NT][NT];
  int  pm [NT][NT];

  initial begin
    int cycles;
    logic [ROW_W-1:0] word;
    cmd = '0; bus_target = BUS_INPUT; bus_bank = '0; bus_addr = '0; bus_wdata = '0; bus_raddr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ===================================================== 1. patch embedding
    for (int c = 0; c < 3; c++) for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++)
      img[c][y][x] = byte'(rnd(50));
    for (int o = 0; o < OCV; o++) for (int c = 0; c < 3; c++)
      for (int ky = 0; ky < 4; ky++) for (int kx = 0; kx < 4; kx++) kcv[o][c][ky][kx] = byte'(rnd(50));
    // group g = output row g/8, 7-pixel chunk g%8; bank (c*4+ky)*4+kx
    for (int g = 0; g < NG; g++)
      for (int c = 0; c < 3; c++) for (int ky = 0; ky < 4; ky++) for (int kx = 0; kx < 4; kx++) begin
        logic [ROW_W-1:0] w;
        int oy, gx;
        oy = g / (OW / 7); gx = g % (OW / 7);
        for (int p = 0; p < 7; p++) w[p*8 +: 8] = 8'(img[c][4*oy+ky][4*(7*gx+p)+kx]);
        bus_write(BUS_INPUT, (c*4 + ky)*4 + kx, g, w);
      end
    for (int o = 0; o < OCV; o++) for (int c = 0; c < 3; c++) for (int ky = 0; ky < 4; ky++) begin
      logic [ROW_W-1:0] w;
      w = '0;
      for (int kx = 0; kx < 4; kx++) w[kx*8 +: 8] = 8'(kcv[o][c][ky][kx]);
      bus_write(BUS_WEIGHT0, c*4 + ky, o, w);
    end
    bus_idle();
    // issue the pass and drain the results while it runs
    begin
      int n, k;
      n = OCV * NG;
      @(negedge clk);
      cmd_valid = 1'b1; cmd = mm_cmd(1, NG, OCV, 12'hfff, 7, 0, 0, 0, 0);
      k = 0;
      while (k < n + 12) begin
        @(negedge clk);
        k++;
        cmd_valid = 1'b0;
        // read word i = k-8 eight cycles after the pass issues it
        if (k >= 8 && k < 8 + n) begin
          int i, o, g;
          i = k - 8; o = i / NG; g = i % NG;
          bus_re = 1'b1; bus_raddr = OUT_AW'(g * OCV + o);
        end else bus_re = 1'b0;
        if (k == n + 6) chk("patch embed: done after 224 cycles per channel + 6", done, 1);
        else if (done) chk("patch embed: early done", k, n + 6);
        if (k >= 10 && k < 10 + n) begin
          int i, o, g, oy, gx;
          i = k - 10; o = i / NG; g = i % NG;
          oy = g / (OW / 7); gx = g % (OW / 7);
          chk("patch embed rvalid", bus_rvalid, 1);
          for (int p = 0; p < 7; p++) begin
            longint s;
            s = 0;
            for (int c = 0; c < 3; c++) for (int ky = 0; ky < 4; ky++) for (int kx = 0; kx < 4; kx++)
              s += longint'(img[c][4*oy+ky][4*(7*gx+p)+kx]) * longint'(kcv[o][c][ky][kx]);
            chk("patch embed out", lane(bus_rdata, p), sat8(s >>> 7));
          end
        end
      end
      bus_re = 1'b0;
      $display("patch embedding: %0d outputs in %0d cycles (%0d per output channel per tile)",
               n * 7, n, NG);
    end

    // ===================================================== 2. MLP fc1 96 -> 384
    for (int t = 0; t < TOK; t++) for (int i = 0; i < CIN; i++) xfc[t][i] = byte'(rnd(60));
    for (int o = 0; o < COUT; o++) for (int i = 0; i < CIN; i++) wfc[o][i] = byte'(rnd(60));
    for (int g = 0; g < TOK/7; g++) for (int kk = 0; kk < 2; kk++)
      for (int b = 0; b < N_IBANK; b++) begin
        logic [ROW_W-1:0] w;
        for (int p = 0; p < 7; p++) w[p*8 +: 8] = 8'(xfc[7*g+p][48*kk + b]);
        bus_write(BUS_INPUT, b, g*2 + kk, w);
      end
    for (int o = 0; o < COUT; o++) for (int kk = 0; kk < 2; kk++) for (int k = 0; k < N_BLK; k++) begin
      logic [ROW_W-1:0] w;
      w = '0;
      for (int c = 0; c < 4; c++) w[c*8 +: 8] = 8'(wfc[o][48*kk + 4*k + c]);
      bus_write(BUS_WEIGHT1, k, o*2 + kk, w);
    end
    run_cmd(mm_cmd(2, TOK/7, COUT, 12'hfff, 9, 1, 0, 0, 0), cycles);
    chk("fc1 cycles: 2 per 7 outputs", cycles, 2 * COUT * TOK/7 + 6);
    for (int g = 0; g < TOK/7; g++) for (int o = 0; o < COUT; o++) begin
      bus_read(g*COUT + o, word);
      for (int p = 0; p < 7; p++) begin
        longint s;
        s = 0;
        for (int i = 0; i < CIN; i++) s += longint'(xfc[7*g+p][i]) * longint'(wfc[o][i]);
        chk("fc1 out", lane(word, p), sat8(s >>> 9));
      end
    end
    $display("mlp fc1 96->384: %0d tokens in %0d cycles", TOK, cycles);

    // ===================================================== 3. attention head
    for (int t = 0; t < NT; t++) for (int d = 0; d < HD; d++) begin
      qm[t][d] = byte'(rnd(25)); km[t][d] = byte'(rnd(25)); vm[t][d] = byte'(rnd(60));
    end
    for (int q = 0; q < NT; q++) for (int b = 0; b < 8; b++) begin
      logic [ROW_W-1:0] w;
      w = '0;
      for (int c = 0; c < 4; c++) w[c*8 +: 8] = 8'(qm[q][4*b + c]);
      bus_write(BUS_WEIGHT0, b, q, w);
    end
    for (int g = 0; g < 7; g++) for (int b = 0; b < 32; b++) begin
      logic [ROW_W-1:0] w;
      for (int p = 0; p < 7; p++) w[p*8 +: 8] = 8'(km[7*g+p][b]);
      bus_write(BUS_INPUT, b, g, w);
    end
    run_cmd(mm_cmd(1, 7, NT, 12'h0ff, 5, 0, 0, 0, 0), cycles);
    chk("qk cycles: 7 per query row", cycles, 7 * NT + 6);
    for (int q = 0; q < NT; q++) for (int k = 0; k < NT; k++) begin
      longint s;
      s = 0;
      for (int d = 0; d < HD; d++) s += longint'(qm[q][d]) * longint'(km[k][d]);
      sc[q][k] = sat8(s >>> 5);
    end
    for (int q = 0; q < NT; q++) begin
      cmd_t c;
      c = '0; c.op = OP_SOFTMAX; c.out_base = OUT_AW'(q); c.stride = OUT_AW'(NT); c.len = 7;
      run_cmd(c, cycles);
    end
    // read P back, check it, and lay it out as input words: token = query,
    // channel = key (chunk 0: keys 0..47, chunk 1: key 48, rest zero)
    for (int q = 0; q < NT; q++) begin
      int m;
      longint sum, rcp;
      m = -128; sum = 0;
      for (int k = 0; k < NT; k++) if (sc[q][k] > m) m = sc[q][k];
      for (int k = 0; k < NT; k++) sum += e_of(m, sc[q][k]);
      rcp = (longint'(1) << 30) / sum;
      for (int g = 0; g < 7; g++) begin
        bus_read(g*NT + q, word);
        for (int p = 0; p < 7; p++) begin
          longint pr;
          pr = (e_of(m, sc[q][7*g+p]) * rcp) >> 23;
          chk("attention softmax", int'(word[p*8 +: 8]), (pr > 127) ? 127 : pr);
          pm[q][7*g+p] = int'(word[p*8 +: 8]);
        end
      end
    end
    for (int g = 0; g < 7; g++) for (int kk = 0; kk < 2; kk++) for (int b = 0; b < N_IBANK; b++) begin
      logic [ROW_W-1:0] w;
      for (int p = 0; p < 7; p++) begin
        int key;
        key = 48*kk + b;
        w[p*8 +: 8] = (key < NT) ? 8'(pm[7*g+p][key]) : 8'd0;
      end
      bus_write(BUS_INPUT, b, g*2 + kk, w);
    end
    for (int d = 0; d < HD; d++) for (int kk = 0; kk < 2; kk++) for (int k = 0; k < N_BLK; k++) begin
      logic [ROW_W-1:0] w;
      for (int c = 0; c < 4; c++) begin
        int key;
        key = 48*kk + 4*k + c;
        w[c*8 +: 8] = (key < NT) ? 8'(vm[key][d]) : 8'd0;
      end
      bus_write(BUS_WEIGHT1, k, d*2 + kk, w);
    end
    run_cmd(mm_cmd(2, 7, HD, 12'hfff, 7, 1, 0, 0, 0), cycles);
    chk("pv cycles", cycles, 2 * 7 * HD + 6);
    for (int g = 0; g < 7; g++) for (int d = 0; d < HD; d++) begin
      bus_read(g*HD + d, word);
      for (int p = 0; p < 7; p++) begin
        longint s;
        s = 0;
        for (int k = 0; k < NT; k++) s += longint'(pm[7*g+p][k]) * longint'(vm[k][d]);
        chk("attention output", lane(word, p), sat8(s >>> 7));
      end
    end
    $display("attention head: 49x49 scores, softmax, 49x32 output");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
