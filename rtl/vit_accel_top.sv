// vit_accel_top: row-wise vision-transformer accelerator.
//
// Datapath (the paper's overall architecture):
//   input SRAM (48 banks x 7x8 bits) and weight SRAM (12 banks x 4x8 bits,
//   two sets) -> 12 PE blocks of 7 rows x 4 MACs -> 12 accumulators ->
//   adder tree -> requantisation to 8 bits -> result SRAM, which the
//   LayerNorm and Softmax units post-process in place and the data bus
//   reads out.  Each cycle the array computes 7 rows x 12 blocks of
//   4-element dot products with the weights of a block shared by its rows.
//
// Control (this design's): the host issues one command at a time
// (cmd_valid while cmd_ready):
//   OP_MATMUL     one array pass, see row_scheduler; blk_mask chooses the
//                 PE blocks summed (all 12 for convolution / FC, 8 for
//                 Q*K^T), wsel the weight set read, shift the requantisation
//                 (result = sat8(sum >>> shift)).
//   OP_LAYERNORM  layernorm over len words at out_base, out_base+stride, ...
//   OP_SOFTMAX    softmax over the same kind of vector.
// `done` pulses when the command has finished and its results are in the
// result SRAM.  The data bus (off-chip memory side) may write the input
// SRAM or either weight set at any time, e.g. the weight set not in use
// by a running pass, and may read the result SRAM while no LayerNorm /
// Softmax command runs.
// Latency of a matmul pass: n_oc*n_g*n_k cycles of issue, then 5 cycles
// (SRAM read, PE register, accumulator input and sum registers, adder tree).
module vit_accel_top
  import vit_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // command interface
  input  logic              cmd_valid,
  input  cmd_t              cmd,
  output logic              cmd_ready,
  output logic              busy,
  output logic              done,
  // data bus, memory-controller side
  input  logic              bus_we,
  input  bus_target_e       bus_target,
  input  logic [5:0]        bus_bank,
  input  logic [9:0]        bus_addr,
  input  logic [ROW_W-1:0]  bus_wdata,
  input  logic              bus_re,
  input  logic [OUT_AW-1:0] bus_raddr,
  output logic              bus_rvalid,
  output logic [ROW_W-1:0]  bus_rdata
);

  // ---------------------------------------------------------------- command
  logic sched_busy, ln_busy, sm_busy;
  logic sched_done, ln_done, sm_done;
  logic go_mm, go_ln, go_sm;

  assign busy      = sched_busy || ln_busy || sm_busy;
  assign cmd_ready = !busy;
  assign go_mm     = cmd_valid && cmd_ready && (cmd.op == OP_MATMUL);
  assign go_ln     = cmd_valid && cmd_ready && (cmd.op == OP_LAYERNORM);
  assign go_sm     = cmd_valid && cmd_ready && (cmd.op == OP_SOFTMAX);
  assign done      = sched_done || ln_done || sm_done;

  logic [N_BLK-1:0] blk_mask_q;
  logic [4:0]       shift_q;
  logic             wsel_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      blk_mask_q <= '1; shift_q <= '0; wsel_q <= 1'b0;
    end else if (go_mm) begin
      blk_mask_q <= cmd.blk_mask; shift_q <= cmd.shift; wsel_q <= cmd.wsel;
    end
  end

  // ---------------------------------------------------------------- data bus
  logic              in_we;
  logic [5:0]        in_wbank;
  logic [IN_AW-1:0]  in_waddr;
  logic [ROW_W-1:0]  in_wdata;
  logic [1:0]        w_we;
  logic [3:0]        w_wbank;
  logic [W_AW-1:0]   w_waddr;
  logic [WVEC_W-1:0] w_wdata;
  logic              bus_out_re;
  logic [OUT_AW-1:0] bus_out_raddr;
  logic [ROW_W-1:0]  out_rdata;

  data_bus u_bus (
    .clk, .rst_n,
    .bus_we, .bus_target, .bus_bank, .bus_addr, .bus_wdata,
    .bus_re, .bus_raddr, .bus_rvalid, .bus_rdata,
    .in_we, .in_wbank, .in_waddr, .in_wdata,
    .w_we, .w_wbank, .w_waddr, .w_wdata,
    .post_busy (ln_busy || sm_busy),
    .out_re    (bus_out_re),
    .out_raddr (bus_out_raddr),
    .out_rdata (out_rdata)
  );

  // ---------------------------------------------------------------- scheduler
  logic              rd_en;
  logic [IN_AW-1:0]  rd_in_addr;
  logic [W_AW-1:0]   rd_w_addr;
  logic              pe_valid, pe_first, pe_last;
  logic              wb_we;
  logic [OUT_AW-1:0] wb_addr;

  row_scheduler u_sched (
    .clk, .rst_n,
    .start    (go_mm),
    .n_k      (cmd.n_k),
    .n_g      (cmd.n_g),
    .n_oc     (cmd.n_oc),
    .in_base  (cmd.in_base),
    .w_base   (cmd.w_base),
    .out_base (cmd.out_base),
    .busy     (sched_busy),
    .done     (sched_done),
    .rd_en, .in_addr(rd_in_addr), .w_addr(rd_w_addr),
    .pe_valid, .pe_first, .pe_last,
    .wb_we, .wb_addr
  );

  // ---------------------------------------------------------------- buffers
  logic [N_IBANK-1:0][ROW_W-1:0] in_rdata;
  logic [N_BLK-1:0][WVEC_W-1:0]  w0_rdata, w1_rdata;

  input_sram u_in (
    .clk, .rst_n,
    .we(in_we), .wbank(in_wbank), .waddr(in_waddr), .wdata(in_wdata),
    .re(rd_en), .raddr(rd_in_addr), .rdata(in_rdata)
  );

  weight_sram u_w0 (
    .clk, .rst_n,
    .we(w_we[0]), .wbank(w_wbank), .waddr(w_waddr), .wdata(w_wdata),
    .re(rd_en && !wsel_q), .raddr(rd_w_addr), .rdata(w0_rdata)
  );

  weight_sram u_w1 (
    .clk, .rst_n,
    .we(w_we[1]), .wbank(w_wbank), .waddr(w_waddr), .wdata(w_wdata),
    .re(rd_en && wsel_q), .raddr(rd_w_addr), .rdata(w1_rdata)
  );

  // ---------------------------------------------------------------- PE array
  logic dv_q;  // SRAM data valid
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dv_q <= 1'b0;
    else        dv_q <= rd_en;

  psum_t psum      [N_BLK][N_ROW];
  acc_t  acc       [N_BLK][N_ROW];
  logic  acc_valid [N_BLK];

  for (genvar k = 0; k < N_BLK; k++) begin : g_blk
    pe_block u_pe (
      .clk, .rst_n,
      .en   (dv_q),
      .w    (wsel_q ? w1_rdata[k] : w0_rdata[k]),
      .in   (in_rdata[k*N_MAC +: N_MAC]),
      .psum (psum[k])
    );
    accumulator u_acc (
      .clk, .rst_n,
      .in_valid  (pe_valid),
      .first     (pe_first),
      .last      (pe_last),
      .psum      (psum[k]),
      .out_valid (acc_valid[k]),
      .acc       (acc[k])
    );
  end

  logic sum_valid;
  acc_t sum [N_ROW];

  adder_tree u_tree (
    .clk, .rst_n,
    .in_valid  (acc_valid[0]),
    .blk_mask  (blk_mask_q),
    .acc       (acc),
    .out_valid (sum_valid),
    .sum       (sum)
  );

  logic [ROW_W-1:0] q_word;
  always_comb
    for (int r = 0; r < N_ROW; r++) q_word[r*DW +: DW] = requant(sum[r], shift_q);

  // ---------------------------------------------------------------- post-processing
  logic              ln_re, ln_we, sm_re, sm_we;
  logic [OUT_AW-1:0] ln_raddr, ln_waddr, sm_raddr, sm_waddr;
  logic [ROW_W-1:0]  ln_wdata, sm_wdata;

  layernorm u_ln (
    .clk, .rst_n,
    .start(go_ln), .base(cmd.out_base), .stride(cmd.stride), .len(cmd.len),
    .busy(ln_busy), .done(ln_done),
    .mem_re(ln_re), .mem_raddr(ln_raddr), .mem_rdata(out_rdata),
    .mem_we(ln_we), .mem_waddr(ln_waddr), .mem_wdata(ln_wdata)
  );

  softmax u_sm (
    .clk, .rst_n,
    .start(go_sm), .base(cmd.out_base), .stride(cmd.stride), .len(cmd.len),
    .busy(sm_busy), .done(sm_done),
    .mem_re(sm_re), .mem_raddr(sm_raddr), .mem_rdata(out_rdata),
    .mem_we(sm_we), .mem_waddr(sm_waddr), .mem_wdata(sm_wdata)
  );

  // ---------------------------------------------------------------- result SRAM
  logic              o_we, o_re;
  logic [OUT_AW-1:0] o_waddr, o_raddr;
  logic [ROW_W-1:0]  o_wdata;

  always_comb begin
    if (sum_valid) begin
      o_we = 1'b1;  o_waddr = wb_addr;  o_wdata = q_word;
    end else if (ln_we) begin
      o_we = 1'b1;  o_waddr = ln_waddr; o_wdata = ln_wdata;
    end else begin
      o_we = sm_we; o_waddr = sm_waddr; o_wdata = sm_wdata;
    end
    if (ln_busy) begin
      o_re = ln_re; o_raddr = ln_raddr;
    end else if (sm_busy) begin
      o_re = sm_re; o_raddr = sm_raddr;
    end else begin
      o_re = bus_out_re; o_raddr = bus_out_raddr;
    end
  end

  output_sram u_out (
    .clk, .rst_n,
    .we(o_we), .waddr(o_waddr), .wdata(o_wdata),
    .re(o_re), .raddr(o_raddr), .rdata(out_rdata)
  );

  // The scheduler's write-back tag and the adder tree's valid must agree.
  a_wb_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    sum_valid == wb_we);

endmodule
