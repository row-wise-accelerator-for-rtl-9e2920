// row_scheduler: sequencer of the row-wise schedule for one array pass.
//
// Every layer type is run as the same loop of 4-element dot products
// (the paper's row-wise scheduling), in the order the paper gives:
// output channel by output channel, and for each output channel all token
// groups of 7 rows; for each group, n_k consecutive input words are
// accumulated (n_k = 1 for the 4x4x3 convolution and for Q*K^T, n_k = C/48
// for a fully connected layer with C input channels).  One input word and
// one weight word are read per cycle, so the 336 MACs are busy every cycle
// of the pass.
//
//   for oc in 0..n_oc-1
//     for g in 0..n_g-1
//       for k in 0..n_k-1
//         input addr  = in_base + g*n_k + k
//         weight addr = w_base  + oc*n_k + k
//       output word   = out_base + g*n_oc + oc   (written once per (oc,g))
//
// The address formulas and the output layout are this design's choice.
// Interface: a `start` pulse with the command (taken while idle) begins a
// pass of n_oc*n_g*n_k issue cycles; `busy` is high until `done` pulses,
// WB_DLY cycles after the last issue, when the last result has been
// written.  The control tags are delayed inside to meet the data: pe_*
// line up with the PE block outputs (PE_DLY cycles after the read) and
// wb_* with the adder tree output (WB_DLY cycles after the read).
module row_scheduler
  import vit_pkg::*;
#(
  parameter int unsigned PE_DLY = 2,  // SRAM read + PE register
  parameter int unsigned WB_DLY = 5   // + accumulator (2) + adder tree (1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [9:0]        n_k,
  input  logic [9:0]        n_g,
  input  logic [9:0]        n_oc,
  input  logic [IN_AW-1:0]  in_base,
  input  logic [W_AW-1:0]   w_base,
  input  logic [OUT_AW-1:0] out_base,
  output logic              busy,
  output logic              done,
  // read side, this cycle
  output logic              rd_en,
  output logic [IN_AW-1:0]  in_addr,
  output logic [W_AW-1:0]   w_addr,
  // aligned with the PE block outputs
  output logic              pe_valid,
  output logic              pe_first,
  output logic              pe_last,
  // aligned with the adder tree output
  output logic              wb_we,
  output logic [OUT_AW-1:0] wb_addr
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [9:0]        k_q, g_q, oc_q, nk_q, ng_q, noc_q;
  logic [IN_AW-1:0]  in_row_q, in_ptr_q;   // in_base; running input address
  logic [W_AW-1:0]   w_row_q;              // w_base + oc*n_k
  logic [OUT_AW-1:0] o_ptr_q;              // out_base + g*n_oc + oc
  logic [OUT_AW-1:0] o_oc_q;               // out_base + oc
  logic [OUT_AW-1:0] o_stride_q;           // n_oc
  logic [3:0]        drain_q;

  logic k_end, g_end, oc_end;
  assign k_end  = (k_q  == nk_q  - 10'd1);
  assign g_end  = (g_q  == ng_q  - 10'd1);
  assign oc_end = (oc_q == noc_q - 10'd1);

  assign busy    = (state != S_IDLE);
  assign rd_en   = (state == S_RUN);
  assign in_addr = in_ptr_q;
  assign w_addr  = w_row_q + W_AW'(k_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k_q <= '0; g_q <= '0; oc_q <= '0;
      nk_q <= 10'd1; ng_q <= 10'd1; noc_q <= 10'd1;
      in_row_q <= '0; in_ptr_q <= '0; w_row_q <= '0;
      o_ptr_q <= '0; o_oc_q <= '0; o_stride_q <= '0;
      drain_q <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state      <= S_RUN;
          k_q <= '0; g_q <= '0; oc_q <= '0;
          nk_q       <= n_k;
          ng_q       <= n_g;
          noc_q      <= n_oc;
          in_row_q   <= in_base;
          in_ptr_q   <= in_base;
          w_row_q    <= w_base;
          o_ptr_q    <= out_base;
          o_oc_q     <= out_base;
          o_stride_q <= OUT_AW'(n_oc);
        end
        S_RUN: begin
          in_ptr_q <= in_ptr_q + 1'b1;
          k_q      <= k_q + 10'd1;
          if (k_end) begin
            k_q     <= '0;
            g_q     <= g_q + 10'd1;
            o_ptr_q <= o_ptr_q + o_stride_q;
            if (g_end) begin
              g_q      <= '0;
              oc_q     <= oc_q + 10'd1;
              in_ptr_q <= in_row_q;
              w_row_q  <= w_row_q + W_AW'(nk_q);
              o_ptr_q  <= o_oc_q + 1'b1;
              o_oc_q   <= o_oc_q + 1'b1;
              if (oc_end) begin
                state   <= S_DRAIN;
                drain_q <= 4'(WB_DLY - 1);
              end
            end
          end
        end
        S_DRAIN: begin
          if (drain_q == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            drain_q <= drain_q - 4'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Tag delay lines: {valid, first, last} and the write-back address.
  logic [2:0]        tag_d [WB_DLY+1];
  logic [OUT_AW-1:0] adr_d [WB_DLY+1];

  assign tag_d[0] = {rd_en, rd_en && (k_q == '0), rd_en && k_end};
  assign adr_d[0] = o_ptr_q;

  for (genvar i = 1; i <= WB_DLY; i++) begin : g_dly
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        tag_d[i] <= '0;
        adr_d[i] <= '0;
      end else begin
        tag_d[i] <= tag_d[i-1];
        adr_d[i] <= adr_d[i-1];
      end
    end
  end

  assign {pe_valid, pe_first, pe_last} = tag_d[PE_DLY];
  // the write happens where the `last` tag of a (oc, g) arrives
  assign wb_we   = tag_d[WB_DLY][0];
  assign wb_addr = adr_d[WB_DLY];

  // A command with a zero count would never finish.
  a_counts_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == S_IDLE) |-> (n_k != 0 && n_g != 0 && n_oc != 0));

endmodule
