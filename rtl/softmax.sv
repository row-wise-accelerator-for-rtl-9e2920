// softmax: softmax of attention-score vectors held in the output buffer.
//
// With the row-wise schedule, the scores of one query row are written as
// `len` buffer words (read at base, base+stride, ...) of 7 scores each, e.g.
// 7 words x 7 keys = 49 keys for a 7x7 window.  The softmax runs over all
// len*7 scores and writes the probabilities back in place.  The paper names
// this unit; the insides are this design's choice, kept simple:
//   pass 1  max m over all scores
//   pass 2  sum S of e(x) = 2^-(t) with t = ((m-x)*369) >> 8  (369/256 ~ log2 e),
//           t has 4 fraction bits: e = LUT[t mod 16] >> (t div 16),
//           LUT[i] = round(32768 * 2^(-i/16))
//   divide  rcp = floor(2^30 / S)
//   pass 3  p = min((e(x) * rcp) >> 23, 127)   (p/128 ~ probability)
// Inputs are signed 8-bit scores with 4 fraction bits (score/16); outputs
// are unsigned 7-bit probabilities with 7 fraction bits in an 8-bit lane.
// Interface and memory timing as the layernorm unit: `start` while idle,
// `busy` until `done`; read data one cycle after mem_re.
module softmax
  import vit_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [OUT_AW-1:0] base,
  input  logic [OUT_AW-1:0] stride,
  input  logic [OUT_AW:0]   len,
  output logic              busy,
  output logic              done,
  output logic              mem_re,
  output logic [OUT_AW-1:0] mem_raddr,
  input  logic [ROW_W-1:0]  mem_rdata,
  output logic              mem_we,
  output logic [OUT_AW-1:0] mem_waddr,
  output logic [ROW_W-1:0]  mem_wdata
);

  localparam int unsigned DVW = 32;

  typedef enum logic [2:0] {S_IDLE, S_MAX, S_SUM, S_DIV, S_DIV_W, S_OUT, S_FIN} state_e;
  state_e state;

  logic [OUT_AW:0]   len_q, icnt_q;
  logic [OUT_AW-1:0] stride_q, base_q, ptr_q, raddr_q;
  logic              rvalid_q;
  act_t              max_q;
  logic [31:0]       sum_q;
  logic [15:0]       rcp_q;

  // 2^(-i/16) in Q15
  function automatic logic [15:0] exp2_lut(input logic [3:0] i);
    unique case (i)
      4'd0:  return 16'd32768;  4'd1:  return 16'd31379;
      4'd2:  return 16'd30048;  4'd3:  return 16'd28774;
      4'd4:  return 16'd27554;  4'd5:  return 16'd26386;
      4'd6:  return 16'd25268;  4'd7:  return 16'd24196;
      4'd8:  return 16'd23170;  4'd9:  return 16'd22188;
      4'd10: return 16'd21247;  4'd11: return 16'd20347;
      4'd12: return 16'd19484;  4'd13: return 16'd18658;
      4'd14: return 16'd17867;  default: return 16'd17109;
    endcase
  endfunction

  // e(x) relative to the running max
  function automatic logic [15:0] exp_rel(input act_t m, input act_t v);
    logic [8:0]  d;
    logic [16:0] t;
    d = 9'($signed(m) - $signed(v));
    t = (17'(d) * 17'd369) >> 8;
    if (t[16:4] >= 13'd16) return 16'd0;
    return exp2_lut(t[3:0]) >> t[7:4];
  endfunction

  logic           div_start, div_done;
  logic [DVW-1:0] div_q;
  seq_div #(.W(DVW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(DVW'(1) << 30), .divisor(sum_q),
    .busy(), .done(div_done), .quo(div_q)
  );
  assign div_start = (state == S_DIV);

  logic issuing;
  assign issuing   = (state == S_MAX || state == S_SUM || state == S_OUT) && (icnt_q != len_q);
  assign busy      = (state != S_IDLE);
  assign mem_re    = issuing;
  assign mem_raddr = ptr_q;

  act_t        x [N_ROW];
  logic [15:0] e [N_ROW];
  act_t        wmax;
  logic [31:0] esum;
  logic [ROW_W-1:0] p_word;
  always_comb begin
    wmax = max_q;
    esum = '0;
    for (int r = 0; r < N_ROW; r++) begin
      logic [31:0] pr;
      x[r] = act_t'(mem_rdata[r*DW +: DW]);
      if (x[r] > wmax) wmax = x[r];
      e[r] = exp_rel(max_q, x[r]);
      esum = esum + 32'(e[r]);
      pr   = (32'(e[r]) * 32'(rcp_q)) >> 23;
      p_word[r*DW +: DW] = (pr > 32'd127) ? 8'd127 : pr[DW-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      len_q <= '0; icnt_q <= '0; stride_q <= '0; base_q <= '0; ptr_q <= '0;
      raddr_q <= '0; rvalid_q <= 1'b0; done <= 1'b0;
      max_q <= '0; sum_q <= '0; rcp_q <= '0;
      mem_we <= 1'b0; mem_waddr <= '0; mem_wdata <= '0;
    end else begin
      done     <= 1'b0;
      mem_we   <= 1'b0;
      rvalid_q <= issuing;
      raddr_q  <= ptr_q;
      if (issuing) begin
        ptr_q  <= ptr_q + stride_q;
        icnt_q <= icnt_q + 1'b1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MAX;
          len_q <= len; stride_q <= stride; base_q <= base; ptr_q <= base;
          icnt_q <= '0; max_q <= -8'sd128; sum_q <= '0;
        end
        S_MAX: begin
          if (rvalid_q) max_q <= wmax;
          if (!issuing && !rvalid_q) begin
            state <= S_SUM; ptr_q <= base_q; icnt_q <= '0;
          end
        end
        S_SUM: begin
          if (rvalid_q) sum_q <= sum_q + esum;
          if (!issuing && !rvalid_q) state <= S_DIV;
        end
        S_DIV:   state <= S_DIV_W;
        S_DIV_W: if (div_done) begin
          rcp_q <= 16'(div_q);
          state <= S_OUT; ptr_q <= base_q; icnt_q <= '0;
        end
        S_OUT: begin
          if (rvalid_q) begin
            mem_we    <= 1'b1;
            mem_waddr <= raddr_q;
            mem_wdata <= p_word;
          end
          if (!issuing && !rvalid_q) state <= S_FIN;
        end
        S_FIN: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
