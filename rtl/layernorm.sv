// layernorm: layer normalisation of result vectors held in the output
// buffer, 7 tokens at a time.
//
// A buffer word holds one channel of 7 tokens (one per PE row), so a vector
// of `len` words read at `base`, `base+stride`, ... holds all channels of 7
// tokens; each of the 7 lanes normalises one token.  The paper names this
// unit and says results are post-processed by it; everything inside is this
// design's choice, kept simple:
//   pass 1  read all words, sum x and x*x per lane
//   stats   per lane, with one shared sequential divider and square root:
//             mean = trunc(16*sum / len)                      (4 fraction bits)
//             var  = max(floor(256*sumsq / len) - mean^2, 0) + 1  (8 bits, +1 = eps)
//             std  = floor(sqrt(var))                         (4 fraction bits)
//             rcp  = floor(2^20 / std)
//   pass 2  read all words again and write back in place
//             y = sat8(((16*x - mean) * rcp) >>> 15)          (5 fraction bits)
// Inputs are signed 8-bit integers; outputs are signed 8-bit with 5
// fraction bits (y/32 ~ (x-mean)/std).  No gamma/beta scaling (an affine
// scale can be folded into the next layer's weights).
// Interface: `start` pulse with base/stride/len (len >= 1) while idle;
// `busy` until `done` pulses.  Memory ports: read data one cycle after
// mem_re; writes of pass 2 go to the address read one cycle before.
module layernorm
  import vit_pkg::*;
#(
  parameter int unsigned OUT_F = 5,
  parameter int unsigned RS    = 20
) (
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

  localparam int unsigned DVW = 40;

  typedef enum logic [2:0] {S_IDLE, S_SUM, S_STAT, S_OUT, S_FIN} state_e;
  typedef enum logic [2:0] {T_MEAN, T_MEAN_W, T_VAR, T_VAR_W, T_SQ_W, T_RCP_W} step_e;

  state_e state;
  step_e  step;

  logic [OUT_AW:0]   len_q, icnt_q;
  logic [OUT_AW-1:0] stride_q, base_q, ptr_q, raddr_q;
  logic              rvalid_q;
  logic [2:0]        lane_q;

  logic signed [23:0] sum_q  [N_ROW];
  logic        [31:0] sq_q   [N_ROW];
  logic signed [23:0] mean_q [N_ROW];
  logic        [23:0] rcp_q  [N_ROW];

  // shared divider and square root
  logic           div_start, div_done;
  logic [DVW-1:0] div_a, div_b, div_q;
  logic           sq_start, sq_done;
  logic [DVW-1:0] sq_x;
  logic [DVW/2-1:0] sq_root;

  seq_div #(.W(DVW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_a), .divisor(div_b),
    .busy(), .done(div_done), .quo(div_q)
  );
  seq_isqrt #(.W(DVW)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .x(sq_x),
    .busy(), .done(sq_done), .root(sq_root)
  );

  logic issuing;
  assign issuing   = (state == S_SUM || state == S_OUT) && (icnt_q != len_q);
  assign busy      = (state != S_IDLE);
  assign mem_re    = issuing;
  assign mem_raddr = ptr_q;

  // lane values of the word being returned
  act_t x [N_ROW];
  always_comb
    for (int r = 0; r < N_ROW; r++) x[r] = act_t'(mem_rdata[r*DW +: DW]);

  // statistics operands for the current lane
  logic signed [23:0] sum_l;
  logic        [23:0] abs_sum_l;
  logic signed [47:0] var_l;
  assign sum_l     = sum_q[lane_q];
  assign abs_sum_l = sum_l[23] ? 24'(-sum_l) : 24'(sum_l);
  assign var_l     = $signed({8'd0, div_q}) - 48'(mean_q[lane_q]) * 48'(mean_q[lane_q]);

  always_comb begin
    div_start = 1'b0; div_a = '0; div_b = DVW'(len_q);
    sq_start  = 1'b0; sq_x  = '0;
    if (state == S_STAT) begin
      unique case (step)
        T_MEAN:   begin div_start = 1'b1; div_a = DVW'(abs_sum_l) << 4; end
        T_VAR:    begin div_start = 1'b1; div_a = DVW'(sq_q[lane_q]) << 8; end
        T_VAR_W:  if (div_done) begin
                    sq_start = 1'b1;
                    sq_x     = (var_l < 0) ? DVW'(1) : DVW'(var_l) + DVW'(1);
                  end
        T_SQ_W:   if (sq_done) begin
                    div_start = 1'b1;
                    div_a     = DVW'(1) << RS;
                    div_b     = DVW'(sq_root);
                  end
        default: ;
      endcase
    end
  end

  // output of pass 2
  logic [ROW_W-1:0] y_word;
  always_comb begin
    for (int r = 0; r < N_ROW; r++) begin
      logic signed [47:0] d, p, s;
      d = 48'(16 * 48'(x[r])) - 48'(mean_q[r]);
      p = d * $signed({24'd0, rcp_q[r]});
      s = p >>> (RS - OUT_F);
      y_word[r*DW +: DW] = (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : s[DW-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; step <= T_MEAN;
      len_q <= '0; icnt_q <= '0; stride_q <= '0; base_q <= '0; ptr_q <= '0;
      raddr_q <= '0; rvalid_q <= 1'b0; lane_q <= '0; done <= 1'b0;
      mem_we <= 1'b0; mem_waddr <= '0; mem_wdata <= '0;
      for (int r = 0; r < N_ROW; r++) begin
        sum_q[r] <= '0; sq_q[r] <= '0; mean_q[r] <= '0; rcp_q[r] <= '0;
      end
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
          state <= S_SUM;
          len_q <= len; stride_q <= stride; base_q <= base; ptr_q <= base;
          icnt_q <= '0;
          for (int r = 0; r < N_ROW; r++) begin sum_q[r] <= '0; sq_q[r] <= '0; end
        end
        S_SUM: begin
          if (rvalid_q)
            for (int r = 0; r < N_ROW; r++) begin
              sum_q[r] <= sum_q[r] + 24'(x[r]);
              sq_q[r]  <= sq_q[r] + 32'($signed(32'(x[r])) * $signed(32'(x[r])));
            end
          if (!issuing && !rvalid_q) begin
            state <= S_STAT; step <= T_MEAN; lane_q <= '0;
          end
        end
        S_STAT: begin
          unique case (step)
            T_MEAN:   step <= T_MEAN_W;
            T_MEAN_W: if (div_done) begin
                        mean_q[lane_q] <= sum_l[23] ? -$signed(24'(div_q)) : $signed(24'(div_q));
                        step <= T_VAR;
                      end
            T_VAR:    step <= T_VAR_W;
            T_VAR_W:  if (div_done) step <= T_SQ_W;
            T_SQ_W:   if (sq_done) step <= T_RCP_W;
            T_RCP_W:  if (div_done) begin
                        rcp_q[lane_q] <= 24'(div_q);
                        step <= T_MEAN;
                        if (lane_q == 3'(N_ROW - 1)) begin
                          state  <= S_OUT;
                          ptr_q  <= base_q;
                          icnt_q <= '0;
                        end else begin
                          lane_q <= lane_q + 3'd1;
                        end
                      end
            default:  step <= T_MEAN;
          endcase
        end
        S_OUT: begin
          if (rvalid_q) begin
            mem_we    <= 1'b1;
            mem_waddr <= raddr_q;
            mem_wdata <= y_word;
          end
          if (!issuing && !rvalid_q) state <= S_FIN;
        end
        S_FIN: begin   // last write lands this cycle
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
