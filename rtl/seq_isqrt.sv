// seq_isqrt: unsigned integer square root, one result bit per cycle.
//
// A `start` pulse (while not busy) latches `x`; W/2 cycles later `done`
// pulses and `root` holds floor(sqrt(x)), kept until the next start.
// Digit-by-digit method: each step tries setting the next result bit and
// keeps it if its square still fits.  Helper of the LayerNorm unit.
module seq_isqrt #(
  parameter int unsigned W = 40   // even
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   x,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);

  localparam int unsigned H = W / 2;

  logic [W-1:0]         x_q;
  logic [$clog2(H)-1:0] bit_q;
  logic [H-1:0]         cand;
  logic [W-1:0]         cand_sq;

  assign cand    = root | (H'(1) << bit_q);
  assign cand_sq = W'(cand) * W'(cand);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0; bit_q <= '0; root <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        x_q   <= x;
        root  <= '0;
        bit_q <= ($clog2(H))'(H - 1);
        busy  <= 1'b1;
      end else if (busy) begin
        if (cand_sq <= x_q) root <= cand;
        bit_q <= bit_q - 1'b1;
        if (bit_q == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
