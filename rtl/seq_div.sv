// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// A `start` pulse (while not busy) latches dividend and divisor; W cycles
// later `done` pulses and `quo` holds floor(dividend / divisor), kept until
// the next start.  A zero divisor gives an all-ones quotient.  Helper of the
// LayerNorm and Softmax units; the paper does not describe how they divide.
module seq_div #(
  parameter int unsigned W = 40
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quo
);

  logic [W-1:0]   rem_q, dvs_q;
  logic [$clog2(W+1)-1:0] cnt_q;
  logic [W:0]     trial;

  assign trial = {rem_q, quo[W-1]} - {1'b0, dvs_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q <= '0; dvs_q <= '0; quo <= '0; cnt_q <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rem_q <= '0;
        dvs_q <= divisor;
        quo   <= dividend;   // shifted out MSB first, quotient shifted in
        cnt_q <= ($clog2(W+1))'(W);
        busy  <= 1'b1;
      end else if (busy) begin
        if (!trial[W]) begin
          rem_q <= trial[W-1:0];
          quo   <= {quo[W-2:0], 1'b1};
        end else begin
          rem_q <= {rem_q[W-2:0], quo[W-1]};
          quo   <= {quo[W-2:0], 1'b0};
        end
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
