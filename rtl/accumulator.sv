// accumulator: per-PE-block accumulation of the 7 row results.
//
// Structure from the paper's overall-architecture figure: an input
// register, an adder and an accumulation register whose output is fed back
// into the adder.  Each of the 7 lanes takes its PE row's dot product.
// When an output needs more input channels than the array covers in one
// cycle (e.g. 96 channels = 2 cycles of 48), the partial results of those
// cycles are summed here.
//
// Control (this design's choice): `in_valid`, `first` and `last` travel with
// psum.  On a valid `first` the accumulation register loads the new value
// (feedback ignored), otherwise it adds.  `out_valid` pulses for one cycle
// with the finished sum when the `last` input has been added.
// Latency: 2 cycles from psum to acc (input register + accumulation register).
module accumulator
  import vit_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  first,
  input  logic  last,
  input  psum_t psum [N_ROW],
  output logic  out_valid,
  output acc_t  acc [N_ROW]
);

  psum_t in_q [N_ROW];
  logic  v_q, first_q, last_q;

  // input register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0;
      for (int r = 0; r < N_ROW; r++) in_q[r] <= '0;
    end else begin
      v_q     <= in_valid;
      first_q <= first;
      last_q  <= last;
      if (in_valid)
        for (int r = 0; r < N_ROW; r++) in_q[r] <= psum[r];
    end
  end

  // adder + accumulation register with feedback
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int r = 0; r < N_ROW; r++) acc[r] <= '0;
    end else begin
      out_valid <= v_q && last_q;
      if (v_q)
        for (int r = 0; r < N_ROW; r++)
          acc[r] <= (first_q ? acc_t'(0) : acc[r]) + acc_t'(in_q[r]);
    end
  end

endmodule
