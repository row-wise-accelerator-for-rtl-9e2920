// output_sram: result buffer between the adder tree, the LayerNorm and
// Softmax units and the data bus.
//
// The paper shows this buffer ("SRAM") only by name; its size and word
// format are this design's choice: 1024 words of 7 x 8 bits, one word per
// (token group, output channel), lane r holding PE row r's result, so the
// word format matches the input buffer and results can be sent back as
// inputs of the next layer.  One write port and one read port, data one
// cycle after the read.  Which unit owns each port is decided outside.
module output_sram
  import vit_pkg::*;
#(
  parameter int unsigned DEPTH = OUT_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [ROW_W-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [ROW_W-1:0] rdata
);

  sram_1r1w #(.DEPTH(DEPTH), .WIDTH(ROW_W)) u_mem (
    .clk, .rst_n, .we, .waddr, .wdata, .re, .raddr, .rdata
  );

endmodule
