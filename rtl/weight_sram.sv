// weight_sram: one set of weight buffers for the PE array.
//
// 12 banks, one per PE block, each 768 words of 4 x 8 bits.  One read gives
// each PE block the 4 weights it broadcasts down its 7 rows.  The bank
// count, the 4x8-bit word and the 3.07 KB bank size are the paper's; the
// depth is 3.07 KB / 4 bytes.  The accelerator has two such sets; using
// them as ping-pong buffers (one filled from the data bus while the other
// feeds the array) is this design's reading of the figure, which shows two
// stacked sets but does not say how they are used.
//
// Shared read address for all banks, separate write port, data one cycle
// after the read.
module weight_sram
  import vit_pkg::*;
#(
  parameter int unsigned NBANK = N_BLK,
  parameter int unsigned DEPTH = W_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(NBANK)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         we,
  input  logic [BW-1:0]                wbank,
  input  logic [AW-1:0]                waddr,
  input  logic [WVEC_W-1:0]            wdata,
  input  logic                         re,
  input  logic [AW-1:0]                raddr,
  output logic [NBANK-1:0][WVEC_W-1:0] rdata
);

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    sram_1r1w #(.DEPTH(DEPTH), .WIDTH(WVEC_W)) u_bank (
      .clk, .rst_n,
      .we    (we && (wbank == BW'(b))),
      .waddr (waddr),
      .wdata (wdata),
      .re    (re),
      .raddr (raddr),
      .rdata (rdata[b])
    );
  end

endmodule
