// input_sram: the activation buffer that feeds the PE array.
//
// 48 banks, one per PE column (12 PE blocks x 4 MAC columns).  Each bank
// holds 224 words of 7 x 8 bits: one word gives one 8-bit input to each of
// the 7 PE rows of its column, so a single read delivers 48 x 7 = 336
// activations per cycle.  The bank count, the 7x8-bit word and the 1.57 KB
// bank size are the paper's; the 224-word depth is 1.57 KB / 7 bytes.
//
// All banks are read at the same address (the scheduler keeps every bank's
// data for a given cycle at the same word); this shared read address, the
// separate write port used by the data bus and the 1-cycle read latency
// are this design's choices.  Bank b feeds PE block b/4, MAC column b%4.
module input_sram
  import vit_pkg::*;
#(
  parameter int unsigned NBANK = N_IBANK,
  parameter int unsigned DEPTH = IN_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(NBANK)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // write side (data bus): one bank per cycle
  input  logic                    we,
  input  logic [BW-1:0]           wbank,
  input  logic [AW-1:0]           waddr,
  input  logic [ROW_W-1:0]        wdata,
  // read side (PE array): all banks at once, data one cycle later
  input  logic                    re,
  input  logic [AW-1:0]           raddr,
  output logic [NBANK-1:0][ROW_W-1:0] rdata
);

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    sram_1r1w #(.DEPTH(DEPTH), .WIDTH(ROW_W)) u_bank (
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
