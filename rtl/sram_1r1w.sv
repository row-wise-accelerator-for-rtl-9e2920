// sram_1r1w: generic synchronous memory with one write port and one read
// port, standing in for a single-port-per-side SRAM macro.
//
// A write (we, waddr, wdata) lands at the rising edge.  A read (re, raddr)
// returns its word on rdata one cycle later and rdata holds until the next
// read.  A read and a write to the same address in the same cycle return
// the old word.  The array is not reset; the read register is reset to zero.
module sram_1r1w #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

endmodule
