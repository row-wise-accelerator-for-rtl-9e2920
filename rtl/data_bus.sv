// data_bus: on-chip data bus between the memory controller and the
// accelerator's buffers.
//
// The paper draws a data bus linking the memory controller to the input
// SRAM, the two weight SRAM sets and the result SRAM; it gives no protocol.
// This design's bus is a simple single-master word bus:
//   write: bus_we with a target (input / weight set 0 / weight set 1), a
//          bank, an address and a 56-bit word (weights use the low 32 bits).
//          The write is decoded and registered, reaching the SRAM one cycle
//          later.
//   read:  bus_re with an address of the result SRAM; bus_rvalid and
//          bus_rdata follow two cycles later (request register + SRAM read).
//          Reads are taken only while the post-processing units do not own
//          the result SRAM read port (`post_busy` low); a read issued while
//          it is high is dropped and flagged by the assertion below.
module data_bus
  import vit_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // bus side
  input  logic              bus_we,
  input  bus_target_e       bus_target,
  input  logic [5:0]        bus_bank,
  input  logic [9:0]        bus_addr,
  input  logic [ROW_W-1:0]  bus_wdata,
  input  logic              bus_re,
  input  logic [OUT_AW-1:0] bus_raddr,
  output logic              bus_rvalid,
  output logic [ROW_W-1:0]  bus_rdata,
  // input SRAM write port
  output logic              in_we,
  output logic [5:0]        in_wbank,
  output logic [IN_AW-1:0]  in_waddr,
  output logic [ROW_W-1:0]  in_wdata,
  // weight SRAM write ports (set 0 and set 1)
  output logic [1:0]        w_we,
  output logic [3:0]        w_wbank,
  output logic [W_AW-1:0]   w_waddr,
  output logic [WVEC_W-1:0] w_wdata,
  // result SRAM read port (granted when post_busy is low)
  input  logic              post_busy,
  output logic              out_re,
  output logic [OUT_AW-1:0] out_raddr,
  input  logic [ROW_W-1:0]  out_rdata
);

  logic rd_pend_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_we <= 1'b0; in_wbank <= '0; in_waddr <= '0; in_wdata <= '0;
      w_we <= '0; w_wbank <= '0; w_waddr <= '0; w_wdata <= '0;
      out_re <= 1'b0; out_raddr <= '0; rd_pend_q <= 1'b0;
    end else begin
      in_we <= bus_we && (bus_target == BUS_INPUT);
      w_we  <= {bus_we && (bus_target == BUS_WEIGHT1),
                bus_we && (bus_target == BUS_WEIGHT0)};
      if (bus_we) begin
        in_wbank <= bus_bank;
        in_waddr <= IN_AW'(bus_addr);
        in_wdata <= bus_wdata;
        w_wbank  <= bus_bank[3:0];
        w_waddr  <= W_AW'(bus_addr);
        w_wdata  <= bus_wdata[WVEC_W-1:0];
      end
      out_re    <= bus_re && !post_busy;
      out_raddr <= bus_raddr;
      rd_pend_q <= out_re;
    end
  end

  assign bus_rvalid = rd_pend_q;
  assign bus_rdata  = out_rdata;

  a_target_valid: assert property (@(posedge clk) disable iff (!rst_n)
    bus_we |-> (bus_target != 2'd3));
  a_bank_range: assert property (@(posedge clk) disable iff (!rst_n)
    (bus_we && bus_target == BUS_INPUT) |-> (bus_bank < 6'(N_IBANK)));
  a_read_granted: assert property (@(posedge clk) disable iff (!rst_n)
    bus_re |-> !post_busy);

endmodule
