// ace_datapath: the switch and interconnect of ACE, joining the SRAM, the ALU, the output port
// buffers and the two DMAs. It executes one packet operation (uop_t) per clock in two stages.
//
// Stage 0 (the cycle uop_valid is high): the SRAM read of uop.rd_addr is issued and the input
// packet in_data (from a receive queue or from the TX DMA) is registered with the operation.
// Stage 1 (next cycle): the SRAM row arrives; the result is SRAM + input through the ALU when
// uop.reduce is set, else the input packet when uop.use_in is set, else the SRAM row. The result
// is written back to uop.wr_addr (wr_en), pushed to output link uop.out_port tagged with uop.fsm
// (out_en), and/or the SRAM row is handed to the RX DMA (to_dma). The "store and forward at the
// same time" and "reduce, store and forward" steps of the paper are single operations here.
// The caller guarantees space in the output buffer and in the RX DMA before it issues. A write
// in stage 1 and a read in stage 0 of the same cycle may touch different rows; the FSM schedules
// never read a row that the operation just before is writing.
// The paper names this block and gives its 64-byte bus width; its structure is this design's.
module ace_datapath
  import ace_pkg::*;
#(
  parameter int unsigned SRAM_BYTES = 4 * 1024 * 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  // operation in
  input  logic            uop_valid,
  input  uop_t            uop,
  input  pkt_data_t       in_data,
  // to the output port buffers
  output logic            out_push,
  output logic [PORT_W-1:0] out_port,
  output net_pkt_t        out_pkt,
  // to the RX DMA
  output logic            dma_valid,
  output pkt_data_t       dma_data,
  // activity, for counters
  output logic            busy_s1
);
  logic      v1;
  uop_t      u1;
  pkt_data_t in1, rd_data, sum, result;

  ace_sram #(.BANKS(LANES), .BANK_BYTES(SRAM_BYTES / LANES)) u_sram (
    .clk    (clk),
    .rd_en  (uop_valid && uop.rd_en),
    .rd_addr(uop.rd_addr),
    .rd_data(rd_data),
    .wr_en  (v1 && u1.wr_en),
    .wr_addr(u1.wr_addr),
    .wr_data(result)
  );

  ace_alu #(.UNITS(LANES)) u_alu (
    .a    (rd_data),
    .b    (in1),
    .dtype(u1.dtype),
    .y    (sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      u1 <= '0;
    end else begin
      v1 <= uop_valid;
      if (uop_valid) u1 <= uop;
    end
  end

  always_ff @(posedge clk) begin
    if (uop_valid && uop.use_in) in1 <= in_data;
  end

  always_comb begin
    if (u1.reduce)      result = sum;
    else if (u1.use_in) result = in1;
    else                result = rd_data;
  end

  assign out_push     = v1 && u1.out_en;
  assign out_port     = u1.out_port;
  assign out_pkt.fsm  = u1.fsm;
  assign out_pkt.data = result;
  assign dma_valid    = v1 && u1.to_dma;
  assign dma_data     = rd_data;
  assign busy_s1      = v1;

  a_reduce_needs_operands: assert property (@(posedge clk) disable iff (!rst_n)
    uop_valid && uop.reduce |-> uop.rd_en && uop.use_in);
endmodule
