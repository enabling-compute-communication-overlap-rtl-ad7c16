// ace_sram: the ACE scratchpad (block #1), BANKS banks of BANK_BYTES each, one packet row wide.
//
// Bank k holds lane k (64 bytes) of every packet row, so the four banks together read or write
// a whole 256-byte packet per cycle. Each bank has one read and one write port (simple dual
// port); a read returns its row one cycle later on rd_data. A read and a write of the same row
// in the same cycle return the old contents. The paper gives 4 x 1 MB banks and 64-byte buses;
// the dual-port banks and the one-cycle read latency are this design's choice. The 28 nm SRAM
// macros are written here as arrays.
module ace_sram
  import ace_pkg::*;
#(
  parameter int unsigned BANKS      = LANES,
  parameter int unsigned BANK_BYTES = 1024 * 1024,
  localparam int unsigned ROWS      = BANK_BYTES / BUS_BYTES
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  sram_addr_t               rd_addr,
  output logic [BANKS*LANE_W-1:0]  rd_data,
  input  logic                     wr_en,
  input  sram_addr_t               wr_addr,
  input  logic [BANKS*LANE_W-1:0]  wr_data
);
  localparam int unsigned AW = $clog2(ROWS);

  for (genvar k = 0; k < int'(BANKS); k++) begin : g_bank
    logic [LANE_W-1:0] mem [ROWS];
    always_ff @(posedge clk) begin
      if (rd_en) rd_data[k*LANE_W +: LANE_W] <= mem[rd_addr[AW-1:0]];
      if (wr_en) mem[wr_addr[AW-1:0]] <= wr_data[k*LANE_W +: LANE_W];
    end
  end

  a_rd_range: assert property (@(posedge clk) rd_en |-> (32'(rd_addr) < ROWS));
  a_wr_range: assert property (@(posedge clk) wr_en |-> (32'(wr_addr) < ROWS));
endmodule
