// ace_alu: the ALU of ACE (block #3 of its microarchitecture): UNITS wide units side by side,
// reducing a whole packet with a local packet in one clock.
//
// With the paper's 4 units of 64 bytes, a 256-byte packet is summed per cycle: unit u works on
// lane u (bits [u*512 +: 512]), the same lane that SRAM bank u stores. Combinational: the
// datapath registers around it. The number of units and their width follow the paper; the
// lane-to-unit mapping is this design's choice.
module ace_alu
  import ace_pkg::*;
#(
  parameter int unsigned UNITS = LANES
) (
  input  logic [UNITS*LANE_W-1:0] a,
  input  logic [UNITS*LANE_W-1:0] b,
  input  dtype_e                  dtype,
  output logic [UNITS*LANE_W-1:0] y
);
  for (genvar u = 0; u < int'(UNITS); u++) begin : g_unit
    ace_alu_unit u_unit (
      .a    (a[u*LANE_W +: LANE_W]),
      .b    (b[u*LANE_W +: LANE_W]),
      .dtype(dtype),
      .y    (y[u*LANE_W +: LANE_W])
    );
  end
endmodule
