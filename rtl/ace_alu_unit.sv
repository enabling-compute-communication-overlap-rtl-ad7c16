// ace_alu_unit: one wide ALU unit of ACE, adding two 64-byte vectors element by element.
//
// In FP32 mode the 64 bytes are 16 FP32 elements, in FP16 mode 32 FP16 elements (the paper's
// "16xFP32 or 32xFP16 in parallel"). Element k occupies bits [k*W +: W] of the vector. Both
// sets of adders are present and dtype selects the result. Purely combinational.
module ace_alu_unit
  import ace_pkg::*;
(
  input  logic [LANE_W-1:0] a,
  input  logic [LANE_W-1:0] b,
  input  dtype_e            dtype,
  output logic [LANE_W-1:0] y
);
  localparam int unsigned N32 = LANE_W / 32;
  localparam int unsigned N16 = LANE_W / 16;

  logic [LANE_W-1:0] y32, y16;

  for (genvar k = 0; k < int'(N32); k++) begin : g_fp32
    ace_fp_add #(.EW(8), .MW(23)) u_add (.a(a[k*32 +: 32]), .b(b[k*32 +: 32]), .y(y32[k*32 +: 32]));
  end
  for (genvar k = 0; k < int'(N16); k++) begin : g_fp16
    ace_fp_add #(.EW(5), .MW(10)) u_add (.a(a[k*16 +: 16]), .b(b[k*16 +: 16]), .y(y16[k*16 +: 16]));
  end

  assign y = (dtype == DT_FP32) ? y32 : y16;
endmodule
