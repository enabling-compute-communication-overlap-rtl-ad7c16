// tb_ace_datapath: self-checking testbench of the ACE switch and interconnect (datapath with its
// SRAM and ALU).
//
// Operations are issued one per clock, as the control unit does: loads of input packets into
// SRAM rows, reads to the RX DMA port, sends to an output link, reductions (SRAM + input in
// FP16 and FP32, written back and forwarded) and stores with forwarding. Data are small
// integers encoded in FP16/FP32, so every expected sum is exact and is worked out with integer
// arithmetic in the testbench. Results must appear exactly one cycle after issue.
module tb_ace_datapath;
  import ace_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b1;
  // a falling edge at time 1 so that every asynchronous reset acts before the first clock edge
  initial #1 rst_n = 1'b0;
  logic       uop_valid = 1'b0;
  uop_t       uop;
  pkt_data_t  in_data;
  logic       out_push, dma_valid, busy_s1;
  logic [PORT_W-1:0] out_port;
  net_pkt_t   out_pkt;
  pkt_data_t  dma_data;
  int         checks = 0, failures = 0;

  ace_datapath #(.SRAM_BYTES(64 * 1024)) dut (
    .clk(clk), .rst_n(rst_n), .uop_valid(uop_valid), .uop(uop), .in_data(in_data),
    .out_push(out_push), .out_port(out_port), .out_pkt(out_pkt),
    .dma_valid(dma_valid), .dma_data(dma_data), .busy_s1(busy_s1));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // integer 0..1023 to FP16 / FP32 (exact), written without the design's help
  function automatic logic [15:0] i2h(input int v);
    int e;
    if (v == 0) return 16'h0;
    e = 0;
    while ((v >> (e + 1)) != 0) e++;
    return {1'b0, 5'(e + 15), 10'((v << 10 >> e) & 10'h3ff)};
  endfunction
  function automatic logic [31:0] i2f(input int v);
    int e;
    if (v == 0) return 32'h0;
    e = 0;
    while ((v >> (e + 1)) != 0) e++;
    return {1'b0, 8'(e + 127), 23'((longint'(v) << 23 >> e) & 23'h7fffff)};
  endfunction
  function automatic pkt_data_t pk(input int vals [], input dtype_e dt);
    pkt_data_t p;
    p = '0;
    if (dt == DT_FP16) for (int k = 0; k < PKT_W / 16; k++) p[k*16 +: 16] = i2h(vals[k]);
    else               for (int k = 0; k < PKT_W / 32; k++) p[k*32 +: 32] = i2f(vals[k]);
    return p;
  endfunction

  task automatic issue(input uop_t u, input pkt_data_t d);
    @(negedge clk);
    uop = u; in_data = d; uop_valid = 1'b1;
    @(negedge clk);
    uop_valid = 1'b0;
  endtask

  task automatic expect_out(input string what, input logic push_e, input logic [PORT_W-1:0] port_e,
                            input logic dma_e, input pkt_data_t d_e, input logic [FSM_ID_W-1:0] tag);
    // called right after issue(): the result belongs to this cycle (one cycle after issue)
    checks++;
    if (out_push !== push_e || dma_valid !== dma_e ||
        (push_e && (out_port !== port_e || out_pkt.data !== d_e || out_pkt.fsm !== tag)) ||
        (dma_e && dma_data !== d_e)) begin
      failures++;
      $display("MISMATCH %s: push=%b port=%0d dma=%b", what, out_push, out_port, dma_valid);
    end
  endtask

  initial begin
    int a [], b [], s [];
    pkt_data_t pa, pb;
    uop_t u;
    uop = '0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 20; it++) begin
      dtype_e dt;
      int n;
      dt = (it % 2) ? DT_FP32 : DT_FP16;
      n  = (dt == DT_FP16) ? PKT_W / 16 : PKT_W / 32;
      a = new[n]; b = new[n]; s = new[n];
      foreach (a[k]) begin a[k] = $urandom_range(0, 511); b[k] = $urandom_range(0, 511); s[k] = a[k] + b[k]; end
      pa = pk(a, dt); pb = pk(b, dt);
      // load a into row 2*it (TX DMA style)
      u = '0; u.use_in = 1'b1; u.wr_en = 1'b1; u.wr_addr = sram_addr_t'(2 * it); u.dtype = dt;
      issue(u, pa);
      expect_out("load", 1'b0, '0, 1'b0, '0, '0);
      // send row to link 3
      u = '0; u.rd_en = 1'b1; u.rd_addr = sram_addr_t'(2 * it); u.out_en = 1'b1; u.out_port = 3'd3;
      u.fsm = 5'(it); u.dtype = dt;
      issue(u, '0);
      expect_out("send", 1'b1, 3'd3, 1'b0, pa, 5'(it));
      // receive b, reduce with row, write to row 2*it+1 and forward on link it%6
      u = '0; u.rd_en = 1'b1; u.rd_addr = sram_addr_t'(2 * it); u.use_in = 1'b1; u.reduce = 1'b1;
      u.wr_en = 1'b1; u.wr_addr = sram_addr_t'(2 * it + 1); u.out_en = 1'b1;
      u.out_port = 3'(it % 6); u.fsm = 5'(it + 1); u.dtype = dt;
      issue(u, pb);
      expect_out("reduce+forward", 1'b1, 3'(it % 6), 1'b0, pk(s, dt), 5'(it + 1));
      // read the sum to the RX DMA
      u = '0; u.rd_en = 1'b1; u.rd_addr = sram_addr_t'(2 * it + 1); u.to_dma = 1'b1; u.dtype = dt;
      issue(u, '0);
      expect_out("read to dma", 1'b0, '0, 1'b1, pk(s, dt), '0);
      // store-and-forward b over row 2*it, then read it
      u = '0; u.use_in = 1'b1; u.wr_en = 1'b1; u.wr_addr = sram_addr_t'(2 * it); u.out_en = 1'b1;
      u.out_port = 3'd1; u.fsm = 5'd2; u.dtype = dt;
      issue(u, pb);
      expect_out("store+forward", 1'b1, 3'd1, 1'b0, pb, 5'd2);
      u = '0; u.rd_en = 1'b1; u.rd_addr = sram_addr_t'(2 * it); u.to_dma = 1'b1;
      issue(u, '0);
      expect_out("stored", 1'b0, '0, 1'b1, pb, '0);
    end
    // back-to-back issue: two reads on consecutive cycles, results one cycle apart
    @(negedge clk);
    u = '0; u.rd_en = 1'b1; u.rd_addr = 16'd1; u.to_dma = 1'b1; uop = u; uop_valid = 1'b1;
    @(negedge clk);
    u.rd_addr = 16'd3; uop = u;
    checks++; if (!dma_valid) begin failures++; $display("MISMATCH back-to-back 1"); end
    @(negedge clk);
    uop_valid = 1'b0;
    checks++; if (!dma_valid) begin failures++; $display("MISMATCH back-to-back 2"); end
    @(negedge clk);
    checks++; if (dma_valid || busy_s1) begin failures++; $display("MISMATCH idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
