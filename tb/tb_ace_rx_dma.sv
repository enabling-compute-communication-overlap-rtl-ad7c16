// tb_ace_rx_dma: self-checking testbench of the ACE RX DMA.
//
// The datapath is modelled by returning, one cycle after each granted read, a packet that
// encodes the SRAM row read. Grants and memory write acceptance are random. For three jobs the
// test checks read rows (job base + packet index), write addresses (destination + 256 bytes
// per packet) and write data (the row read for that packet), that the staging buffer never
// overflows (the datapath returns data unconditionally), that done comes only after the last
// write, and with everything ready that one packet per cycle is written.
module tb_ace_rx_dma;
  import ace_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic job_valid = 1'b0, job_ready;
  chunk_ctx_t job_ctx = '0, done_ctx;
  sram_addr_t job_npkts = '0;
  logic rd_req_valid, rd_grant, dp_valid = 1'b0;
  uop_t rd_uop;
  pkt_data_t dp_data = '0, mem_wr_data;
  logic mem_wr_valid, mem_wr_ready, done_valid, done_ready = 1'b0;
  mem_addr_t mem_wr_addr;
  int checks = 0, failures = 0;
  logic fast = 1'b0;

  ace_rx_dma #(.BUF_DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [1:0] coin;
  always @(negedge clk) coin <= 2'($urandom());
  assign rd_grant     = rd_req_valid && (fast || coin[0]);
  assign mem_wr_ready = fast || (coin[1] && coin[0]);
  always @(posedge clk) begin
    dp_valid <= rd_grant;
    dp_data  <= {PKT_W/16{rd_uop.rd_addr}};
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("MISMATCH %s at %0t", what, $time); end
  endtask

  initial begin
    int lens [3] = '{3, 20, 24};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < 3; j++) begin
      int rds, wrs, first_wr, last_wr;
      mem_addr_t dst;
      fast = (j == 2);
      dst  = mem_addr_t'(40'h20_0000 * (j + 1));
      @(negedge clk);
      chk(job_ready, "idle dma ready");
      job_valid = 1'b1;
      job_ctx = '0; job_ctx.mem_dst = dst; job_ctx.in_base = sram_addr_t'(1000 + 50 * j); job_ctx.idx = 16'(j);
      job_npkts = sram_addr_t'(lens[j]);
      @(negedge clk);
      job_valid = 1'b0;
      rds = 0; wrs = 0; first_wr = -1; last_wr = 0;
      for (int cyc = 0; cyc < 1000 && !done_valid; cyc++) begin
        @(posedge clk);
        if (rd_grant) begin
          chk(rd_uop.rd_en && rd_uop.to_dma && !rd_uop.wr_en && !rd_uop.out_en, "read operation");
          chk(rd_uop.rd_addr == sram_addr_t'(1000 + 50 * j + rds), "SRAM row");
          rds++;
        end
        if (mem_wr_valid && mem_wr_ready) begin
          chk(mem_wr_addr == dst + mem_addr_t'(wrs * 256), "write address");
          chk(mem_wr_data == {PKT_W/16{sram_addr_t'(1000 + 50 * j + wrs)}}, "write data");
          if (first_wr < 0) first_wr = cyc;
          last_wr = cyc;
          wrs++;
        end
        #1;
        chk(!done_valid || wrs == lens[j], "done only after last packet");
      end
      chk(rds == lens[j] && wrs == lens[j], "packet counts");
      chk(done_valid && done_ctx.idx == 16'(j) && done_ctx.mem_dst == dst, "done context");
      if (fast) chk(last_wr - first_wr == lens[j] - 1, "one packet per cycle");
      @(negedge clk);
      done_ready = 1'b1;
      @(negedge clk);
      done_ready = 1'b0;
      chk(!done_valid && job_ready, "back to idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
