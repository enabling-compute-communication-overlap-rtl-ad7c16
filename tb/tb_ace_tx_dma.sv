// tb_ace_tx_dma: self-checking testbench of the ACE TX DMA.
//
// A behavioural main memory answers read requests in order after a random delay, with data
// that encodes the address. Write grants are given at random. For three jobs of different
// lengths the test checks that every request address is the job's source plus 256 bytes per
// packet, that every granted write goes to the next SRAM row of the job with the data of the
// matching address, that the job is reported done with its context only after its last packet,
// and, with memory and grants always ready, that a packet is written every cycle.
module tb_ace_tx_dma;
  import ace_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic job_valid = 1'b0, job_ready;
  chunk_ctx_t job_ctx = '0, done_ctx;
  sram_addr_t job_npkts = '0;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  mem_addr_t mem_req_addr;
  logic wr_req_valid, wr_grant, done_valid, done_ready = 1'b0;
  uop_t wr_uop;
  int checks = 0, failures = 0;
  logic fast = 1'b0;

  ace_tx_dma dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory model: in-order responses
  mem_addr_t pend [$];
  int        delay;
  logic [1:0] coin;
  always @(negedge clk) coin <= 2'($urandom());
  assign mem_req_ready = fast || (coin != 0);
  assign mem_rsp_valid = pend.size() > 0 && delay == 0;
  always @(posedge clk) begin
    if (delay > 0) delay <= delay - 1;
    if (mem_rsp_valid && mem_rsp_ready) begin
      void'(pend.pop_front());
      delay <= fast ? 0 : $urandom_range(0, 3);
    end
    if (mem_req_valid && mem_req_ready) pend.push_back(mem_req_addr);
  end
  assign wr_grant = wr_req_valid && (fast || coin[0]);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("MISMATCH %s at %0t", what, $time); end
  endtask

  initial begin
    int lens [3] = '{5, 17, 32};
    delay = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < 3; j++) begin
      int reqs, wrs, first_wr, last_wr;
      mem_addr_t base;
      fast = (j == 2);
      base = mem_addr_t'(40'h10_0000 * (j + 1));
      @(negedge clk);
      chk(job_ready, "idle dma ready");
      job_valid = 1'b1;
      job_ctx = '0; job_ctx.mem_src = base; job_ctx.in_base = sram_addr_t'(100 * j); job_ctx.idx = 16'(j);
      job_npkts = sram_addr_t'(lens[j]);
      @(negedge clk);
      job_valid = 1'b0;
      reqs = 0; wrs = 0; first_wr = -1; last_wr = 0;
      for (int cyc = 0; cyc < 1000 && !done_valid; cyc++) begin
        @(posedge clk);
        if (mem_req_valid && mem_req_ready) begin
          chk(mem_req_addr == base + mem_addr_t'(reqs * 256), "request address");
          reqs++;
        end
        if (wr_grant) begin
          chk(wr_uop.wr_en && wr_uop.use_in && !wr_uop.rd_en, "write operation");
          chk(wr_uop.wr_addr == sram_addr_t'(100 * j + wrs), "SRAM row");
          chk(pend.size() > 0 && pend[0] == base + mem_addr_t'(wrs * 256), "data matches row");
          if (first_wr < 0) first_wr = cyc;
          last_wr = cyc;
          wrs++;
        end
        #1;
        chk(!done_valid || wrs == lens[j], "done only after last packet");
      end
      chk(reqs == lens[j] && wrs == lens[j], "packet counts");
      chk(done_valid && done_ctx.idx == 16'(j) && done_ctx.mem_src == base, "done context");
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
