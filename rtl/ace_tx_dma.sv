// ace_tx_dma: the AFI TX DMA in ACE mode (block #2): copies one chunk at a time from NPU main
// memory into its slot of the first SRAM partition.
//
// A job (job_valid/job_ready, accepted only when idle) names the chunk context, whose mem_src is
// the memory address and in_base the first SRAM row, and the chunk length in packets. The DMA
// issues one read request per 256-byte packet on the memory port, in address order, as fast as
// the memory accepts them. Each packet that returns asks the control unit for a datapath write
// (wr_req_valid/wr_uop); the grant of that request is also the acceptance of the memory
// response (mem_rsp_ready), and the datapath takes the packet from mem_rsp_data. Responses must
// come back in request order. When every packet is written the context is offered on done_valid
// until done_ready. The paper gives this block's function (main memory to ACE SRAM); the
// request/response interface, the packet-wide memory port and the one-job-at-a-time operation
// are this design's choices. Its normal (non-ACE) mode, filling the AFI's own SRAM, is not
// modelled.
module ace_tx_dma
  import ace_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // job
  input  logic        job_valid,
  input  chunk_ctx_t  job_ctx,
  input  sram_addr_t  job_npkts,
  output logic        job_ready,
  // memory read port
  output logic        mem_req_valid,
  output mem_addr_t   mem_req_addr,
  input  logic        mem_req_ready,
  input  logic        mem_rsp_valid,
  output logic        mem_rsp_ready,
  // datapath write request
  output logic        wr_req_valid,
  output uop_t        wr_uop,
  input  logic        wr_grant,
  // chunk loaded
  output logic        done_valid,
  output chunk_ctx_t  done_ctx,
  input  logic        done_ready
);
  typedef enum logic [1:0] {S_IDLE, S_COPY, S_DONE} state_e;

  state_e     state;
  chunk_ctx_t ctx;
  sram_addr_t npkts, req_cnt, wr_cnt;

  assign job_ready     = (state == S_IDLE);
  assign mem_req_valid = (state == S_COPY) && (req_cnt != npkts);
  assign mem_req_addr  = ctx.mem_src + mem_addr_t'(req_cnt) * mem_addr_t'(PKT_BYTES);
  assign wr_req_valid  = (state == S_COPY) && mem_rsp_valid && (wr_cnt != req_cnt);
  assign mem_rsp_ready = wr_grant;
  assign done_valid    = (state == S_DONE);
  assign done_ctx      = ctx;

  always_comb begin
    wr_uop         = '0;
    wr_uop.use_in  = 1'b1;
    wr_uop.wr_en   = 1'b1;
    wr_uop.wr_addr = ctx.in_base + wr_cnt;
    wr_uop.dtype   = ctx.dtype;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      ctx     <= '0;
      npkts   <= '0;
      req_cnt <= '0;
      wr_cnt  <= '0;
    end else begin
      case (state)
        S_IDLE: if (job_valid) begin
          ctx     <= job_ctx;
          npkts   <= job_npkts;
          req_cnt <= '0;
          wr_cnt  <= '0;
          state   <= S_COPY;
        end
        S_COPY: begin
          if (mem_req_valid && mem_req_ready) req_cnt <= req_cnt + 1'b1;
          if (wr_grant) begin
            wr_cnt <= wr_cnt + 1'b1;
            if (wr_cnt + 1'b1 == npkts) state <= S_DONE;
          end
        end
        S_DONE: if (done_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_grant_only_on_request: assert property (@(posedge clk) disable iff (!rst_n)
    wr_grant |-> wr_req_valid);
endmodule
