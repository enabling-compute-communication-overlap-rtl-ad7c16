// ace_rx_dma: the AFI RX DMA in ACE mode (block #4): copies the final result of one chunk at a
// time from its slot of the terminal SRAM partition back to NPU main memory.
//
// A job (accepted only when idle) names the chunk context, whose in_base is the first terminal
// row and mem_dst the memory address, and the length in packets. The DMA asks the control unit
// for one datapath read per packet (rd_req_valid/rd_uop) while its BUF_DEPTH-packet staging
// buffer has room for everything already granted; the row arrives from the datapath one cycle
// after the grant (dp_valid/dp_data) and is written to memory in order through a valid/ready
// write port, one 256-byte packet per beat. When the last packet has been accepted by the
// memory the context is offered on done_valid until done_ready. The paper gives the function
// (ACE SRAM to main memory); the interfaces and the staging buffer are this design's choice.
// Its normal (non-ACE) mode, draining the AFI's own SRAM, is not modelled.
module ace_rx_dma
  import ace_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // job
  input  logic        job_valid,
  input  chunk_ctx_t  job_ctx,
  input  sram_addr_t  job_npkts,
  output logic        job_ready,
  // datapath read request and data
  output logic        rd_req_valid,
  output uop_t        rd_uop,
  input  logic        rd_grant,
  input  logic        dp_valid,
  input  pkt_data_t   dp_data,
  // memory write port
  output logic        mem_wr_valid,
  output mem_addr_t   mem_wr_addr,
  output pkt_data_t   mem_wr_data,
  input  logic        mem_wr_ready,
  // chunk written back
  output logic        done_valid,
  output chunk_ctx_t  done_ctx,
  input  logic        done_ready
);
  typedef enum logic [1:0] {S_IDLE, S_COPY, S_DONE} state_e;
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);

  state_e     state;
  chunk_ctx_t ctx;
  sram_addr_t npkts, rd_cnt, wr_cnt;
  logic       inflight, empty, full;
  logic [CW-1:0] cnt;

  ace_fifo #(.WIDTH(PKT_W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk(clk), .rst_n(rst_n),
    .push(dp_valid), .wr_data(dp_data),
    .pop(mem_wr_valid && mem_wr_ready), .rd_data(mem_wr_data),
    .empty(empty), .full(full), .count(cnt)
  );

  assign job_ready    = (state == S_IDLE);
  assign rd_req_valid = (state == S_COPY) && (rd_cnt != npkts) &&
                        (32'(cnt) + (inflight ? 32'd1 : 32'd0) < BUF_DEPTH);
  assign mem_wr_valid = !empty;
  assign mem_wr_addr  = ctx.mem_dst + mem_addr_t'(wr_cnt) * mem_addr_t'(PKT_BYTES);
  assign done_valid   = (state == S_DONE);
  assign done_ctx     = ctx;

  always_comb begin
    rd_uop         = '0;
    rd_uop.rd_en   = 1'b1;
    rd_uop.rd_addr = ctx.in_base + rd_cnt;
    rd_uop.to_dma  = 1'b1;
    rd_uop.dtype   = ctx.dtype;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ctx      <= '0;
      npkts    <= '0;
      rd_cnt   <= '0;
      wr_cnt   <= '0;
      inflight <= 1'b0;
    end else begin
      inflight <= rd_grant;
      case (state)
        S_IDLE: if (job_valid) begin
          ctx    <= job_ctx;
          npkts  <= job_npkts;
          rd_cnt <= '0;
          wr_cnt <= '0;
          state  <= S_COPY;
        end
        S_COPY: begin
          if (rd_grant) rd_cnt <= rd_cnt + 1'b1;
          if (mem_wr_valid && mem_wr_ready) begin
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
    rd_grant |-> rd_req_valid);
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) dp_valid |-> !full);
endmodule
