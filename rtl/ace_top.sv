// ace_top: the Accelerator Collectives Engine (ACE), an endpoint engine beside the accelerator
// fabric interface (AFI) of a training accelerator (NPU) that runs collective communication
// (reduce-scatter, all-gather, all-reduce) out of its own SRAM, so that the NPU's cores and
// memory bandwidth stay free for training compute.
//
// Structure: the control unit (ace_control, with its NUM_FSM programmable FSMs) accepts a
// command, and for each chunk the TX DMA copies the data from main memory into the SRAM; the FSMs
// then run the phases of the collective, each packet operation going through the datapath
// (ace_datapath: SRAM, ALU and the switch between them) to and from the per-link port buffers
// (ace_port_buffers); finally the RX DMA writes the terminal partition back and an interrupt
// reports the chunk. Main memory, the AFI link layer and the NPU are outside: their signals are
// ports. Programming (fsm_prog, part_cfg, nphases) is expected to be held steady by the host
// while commands run.
//
// Defaults are the paper's: 16 FSMs, 4 MB SRAM in 4 banks, 6 links per node (two intra-package,
// four inter-package, for a 3D torus), 256-byte packets moving one per clock over four 64-byte
// lanes. NUM_SLOTS (chunks in flight), the queue and buffer depths are this design's choices.
//
// Lint notes: the datapath's stage-1 busy flag (busy_s1) is left unconnected here because the
// issue arbiter already accounts for the operation in flight; rst_n is reported as used both
// synchronously and asynchronously only because the assertions use it in `disable iff`; every
// flip-flop of the design is reset asynchronously or not at all (SRAM contents, data registers).
module ace_top
  import ace_pkg::*;
#(
  parameter int unsigned NUM_FSM    = 16,
  parameter int unsigned NUM_LINKS  = 6,
  parameter int unsigned SRAM_BYTES = 4 * 1024 * 1024,
  parameter int unsigned NUM_SLOTS  = 16,
  parameter int unsigned QDEPTH     = 4,
  parameter int unsigned OUT_DEPTH  = 8,
  parameter int unsigned RX_DEPTH   = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // programming
  input  fsm_prog_t [NUM_FSM-1:0]   fsm_prog,
  input  part_cfg_t [MAX_PHASES:0]  part_cfg,
  input  logic [3:0][PHASE_W-1:0]   nphases,
  // NPU
  input  logic                      cmd_valid,
  input  ace_cmd_t                  cmd,
  output logic                      cmd_ready,
  output logic                      irq_valid,
  output ace_irq_t                  irq,
  // main memory read port (TX DMA)
  output logic                      mem_rd_req_valid,
  output mem_addr_t                 mem_rd_req_addr,
  input  logic                      mem_rd_req_ready,
  input  logic                      mem_rd_rsp_valid,
  input  pkt_data_t                 mem_rd_rsp_data,
  output logic                      mem_rd_rsp_ready,
  // main memory write port (RX DMA)
  output logic                      mem_wr_valid,
  output mem_addr_t                 mem_wr_addr,
  output pkt_data_t                 mem_wr_data,
  input  logic                      mem_wr_ready,
  // links to the AFI
  output logic     [NUM_LINKS-1:0]  link_out_valid,
  output net_pkt_t [NUM_LINKS-1:0]  link_out_pkt,
  input  logic     [NUM_LINKS-1:0]  link_out_ready,
  input  logic     [NUM_LINKS-1:0]  link_in_valid,
  input  net_pkt_t [NUM_LINKS-1:0]  link_in_pkt,
  output logic     [NUM_LINKS-1:0]  link_in_ready,
  // status
  output logic     [NUM_FSM-1:0]    fsm_active,
  output logic     [NUM_FSM-1:0]    fsm_stall,
  output logic                      slot_wait
);
  // TX DMA
  logic       tx_job_valid, tx_job_ready, tx_done_valid, tx_done_ready;
  logic       tx_wr_req_valid, tx_wr_grant;
  chunk_ctx_t tx_job_ctx, tx_done_ctx;
  sram_addr_t tx_job_npkts;
  uop_t       tx_wr_uop;
  // RX DMA
  logic       rx_job_valid, rx_job_ready, rx_done_valid, rx_done_ready;
  logic       rx_rd_req_valid, rx_rd_grant, dp_dma_valid;
  chunk_ctx_t rx_job_ctx, rx_done_ctx;
  sram_addr_t rx_job_npkts;
  uop_t       rx_rd_uop;
  pkt_data_t  dp_dma_data;
  // datapath
  logic       uop_valid, uop_from_tx_dma, out_push, rx_pop, busy_s1;
  uop_t       uop;
  pkt_data_t  in_data, rx_head;
  logic [PORT_W-1:0]   out_port;
  net_pkt_t            out_pkt;
  logic [FSM_ID_W-1:0] rx_pop_fsm;
  logic [NUM_FSM-1:0]  rx_nonempty;
  logic [NUM_LINKS-1:0][$clog2(OUT_DEPTH+1)-1:0] out_free;

  ace_control #(
    .NUM_FSM(NUM_FSM), .NUM_LINKS(NUM_LINKS), .NUM_SLOTS(NUM_SLOTS),
    .QDEPTH(QDEPTH), .OUT_DEPTH(OUT_DEPTH)
  ) u_control (
    .clk(clk), .rst_n(rst_n),
    .fsm_prog(fsm_prog), .part_cfg(part_cfg), .nphases(nphases),
    .cmd_valid(cmd_valid), .cmd(cmd), .cmd_ready(cmd_ready),
    .irq_valid(irq_valid), .irq(irq),
    .tx_job_valid(tx_job_valid), .tx_job_ctx(tx_job_ctx), .tx_job_npkts(tx_job_npkts),
    .tx_job_ready(tx_job_ready), .tx_done_valid(tx_done_valid), .tx_done_ctx(tx_done_ctx),
    .tx_done_ready(tx_done_ready), .tx_wr_req_valid(tx_wr_req_valid), .tx_wr_uop(tx_wr_uop),
    .tx_wr_grant(tx_wr_grant),
    .rx_job_valid(rx_job_valid), .rx_job_ctx(rx_job_ctx), .rx_job_npkts(rx_job_npkts),
    .rx_job_ready(rx_job_ready), .rx_done_valid(rx_done_valid), .rx_done_ctx(rx_done_ctx),
    .rx_done_ready(rx_done_ready), .rx_rd_req_valid(rx_rd_req_valid), .rx_rd_uop(rx_rd_uop),
    .rx_rd_grant(rx_rd_grant),
    .out_free(out_free), .rx_nonempty(rx_nonempty), .rx_pop(rx_pop), .rx_pop_fsm(rx_pop_fsm),
    .uop_valid(uop_valid), .uop(uop), .uop_from_tx_dma(uop_from_tx_dma),
    .fsm_active(fsm_active), .fsm_stall(fsm_stall), .slot_wait(slot_wait)
  );

  ace_tx_dma u_tx_dma (
    .clk(clk), .rst_n(rst_n),
    .job_valid(tx_job_valid), .job_ctx(tx_job_ctx), .job_npkts(tx_job_npkts), .job_ready(tx_job_ready),
    .mem_req_valid(mem_rd_req_valid), .mem_req_addr(mem_rd_req_addr), .mem_req_ready(mem_rd_req_ready),
    .mem_rsp_valid(mem_rd_rsp_valid), .mem_rsp_ready(mem_rd_rsp_ready),
    .wr_req_valid(tx_wr_req_valid), .wr_uop(tx_wr_uop), .wr_grant(tx_wr_grant),
    .done_valid(tx_done_valid), .done_ctx(tx_done_ctx), .done_ready(tx_done_ready)
  );

  ace_rx_dma u_rx_dma (
    .clk(clk), .rst_n(rst_n),
    .job_valid(rx_job_valid), .job_ctx(rx_job_ctx), .job_npkts(rx_job_npkts), .job_ready(rx_job_ready),
    .rd_req_valid(rx_rd_req_valid), .rd_uop(rx_rd_uop), .rd_grant(rx_rd_grant),
    .dp_valid(dp_dma_valid), .dp_data(dp_dma_data),
    .mem_wr_valid(mem_wr_valid), .mem_wr_addr(mem_wr_addr), .mem_wr_data(mem_wr_data),
    .mem_wr_ready(mem_wr_ready),
    .done_valid(rx_done_valid), .done_ctx(rx_done_ctx), .done_ready(rx_done_ready)
  );

  assign in_data = uop_from_tx_dma ? mem_rd_rsp_data : rx_head;

  ace_datapath #(.SRAM_BYTES(SRAM_BYTES)) u_datapath (
    .clk(clk), .rst_n(rst_n),
    .uop_valid(uop_valid), .uop(uop), .in_data(in_data),
    .out_push(out_push), .out_port(out_port), .out_pkt(out_pkt),
    .dma_valid(dp_dma_valid), .dma_data(dp_dma_data),
    .busy_s1(busy_s1)
  );

  ace_port_buffers #(
    .NUM_LINKS(NUM_LINKS), .NUM_FSM(NUM_FSM), .OUT_DEPTH(OUT_DEPTH), .RX_DEPTH(RX_DEPTH)
  ) u_ports (
    .clk(clk), .rst_n(rst_n),
    .out_push(out_push), .out_port(out_port), .out_pkt(out_pkt), .out_free(out_free),
    .link_out_valid(link_out_valid), .link_out_pkt(link_out_pkt), .link_out_ready(link_out_ready),
    .link_in_valid(link_in_valid), .link_in_pkt(link_in_pkt), .link_in_ready(link_in_ready),
    .rx_nonempty(rx_nonempty), .rx_pop(rx_pop), .rx_pop_fsm(rx_pop_fsm), .rx_head(rx_head)
  );
endmodule
