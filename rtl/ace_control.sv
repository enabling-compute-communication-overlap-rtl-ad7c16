// ace_control: the control unit of ACE (block #6).
//
// It takes collective commands from the NPU, cuts each payload into chunks, keeps track of the
// SRAM space, hosts the NUM_FSM programmable FSMs, moves every chunk from phase to phase and
// raises a completion interrupt for every chunk.
//
//  * Commands (cmd_valid/cmd_ready) name a programmed collective, an element type, source and
//    destination addresses in main memory and a length in chunks. A chunk is created when one of
//    the NUM_SLOTS chunk slots is free and the TX DMA can take it, so ACE loads data only when
//    SRAM space is available. A slot stays with its chunk through all phases.
//  * The SRAM holds one partition per phase plus the terminal partition (part_cfg[p]: base row
//    and rows per slot; partition p+1 receives the results of phase p; the terminal partition of
//    a collective with P phases is partition P, as nphases[coll] = P).
//  * FSM assignment: every chunk gets a sequence number when it is created. Among the K FSMs
//    programmed for a collective and phase, the k-th one (in FSM number order) takes the chunks
//    whose sequence number is k mod K, in increasing order (next_seq). The assignment is thus
//    fixed at creation and identical on every node, which the ring schedule needs: packets are
//    tagged with the FSM number and every node's FSM of that number must be working on the same
//    chunk. The counters restart from the program whenever the engine is idle.
//  * Hand-off: one chunk per cycle moves from the TX DMA or a finished FSM to the queue of the
//    FSM assigned to it for the next phase, when that FSM expects it and has room, or, after the
//    last phase, to the RX DMA. Its context gets the SRAM rows of its slot in the two partitions
//    the phase uses.
//  * Issue: every cycle one request among the FSMs and the two DMAs is granted, round robin,
//    among those whose resources are free: the head of the FSM's receive queue for a receiving
//    operation, one free entry of the output link buffer for a sending one (the entry that the
//    operation issued the cycle before may still take is counted). Requests that cannot go
//    stall, and the FSMs compete, which lets chunks of the same and of different phases run out
//    of order and overlap.
//  * When the RX DMA has written a chunk back its slot is freed and irq_valid pulses for a cycle
//    with the command tag and the chunk index.
// FSMs with queues of chunk contexts, partitions per phase plus a terminal partition, SRAM-aware
// loading and the per-chunk interrupt follow the paper. The slot scheme, the round-robin
// policies and the one-operation-per-cycle issue are this design's choices. All-to-all, which the
// paper also runs on these FSMs, is not implemented.
module ace_control
  import ace_pkg::*;
#(
  parameter int unsigned NUM_FSM   = 16,
  parameter int unsigned NUM_LINKS = 6,
  parameter int unsigned NUM_SLOTS = 16,
  parameter int unsigned QDEPTH    = 4,
  parameter int unsigned OUT_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // programming
  input  fsm_prog_t   [NUM_FSM-1:0]     fsm_prog,
  input  part_cfg_t   [MAX_PHASES:0]    part_cfg,
  input  logic [3:0][PHASE_W-1:0]       nphases,
  // NPU command / interrupt
  input  logic        cmd_valid,
  input  ace_cmd_t    cmd,
  output logic        cmd_ready,
  output logic        irq_valid,
  output ace_irq_t    irq,
  // TX DMA
  output logic        tx_job_valid,
  output chunk_ctx_t  tx_job_ctx,
  output sram_addr_t  tx_job_npkts,
  input  logic        tx_job_ready,
  input  logic        tx_done_valid,
  input  chunk_ctx_t  tx_done_ctx,
  output logic        tx_done_ready,
  input  logic        tx_wr_req_valid,
  input  uop_t        tx_wr_uop,
  output logic        tx_wr_grant,
  // RX DMA
  output logic        rx_job_valid,
  output chunk_ctx_t  rx_job_ctx,
  output sram_addr_t  rx_job_npkts,
  input  logic        rx_job_ready,
  input  logic        rx_done_valid,
  input  chunk_ctx_t  rx_done_ctx,
  output logic        rx_done_ready,
  input  logic        rx_rd_req_valid,
  input  uop_t        rx_rd_uop,
  output logic        rx_rd_grant,
  // port buffers
  input  logic [NUM_LINKS-1:0][$clog2(OUT_DEPTH+1)-1:0] out_free,
  input  logic [NUM_FSM-1:0]            rx_nonempty,
  output logic        rx_pop,
  output logic [FSM_ID_W-1:0]           rx_pop_fsm,
  // datapath issue
  output logic        uop_valid,
  output uop_t        uop,
  output logic        uop_from_tx_dma,
  // status
  output logic [NUM_FSM-1:0]            fsm_active,
  output logic [NUM_FSM-1:0]            fsm_stall,
  output logic        slot_wait
);
  localparam int unsigned NREQ = NUM_FSM + 2;     // FSMs, TX DMA, RX DMA
  localparam int unsigned NSRC = NUM_FSM + 1;     // FSMs, TX DMA
  localparam int unsigned TXI  = NUM_FSM;
  localparam int unsigned RXI  = NUM_FSM + 1;

  function automatic sram_addr_t part_row(input logic [PHASE_W-1:0] p, input logic [SLOT_W-1:0] sl);
    return part_cfg[p].base + sram_addr_t'(sl) * part_cfg[p].slot_pkts;
  endfunction

  // ---------------------------------------------------------------- FSMs
  logic       [NUM_FSM-1:0] f_q_push, f_q_full, f_req, f_grant, f_done, f_done_ready;
  uop_t       [NUM_FSM-1:0] f_uop;
  chunk_ctx_t [NUM_FSM-1:0] f_done_ctx;
  chunk_ctx_t               push_ctx;

  for (genvar f = 0; f < int'(NUM_FSM); f++) begin : g_fsm
    ace_fsm #(.FSM_ID(f), .QDEPTH(QDEPTH)) u_fsm (
      .clk(clk), .rst_n(rst_n), .prog(fsm_prog[f]),
      .q_push(f_q_push[f]), .q_ctx(push_ctx), .q_full(f_q_full[f]),
      .req_valid(f_req[f]), .req_uop(f_uop[f]), .grant(f_grant[f]),
      .done_valid(f_done[f]), .done_ctx(f_done_ctx[f]), .done_ready(f_done_ready[f]),
      .active(fsm_active[f])
    );
  end

  // ---------------------------------------------------------------- chunk creation
  logic              act;
  ace_cmd_t          cur;
  logic [IDX_W-1:0]  idx;
  logic [NUM_SLOTS-1:0] slot_busy;
  logic              have_slot;
  logic [SLOT_W-1:0] free_slot;
  logic [PHASE_W-1:0] cur_nph;
  logic [IDX_W-1:0]  seq_ctr;
  logic [NUM_FSM-1:0][IDX_W-1:0] grp_cnt, grp_ord;

  always_comb begin
    have_slot = 1'b0;
    free_slot = '0;
    for (int k = int'(NUM_SLOTS) - 1; k >= 0; k--) begin
      if (!slot_busy[k]) begin
        have_slot = 1'b1;
        free_slot = SLOT_W'(k);
      end
    end
  end

  assign cmd_ready    = !act;
  assign cur_nph      = nphases[cur.coll];
  assign tx_job_valid = act && have_slot;
  assign tx_job_npkts = part_cfg[0].slot_pkts;
  assign slot_wait    = act && !have_slot;

  always_comb begin
    tx_job_ctx          = '0;
    tx_job_ctx.slot     = free_slot;
    tx_job_ctx.coll     = cur.coll;
    tx_job_ctx.dtype    = cur.dtype;
    tx_job_ctx.phase    = '0;
    tx_job_ctx.in_base  = part_row('0, free_slot);
    tx_job_ctx.out_base = part_row(PHASE_W'(1), free_slot);
    tx_job_ctx.mem_src  = cur.src_addr + mem_addr_t'(idx) * mem_addr_t'(part_cfg[0].slot_pkts) * mem_addr_t'(PKT_BYTES);
    tx_job_ctx.mem_dst  = cur.dst_addr + mem_addr_t'(idx) * mem_addr_t'(part_cfg[cur_nph].slot_pkts) * mem_addr_t'(PKT_BYTES);
    tx_job_ctx.tag      = cur.tag;
    tx_job_ctx.idx      = idx;
    tx_job_ctx.seq      = seq_ctr;
  end

  // size of each FSM's group (same collective and phase) and its rank inside the group
  always_comb begin
    for (int f = 0; f < int'(NUM_FSM); f++) begin
      grp_cnt[f] = '0;
      grp_ord[f] = '0;
      for (int j = 0; j < int'(NUM_FSM); j++) begin
        if (fsm_prog[j].enable && fsm_prog[j].coll == fsm_prog[f].coll &&
            fsm_prog[j].phase == fsm_prog[f].phase) begin
          grp_cnt[f] = grp_cnt[f] + 1'b1;
          if (j < f) grp_ord[f] = grp_ord[f] + 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------------- hand-off between phases
  logic [$clog2(NSRC)-1:0]   src_ptr;
  logic [NUM_FSM-1:0][IDX_W-1:0] next_seq;
  logic                      idle_all;
  logic                      ho_valid, ho_to_rx;
  int                        ho_src, ho_tgt;
  chunk_ctx_t                ho_ctx;
  logic [PHASE_W-1:0]        ho_phase;
  int                        sidx, t;
  logic                      sv;
  chunk_ctx_t                sc;
  logic [PHASE_W-1:0]        np;

  always_comb begin
    ho_valid = 1'b0;
    ho_to_rx = 1'b0;
    ho_src   = 0;
    ho_tgt   = 0;
    ho_ctx   = '0;
    ho_phase = '0;
    sidx     = 0;
    sv       = 1'b0;
    sc       = '0;
    np       = '0;
    t        = 0;
    for (int k = 0; k < int'(NSRC); k++) begin
      sidx = int'(src_ptr) + k;
      if (sidx >= int'(NSRC)) sidx = sidx - int'(NSRC);
      if (sidx == int'(TXI)) begin
        sv = tx_done_valid; sc = tx_done_ctx; np = '0;
      end else begin
        sv = f_done[sidx];  sc = f_done_ctx[sidx]; np = f_done_ctx[sidx].phase + 1'b1;
      end
      if (sv && !ho_valid) begin
        if (np == nphases[sc.coll]) begin
          if (rx_job_ready) begin
            ho_valid = 1'b1; ho_to_rx = 1'b1; ho_src = sidx; ho_ctx = sc; ho_phase = np;
          end
        end else begin
          for (int j = 0; j < int'(NUM_FSM); j++) begin
            t = j;
            if (!ho_valid && fsm_prog[t].enable && fsm_prog[t].coll == sc.coll &&
                fsm_prog[t].phase == np && next_seq[t] == sc.seq && !f_q_full[t]) begin
              ho_valid = 1'b1; ho_src = sidx; ho_tgt = t; ho_ctx = sc; ho_phase = np;
            end
          end
        end
      end
    end
    push_ctx          = ho_ctx;
    push_ctx.phase    = ho_phase;
    push_ctx.in_base  = part_row(ho_phase, ho_ctx.slot);
    push_ctx.out_base = part_row(ho_phase + 1'b1, ho_ctx.slot);
  end

  always_comb begin
    f_q_push      = '0;
    f_done_ready  = '0;
    tx_done_ready = 1'b0;
    if (ho_valid) begin
      if (!ho_to_rx) f_q_push[ho_tgt] = 1'b1;
      if (ho_src == int'(TXI)) tx_done_ready = 1'b1;
      else                     f_done_ready[ho_src] = 1'b1;
    end
  end

  assign rx_job_valid = ho_valid && ho_to_rx;
  assign rx_job_ctx   = push_ctx;
  assign rx_job_npkts = part_cfg[ho_phase].slot_pkts;

  // ---------------------------------------------------------------- issue arbiter
  logic [$clog2(NREQ)-1:0]   req_ptr;
  logic                      last_out_en;
  logic [PORT_W-1:0]         last_out_port;
  logic [NREQ-1:0]           elig;
  logic                      gnt_valid;
  int                        gnt, q;

  function automatic logic out_ok(input logic [PORT_W-1:0] p);
    logic [31:0] reserved;
    reserved = (last_out_en && last_out_port == p) ? 32'd1 : 32'd0;
    return 32'(out_free[p]) > reserved;
  endfunction

  always_comb begin
    for (int f = 0; f < int'(NUM_FSM); f++) begin
      elig[f] = f_req[f] && (!f_uop[f].use_in || rx_nonempty[f]) &&
                (!f_uop[f].out_en || out_ok(f_uop[f].out_port));
    end
    elig[TXI] = tx_wr_req_valid;
    elig[RXI] = rx_rd_req_valid;
    gnt_valid = 1'b0;
    gnt       = 0;
    q         = 0;
    for (int k = 0; k < int'(NREQ); k++) begin
      q = int'(req_ptr) + k;
      if (q >= int'(NREQ)) q = q - int'(NREQ);
      if (!gnt_valid && elig[q]) begin
        gnt_valid = 1'b1;
        gnt       = q;
      end
    end
    f_grant = '0;
    if (gnt_valid && gnt < int'(NUM_FSM)) f_grant[gnt] = 1'b1;
    tx_wr_grant = gnt_valid && gnt == int'(TXI);
    rx_rd_grant = gnt_valid && gnt == int'(RXI);
    if (gnt == int'(TXI))      uop = tx_wr_uop;
    else if (gnt == int'(RXI)) uop = rx_rd_uop;
    else                       uop = f_uop[gnt];
    uop_valid       = gnt_valid;
    uop_from_tx_dma = tx_wr_grant;
    rx_pop          = gnt_valid && gnt < int'(NUM_FSM) && f_uop[gnt].use_in;
    rx_pop_fsm      = FSM_ID_W'(gnt);
    fsm_stall       = f_req & ~f_grant;
  end

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act           <= 1'b0;
      cur           <= '0;
      idx           <= '0;
      slot_busy     <= '0;
      src_ptr       <= '0;
      next_seq      <= '0;
      seq_ctr       <= '0;
      req_ptr       <= '0;
      last_out_en   <= 1'b0;
      last_out_port <= '0;
      irq_valid     <= 1'b0;
      irq           <= '0;
    end else begin
      // command / chunk creation
      if (!act && cmd_valid && cmd.num_chunks != 0) begin
        act <= 1'b1;
        cur <= cmd;
        idx <= '0;
      end else if (tx_job_valid && tx_job_ready) begin
        idx <= idx + 1'b1;
        if (idx + 1'b1 == cur.num_chunks) act <= 1'b0;
      end
      // slots
      for (int k = 0; k < int'(NUM_SLOTS); k++) begin
        if (tx_job_valid && tx_job_ready && free_slot == SLOT_W'(k)) slot_busy[k] <= 1'b1;
        else if (rx_done_valid && rx_done_ctx.slot == SLOT_W'(k))    slot_busy[k] <= 1'b0;
      end
      // completion interrupt
      irq_valid <= rx_done_valid;
      if (rx_done_valid) begin
        irq.tag <= rx_done_ctx.tag;
        irq.idx <= rx_done_ctx.idx;
      end
      // round-robin pointers
      if (ho_valid) begin
        src_ptr <= (ho_src + 1 >= int'(NSRC)) ? '0 : ($clog2(NSRC))'(ho_src + 1);
      end
      // deterministic FSM assignment
      if (idle_all) begin
        next_seq <= grp_ord;
        seq_ctr  <= '0;
      end else begin
        if (tx_job_valid && tx_job_ready) seq_ctr <= seq_ctr + 1'b1;
        for (int f = 0; f < int'(NUM_FSM); f++)
          if (f_q_push[f]) next_seq[f] <= next_seq[f] + grp_cnt[f];
      end
      if (gnt_valid) req_ptr <= (gnt + 1 >= int'(NREQ)) ? '0 : ($clog2(NREQ))'(gnt + 1);
      last_out_en   <= uop_valid && uop.out_en;
      last_out_port <= uop.out_port;
    end
  end

  assign rx_done_ready = 1'b1;
  assign idle_all      = !act && (slot_busy == '0) && !(cmd_valid && cmd.num_chunks != 0);

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({f_grant, tx_wr_grant, rx_rd_grant}));
  a_slot_freed_was_busy: assert property (@(posedge clk) disable iff (!rst_n)
    rx_done_valid |-> slot_busy[rx_done_ctx.slot]);
endmodule
