// ace_fsm: one programmable state machine of the ACE control unit.
//
// An FSM is programmed (prog) for one phase of one collective and owns a queue of chunk
// contexts, which it processes in order. For each chunk it walks the ring algorithm of its phase
// packet by packet and requests one datapath operation at a time (req_valid/req_uop); the
// control unit grants the request when the operation's resources are free (the packet in this
// FSM's receive queue, room in the output link buffer, the datapath itself), otherwise the FSM
// stalls. When the phase is complete the chunk is offered on done_valid/done_ctx until the
// control unit takes it (done_ready) and hands it to the next phase.
//
// Ring algorithms, for a ring of N nodes, rank r, G groups of N messages of M packets (data of
// block b of group g is at rows g*N*M + b*M in a full layout, g*M in a compact one):
//   reduce-scatter (N-1 steps): step 0 sends block r; at step s it receives block (r-s-1) mod N,
//     adds the local copy and forwards the sum (the next step's send), except that the last
//     step writes the fully reduced block (r+1) mod N into the next partition (compact).
//   all-gather (N-1 steps): sends its own compact block, copying it to block (r+1) mod N of the
//     next partition; at step t it stores the received block (r-t) mod N and forwards it,
//     except at the last step.
//   all-reduce: reduce-scatter whose last step stores and forwards at once, then the receive
//     steps of all-gather, all into the next partition (full layout).
// Order: packet-major. Packet i of a group is taken through every step (its send, then its
// receive at step 0, 1, ...) before packet i+1 starts. Every forwarded packet is then emitted in
// exactly the order the next node consumes it, each link carries one FIFO stream per FSM, and a
// node never waits for more than one packet, so a receive queue of one packet is enough to avoid
// deadlock. The step-by-step ring algorithm, reduce-and-forward and store-and-forward follow the
// paper's walk-through; the packet-major order (the paper proceeds message by message), the
// addressing and the request/grant handshake are this design's.
module ace_fsm
  import ace_pkg::*;
#(
  parameter int unsigned FSM_ID = 0,
  parameter int unsigned QDEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  fsm_prog_t   prog,
  // chunk queue
  input  logic        q_push,
  input  chunk_ctx_t  q_ctx,
  output logic        q_full,
  // datapath request
  output logic        req_valid,
  output uop_t        req_uop,
  input  logic        grant,
  // phase done
  output logic        done_valid,
  output chunk_ctx_t  done_ctx,
  input  logic        done_ready,
  // status
  output logic        active
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e            state;
  chunk_ctx_t        ctx;
  logic              q_empty;
  chunk_ctx_t        q_head;
  logic [GRP_W-1:0]  g;
  logic [RING_W:0]   s;        // step
  logic [MSG_W-1:0]  i;        // packet within the message
  logic              sub;      // 0: the send half of a step-0 packet

  ace_fifo #(.WIDTH($bits(chunk_ctx_t)), .DEPTH(QDEPTH)) u_queue (
    .clk(clk), .rst_n(rst_n),
    .push(q_push), .wr_data(q_ctx),
    .pop(state == S_IDLE && !q_empty), .rd_data(q_head),
    .empty(q_empty), .full(q_full), .count()
  );

  // ---------------------------------------------------------------- schedule arithmetic
  logic [RING_W-1:0] n, r;
  logic [RING_W:0]   last_step;
  sram_addr_t        grp_full, grp_compact;

  // (r - k) mod n, for 0 <= k <= n
  function automatic logic [RING_W-1:0] blk(input logic [RING_W:0] k);
    logic [RING_W+1:0] t;
    t = {2'b0, r} + {1'b0, n} - {1'b0, k};
    if (t >= {2'b0, n}) t = t - {2'b0, n};
    return t[RING_W-1:0];
  endfunction

  function automatic sram_addr_t blk_row(input logic [RING_W-1:0] b);
    return grp_full + sram_addr_t'(b) * sram_addr_t'(prog.msg_pkts) + sram_addr_t'(i);
  endfunction

  assign n           = prog.ring_n;
  assign r           = prog.rank;
  assign last_step   = (prog.op == PH_ALL_REDUCE) ? ({1'b0, n} << 1) - 3 : {1'b0, n} - 2;
  assign grp_full    = sram_addr_t'(g) * sram_addr_t'(n) * sram_addr_t'(prog.msg_pkts);
  assign grp_compact = sram_addr_t'(g) * sram_addr_t'(prog.msg_pkts);

  logic            rs_part;
  logic [RING_W:0] t_ag;
  sram_addr_t      row;

  always_comb begin
    req_uop          = '0;
    req_uop.dtype    = ctx.dtype;
    req_uop.fsm      = FSM_ID_W'(FSM_ID);
    req_uop.out_port = prog.tx_port;
    rs_part          = (prog.op != PH_ALL_GATHER) && (s <= {1'b0, n} - 2);
    t_ag             = (prog.op == PH_ALL_REDUCE) ? s - ({1'b0, n} - 1) : s;
    row              = '0;
    if (rs_part) begin
      if (!sub) begin                                   // send own block
        req_uop.rd_en   = 1'b1;
        req_uop.rd_addr = ctx.in_base + blk_row(blk(0));
        req_uop.out_en  = 1'b1;
      end else begin                                    // receive, reduce (and forward)
        row             = blk_row(blk(s + 1));
        req_uop.rd_en   = 1'b1;
        req_uop.rd_addr = ctx.in_base + row;
        req_uop.use_in  = 1'b1;
        req_uop.reduce  = 1'b1;
        req_uop.wr_en   = 1'b1;
        if (s != {1'b0, n} - 2) begin
          req_uop.wr_addr = ctx.in_base + row;
          req_uop.out_en  = 1'b1;
        end else if (prog.op == PH_ALL_REDUCE) begin
          req_uop.wr_addr = ctx.out_base + row;
          req_uop.out_en  = 1'b1;
        end else begin
          req_uop.wr_addr = ctx.out_base + grp_compact + sram_addr_t'(i);
        end
      end
    end else begin
      if (!sub) begin                                   // all-gather: send and keep own block
        req_uop.rd_en   = 1'b1;
        req_uop.rd_addr = ctx.in_base + grp_compact + sram_addr_t'(i);
        req_uop.wr_en   = 1'b1;
        req_uop.wr_addr = ctx.out_base + blk_row(blk({1'b0, n} - 1));
        req_uop.out_en  = 1'b1;
      end else begin                                    // receive, store (and forward)
        req_uop.use_in  = 1'b1;
        req_uop.wr_en   = 1'b1;
        req_uop.wr_addr = ctx.out_base + blk_row(blk(t_ag));
        req_uop.out_en  = (t_ag != {1'b0, n} - 2);
      end
    end
  end

  assign req_valid  = (state == S_RUN);
  assign done_valid = (state == S_DONE);
  assign done_ctx   = ctx;
  assign active     = (state != S_IDLE);

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ctx   <= '0;
      g     <= '0;
      s     <= '0;
      i     <= '0;
      sub   <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (!q_empty) begin
          ctx   <= q_head;
          g     <= '0;
          s     <= '0;
          i     <= '0;
          sub   <= 1'b0;
          state <= S_RUN;
        end
        S_RUN: if (grant) begin
          if (s == 0 && !sub) begin
            sub <= 1'b1;
          end else if (s != last_step) begin
            s <= s + 1'b1;
          end else begin
            s   <= '0;
            sub <= 1'b0;
            if (i != prog.msg_pkts - 1) begin
              i <= i + 1'b1;
            end else begin
              i <= '0;
              if (g != prog.groups - 1) g <= g + 1'b1;
              else                      state <= S_DONE;
            end
          end
        end
        S_DONE: if (done_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_ring_size: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_RUN |-> prog.ring_n >= 2 && prog.rank < prog.ring_n);
endmodule
