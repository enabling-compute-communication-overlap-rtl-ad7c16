// tb_ace_fsm: self-checking testbench of one ACE state machine, run as a ring of nodes.
//
// Four copies of the FSM (one per node, ranks 0..N-1, each sending to the next node) execute
// reduce-scatter, all-gather and all-reduce phases with various ring sizes, group counts and
// message lengths. A behavioural datapath per node executes each granted operation on integer
// data (reduce = integer add) and moves forwarded packets through a queue to the next node;
// grants are random and a receive is only granted when its packet has arrived. After two chunks
// per FSM the partitions must hold what the collective defines, computed directly from the
// initial data: the sum over all nodes of the block a node owns (reduce-scatter), the sum of
// every block (all-reduce), or every node's block in place (all-gather). The number of
// operations per chunk is checked against the schedule (N*G*M packets for reduce-scatter and
// all-gather, (2N-1)*G*M for all-reduce), and with every grant given it must take one
// operation per cycle.
module tb_ace_fsm;
  import ace_pkg::*;
  localparam int MAXN = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  fsm_prog_t  prog [MAXN];
  logic       q_push [MAXN], q_full [MAXN], req_valid [MAXN], grant [MAXN];
  logic       done_valid [MAXN], done_ready [MAXN], active [MAXN];
  uop_t       req_uop [MAXN];
  chunk_ctx_t q_ctx [MAXN], done_ctx [MAXN];
  int checks = 0, failures = 0;

  for (genvar n = 0; n < MAXN; n++) begin : g_node
    ace_fsm #(.FSM_ID(7), .QDEPTH(4)) dut (
      .clk(clk), .rst_n(rst_n), .prog(prog[n]),
      .q_push(q_push[n]), .q_ctx(q_ctx[n]), .q_full(q_full[n]),
      .req_valid(req_valid[n]), .req_uop(req_uop[n]), .grant(grant[n]),
      .done_valid(done_valid[n]), .done_ctx(done_ctx[n]), .done_ready(done_ready[n]),
      .active(active[n]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int mem  [MAXN][1024];
  int link [MAXN][$];         // packets waiting at node n, from node n-1
  int ops  [MAXN];
  int N;
  logic always_grant;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("MISMATCH %s at %0t", what, $time); end
  endtask

  // behavioural datapath and grant decision, on the falling edge
  always @(negedge clk) begin
    for (int n = 0; n < MAXN; n++) begin
      grant[n]      <= 1'b0;
      done_ready[n] <= done_valid[n];
    end
    if (rst_n) begin
      for (int n = 0; n < N; n++) begin
        uop_t u;
        int   v, x;
        u = req_uop[n];
        if (req_valid[n] && (!u.use_in || link[n].size() > 0) && (always_grant || $urandom_range(0, 3) != 0)) begin
          grant[n] <= 1'b1;
          ops[n]++;
          v = u.rd_en ? mem[n][u.rd_addr] : 0;
          x = u.use_in ? link[n].pop_front() : 0;
          if (u.reduce)      v = v + x;
          else if (u.use_in) v = x;
          if (u.wr_en) mem[n][u.wr_addr] = v;
          if (u.out_en) begin
            chk(u.out_port == prog[n].tx_port && u.fsm == 5'd7, "output port and tag");
            link[(n + 1) % N].push_back(v);
          end
        end
      end
    end
  end

  task automatic run_case(input phase_op_e op, input int n_ring, input int groups, input int msg, input logic fastmode);
    int m_in, m_out, base_in [2], base_out [2], cyc_start, cyc;
    int exp_ops, done_cnt [MAXN];
    N = n_ring;
    always_grant = fastmode;
    m_in  = (op == PH_ALL_GATHER) ? groups * msg : groups * n_ring * msg;
    m_out = (op == PH_REDUCE_SCATTER) ? groups * msg : groups * n_ring * msg;
    base_in  = '{10, 10 + m_in + 3};
    base_out = '{500, 500 + m_out + 5};
    exp_ops  = (op == PH_ALL_REDUCE) ? (2 * n_ring - 1) * groups * msg : n_ring * groups * msg;
    for (int n = 0; n < MAXN; n++) begin
      for (int r = 0; r < 1024; r++) mem[n][r] = (n + 1) * 100000 + r;
      link[n].delete();
      ops[n] = 0;
      done_cnt[n] = 0;
      prog[n] = '0;
      prog[n].enable = (n < n_ring);
      prog[n].op = op; prog[n].ring_n = 5'(n_ring); prog[n].rank = 5'(n);
      prog[n].groups = 6'(groups); prog[n].msg_pkts = 12'(msg);
      prog[n].tx_port = 3'd2; prog[n].rx_port = 3'd2;
    end
    // queue two chunks on each node
    for (int c = 0; c < 2; c++) begin
      @(negedge clk);
      for (int n = 0; n < n_ring; n++) begin
        q_push[n] = 1'b1;
        q_ctx[n] = '0; q_ctx[n].idx = 16'(c);
        q_ctx[n].in_base = sram_addr_t'(base_in[c]); q_ctx[n].out_base = sram_addr_t'(base_out[c]);
      end
      @(negedge clk);
      for (int n = 0; n < MAXN; n++) q_push[n] = 1'b0;
    end
    cyc_start = 0;
    for (cyc = 0; cyc < 20000; cyc++) begin
      @(posedge clk);
      for (int n = 0; n < n_ring; n++) if (done_valid[n] && done_ready[n]) begin
        chk(done_ctx[n].idx == 16'(done_cnt[n]), "chunks complete in queue order");
        done_cnt[n]++;
        if (done_cnt[n] == 1) chk(ops[n] == exp_ops, "operations per chunk");
        if (fastmode && n == 0 && done_cnt[n] == 1) chk(cyc - cyc_start <= exp_ops + 2, "one operation per cycle");
      end
      begin
        bit all_done;
        all_done = 1'b1;
        for (int n = 0; n < n_ring; n++) if (done_cnt[n] != 2) all_done = 1'b0;
        if (all_done) break;
      end
    end
    repeat (2) @(posedge clk);
    for (int n = 0; n < n_ring; n++) chk(done_cnt[n] == 2 && ops[n] == 2 * exp_ops, "both chunks done");
    // expected contents
    for (int c = 0; c < 2; c++) begin
      for (int n = 0; n < n_ring; n++) begin
        for (int g = 0; g < groups; g++) begin
          for (int b = 0; b < n_ring; b++) begin
            for (int i = 0; i < msg; i++) begin
              int e, row_full;
              row_full = g * n_ring * msg + b * msg + i;
              e = 0;
              if (op == PH_REDUCE_SCATTER) begin
                if (b == (n + 1) % n_ring) begin
                  for (int k = 0; k < n_ring; k++) e += (k + 1) * 100000 + base_in[c] + row_full;
                  chk(mem[n][base_out[c] + g * msg + i] == e, "reduce-scatter result");
                end
              end else if (op == PH_ALL_REDUCE) begin
                for (int k = 0; k < n_ring; k++) e += (k + 1) * 100000 + base_in[c] + row_full;
                chk(mem[n][base_out[c] + row_full] == e, "all-reduce result");
              end else begin
                int owner;
                owner = (b + n_ring - 1) % n_ring;
                e = (owner + 1) * 100000 + base_in[c] + g * msg + i;
                chk(mem[n][base_out[c] + row_full] == e, "all-gather result");
              end
            end
          end
        end
      end
    end
  endtask

  initial begin
    N = 0;
    always_grant = 1'b0;
    for (int n = 0; n < MAXN; n++) begin q_push[n] = 1'b0; q_ctx[n] = '0; prog[n] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_case(PH_REDUCE_SCATTER, 3, 2, 3, 1'b0);
    run_case(PH_ALL_REDUCE,     4, 2, 2, 1'b0);
    run_case(PH_ALL_GATHER,     3, 1, 4, 1'b0);
    run_case(PH_ALL_REDUCE,     2, 1, 3, 1'b0);
    run_case(PH_ALL_GATHER,     4, 2, 3, 1'b0);
    run_case(PH_ALL_REDUCE,     3, 2, 4, 1'b1);
    run_case(PH_REDUCE_SCATTER, 4, 1, 5, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
