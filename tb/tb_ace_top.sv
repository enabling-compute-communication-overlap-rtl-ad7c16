// tb_ace_top: end-to-end testbench of ACE, eight nodes in a 4x2x1 torus running a
// hierarchical all-reduce, every ACE at its default parameters (16 FSMs, 4 MB SRAM, 6 links).
//
// Each node has a behavioural main memory and its six links wired to its neighbours: links 0/1
// go around the local (in-package) ring of four in the two directions, 2/3 around the vertical
// ring of two (4/5 would be the horizontal ring, which has size one here and stays unused).
// The inter-package links (2..5) are throttled to accept a packet only one cycle in four, as a
// stand-in for their lower bandwidth. Main-memory writes are held off for the first 20000
// cycles so that finished chunks cannot leave and the SRAM slots run out.
// All nodes get the same program: the all-reduce runs in three phases (reduce-scatter in the
// local ring, all-reduce in the vertical ring, all-gather in the local ring; the horizontal
// phase of the paper's 3D torus disappears because that dimension has size one), four FSMs per
// phase, alternating ring direction, FSMs 12..15 unused. A ring of four is needed for packets
// that are stored and forwarded in the all-gather. The payload is NCH chunks
// of 64 KB of FP16 small integers, so the exact sums are known in advance; each node must end
// with the sum of all eight nodes' payloads at its destination address and one interrupt per
// chunk. The test also counts how often the design's mechanisms happen (resource stalls,
// waits for a free SRAM slot, several chunks in flight, phases overlapping, reductions,
// reduce-and-forward and store-and-forward, link back-pressure) and fails a mechanism that
// never happened.
module tb_ace_top;
  import ace_pkg::*;
  localparam int L = 4, V = 2, H = 1, NN = L * V * H;
  localparam int NFSM = 16, NLNK = 6;
  localparam int NCH = 20;                         // chunks in the payload
  localparam int CPK = 256;                        // packets per 64 KB chunk
  localparam longint SRC = 64'h10_0000, DST = 64'h80_0000;

  logic clk = 1'b0, rst_n = 1'b1;
  // a falling edge at time 1 so that every asynchronous reset acts before the first clock edge
  initial #1 rst_n = 1'b0;
  int   checks = 0, failures = 0;

  fsm_prog_t [NFSM-1:0] prog [NN];
  part_cfg_t [MAX_PHASES:0] part;
  logic [3:0][PHASE_W-1:0] nph;

  logic cmd_valid [NN], cmd_ready [NN], irq_valid [NN];
  ace_cmd_t cmd;
  ace_irq_t irq [NN];
  logic mem_rd_req_valid [NN], mem_rd_req_ready [NN], mem_rd_rsp_valid [NN], mem_rd_rsp_ready [NN];
  mem_addr_t mem_rd_req_addr [NN], mem_wr_addr [NN];
  pkt_data_t mem_rd_rsp_data [NN], mem_wr_data [NN];
  logic mem_wr_valid [NN], mem_wr_ready [NN];
  logic     [NLNK-1:0] lo_valid [NN], lo_ready [NN], li_valid [NN], li_ready [NN];
  net_pkt_t [NLNK-1:0] lo_pkt [NN], li_pkt [NN];
  logic     [NFSM-1:0] fsm_active [NN], fsm_stall [NN];
  logic     slot_wait [NN];
  logic     [NLNK-1:0] gate [NN];

  function automatic int nid(input int l, input int v, input int h);
    return ((l + L) % L) + L * (((v + V) % V) + V * ((h + H) % H));
  endfunction
  function automatic int nbr(input int n, input int p);
    int l, v, h, d;
    l = n % L; v = (n / L) % V; h = n / (L * V);
    d = (p % 2 == 0) ? 1 : -1;
    case (p / 2)
      0: return nid(l + d, v, h);
      1: return nid(l, v + d, h);
      default: return nid(l, v, h + d);
    endcase
  endfunction

  for (genvar n = 0; n < NN; n++) begin : g_node
    ace_top dut (
      .clk(clk), .rst_n(rst_n),
      .fsm_prog(prog[n]), .part_cfg(part), .nphases(nph),
      .cmd_valid(cmd_valid[n]), .cmd(cmd), .cmd_ready(cmd_ready[n]),
      .irq_valid(irq_valid[n]), .irq(irq[n]),
      .mem_rd_req_valid(mem_rd_req_valid[n]), .mem_rd_req_addr(mem_rd_req_addr[n]),
      .mem_rd_req_ready(mem_rd_req_ready[n]), .mem_rd_rsp_valid(mem_rd_rsp_valid[n]),
      .mem_rd_rsp_data(mem_rd_rsp_data[n]), .mem_rd_rsp_ready(mem_rd_rsp_ready[n]),
      .mem_wr_valid(mem_wr_valid[n]), .mem_wr_addr(mem_wr_addr[n]), .mem_wr_data(mem_wr_data[n]),
      .mem_wr_ready(mem_wr_ready[n]),
      .link_out_valid(lo_valid[n]), .link_out_pkt(lo_pkt[n]), .link_out_ready(lo_ready[n]),
      .link_in_valid(li_valid[n]), .link_in_pkt(li_pkt[n]), .link_in_ready(li_ready[n]),
      .fsm_active(fsm_active[n]), .fsm_stall(fsm_stall[n]), .slot_wait(slot_wait[n]));
  end

  // links: output p of node n feeds input p of its neighbour in that direction
  always_comb begin
    for (int n = 0; n < NN; n++) begin
      for (int p = 0; p < NLNK; p++) begin
        int m;
        m = nbr(n, p);
        li_valid[m][p] = lo_valid[n][p] && gate[n][p];
        li_pkt[m][p]   = lo_pkt[n][p];
        lo_ready[n][p] = li_ready[m][p] && gate[n][p];
      end
    end
  end

  always #5 clk = ~clk;

  int cycles = 0;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- payload
  function automatic int val(input int n, input int pkt, input int k);
    return (n * 7 + pkt * 3 + k * 5) % 61;
  endfunction
  function automatic logic [15:0] i2h(input int v);
    int e;
    if (v == 0) return 16'h0;
    e = 0;
    while ((v >> (e + 1)) != 0) e++;
    return {1'b0, 5'(e + 15), 10'((v << 10 >> e) & 10'h3ff)};
  endfunction
  function automatic pkt_data_t src_pkt(input int n, input int pkt);
    pkt_data_t p;
    for (int k = 0; k < PKT_W / 16; k++) p[k*16 +: 16] = i2h(val(n, pkt, k));
    return p;
  endfunction

  // ---------------------------------------------------------------- memories
  pkt_data_t mem [NN][longint];
  mem_addr_t rq [NN][$];
  logic      rd_fire [NN], rq_fire [NN], wr_fire [NN];
  mem_addr_t rq_addr [NN];

  always @(posedge clk) begin
    for (int n = 0; n < NN; n++) begin
      rd_fire[n] = mem_rd_rsp_valid[n] && mem_rd_rsp_ready[n];
      rq_fire[n] = mem_rd_req_valid[n] && mem_rd_req_ready[n];
      rq_addr[n] = mem_rd_req_addr[n];
      wr_fire[n] = mem_wr_valid[n] && mem_wr_ready[n];
      if (wr_fire[n]) mem[n][longint'(mem_wr_addr[n]) / 256] = mem_wr_data[n];
    end
  end
  always @(negedge clk) begin
    for (int n = 0; n < NN; n++) begin
      if (rd_fire[n]) void'(rq[n].pop_front());
      if (rq_fire[n]) rq[n].push_back(rq_addr[n]);
      rd_fire[n] = 1'b0; rq_fire[n] = 1'b0;
      mem_rd_rsp_valid[n] = rq[n].size() > 0;
      mem_rd_rsp_data[n]  = (rq[n].size() > 0 && mem[n].exists(longint'(rq[n][0]) / 256)) ?
                            mem[n][longint'(rq[n][0]) / 256] : '0;
      mem_rd_req_ready[n] = rq[n].size() < 8;
      mem_wr_ready[n]     = (cycles > 20000) && ($urandom_range(0, 7) != 0);
      for (int p = 0; p < NLNK; p++) gate[n][p] = (p < 2) ? 1'b1 : ($urandom_range(0, 3) == 0);
    end
  end

  // ---------------------------------------------------------------- mechanism counters
  longint n_stall = 0, n_slot_wait = 0, n_multi = 0, n_phase_overlap = 0, n_reduce = 0;
  longint n_red_fwd = 0, n_store_fwd = 0, n_backpressure = 0, n_irq = 0;
  bit     seen_irq [NN][NCH];
  always @(posedge clk) if (rst_n) begin
    cycles++;
    for (int n = 0; n < NN; n++) begin
      int act, phases_seen;
      if (fsm_stall[n] != '0) n_stall++;
      if (slot_wait[n]) n_slot_wait++;
      act = $countones(fsm_active[n]);
      if (act > 1) n_multi++;
      phases_seen = 0;
      for (int ph = 0; ph < 4; ph++)
        if ((fsm_active[n] & (16'hf << (4 * ph))) != 0) phases_seen++;
      if (phases_seen > 1) n_phase_overlap++;
      for (int p = 0; p < NLNK; p++) if (lo_valid[n][p] && !lo_ready[n][p]) n_backpressure++;
      if (irq_valid[n]) begin
        n_irq++;
        checks++;
        if (irq[n].tag != 8'h5a || int'(irq[n].idx) >= NCH || seen_irq[n][irq[n].idx]) begin
          failures++;
          $display("MISMATCH bad interrupt node %0d idx %0d", n, irq[n].idx);
        end else seen_irq[n][irq[n].idx] = 1'b1;
      end
    end
  end
  // operation mix, seen at node 0's datapath input
  always @(posedge clk) if (rst_n && g_node[0].dut.uop_valid) begin
    if (g_node[0].dut.uop.reduce) n_reduce++;
    if (g_node[0].dut.uop.reduce && g_node[0].dut.uop.out_en) n_red_fwd++;
    if (!g_node[0].dut.uop.reduce && g_node[0].dut.uop.use_in && g_node[0].dut.uop.out_en) n_store_fwd++;
  end

  task automatic mech(input string name, input longint cnt);
    checks++;
    $display("mechanism %-28s %0d", name, cnt);
    if (cnt == 0) begin failures++; $display("MISMATCH mechanism %s never happened", name); end
  endtask

  // ---------------------------------------------------------------- program and run
  initial begin
    int done_cnt, start_cycle;
    cmd = '0;
    for (int n = 0; n < NN; n++) begin
      int l, v, h;
      cmd_valid[n] = 1'b0;
      l = n % L; v = (n / L) % V; h = n / (L * V);
      for (int a = 0; a < NCH * CPK; a++) mem[n][longint'(SRC) / 256 + a] = src_pkt(n, a);
      for (int f = 0; f < NFSM; f++) begin
        int ph, dir, sz, pos;
        ph  = f / 4;
        dir = f % 2;
        sz  = (ph == 1) ? V : L;
        pos = (ph == 1) ? v : l;
        prog[n][f] = '0;
        prog[n][f].enable   = (ph < 3);
        prog[n][f].coll     = 2'd0;
        prog[n][f].phase    = 3'(ph);
        prog[n][f].op       = (ph == 0) ? PH_REDUCE_SCATTER : (ph == 2) ? PH_ALL_GATHER : PH_ALL_REDUCE;
        prog[n][f].ring_n   = 5'(sz);
        prog[n][f].rank     = 5'(dir == 0 ? pos : (sz - pos) % sz);
        prog[n][f].msg_pkts = 12'd32;                                   // 8 KB messages
        prog[n][f].groups   = (ph != 1) ? 6'(CPK / (32 * L)) :
                              6'(CPK / L / (32 * sz));
        prog[n][f].tx_port  = 3'(2 * (ph == 1 ? 1 : 0) + dir);
        prog[n][f].rx_port  = prog[n][f].tx_port;
      end
    end
    // partitions: phase 0 holds whole chunks, phases 1-2 a local-ring share, terminal whole chunks
    part[0] = '{base: 16'd0,     slot_pkts: 16'(CPK)};
    part[1] = '{base: 16'd4096,  slot_pkts: 16'(CPK / L)};
    part[2] = '{base: 16'd5120,  slot_pkts: 16'(CPK / L)};
    part[3] = '{base: 16'd6144,  slot_pkts: 16'(CPK)};
    part[4] = '{base: 16'd0,     slot_pkts: 16'd0};
    nph = '{default: 3'd3};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    cmd.coll = 2'd0; cmd.dtype = DT_FP16; cmd.src_addr = mem_addr_t'(SRC); cmd.dst_addr = mem_addr_t'(DST);
    cmd.num_chunks = 16'(NCH); cmd.tag = 8'h5a;
    for (int n = 0; n < NN; n++) cmd_valid[n] = 1'b1;
    #1;
    for (int n = 0; n < NN; n++) begin
      checks++;
      if (!cmd_ready[n]) begin failures++; $display("MISMATCH command not taken"); end
    end
    @(negedge clk);
    for (int n = 0; n < NN; n++) cmd_valid[n] = 1'b0;
    start_cycle = cycles;
    // wait for every interrupt
    done_cnt = 0;
    while (n_irq < NN * NCH) @(posedge clk);
    $display("all-reduce of %0d x 64 KB on %0d nodes took %0d cycles", NCH, NN, cycles - start_cycle);
    repeat (5) @(negedge clk);
    // results
    for (int n = 0; n < NN; n++) begin
      for (int a = 0; a < NCH * CPK; a++) begin
        pkt_data_t e, got;
        for (int k = 0; k < PKT_W / 16; k++) begin
          int s;
          s = 0;
          for (int m = 0; m < NN; m++) s += val(m, a, k);
          e[k*16 +: 16] = i2h(s);
        end
        got = mem[n].exists(longint'(DST) / 256 + a) ? mem[n][longint'(DST) / 256 + a] : '0;
        checks++;
        if (got !== e) begin
          failures++;
          if (failures < 5) $display("MISMATCH node %0d packet %0d", n, a);
        end
      end
      for (int c = 0; c < NCH; c++) begin
        checks++;
        if (!seen_irq[n][c]) begin failures++; $display("MISMATCH no interrupt node %0d chunk %0d", n, c); end
      end
    end
    mech("resource stall", n_stall);
    mech("wait for free SRAM slot", n_slot_wait);
    mech("several chunks in flight", n_multi);
    mech("phases overlapping", n_phase_overlap);
    mech("reduction", n_reduce);
    mech("reduce-and-forward", n_red_fwd);
    mech("store-and-forward", n_store_fwd);
    mech("link back-pressure", n_backpressure);
    mech("completion interrupt", n_irq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
