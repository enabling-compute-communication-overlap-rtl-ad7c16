// tb_ace_port_buffers: self-checking testbench of the ACE per-link port buffers.
//
// Output side: random packets are pushed to random links while the links drain with random
// back-pressure; each link must deliver its packets in push order, out_free must equal the
// depth minus what the testbench has counted in, and a full buffer must hold its contents.
// Input side: packets tagged for random FSMs arrive on random links with random pops; each FSM
// queue must return its own packets in arrival order, a full queue must refuse (ready low),
// and two links delivering to the same FSM in one cycle must be served one at a time.
module tb_ace_port_buffers;
  import ace_pkg::*;
  localparam int unsigned NL = 6, NF = 16, OD = 8, RD = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic out_push = 1'b0;
  logic [PORT_W-1:0] out_port = '0;
  net_pkt_t out_pkt = '0;
  logic [NL-1:0][$clog2(OD+1)-1:0] out_free;
  logic [NL-1:0] link_out_valid, link_out_ready = '0, link_in_valid = '0, link_in_ready;
  net_pkt_t [NL-1:0] link_out_pkt, link_in_pkt = '0;
  logic [NF-1:0] rx_nonempty;
  logic rx_pop = 1'b0;
  logic [FSM_ID_W-1:0] rx_pop_fsm = '0;
  pkt_data_t rx_head;
  int checks = 0, failures = 0;

  ace_port_buffers #(.NUM_LINKS(NL), .NUM_FSM(NF), .OUT_DEPTH(OD), .RX_DEPTH(RD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  net_pkt_t  oq [NL][$];
  pkt_data_t iq [NF][$];
  int        ocnt [NL];

  function automatic pkt_data_t rnd_data();
    pkt_data_t p;
    for (int k = 0; k < PKT_W / 32; k++) p[k*32 +: 32] = $urandom();
    return p;
  endfunction

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("MISMATCH %s at %0t", what, $time); end
  endtask

  initial begin
    int sent = 0, got = 0;
    foreach (ocnt[l]) ocnt[l] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // ---------------- output side
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      for (int l = 0; l < NL; l++) chk(int'(out_free[l]) == OD - ocnt[l], "out_free");
      // decide pushes and drains
      out_push = 1'b0;
      if (cyc < 2500 && $urandom_range(0, 1)) begin
        int l;
        l = $urandom_range(0, NL - 1);
        if (ocnt[l] < OD) begin
          out_push = 1'b1; out_port = PORT_W'(l);
          out_pkt.fsm = FSM_ID_W'($urandom_range(0, NF - 1)); out_pkt.data = rnd_data();
        end
      end
      for (int l = 0; l < NL; l++) link_out_ready[l] = (cyc > 300) && ($urandom_range(0, 3) == 0);
      @(posedge clk);
      for (int l = 0; l < NL; l++) begin
        if (link_out_valid[l] && link_out_ready[l]) begin
          chk(oq[l].size() > 0 && link_out_pkt[l] == oq[l][0], "output order");
          if (oq[l].size() > 0) void'(oq[l].pop_front());
          ocnt[l]--;
          got++;
        end
      end
      if (out_push) begin oq[out_port].push_back(out_pkt); ocnt[out_port]++; sent++; end
    end
    @(negedge clk);
    link_out_ready = '0;
    chk(sent == got && sent > 500, "all output packets delivered");
    // ---------------- input side
    got = 0; sent = 0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      logic [NL-1:0] acc;
      @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        link_in_valid[l] = (cyc < 3500) && $urandom_range(0, 1);
        link_in_pkt[l].fsm  = FSM_ID_W'((cyc % 500 < 50) ? 3 : $urandom_range(0, NF - 1));
        link_in_pkt[l].data = rnd_data();
      end
      rx_pop_fsm = FSM_ID_W'($urandom_range(0, NF - 1));
      rx_pop     = (cyc > 200) && rx_nonempty[rx_pop_fsm] && $urandom_range(0, 1);
      #1;
      // expected readiness: room in the target queue, and no lower link targeting it
      for (int l = 0; l < NL; l++) begin
        logic lower;
        lower = 1'b0;
        for (int j = 0; j < l; j++)
          if (link_in_pkt[j].fsm == link_in_pkt[l].fsm && link_in_valid[j] && link_in_ready[j]) lower = 1'b1;
        chk(link_in_ready[l] == (iq[link_in_pkt[l].fsm].size() < RD && !lower), "input ready");
      end
      if (rx_pop) begin
        chk(iq[rx_pop_fsm].size() > 0 && rx_head == iq[rx_pop_fsm][0], "receive queue order");
        if (iq[rx_pop_fsm].size() > 0) void'(iq[rx_pop_fsm].pop_front());
        got++;
      end
      acc = link_in_valid & link_in_ready;
      for (int l = 0; l < NL; l++) if (acc[l]) begin iq[link_in_pkt[l].fsm].push_back(link_in_pkt[l].data); sent++; end
      for (int f = 0; f < NF; f++) chk(rx_nonempty[f] == (iq[f].size() > 0) || rx_pop || acc != 0, "nonempty");
    end
    chk(got > 500, "packets received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
