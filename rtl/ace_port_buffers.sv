// ace_port_buffers: the input and output packet buffers of ACE's physical links (block #5).
//
// Output side: one FIFO of OUT_DEPTH packets per link. The datapath pushes a tagged packet into
// the FIFO of its link; the FIFO drains to the AFI through a valid/ready pair per link.
// out_free reports the free entries of each FIFO so that the control unit issues an operation
// only when its packet has room.
// Input side: a packet arriving on link l is steered by its FSM tag into a receive queue of
// RX_DEPTH packets owned by that FSM; link_in_ready[l] is low while that queue is full or while a
// lower-numbered link delivers to the same queue in the cycle. The FSM consumes its queue
// head with rx_pop/rx_pop_fsm; rx_head carries the popped packet in the same cycle.
// Buffers per physical link follow the paper; splitting the input side into per-FSM queues (so
// that chunks sharing a link never block each other) is this design's choice.
module ace_port_buffers
  import ace_pkg::*;
#(
  parameter int unsigned NUM_LINKS = 6,
  parameter int unsigned NUM_FSM   = 16,
  parameter int unsigned OUT_DEPTH = 8,
  parameter int unsigned RX_DEPTH  = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // from the datapath
  input  logic                      out_push,
  input  logic [PORT_W-1:0]         out_port,
  input  net_pkt_t                  out_pkt,
  output logic [NUM_LINKS-1:0][$clog2(OUT_DEPTH+1)-1:0] out_free,
  // output links
  output logic     [NUM_LINKS-1:0]  link_out_valid,
  output net_pkt_t [NUM_LINKS-1:0]  link_out_pkt,
  input  logic     [NUM_LINKS-1:0]  link_out_ready,
  // input links
  input  logic     [NUM_LINKS-1:0]  link_in_valid,
  input  net_pkt_t [NUM_LINKS-1:0]  link_in_pkt,
  output logic     [NUM_LINKS-1:0]  link_in_ready,
  // receive queues
  output logic     [NUM_FSM-1:0]    rx_nonempty,
  input  logic                      rx_pop,
  input  logic [FSM_ID_W-1:0]       rx_pop_fsm,
  output pkt_data_t                 rx_head
);
  localparam int unsigned OCW = $clog2(OUT_DEPTH + 1);
  localparam int unsigned RCW = $clog2(RX_DEPTH + 1);

  // ---------------------------------------------------------------- output side
  for (genvar l = 0; l < int'(NUM_LINKS); l++) begin : g_out
    logic           push, empty, full;
    logic [OCW-1:0] cnt;
    assign push = out_push && (out_port == PORT_W'(l));
    ace_fifo #(.WIDTH($bits(net_pkt_t)), .DEPTH(OUT_DEPTH)) u_fifo (
      .clk(clk), .rst_n(rst_n),
      .push(push), .wr_data(out_pkt),
      .pop(link_out_valid[l] && link_out_ready[l]), .rd_data(link_out_pkt[l]),
      .empty(empty), .full(full), .count(cnt)
    );
    assign link_out_valid[l] = !empty;
    assign out_free[l]       = OCW'(OUT_DEPTH) - cnt;
  end

  // ---------------------------------------------------------------- input side
  logic [NUM_FSM-1:0]            rx_full, rx_push;
  pkt_data_t [NUM_FSM-1:0]       rx_wdata, rx_rdata;

  always_comb begin
    rx_push       = '0;
    rx_wdata      = '0;
    link_in_ready = '0;
    for (int l = 0; l < int'(NUM_LINKS); l++) begin
      for (int f = 0; f < int'(NUM_FSM); f++) begin
        if (link_in_pkt[l].fsm == FSM_ID_W'(f) && !rx_full[f] && !rx_push[f]) begin
          link_in_ready[l] = 1'b1;
          if (link_in_valid[l]) begin
            rx_push[f]  = 1'b1;
            rx_wdata[f] = link_in_pkt[l].data;
          end
        end
      end
    end
  end

  for (genvar f = 0; f < int'(NUM_FSM); f++) begin : g_rx
    logic           empty;
    logic [RCW-1:0] cnt;
    ace_fifo #(.WIDTH(PKT_W), .DEPTH(RX_DEPTH)) u_fifo (
      .clk(clk), .rst_n(rst_n),
      .push(rx_push[f]), .wr_data(rx_wdata[f]),
      .pop(rx_pop && rx_pop_fsm == FSM_ID_W'(f)), .rd_data(rx_rdata[f]),
      .empty(empty), .full(rx_full[f]), .count(cnt)
    );
    assign rx_nonempty[f] = !empty;
  end

  assign rx_head = rx_rdata[rx_pop_fsm];

  a_push_has_room: assert property (@(posedge clk) disable iff (!rst_n)
    out_push |-> out_free[out_port] != '0);
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    rx_pop |-> rx_nonempty[rx_pop_fsm]);
endmodule
