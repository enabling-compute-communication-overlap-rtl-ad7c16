// ace_pkg: types and constants shared by the Accelerator Collectives Engine (ACE).
//
// ACE moves data in packets of 256 bytes. Inside the engine a packet travels as four 64-byte
// lanes side by side (one lane per SRAM bank and per ALU unit), so one whole packet moves per
// clock. Addresses into the ACE SRAM count packet rows. The packet size (256 B) and the 64-byte
// bus width follow the paper; the field widths below are this design's own choices, sized with
// headroom above the default configuration (16 FSMs, 4 MB SRAM, 6 links).
package ace_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned PKT_BYTES   = 256;                 // packet size (paper)
  parameter int unsigned BUS_BYTES   = 64;                  // SRAM / ALU bus width (paper)
  parameter int unsigned LANES       = PKT_BYTES / BUS_BYTES; // 4 lanes = 4 banks = 4 ALU units
  parameter int unsigned LANE_W      = BUS_BYTES * 8;        // 512 bits
  parameter int unsigned PKT_W       = PKT_BYTES * 8;        // 2048 bits

  parameter int unsigned FSM_ID_W    = 5;   // up to 32 FSMs
  parameter int unsigned PORT_W      = 3;   // up to 8 links
  parameter int unsigned SRAM_ADDR_W = 16;  // up to 65536 packet rows (16 MB)
  parameter int unsigned SLOT_W      = 5;   // up to 32 chunk slots
  parameter int unsigned MAX_PHASES  = 4;   // 3D-torus all-reduce uses 4 phases (paper)
  parameter int unsigned PHASE_W     = 3;   // phase index 0..MAX_PHASES (terminal included)
  parameter int unsigned RING_W      = 5;   // ring size / rank up to 31
  parameter int unsigned MSG_W       = 12;  // packets per message
  parameter int unsigned GRP_W       = 6;   // message groups per chunk
  parameter int unsigned MEM_ADDR_W  = 40;  // byte address in NPU main memory
  parameter int unsigned TAG_W       = 8;
  parameter int unsigned IDX_W       = 16;  // chunk index inside a payload

  typedef logic [PKT_W-1:0]       pkt_data_t;
  typedef logic [SRAM_ADDR_W-1:0] sram_addr_t;
  typedef logic [MEM_ADDR_W-1:0]  mem_addr_t;
  typedef logic [1:0]             coll_id_t;   // which programmed collective a command runs

  // Element type of the reduction.
  typedef enum logic [0:0] {DT_FP16 = 1'b0, DT_FP32 = 1'b1} dtype_e;

  // What one FSM does in its phase.
  typedef enum logic [1:0] {
    PH_REDUCE_SCATTER = 2'd0,
    PH_ALL_GATHER     = 2'd1,
    PH_ALL_REDUCE     = 2'd2
  } phase_op_e;

  // A packet on a link. The tag names the FSM that sent it; the same FSM number handles it
  // on the receiving node, since every node is programmed with the same schedule.
  typedef struct packed {
    logic [FSM_ID_W-1:0] fsm;
    pkt_data_t           data;
  } net_pkt_t;

  // Collective command from the NPU.
  typedef struct packed {
    coll_id_t            coll;        // programmed collective to run
    dtype_e              dtype;
    mem_addr_t           src_addr;    // payload in main memory
    mem_addr_t           dst_addr;    // where the results go
    logic [IDX_W-1:0]    num_chunks;  // payload size in chunks
    logic [TAG_W-1:0]    tag;         // echoed in the completion interrupt
  } ace_cmd_t;

  // Completion interrupt information, one per chunk.
  typedef struct packed {
    logic [TAG_W-1:0]    tag;
    logic [IDX_W-1:0]    idx;
  } ace_irq_t;

  // Context of a chunk, as held in the FSM queues.
  typedef struct packed {
    logic [SLOT_W-1:0]   slot;
    coll_id_t            coll;
    dtype_e              dtype;
    logic [PHASE_W-1:0]  phase;      // phase being (or just) executed
    sram_addr_t          in_base;    // this phase's data in its partition
    sram_addr_t          out_base;   // next partition: where this phase leaves its result
    mem_addr_t           mem_src;
    mem_addr_t           mem_dst;
    logic [TAG_W-1:0]    tag;
    logic [IDX_W-1:0]    idx;
    logic [IDX_W-1:0]    seq;        // creation order, decides the FSM of every phase
  } chunk_ctx_t;

  // Program of one FSM: which phase of which collective it runs, and how.
  typedef struct packed {
    logic                  enable;
    coll_id_t              coll;
    logic [PHASE_W-1:0]    phase;
    phase_op_e             op;
    logic [RING_W-1:0]     ring_n;    // nodes in the ring of this phase (>= 2)
    logic [RING_W-1:0]     rank;      // this node's position in that ring
    logic [GRP_W-1:0]      groups;    // groups of ring_n messages per chunk
    logic [MSG_W-1:0]      msg_pkts;  // packets per message
    logic [PORT_W-1:0]     tx_port;   // output link toward the next ring node
    logic [PORT_W-1:0]     rx_port;   // input link from the previous ring node
  } fsm_prog_t;

  // One SRAM partition: base row and rows per chunk slot.
  typedef struct packed {
    sram_addr_t base;
    sram_addr_t slot_pkts;
  } part_cfg_t;

  // One packet operation for the datapath.
  typedef struct packed {
    logic                rd_en;     // read a packet row of the SRAM
    sram_addr_t          rd_addr;
    logic                use_in;    // take a packet from the datapath input (receive queue / TX DMA)
    logic                reduce;    // add SRAM data and input packet in the ALU
    logic                wr_en;     // write the result to the SRAM
    sram_addr_t          wr_addr;
    logic                out_en;    // push the result into an output port buffer
    logic [PORT_W-1:0]   out_port;
    logic                to_dma;    // hand the SRAM data to the RX DMA
    dtype_e              dtype;
    logic [FSM_ID_W-1:0] fsm;       // tag for the outgoing packet
  } uop_t;

endpackage
