// vsw_pkg: types and constants shared by the switch-virtualization SoC.
//
// Word formats. A lane word (RX/TX queues, 417 bits) is an AXI4-Stream beat:
// 256-bit tdata, 32-bit tkeep, 128-bit tuser and tlast (256+32+128+1 = 417).
// A vS word (vS queues, 289 bits) is the same beat without tuser
// (256+32+1 = 289). The two widths 417 and 289 are the queue widths the paper
// prints; their split into fields is this design's reading of them.
// Byte 0 of a frame sits in tdata[7:0], byte i in tdata[8*i+7:8*i].
//
// A management word (146 bits) is {op, tgt, dev, addr, data}; the width is the
// paper's, the field layout is this design's own.
package vsw_pkg;

  // Sizes of the platform (Fig. 2 and Sec. IV of the paper).
  localparam int unsigned N_PHY      = 32;          // 100G RX/TX lanes
  localparam int unsigned N_PORTS    = N_PHY + 1;   // lanes + virtual vRX/vTX channel
  localparam int unsigned N_VS       = 26;          // vS placeholders
  localparam int unsigned PORT_ID_W  = 6;           // enough for 33 ports
  localparam int unsigned VS_ID_W    = 5;           // enough for 26 vS

  localparam int unsigned DATA_W     = 256;
  localparam int unsigned KEEP_W     = DATA_W / 8;
  localparam int unsigned USER_W     = 128;

  localparam int unsigned LANE_Q_DEPTH = 66;        // RX/TX queue words
  localparam int unsigned VS_Q_DEPTH   = 52;        // vS queue words

  // Lane (RX/TX) queue word: 417 bits.
  typedef struct packed {
    logic [DATA_W-1:0] tdata;
    logic [KEEP_W-1:0] tkeep;
    logic [USER_W-1:0] tuser;
    logic              tlast;
  } lane_word_t;

  // vS queue word: 289 bits.
  typedef struct packed {
    logic [DATA_W-1:0] tdata;
    logic [KEEP_W-1:0] tkeep;
    logic              tlast;
  } vs_word_t;

  localparam int unsigned LANE_W = $bits(lane_word_t);
  localparam int unsigned VS_W   = $bits(vs_word_t);

  // tuser of a word leaving the OPI towards a TX queue.
  localparam int unsigned TUSER_TXPORT_LSB = 0;     // [5:0]  TX port
  localparam int unsigned TUSER_DEV_LSB    = 8;     // [12:8] vS that handled it

  // 802.1Q.
  localparam logic [15:0] TPID_8021Q = 16'h8100;

  // Management word: 146 bits.
  typedef enum logic [1:0] {
    MI_NOP   = 2'd0,
    MI_WRITE = 2'd1,
    MI_READ  = 2'd2,
    MI_RESP  = 2'd3
  } mi_op_e;

  typedef enum logic [2:0] {
    MI_TGT_INGRESS = 3'd0,   // IPI Ingress table
    MI_TGT_EGRESS  = 3'd1,   // OPI Egress table
    MI_TGT_VS      = 3'd2,   // relayed to vS[dev]
    MI_TGT_COUNTER = 3'd3    // IPI/OPI packet counters (read only)
  } mi_tgt_e;

  typedef struct packed {
    mi_op_e       op;
    mi_tgt_e      tgt;
    logic [4:0]   dev;
    logic [7:0]   addr;
    logic [127:0] data;
  } mi_word_t;

  localparam int unsigned MI_W = $bits(mi_word_t);

  // Ingress table entry: forward packets of VLAN vid arriving on a port in
  // port_mask to vS dev_id. No matching entry means drop.
  typedef struct packed {
    logic                valid;
    logic [11:0]         vid;
    logic [N_PORTS-1:0]  port_mask;
    logic [VS_ID_W-1:0]  dev_id;
  } ig_entry_t;

  // Egress table entry: packets of VLAN vid coming from vS dev_id go to TX port
  // tx_port. No matching entry means drop.
  typedef struct packed {
    logic                 valid;
    logic [11:0]          vid;
    logic [VS_ID_W-1:0]   dev_id;
    logic [PORT_ID_W-1:0] tx_port;
  } eg_entry_t;

  // VLAN parse of the first beat of a frame.
  typedef struct packed {
    logic        has_tag;
    logic [11:0] vid;
  } vlan_t;

  function automatic vlan_t parse_vlan(input logic [DATA_W-1:0] d,
                                       input logic [KEEP_W-1:0] k);
    vlan_t v;
    logic [15:0] tpid;
    tpid     = {d[12*8 +: 8], d[13*8 +: 8]};
    v.has_tag = (&k[15:0]) && (tpid == TPID_8021Q);
    v.vid    = {d[14*8 +: 4], d[15*8 +: 8]};
    return v;
  endfunction

endpackage
