// opi: Output Port Interface. Decides for every packet a virtual switch (vS)
// has sent which TX port gets it, or drops it.
//
// Packets reach the OPI through the round-robin mux over the vS output queues,
// which also supplies the index of the queue served (in_dev): that index is
// the device id the IPI gave the packet. The first word is parsed for its
// 802.1Q VLAN id, and (VLAN id, device id) is looked up in the Egress table,
// ENTRIES entries searched in parallel, lowest index first. A hit forwards the
// packet to TX port tx_port (port N_PHY is the virtual vTX channel). A packet
// without a tag, without a hit, or whose hit names a port that does not exist
// is dropped, so a vS can only reach the network segments its entries allow.
// The decision taken on the first word holds for the whole packet.
//
// Forwarded words leave through a one-word output register as 417-bit lane
// words with tuser carrying the TX port (bits 5:0) and the device id (bits
// 12:8); out_port selects the TX queue. One cycle of latency, one word per
// cycle. Four 32-bit counters (packets seen, forwarded, dropped untagged,
// dropped on a miss) are readable by the management interface, which also
// writes and reads the table through the tbl_* ports.
//
// From the paper: iterating over the vS output buffers, the Egress table with
// forward(TX port) and drop actions matched on VLAN and device id. Table size,
// first-hit priority, the tuser layout, the counters and the pipeline are this
// design's own.
module opi
  import vsw_pkg::*;
#(
  parameter int unsigned ENTRIES   = 32,
  parameter int unsigned NUM_PORTS = N_PORTS,
  parameter int unsigned TBL_AW    = $clog2(ENTRIES)
) (
  input  logic                 clk,
  input  logic                 rst_n,

  input  logic                 in_valid,
  output logic                 in_ready,
  input  vs_word_t             in_word,
  input  logic [VS_ID_W-1:0]   in_dev,

  output logic                 out_valid,
  input  logic                 out_ready,
  output lane_word_t           out_word,
  output logic [PORT_ID_W-1:0] out_port,

  input  logic                 tbl_we,
  input  logic [TBL_AW-1:0]    tbl_waddr,
  input  eg_entry_t            tbl_wdata,
  input  logic [TBL_AW-1:0]    tbl_raddr,
  output eg_entry_t            tbl_rdata,

  output logic [31:0]          cnt_pkts,
  output logic [31:0]          cnt_fwd,
  output logic [31:0]          cnt_drop_untagged,
  output logic [31:0]          cnt_drop_miss
);
  eg_entry_t table_q [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) table_q[i] <= '0;
    end else if (tbl_we) begin
      table_q[tbl_waddr] <= tbl_wdata;
    end
  end
  assign tbl_rdata = table_q[tbl_raddr];

  // ---------------- parse and look up (first word) ----------------
  vlan_t                vlan;
  logic                 hit;
  logic [PORT_ID_W-1:0] hit_port;

  assign vlan = parse_vlan(in_word.tdata, in_word.tkeep);

  always_comb begin
    hit      = 1'b0;
    hit_port = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (table_q[i].valid && table_q[i].vid == vlan.vid &&
          table_q[i].dev_id == in_dev && int'(table_q[i].tx_port) < NUM_PORTS) begin
        hit      = 1'b1;
        hit_port = table_q[i].tx_port;
      end
    end
  end

  // ---------------- per-packet decision ----------------
  logic                 sop;
  logic                 drop_q;
  logic [PORT_ID_W-1:0] port_q;
  logic                 drop_c;
  logic [PORT_ID_W-1:0] port_c;

  assign drop_c = sop ? !(vlan.has_tag && hit) : drop_q;
  assign port_c = sop ? hit_port : port_q;

  assign in_ready = drop_c || !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sop               <= 1'b1;
      drop_q            <= 1'b0;
      port_q            <= '0;
      out_valid         <= 1'b0;
      out_word          <= '0;
      out_port          <= '0;
      cnt_pkts          <= '0;
      cnt_fwd           <= '0;
      cnt_drop_untagged <= '0;
      cnt_drop_miss     <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        sop    <= in_word.tlast;
        drop_q <= drop_c;
        port_q <= port_c;
        if (!drop_c) begin
          out_valid      <= 1'b1;
          out_word.tdata <= in_word.tdata;
          out_word.tkeep <= in_word.tkeep;
          out_word.tlast <= in_word.tlast;
          out_word.tuser <= '0;
          out_word.tuser[TUSER_TXPORT_LSB +: PORT_ID_W] <= port_c;
          out_word.tuser[TUSER_DEV_LSB +: VS_ID_W]      <= in_dev;
          out_port       <= port_c;
        end
        if (sop) begin
          cnt_pkts <= cnt_pkts + 1;
          if (!vlan.has_tag) cnt_drop_untagged <= cnt_drop_untagged + 1;
          else if (!hit)     cnt_drop_miss     <= cnt_drop_miss + 1;
          else               cnt_fwd           <= cnt_fwd + 1;
        end
      end
    end
  end

endmodule
