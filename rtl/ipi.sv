// ipi: Input Port Interface. Decides for every packet coming from the RX
// queues which virtual switch (vS) gets it, or drops it.
//
// The first word of each packet is parsed for an 802.1Q tag (TPID 0x8100 in
// bytes 12-13, VLAN id in the low 12 bits of bytes 14-15). The VLAN id and the
// ingress port (in_src, the index of the RX queue the mux served) are looked
// up in the Ingress table, ENTRIES entries searched in parallel, lowest index
// first. An entry hits when it is valid, its vid equals the packet's and its
// port_mask has the ingress port's bit set; its action is "forward to vS
// dev_id". A packet without a tag, without a hit, or whose hit names a vS
// that does not exist is dropped: its words are consumed and nothing is sent.
// The decision taken on the first word holds for the whole packet.
//
// Forwarded words leave through a one-word output register with the vS index
// on out_dev and tuser removed (vS queues are 289 bits wide): one cycle of
// latency, one word per cycle. Four 32-bit counters (packets seen, forwarded,
// dropped untagged, dropped on a miss) are readable by the management
// interface, which also writes and reads the table through the tbl_* ports.
//
// From the paper: VLAN parsing, the Ingress table with forward(device id) and
// drop actions, matching on the VLAN tag with the ingress port taken into
// account ("vS instances may belong to the same VLAN, as long as they do not
// share the same physical ingress ports"), and drop when no device id is
// found. Table size, the port-mask form of the key, first-hit priority, the
// counters and the pipeline are this design's own.
module ipi
  import vsw_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned NUM_VS  = N_VS,
  parameter int unsigned TBL_AW  = $clog2(ENTRIES)
) (
  input  logic                 clk,
  input  logic                 rst_n,

  input  logic                 in_valid,
  output logic                 in_ready,
  input  lane_word_t           in_word,
  input  logic [PORT_ID_W-1:0] in_src,

  output logic                 out_valid,
  input  logic                 out_ready,
  output vs_word_t             out_word,
  output logic [VS_ID_W-1:0]   out_dev,

  input  logic                 tbl_we,
  input  logic [TBL_AW-1:0]    tbl_waddr,
  input  ig_entry_t            tbl_wdata,
  input  logic [TBL_AW-1:0]    tbl_raddr,
  output ig_entry_t            tbl_rdata,

  output logic [31:0]          cnt_pkts,
  output logic [31:0]          cnt_fwd,
  output logic [31:0]          cnt_drop_untagged,
  output logic [31:0]          cnt_drop_miss
);
  ig_entry_t table_q [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) table_q[i] <= '0;
    end else if (tbl_we) begin
      table_q[tbl_waddr] <= tbl_wdata;
    end
  end
  assign tbl_rdata = table_q[tbl_raddr];

  // ---------------- parse and look up (first word) ----------------
  vlan_t              vlan;
  logic               hit;
  logic [VS_ID_W-1:0] hit_dev;

  assign vlan = parse_vlan(in_word.tdata, in_word.tkeep);

  always_comb begin
    hit     = 1'b0;
    hit_dev = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (table_q[i].valid && table_q[i].vid == vlan.vid &&
          table_q[i].port_mask[in_src] && int'(table_q[i].dev_id) < NUM_VS) begin
        hit     = 1'b1;
        hit_dev = table_q[i].dev_id;
      end
    end
  end

  // ---------------- per-packet decision ----------------
  logic               sop;          // next word is the first of a packet
  logic               drop_q;
  logic [VS_ID_W-1:0] dev_q;
  logic               drop_c;
  logic [VS_ID_W-1:0] dev_c;

  assign drop_c = sop ? !(vlan.has_tag && hit) : drop_q;
  assign dev_c  = sop ? hit_dev : dev_q;

  // Dropped words are always taken; forwarded ones wait for the output register.
  assign in_ready = drop_c || !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sop               <= 1'b1;
      drop_q            <= 1'b0;
      dev_q             <= '0;
      out_valid         <= 1'b0;
      out_word          <= '0;
      out_dev           <= '0;
      cnt_pkts          <= '0;
      cnt_fwd           <= '0;
      cnt_drop_untagged <= '0;
      cnt_drop_miss     <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        sop    <= in_word.tlast;
        drop_q <= drop_c;
        dev_q  <= dev_c;
        if (!drop_c) begin
          out_valid      <= 1'b1;
          out_word.tdata <= in_word.tdata;
          out_word.tkeep <= in_word.tkeep;
          out_word.tlast <= in_word.tlast;
          out_dev        <= dev_c;
        end
        if (sop) begin
          cnt_pkts <= cnt_pkts + 1;
          if (!vlan.has_tag)  cnt_drop_untagged <= cnt_drop_untagged + 1;
          else if (!hit)     cnt_drop_miss     <= cnt_drop_miss + 1;
          else               cnt_fwd           <= cnt_fwd + 1;
        end
      end
    end
  end

endmodule
