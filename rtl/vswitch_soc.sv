// vswitch_soc: ASIC part of the hybrid FPGA-ASIC switch-virtualization SoC.
//
// Packets from NUM_PHY 100G lanes are steered by VLAN into NUM_VS virtual
// switches (vS) that live in the FPGA fabric, and the vS results are steered
// back to the lanes. Data path, left to right:
//
//   rx lane i --[RX queue i, rx_clk[i] -> clk]--+
//   vTX loop  --[vRX queue, clk -> clk]---------+-> RR mux -> IPI -> demux
//      -> [vS input queue d, clk -> fpga_clk] -> vs_rx_* (to vS d, off this block)
//   vs_tx_* (from vS d) -> [vS output queue d, fpga_clk -> clk]
//      -> RR mux -> OPI -> demux -> [TX queue p, clk -> tx_clk[p]] -> tx lane p
//                                -> [vTX queue, clk -> clk] -> vRX queue
//
// With the defaults that is 33 + 26 + 26 + 33 = 118 queues: 66-word x 417-bit
// lane queues and 52-word x 289-bit vS queues. TX port NUM_PHY is the virtual
// channel: what the OPI sends there re-enters the IPI as coming from ingress
// port NUM_PHY, so a packet can pass through two vS in turn (loopback
// switching). The management interface (MI) gives the external control layer
// access to both tables, the counters, and through per-vS channels to the vS.
//
// Clocks: clk is the ASIC core clock (1 GHz in the paper), fpga_clk the vS
// fabric clock, rx_clk/tx_clk the lane clocks. Every queue is a dual-clock
// queue, so the clocks may be unrelated. rst_n is asynchronous, active low,
// shared by all domains, and must be released synchronously to each clock by
// the surrounding system. The MI channels run on clk.
//
// The virtual switches themselves, the PHYs and the control software are not
// part of this block; their signals are ports. The structure and sizes follow
// the paper; the handshakes, the round-robin order, the single shared reset
// and the loopback wiring of vTX into vRX are this design's reading.
module vswitch_soc
  import vsw_pkg::*;
#(
  parameter int unsigned NUM_PHY    = N_PHY,
  parameter int unsigned NUM_VS     = N_VS,
  parameter int unsigned LANE_DEPTH = LANE_Q_DEPTH,
  parameter int unsigned VS_DEPTH   = VS_Q_DEPTH,
  parameter int unsigned IG_ENTRIES = 32,
  parameter int unsigned EG_ENTRIES = 32
) (
  input  logic        clk,
  input  logic        fpga_clk,
  input  logic        rst_n,

  // PHY side
  input  logic        rx_clk   [NUM_PHY],
  input  logic        rx_valid [NUM_PHY],
  output logic        rx_ready [NUM_PHY],
  input  lane_word_t  rx_word  [NUM_PHY],
  input  logic        tx_clk   [NUM_PHY],
  output logic        tx_valid [NUM_PHY],
  input  logic        tx_ready [NUM_PHY],
  output lane_word_t  tx_word  [NUM_PHY],

  // vS array side (fpga_clk)
  output logic        vs_rx_valid [NUM_VS],
  input  logic        vs_rx_ready [NUM_VS],
  output vs_word_t    vs_rx_word  [NUM_VS],
  input  logic        vs_tx_valid [NUM_VS],
  output logic        vs_tx_ready [NUM_VS],
  input  vs_word_t    vs_tx_word  [NUM_VS],

  // Control layer (clk)
  input  logic        mi_cmd_valid,
  output logic        mi_cmd_ready,
  input  mi_word_t    mi_cmd,
  output logic        mi_rsp_valid,
  input  logic        mi_rsp_ready,
  output mi_word_t    mi_rsp,
  output logic        vs_ctl_valid  [NUM_VS],
  input  logic        vs_ctl_ready  [NUM_VS],
  output mi_word_t    vs_ctl_word   [NUM_VS],
  input  logic        vs_ctlr_valid [NUM_VS],
  output logic        vs_ctlr_ready [NUM_VS],
  input  mi_word_t    vs_ctlr_word  [NUM_VS]
);
  localparam int unsigned NP     = NUM_PHY + 1;                 // ports incl. virtual
  localparam int unsigned P_IDXW = (NP > 1) ? $clog2(NP) : 1;
  localparam int unsigned V_IDXW = (NUM_VS > 1) ? $clog2(NUM_VS) : 1;
  localparam int unsigned IG_AW  = $clog2(IG_ENTRIES);
  localparam int unsigned EG_AW  = $clog2(EG_ENTRIES);

  // ======================= ingress =======================
  logic              inq_valid [NP];
  logic              inq_ready [NP];
  logic [LANE_W-1:0] inq_data  [NP];
  logic              inq_last  [NP];

  // loopback: vTX queue output feeds the vRX queue input
  logic              vtx_valid, vtx_ready;
  logic [LANE_W-1:0] vtx_data;

  for (genvar i = 0; i < NUM_PHY; i++) begin : g_rxq
    async_fifo #(.WIDTH(LANE_W), .DEPTH(LANE_DEPTH)) u_q (
      .wclk(rx_clk[i]), .wrst_n(rst_n), .wvalid(rx_valid[i]), .wready(rx_ready[i]),
      .wdata(rx_word[i]),
      .rclk(clk), .rrst_n(rst_n), .rvalid(inq_valid[i]), .rready(inq_ready[i]),
      .rdata(inq_data[i]));
  end

  async_fifo #(.WIDTH(LANE_W), .DEPTH(LANE_DEPTH)) u_vrx_q (
    .wclk(clk), .wrst_n(rst_n), .wvalid(vtx_valid), .wready(vtx_ready), .wdata(vtx_data),
    .rclk(clk), .rrst_n(rst_n), .rvalid(inq_valid[NUM_PHY]), .rready(inq_ready[NUM_PHY]),
    .rdata(inq_data[NUM_PHY]));

  always_comb begin
    for (int unsigned i = 0; i < NP; i++) inq_last[i] = inq_data[i][0];
  end

  logic              ing_valid, ing_ready, ing_last;
  logic [LANE_W-1:0] ing_data;
  logic [P_IDXW-1:0] ing_src;

  axis_rr_mux #(.N(NP), .WIDTH(LANE_W)) u_in_mux (
    .clk, .rst_n,
    .in_valid(inq_valid), .in_ready(inq_ready), .in_data(inq_data), .in_last(inq_last),
    .out_valid(ing_valid), .out_ready(ing_ready), .out_data(ing_data),
    .out_last(ing_last), .out_src(ing_src));

  logic               ipi_valid, ipi_ready;
  vs_word_t           ipi_word;
  logic [VS_ID_W-1:0] ipi_dev;

  logic              ig_we;
  logic [IG_AW-1:0]  ig_waddr, ig_raddr;
  ig_entry_t         ig_wdata, ig_rdata;
  logic [31:0]       ipi_cnt [4];

  ipi #(.ENTRIES(IG_ENTRIES), .NUM_VS(NUM_VS)) u_ipi (
    .clk, .rst_n,
    .in_valid(ing_valid), .in_ready(ing_ready), .in_word(lane_word_t'(ing_data)),
    .in_src(PORT_ID_W'(ing_src)),
    .out_valid(ipi_valid), .out_ready(ipi_ready), .out_word(ipi_word), .out_dev(ipi_dev),
    .tbl_we(ig_we), .tbl_waddr(ig_waddr), .tbl_wdata(ig_wdata),
    .tbl_raddr(ig_raddr), .tbl_rdata(ig_rdata),
    .cnt_pkts(ipi_cnt[0]), .cnt_fwd(ipi_cnt[1]),
    .cnt_drop_untagged(ipi_cnt[2]), .cnt_drop_miss(ipi_cnt[3]));

  logic            vsq_in_valid [NUM_VS];
  logic            vsq_in_ready [NUM_VS];
  logic [VS_W-1:0] vsq_in_data;
  logic            vsq_in_last;

  axis_demux #(.N(NUM_VS), .WIDTH(VS_W)) u_vs_demux (
    .clk, .rst_n,
    .in_valid(ipi_valid), .in_ready(ipi_ready), .in_data(ipi_word),
    .in_last(ipi_word.tlast), .in_dest(V_IDXW'(ipi_dev)),
    .out_valid(vsq_in_valid), .out_ready(vsq_in_ready), .out_data(vsq_in_data),
    .out_last(vsq_in_last));

  for (genvar d = 0; d < NUM_VS; d++) begin : g_vsinq
    logic [VS_W-1:0] rd;
    async_fifo #(.WIDTH(VS_W), .DEPTH(VS_DEPTH)) u_q (
      .wclk(clk), .wrst_n(rst_n), .wvalid(vsq_in_valid[d]), .wready(vsq_in_ready[d]),
      .wdata(vsq_in_data),
      .rclk(fpga_clk), .rrst_n(rst_n), .rvalid(vs_rx_valid[d]), .rready(vs_rx_ready[d]),
      .rdata(rd));
    assign vs_rx_word[d] = vs_word_t'(rd);
  end

  // ======================= egress =======================
  logic            vsq_out_valid [NUM_VS];
  logic            vsq_out_ready [NUM_VS];
  logic [VS_W-1:0] vsq_out_data  [NUM_VS];
  logic            vsq_out_last  [NUM_VS];

  for (genvar d = 0; d < NUM_VS; d++) begin : g_vsoutq
    async_fifo #(.WIDTH(VS_W), .DEPTH(VS_DEPTH)) u_q (
      .wclk(fpga_clk), .wrst_n(rst_n), .wvalid(vs_tx_valid[d]), .wready(vs_tx_ready[d]),
      .wdata(vs_tx_word[d]),
      .rclk(clk), .rrst_n(rst_n), .rvalid(vsq_out_valid[d]), .rready(vsq_out_ready[d]),
      .rdata(vsq_out_data[d]));
    assign vsq_out_last[d] = vsq_out_data[d][0];
  end

  logic              egm_valid, egm_ready, egm_last;
  logic [VS_W-1:0]   egm_data;
  logic [V_IDXW-1:0] egm_src;

  axis_rr_mux #(.N(NUM_VS), .WIDTH(VS_W)) u_vs_mux (
    .clk, .rst_n,
    .in_valid(vsq_out_valid), .in_ready(vsq_out_ready), .in_data(vsq_out_data),
    .in_last(vsq_out_last),
    .out_valid(egm_valid), .out_ready(egm_ready), .out_data(egm_data),
    .out_last(egm_last), .out_src(egm_src));

  logic                 opi_valid, opi_ready;
  lane_word_t           opi_word;
  logic [PORT_ID_W-1:0] opi_port;

  logic              eg_we;
  logic [EG_AW-1:0]  eg_waddr, eg_raddr;
  eg_entry_t         eg_wdata, eg_rdata;
  logic [31:0]       opi_cnt [4];

  opi #(.ENTRIES(EG_ENTRIES), .NUM_PORTS(NP)) u_opi (
    .clk, .rst_n,
    .in_valid(egm_valid), .in_ready(egm_ready), .in_word(vs_word_t'(egm_data)),
    .in_dev(VS_ID_W'(egm_src)),
    .out_valid(opi_valid), .out_ready(opi_ready), .out_word(opi_word), .out_port(opi_port),
    .tbl_we(eg_we), .tbl_waddr(eg_waddr), .tbl_wdata(eg_wdata),
    .tbl_raddr(eg_raddr), .tbl_rdata(eg_rdata),
    .cnt_pkts(opi_cnt[0]), .cnt_fwd(opi_cnt[1]),
    .cnt_drop_untagged(opi_cnt[2]), .cnt_drop_miss(opi_cnt[3]));

  logic              txq_in_valid [NP];
  logic              txq_in_ready [NP];
  logic [LANE_W-1:0] txq_in_data;
  logic              txq_in_last;

  axis_demux #(.N(NP), .WIDTH(LANE_W)) u_tx_demux (
    .clk, .rst_n,
    .in_valid(opi_valid), .in_ready(opi_ready), .in_data(opi_word),
    .in_last(opi_word.tlast), .in_dest(P_IDXW'(opi_port)),
    .out_valid(txq_in_valid), .out_ready(txq_in_ready), .out_data(txq_in_data),
    .out_last(txq_in_last));

  for (genvar i = 0; i < NUM_PHY; i++) begin : g_txq
    logic [LANE_W-1:0] rd;
    async_fifo #(.WIDTH(LANE_W), .DEPTH(LANE_DEPTH)) u_q (
      .wclk(clk), .wrst_n(rst_n), .wvalid(txq_in_valid[i]), .wready(txq_in_ready[i]),
      .wdata(txq_in_data),
      .rclk(tx_clk[i]), .rrst_n(rst_n), .rvalid(tx_valid[i]), .rready(tx_ready[i]),
      .rdata(rd));
    assign tx_word[i] = lane_word_t'(rd);
  end

  async_fifo #(.WIDTH(LANE_W), .DEPTH(LANE_DEPTH)) u_vtx_q (
    .wclk(clk), .wrst_n(rst_n), .wvalid(txq_in_valid[NUM_PHY]),
    .wready(txq_in_ready[NUM_PHY]), .wdata(txq_in_data),
    .rclk(clk), .rrst_n(rst_n), .rvalid(vtx_valid), .rready(vtx_ready), .rdata(vtx_data));

  // ======================= management =======================
  mi_word_t vs_ctl_shared;

  mgmt_if #(.NUM_VS(NUM_VS), .IG_ENTRIES(IG_ENTRIES), .EG_ENTRIES(EG_ENTRIES)) u_mi (
    .clk, .rst_n,
    .cmd_valid(mi_cmd_valid), .cmd_ready(mi_cmd_ready), .cmd(mi_cmd),
    .rsp_valid(mi_rsp_valid), .rsp_ready(mi_rsp_ready), .rsp(mi_rsp),
    .vs_cmd_valid(vs_ctl_valid), .vs_cmd_ready(vs_ctl_ready), .vs_cmd(vs_ctl_shared),
    .vs_rsp_valid(vs_ctlr_valid), .vs_rsp_ready(vs_ctlr_ready), .vs_rsp(vs_ctlr_word),
    .ig_we, .ig_waddr, .ig_wdata, .ig_raddr, .ig_rdata, .ipi_cnt,
    .eg_we, .eg_waddr, .eg_wdata, .eg_raddr, .eg_rdata, .opi_cnt);

  always_comb begin
    for (int unsigned d = 0; d < NUM_VS; d++) vs_ctl_word[d] = vs_ctl_shared;
  end

endmodule
