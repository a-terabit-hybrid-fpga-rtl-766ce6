// tb_platform_rate: aggregate-rate run of the SoC at its default size with
// all 32 lanes saturated, for the vS populations of the four case-study
// switches: 26 (L2 switch), 17 (firewall), 14 (router) and 11 (INT) active vS.
//
// For each population the Ingress/Egress tables are rewritten through the
// management channel so that lane i feeds vS (i mod NACT) and that vS sends to
// TX lane i. Every lane then offers back-to-back 1024-byte frames (32 words)
// at 390.625 MHz x 256 bits = 100 Gb/s while all TX lanes are always ready.
// Over a window of WINDOW core cycles (1 GHz) the testbench counts words taken
// by the IPI and words leaving the OPI and reports them as Gb/s.
//
// The IPI and OPI move at most one 256-bit word per core cycle. The check is
// that both run at no less than 95 % of that ceiling (243 Gb/s) while the
// lanes offer 3.2 Tb/s, and that every delivered frame arrives on the right
// lane with its content intact.
`timescale 1ps/1ps
module tb_platform_rate;
  import vsw_pkg::*;
  import tb_pkt_pkg::*;

  localparam int NPHY   = N_PHY;
  localparam int NVS    = N_VS;
  localparam int WINDOW = 20000;

  logic clk = 0, fpga_clk = 0, rst_n = 0, lane_clk = 0;
  always #500 clk = ~clk;
  always #696 fpga_clk = ~fpga_clk;
  always #1280 lane_clk = ~lane_clk;

  logic        rx_clk   [NPHY];
  logic        rx_valid [NPHY];
  logic        rx_ready [NPHY];
  lane_word_t  rx_word  [NPHY];
  logic        tx_clk   [NPHY];
  logic        tx_valid [NPHY];
  logic        tx_ready [NPHY];
  lane_word_t  tx_word  [NPHY];
  logic        vs_rx_valid [NVS];
  logic        vs_rx_ready [NVS];
  vs_word_t    vs_rx_word  [NVS];
  logic        vs_tx_valid [NVS];
  logic        vs_tx_ready [NVS];
  vs_word_t    vs_tx_word  [NVS];
  logic        mi_cmd_valid = 0, mi_cmd_ready, mi_rsp_valid, mi_rsp_ready = 1;
  mi_word_t    mi_cmd = '0, mi_rsp;
  logic        vs_ctl_valid  [NVS];
  logic        vs_ctl_ready  [NVS];
  mi_word_t    vs_ctl_word   [NVS];
  logic        vs_ctlr_valid [NVS];
  logic        vs_ctlr_ready [NVS];
  mi_word_t    vs_ctlr_word  [NVS];

  always_comb for (int i = 0; i < NPHY; i++) begin
    rx_clk[i] = lane_clk; tx_clk[i] = lane_clk; tx_ready[i] = 1'b1;
  end

  vswitch_soc dut (.*);

  for (genvar v = 0; v < NVS; v++) begin : g_vs
    vs_model #(.LAT(4)) u_vs (
      .clk(fpga_clk), .rst_n,
      .rx_valid(vs_rx_valid[v]), .rx_ready(vs_rx_ready[v]), .rx_word(vs_rx_word[v]),
      .tx_valid(vs_tx_valid[v]), .tx_ready(vs_tx_ready[v]), .tx_word(vs_tx_word[v]),
      .ctl_valid(vs_ctl_valid[v]), .ctl_ready(vs_ctl_ready[v]), .ctl_word(vs_ctl_word[v]),
      .ctlr_valid(vs_ctlr_valid[v]), .ctlr_ready(vs_ctlr_ready[v]), .ctlr_word(vs_ctlr_word[v]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  initial begin : watchdog
    #1000us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- MI ----------------
  mi_word_t rsps [$];
  always @(posedge clk) if (rst_n && mi_rsp_valid && mi_rsp_ready) rsps.push_back(mi_rsp);

  task automatic mi(input mi_tgt_e tgt, input int addr, input logic [127:0] data);
    int t;
    @(negedge clk);
    mi_cmd_valid = 1; mi_cmd.op = MI_WRITE; mi_cmd.tgt = tgt; mi_cmd.dev = '0;
    mi_cmd.addr = 8'(addr); mi_cmd.data = data;
    do @(posedge clk); while (!mi_cmd_ready);
    #1 mi_cmd_valid = 0;
    t = 0;
    while (rsps.size() == 0 && t < 1000) begin @(posedge clk); t++; end
    check(rsps.size() == 1 && rsps[0].data == 0, "table write acknowledged");
    rsps.delete();
  endtask

  // ---------------- lanes ----------------
  bit   gen_on = 0;
  int   epoch = 0;          // frames of an earlier population are ignored
  int   delivered = 0, bad = 0;
  frame_t proto [NPHY];     // the frame each lane repeats (id = epoch, lane)

  for (genvar i = 0; i < NPHY; i++) begin : g_lane
    int wi = 0;
    always_comb begin
      rx_valid[i] = gen_on || (wi != 0);   // a started frame is always finished
      rx_word[i]  = (proto[i].size() > 0) ? proto[i][wi] : '0;
    end
    always @(posedge lane_clk) begin
      if (rx_valid[i] && rx_ready[i]) wi = (wi == proto[i].size() - 1) ? 0 : wi + 1;
    end

    int ti = 0;
    bit ok = 1, stale = 0;
    always @(posedge lane_clk) begin
      if (rst_n && tx_valid[i]) begin
        logic [31:0] id;
        id = frame_id(tx_word[i].tdata, 1);
        if (ti == 0) stale = (id[23:16] != 8'(epoch));    // earlier population: not counted
        if (!stale && to_vs(tx_word[i]) != to_vs(proto[i][ti])) begin ok = 0; bad++; end
        if (tx_word[i].tlast) begin
          if (ok && !stale) delivered++;
          ok = 1; ti = 0;
        end else ti++;
      end
    end
  end

  // ---------------- rate meter ----------------
  bit   meter = 0;
  int   ipi_words = 0, opi_words = 0;
  always @(posedge clk) begin
    if (meter) begin
      if (dut.ing_valid && dut.ing_ready) ipi_words++;
      if (dut.opi_valid && dut.opi_ready) opi_words++;
    end
  end

  task automatic run_population(input int nact, input string name);
    real gbps_in, gbps_out;
    gen_on = 0;
    repeat (3000) @(posedge clk);           // let the previous run drain
    epoch++;
    for (int i = 0; i < NPHY; i++) begin
      ig_entry_t ie; eg_entry_t ee;
      ie = '0; ie.valid = 1; ie.vid = 12'(200 + i); ie.port_mask = 33'(1) << i; ie.dev_id = 5'(i % nact);
      mi(MI_TGT_INGRESS, i, 128'(ie));
      if (i < 32) begin
        ee = '0; ee.valid = 1; ee.vid = 12'(200 + i); ee.dev_id = 5'(i % nact); ee.tx_port = 6'(i);
        mi(MI_TGT_EGRESS, i, 128'(ee));
      end
    end
    for (int i = 0; i < NPHY; i++) proto[i] = build_frame(1, 12'(200 + i), 1024 - 4, {8'h0, 8'(epoch), 8'(i), 8'h0});
    delivered = 0;
    bad = 0;
    gen_on = 1;
    repeat (2000) @(posedge clk);           // fill the pipeline
    ipi_words = 0; opi_words = 0;
    meter = 1;
    repeat (WINDOW) @(posedge clk);
    meter = 0;
    gbps_in  = real'(ipi_words) * 256.0 / real'(WINDOW);
    gbps_out = real'(opi_words) * 256.0 / real'(WINDOW);
    $display("%s: %0d vS active, lanes offer %0d Gb/s, IPI %0.1f Gb/s, OPI %0.1f Gb/s, %0d frames delivered",
             name, nact, NPHY * 100, gbps_in, gbps_out, delivered);
    check(ipi_words >= WINDOW * 95 / 100, $sformatf("%s: IPI at >= 95%% of one word per cycle", name));
    check(opi_words >= WINDOW * 95 / 100, $sformatf("%s: OPI at >= 95%% of one word per cycle", name));
    check(delivered > 0 && bad == 0, $sformatf("%s: frames delivered intact", name));
  endtask

  initial begin
    repeat (5) @(posedge lane_clk);
    rst_n = 1;
    repeat (5) @(posedge lane_clk);
    run_population(26, "L2-Switch");
    run_population(17, "Firewall");
    run_population(14, "Router");
    run_population(11, "INT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
