// tb_vswitch_soc: end-to-end test of the SoC at its default size (32 lanes,
// 26 vS, 66 x 417 lane queues, 52 x 289 vS queues).
//
// Clocks: core 1 GHz, vS fabric 718.4 MHz, lanes 390.625 MHz (a 256-bit word
// per cycle is 100 Gb/s). Every vS slot holds a vs_model that passes frames
// through after a short pipeline delay.
//
// All configuration goes through the management channel: 31 Ingress and 30
// Egress entries are written and acknowledged. The entries send VLAN 100+v to
// vS v and then to TX port (5v+3) mod 32; VLAN 10 to vS 2 from port 1 but to
// vS 3 from port 2 (same VLAN, different ingress ports); VLAN 50 to vS 4,
// then to the virtual port vTX, back in through vRX to vS 9 and out on port
// 20 (loopback switching); VLAN 60 to vS 6 which has no Egress entry (egress
// drop); VLAN 70 has no Ingress entry (ingress drop), and untagged frames are
// dropped too. Every lane sends random frames of these kinds. A reference
// model predicts every frame's TX port; each frame must arrive there exactly
// once, unchanged, with tuser naming the port and the last vS. Frames from one
// lane to one TX port must stay in order.
//
// Mechanisms counted (each must occur): forwarding, both ingress drops, the
// egress drop, loopback, contention at the input mux, a full TX queue
// stalling the OPI, back-pressure reaching the RX lanes, a vS register
// written and read through the MI, and the IPI/OPI counters read through the
// MI matching the model.
`timescale 1ps/1ps
module tb_vswitch_soc;
  import vsw_pkg::*;
  import tb_pkt_pkg::*;

  localparam int NPHY = N_PHY;
  localparam int NVS  = N_VS;
  localparam int FRAMES_PER_LANE = 12;

  logic clk = 0, fpga_clk = 0, rst_n = 0;
  logic lane_clk = 0;
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

  always_comb for (int i = 0; i < NPHY; i++) begin rx_clk[i] = lane_clk; tx_clk[i] = lane_clk; end

  vswitch_soc dut (.*);

  for (genvar v = 0; v < NVS; v++) begin : g_vs
    vs_model #(.LAT(3 + v % 4)) u_vs (
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
    #2000us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  typedef struct { int port; int dev; } route_t;   // port -1/-2/-3: dropped

  function automatic route_t route(input int kind, input int v, input int lane);
    route_t r;
    case (kind)
      0: begin r.port = (5 * v + 3) % 32; r.dev = v; end             // VLAN 100+v
      1: begin r.port = (lane == 1) ? 0 : 1; r.dev = (lane == 1) ? 2 : 3; end  // VLAN 10
      2: begin r.port = 20; r.dev = 9; end                           // VLAN 50, loopback
      3: begin r.port = -3; r.dev = 6; end                           // VLAN 60, egress drop
      4: begin r.port = -2; r.dev = -1; end                          // VLAN 70, ingress miss
      default: begin r.port = -1; r.dev = -1; end                    // untagged
    endcase
    return r;
  endfunction

  // Expected frames by id.
  frame_t    sent_frame [int];
  int        exp_port   [int];
  int        exp_dev    [int];
  int n_pkts = 0, n_fwd_ipi = 0, n_unt = 0, n_miss = 0, n_opi = 0, n_opi_fwd = 0, n_eg_drop = 0;
  int n_loop = 0, n_delivered = 0, n_fwd_expected = 0;

  // ---------------- MI driver ----------------
  mi_word_t rsps [$];
  always @(posedge clk) if (rst_n && mi_rsp_valid && mi_rsp_ready) rsps.push_back(mi_rsp);

  task automatic mi(input mi_op_e op, input mi_tgt_e tgt, input int dev, input int addr,
                    input logic [127:0] data, output mi_word_t r);
    int t;
    @(negedge clk);
    mi_cmd_valid = 1; mi_cmd.op = op; mi_cmd.tgt = tgt; mi_cmd.dev = 5'(dev);
    mi_cmd.addr = 8'(addr); mi_cmd.data = data;
    do @(posedge clk); while (!mi_cmd_ready);
    #1 mi_cmd_valid = 0;
    t = 0;
    while (rsps.size() == 0 && t < 1000) begin @(posedge clk); t++; end
    if (rsps.size() == 0) begin check(0, "MI answer"); r = '0; end
    else r = rsps.pop_front();
  endtask

  int n_mi_writes = 0;
  task automatic ig_write(input int a, input int vid, input logic [32:0] mask, input int dev);
    ig_entry_t e; mi_word_t r;
    e = '0; e.valid = 1; e.vid = 12'(vid); e.port_mask = mask; e.dev_id = 5'(dev);
    mi(MI_WRITE, MI_TGT_INGRESS, 0, a, 128'(e), r);
    check(r.op == MI_RESP && r.data == 0, "ingress entry acknowledged");
    n_mi_writes++;
  endtask
  task automatic eg_write(input int a, input int vid, input int dev, input int port);
    eg_entry_t e; mi_word_t r;
    e = '0; e.valid = 1; e.vid = 12'(vid); e.dev_id = 5'(dev); e.tx_port = 6'(port);
    mi(MI_WRITE, MI_TGT_EGRESS, 0, a, 128'(e), r);
    check(r.op == MI_RESP && r.data == 0, "egress entry acknowledged");
    n_mi_writes++;
  endtask

  // ---------------- lanes ----------------
  logic [32:0] ALL_PHY = {1'b0, {32{1'b1}}};
  bit tx_hold = 0;
  int rx_stall_cycles = 0, tx_full_stalls = 0, mux_contention = 0;
  int last_seq [int];     // key lane*64+port -> last sequence number seen

  for (genvar i = 0; i < NPHY; i++) begin : g_lane
    frame_t q [$];
    int     wi = 0;
    initial rx_valid[i] = 0;
    always @(posedge lane_clk) begin
      if (rst_n) begin
        if (rx_valid[i] && rx_ready[i]) begin
          wi++;
          if (wi == q[0].size()) begin void'(q.pop_front()); wi = 0; end
        end
        if (rx_valid[i] && !rx_ready[i]) rx_stall_cycles++;
      end
    end
    always_comb begin
      rx_valid[i] = (q.size() > 0);
      rx_word[i]  = (q.size() > 0) ? q[0][wi] : '0;
    end

    // TX sink
    frame_t cur;
    always @(posedge lane_clk) begin
      tx_ready[i] <= !tx_hold && ($urandom % 8 != 0);
      if (rst_n && tx_valid[i] && tx_ready[i]) begin
        cur.push_back(tx_word[i]);
        if (tx_word[i].tlast) begin
          logic [31:0] id;
          id = frame_id(cur[0].tdata, 1);
          if (!sent_frame.exists(int'(id))) check(0, $sformatf("unknown frame %h on port %0d", id, i));
          else begin
            frame_t f;
            bit same;
            int key;
            f = sent_frame[int'(id)];
            check(exp_port[int'(id)] == i, $sformatf("frame %h on port %0d, expected %0d", id, i, exp_port[int'(id)]));
            same = (f.size() == cur.size());
            if (same) foreach (f[k]) if (to_vs(f[k]) != to_vs(cur[k])) same = 0;
            check(same, "frame content unchanged");
            check(int'(cur[0].tuser[5:0]) == i && int'(cur[0].tuser[12:8]) == exp_dev[int'(id)],
                  "tuser names TX port and vS");
            key = int'(id[23:16]) * 64 + i;
            if (last_seq.exists(key)) check(int'(id[15:0]) > last_seq[key], "order kept per lane and port");
            last_seq[key] = int'(id[15:0]);
            if (exp_dev[int'(id)] == 9) n_loop++;
            sent_frame.delete(int'(id));
            n_delivered++;
          end
          cur.delete();
        end
      end
    end
  end

  always @(posedge clk) begin
    int nv;
    if (rst_n) begin
      if (dut.u_tx_demux.in_valid && !dut.u_tx_demux.in_ready) tx_full_stalls++;
      nv = 0;
      for (int i = 0; i <= NPHY; i++) nv += int'(dut.inq_valid[i]);
      if (nv > 1) mux_contention++;
    end
  end

  // ---------------- stimulus ----------------
  initial begin
    mi_word_t r;
    ig_entry_t rb;
    int idle;
    repeat (5) @(posedge lane_clk);
    rst_n = 1;
    repeat (5) @(posedge lane_clk);

    // Tables.
    for (int v = 0; v < NVS; v++) ig_write(v, 100 + v, ALL_PHY, v);
    ig_write(26, 10, 33'h2, 2);
    ig_write(27, 10, 33'h4, 3);
    ig_write(28, 50, ALL_PHY, 4);
    ig_write(29, 50, 33'h1_0000_0000, 9);
    ig_write(30, 60, ALL_PHY, 6);
    for (int v = 0; v < NVS; v++) eg_write(v, 100 + v, v, (5 * v + 3) % 32);
    eg_write(26, 10, 2, 0);
    eg_write(27, 10, 3, 1);
    eg_write(28, 50, 4, 32);
    eg_write(29, 50, 9, 20);
    mi(MI_READ, MI_TGT_INGRESS, 0, 27, '0, r);
    rb = ig_entry_t'(r.data[$bits(ig_entry_t)-1:0]);
    check(rb.port_mask == 33'h4 && rb.dev_id == 3, "ingress entry read back through the MI");

    // vS register through the MI.
    mi(MI_WRITE, MI_TGT_VS, 13, 1, 128'hfeed, r);
    check(r.op == MI_RESP && r.dev == 13, "vS 13 acknowledged");
    mi(MI_READ, MI_TGT_VS, 13, 1, '0, r);
    check(r.data == 128'hfeed && r.dev == 13, "vS 13 register read back");

    // Phase A: no loopback frames; TX lanes are held for a while so queues
    // fill up and back-pressure reaches the RX lanes.
    tx_hold = 1;
    for (int n = 0; n < FRAMES_PER_LANE; n++)
      for (int i = 0; i < NPHY; i++) send_random(i, n, 0);
    repeat (3000) @(posedge clk);
    tx_hold = 0;
    drain();
    // Phase B: light traffic that includes loopback frames. The loop
    // OPI -> vTX -> vRX -> IPI -> vS -> OPI is flow controlled end to end, so
    // it is kept below saturation (see the README).
    for (int n = FRAMES_PER_LANE; n < FRAMES_PER_LANE + 4; n++) begin
      for (int i = 0; i < NPHY; i++) send_random(i, n, 1);
      drain();
    end

    check(sent_frame.num() == 0, $sformatf("%0d frames never arrived", sent_frame.num()));
    check(n_delivered == n_fwd_expected, "delivered count");

    // Counters through the MI.
    mi(MI_READ, MI_TGT_COUNTER, 0, 0, '0, r); check(r.data == 128'(n_pkts), $sformatf("IPI packets %0d vs %0d", r.data, n_pkts));
    mi(MI_READ, MI_TGT_COUNTER, 0, 1, '0, r); check(r.data == 128'(n_fwd_ipi), "IPI forwarded");
    mi(MI_READ, MI_TGT_COUNTER, 0, 2, '0, r); check(r.data == 128'(n_unt), "IPI untagged drops");
    mi(MI_READ, MI_TGT_COUNTER, 0, 3, '0, r); check(r.data == 128'(n_miss), "IPI miss drops");
    mi(MI_READ, MI_TGT_COUNTER, 0, 4, '0, r); check(r.data == 128'(n_opi), "OPI packets");
    mi(MI_READ, MI_TGT_COUNTER, 0, 5, '0, r); check(r.data == 128'(n_opi_fwd), "OPI forwarded");
    mi(MI_READ, MI_TGT_COUNTER, 0, 7, '0, r); check(r.data == 128'(n_eg_drop), "OPI miss drops");

    // Mechanisms.
    $display("mechanisms: forwarded=%0d untagged_drop=%0d ingress_miss=%0d egress_drop=%0d loopback=%0d",
             n_delivered, n_unt, n_miss, n_eg_drop, n_loop);
    $display("            mux_contention=%0d tx_queue_full_stalls=%0d rx_backpressure=%0d mi_writes=%0d",
             mux_contention, tx_full_stalls, rx_stall_cycles, n_mi_writes);
    check(n_delivered > 0, "forwarding happened");
    check(n_unt > 0, "untagged drop happened");
    check(n_miss > 0, "ingress miss drop happened");
    check(n_eg_drop > 0, "egress drop happened");
    check(n_loop > 0, "loopback through vTX/vRX happened");
    check(mux_contention > 0, "input mux contention happened");
    check(tx_full_stalls > 0, "full TX queue stalled the OPI");
    check(rx_stall_cycles > 0, "back-pressure reached the RX lanes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Wait until every frame has arrived, or until nothing has arrived for
  // 20000 core cycles (a stuck or looping network).
  task automatic drain();
    int t, last;
    t = 0;
    last = n_delivered;
    while ((sent_frame.num() != 0 || !lanes_empty()) && t < 20000) begin
      @(posedge clk);
      if (n_delivered != last) begin t = 0; last = n_delivered; end
      else t++;
    end
    repeat (2000) @(posedge clk);
  endtask

  function automatic bit lanes_empty();
    for (int i = 0; i < NPHY; i++) if (rx_valid[i]) return 0;
    return 1;
  endfunction

  // One random frame from lane i, frame number n. kinds: 0 VLAN 100+v,
  // 1 VLAN 10, 2 VLAN 50 (loopback), 3 VLAN 60, 4 VLAN 70, 5 untagged.
  task automatic send_random(input int i, input int n, input bit allow_loop);
    int kind, v, vid;
    bit has_tag;
    route_t rt;
    frame_t f;
    logic [31:0] id;
    kind = $urandom % 10;
    kind = (kind < 5) ? 0 : kind - 4;            // half of the frames go to vS 0..25
    if (kind == 1 && !(i == 1 || i == 2)) kind = 0;
    if (kind == 2 && !allow_loop) kind = 0;
    if (allow_loop && (i % 16 == 0)) kind = 2;
    v = $urandom % NVS;
    case (kind)
      0: vid = 100 + v;
      1: vid = 10;
      2: vid = 50;
      3: vid = 60;
      4: vid = 70;
      default: vid = 0;
    endcase
    has_tag = (kind != 5);
    id = {8'h00, 8'(i), 16'(n)};
    f = build_frame(has_tag, 12'(vid), 64 + $urandom % 400, id);
    rt = route(kind, v, i);
    n_pkts++;
    if (kind == 5) n_unt++;
    else if (kind == 4) n_miss++;
    else begin
      n_fwd_ipi++; n_opi++;
      if (kind == 2) begin n_pkts++; n_fwd_ipi++; n_opi++; n_opi_fwd++; end
      if (kind == 3) n_eg_drop++;
      else begin
        n_opi_fwd++;
        n_fwd_expected++;
        sent_frame[int'(id)] = f;
        exp_port[int'(id)] = rt.port;
        exp_dev[int'(id)] = rt.dev;
      end
    end
    g_lane_push(i, f);
  endtask

  // Frames are handed to the lane generators through this task.
  task automatic g_lane_push(input int i, input frame_t f);
    case (i)
      0: g_lane[0].q.push_back(f);   1: g_lane[1].q.push_back(f);
      2: g_lane[2].q.push_back(f);   3: g_lane[3].q.push_back(f);
      4: g_lane[4].q.push_back(f);   5: g_lane[5].q.push_back(f);
      6: g_lane[6].q.push_back(f);   7: g_lane[7].q.push_back(f);
      8: g_lane[8].q.push_back(f);   9: g_lane[9].q.push_back(f);
      10: g_lane[10].q.push_back(f); 11: g_lane[11].q.push_back(f);
      12: g_lane[12].q.push_back(f); 13: g_lane[13].q.push_back(f);
      14: g_lane[14].q.push_back(f); 15: g_lane[15].q.push_back(f);
      16: g_lane[16].q.push_back(f); 17: g_lane[17].q.push_back(f);
      18: g_lane[18].q.push_back(f); 19: g_lane[19].q.push_back(f);
      20: g_lane[20].q.push_back(f); 21: g_lane[21].q.push_back(f);
      22: g_lane[22].q.push_back(f); 23: g_lane[23].q.push_back(f);
      24: g_lane[24].q.push_back(f); 25: g_lane[25].q.push_back(f);
      26: g_lane[26].q.push_back(f); 27: g_lane[27].q.push_back(f);
      28: g_lane[28].q.push_back(f); 29: g_lane[29].q.push_back(f);
      30: g_lane[30].q.push_back(f); 31: g_lane[31].q.push_back(f);
      default: ;
    endcase
  endtask
endmodule
