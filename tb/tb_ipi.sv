// tb_ipi: self-checking test of the Input Port Interface.
//
// The Ingress table is loaded with entries that exercise the key: one VLAN
// split over two vS by ingress port, a VLAN open to every port, an entry that
// names a vS that does not exist, and an invalid entry. Random frames (tagged
// or not, random VLAN, port and length) are pushed with random
// back-pressure. A reference model in the testbench decides each frame's fate;
// forwarded frames must arrive whole, unchanged apart from tuser, with the
// right vS index, and the four counters must match the model. The first word
// must appear one cycle after it is taken.
`timescale 1ns/1ps
module tb_ipi;
  import vsw_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic                 in_valid = 0, in_ready;
  lane_word_t           in_word = '0;
  logic [PORT_ID_W-1:0] in_src = '0;
  logic                 out_valid, out_ready = 1;
  vs_word_t             out_word;
  logic [VS_ID_W-1:0]   out_dev;
  logic                 tbl_we = 0;
  logic [4:0]           tbl_waddr = '0, tbl_raddr = '0;
  ig_entry_t            tbl_wdata = '0, tbl_rdata;
  logic [31:0]          cnt_pkts, cnt_fwd, cnt_drop_untagged, cnt_drop_miss;

  ipi dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  initial begin : watchdog
    #2ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: which vS (or -1 for untagged drop, -2 for miss drop).
  function automatic int ref_dev(input bit has_tag, input int vid, input int port);
    if (!has_tag) return -1;
    if (vid == 10 && (port == 1 || port == 3)) return 4;
    if (vid == 10 && port == 2) return 7;
    if (vid == 20) return 25;
    return -2;
  endfunction

  task automatic wr(input int a, input ig_entry_t e);
    @(negedge clk); tbl_we = 1; tbl_waddr = 5'(a); tbl_wdata = e;
    @(negedge clk); tbl_we = 0;
  endtask

  // Expected output stream.
  vs_word_t exp_w [$];
  int       exp_d [$];
  int n_pk = 0, n_fwd = 0, n_unt = 0, n_miss = 0;
  bit rnd_ready = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (exp_w.size() == 0) check(0, "unexpected output word");
      else begin
        check(out_word == exp_w.pop_front(), "forwarded word unchanged");
        check(int'(out_dev) == exp_d.pop_front(), "forwarded to the right vS");
      end
    end
    out_ready <= rnd_ready ? ($urandom % 4 != 0) : 1'b1;
  end

  task automatic send(input frame_t f, input int port);
    foreach (f[k]) begin
      in_valid = 1; in_word = f[k]; in_src = PORT_ID_W'(port);
      do @(posedge clk); while (!in_ready);
      #1;
    end
    in_valid = 0;
  endtask

  initial begin
    ig_entry_t e;
    frame_t f;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Table.
    e = '0; e.valid = 1; e.vid = 10; e.port_mask[1] = 1; e.port_mask[3] = 1; e.dev_id = 4;  wr(0, e);
    e = '0; e.valid = 1; e.vid = 10; e.port_mask[2] = 1; e.dev_id = 7;                      wr(1, e);
    e = '0; e.valid = 1; e.vid = 20; e.port_mask = '1; e.dev_id = 25;                       wr(2, e);
    e = '0; e.valid = 1; e.vid = 30; e.port_mask = '1; e.dev_id = 30;                       wr(3, e);
    e = '0; e.valid = 0; e.vid = 40; e.port_mask = '1; e.dev_id = 1;                        wr(5, e);
    @(negedge clk); tbl_raddr = 1; #1;
    check(tbl_rdata.vid == 10 && tbl_rdata.dev_id == 7 && tbl_rdata.port_mask == 33'h4,
          "table read back");

    // Latency of a forwarded one-word frame.
    f = build_frame(1, 12'd20, 60, 32'hABCD0001);
    exp_w.push_back(to_vs(f[0])); exp_w.push_back(to_vs(f[1])); exp_d.push_back(25); exp_d.push_back(25);
    n_pk++; n_fwd++;
    @(negedge clk); in_valid = 1; in_word = f[0]; in_src = 6;
    @(posedge clk); #1;
    check(out_valid && out_dev == 25, "first word out one cycle after it is taken");
    in_word = f[1];
    @(posedge clk); #1; in_valid = 0;

    // Rate: a forwarded 10-word frame and a dropped 10-word frame each take
    // exactly 10 cycles at the input (one word per clock).
    begin
      int c0;
      repeat (3) @(posedge clk);
      f = build_frame(1, 12'd20, 320, 32'hBEEF0000);
      foreach (f[k]) begin exp_w.push_back(to_vs(f[k])); exp_d.push_back(25); end
      n_pk++; n_fwd++;
      @(negedge clk); c0 = cyc;
      send(f, 6);
      check(cyc - c0 == 10, $sformatf("forwarded frame: %0d cycles for 10 words", cyc - c0));
      f = build_frame(1, 12'd70, 320, 32'hBEEF0001);
      n_pk++; n_miss++;
      @(negedge clk); c0 = cyc;
      send(f, 6);
      check(cyc - c0 == 10, $sformatf("dropped frame: %0d cycles for 10 words", cyc - c0));
    end

    // Random traffic.
    rnd_ready = 1;
    for (int p = 0; p < 400; p++) begin
      bit t; int vid, port, dv;
      int vids [5] = '{10, 20, 30, 40, 50};
      t    = ($urandom % 5) != 0;
      vid  = vids[$urandom % 5];
      port = $urandom % 33;
      f    = build_frame(t, 12'(vid), 60 + $urandom % 200, 32'(p));
      dv   = ref_dev(t, vid, port);
      n_pk++;
      if (dv == -1) n_unt++;
      else if (dv == -2) n_miss++;
      else begin
        n_fwd++;
        foreach (f[k]) begin exp_w.push_back(to_vs(f[k])); exp_d.push_back(dv); end
      end
      send(f, port);
    end
    rnd_ready = 0;
    repeat (5) @(posedge clk);
    check(exp_w.size() == 0, "every forwarded word arrived");
    check(cnt_pkts == 32'(n_pk), "packet counter");
    check(cnt_fwd == 32'(n_fwd), "forward counter");
    check(cnt_drop_untagged == 32'(n_unt), "untagged drop counter");
    check(cnt_drop_miss == 32'(n_miss), "miss drop counter");
    check(n_unt > 0 && n_miss > 0 && n_fwd > 0, "all three outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
