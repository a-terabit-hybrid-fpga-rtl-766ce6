// tb_opi: self-checking test of the Output Port Interface.
//
// The Egress table is loaded so that one VLAN leads to different TX ports
// depending on the vS that sent the frame, one entry points at the virtual
// port 32, one names a port that does not exist and one is invalid. Random
// frames from random vS with random back-pressure are checked against a
// reference model: forwarded frames arrive whole with the right TX port on
// out_port and in tuser, the sending vS in tuser, and the counters agree. The
// first word must appear one cycle after it is taken.
`timescale 1ns/1ps
module tb_opi;
  import vsw_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic                 in_valid = 0, in_ready;
  vs_word_t             in_word = '0;
  logic [VS_ID_W-1:0]   in_dev = '0;
  logic                 out_valid, out_ready = 1;
  lane_word_t           out_word;
  logic [PORT_ID_W-1:0] out_port;
  logic                 tbl_we = 0;
  logic [4:0]           tbl_waddr = '0, tbl_raddr = '0;
  eg_entry_t            tbl_wdata = '0, tbl_rdata;
  logic [31:0]          cnt_pkts, cnt_fwd, cnt_drop_untagged, cnt_drop_miss;

  opi dut (.*);

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

  function automatic int ref_port(input bit has_tag, input int vid, input int dev);
    if (!has_tag) return -1;
    if (vid == 10 && dev == 4) return 5;
    if (vid == 10 && dev == 7) return 31;
    if (vid == 20 && dev == 25) return 32;
    return -2;
  endfunction

  task automatic wr(input int a, input eg_entry_t e);
    @(negedge clk); tbl_we = 1; tbl_waddr = 5'(a); tbl_wdata = e;
    @(negedge clk); tbl_we = 0;
  endtask

  vs_word_t exp_w [$];
  int       exp_p [$];
  int       exp_v [$];
  int n_pk = 0, n_fwd = 0, n_unt = 0, n_miss = 0;
  bit rnd_ready = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (exp_w.size() == 0) check(0, "unexpected output word");
      else begin
        int p, v;
        p = exp_p.pop_front(); v = exp_v.pop_front();
        check(to_vs(out_word) == exp_w.pop_front(), "forwarded word unchanged");
        check(int'(out_port) == p, "forwarded to the right TX port");
        check(int'(out_word.tuser[5:0]) == p && int'(out_word.tuser[12:8]) == v,
              "tuser carries TX port and vS");
      end
    end
    out_ready <= rnd_ready ? ($urandom % 4 != 0) : 1'b1;
  end

  task automatic send(input frame_t f, input int dev);
    foreach (f[k]) begin
      in_valid = 1; in_word = to_vs(f[k]); in_dev = VS_ID_W'(dev);
      do @(posedge clk); while (!in_ready);
      #1;
    end
    in_valid = 0;
  endtask

  initial begin
    eg_entry_t e;
    frame_t f;
    repeat (3) @(posedge clk);
    rst_n = 1;
    e = '0; e.valid = 1; e.vid = 10; e.dev_id = 4;  e.tx_port = 5;  wr(0, e);
    e = '0; e.valid = 1; e.vid = 10; e.dev_id = 7;  e.tx_port = 31; wr(1, e);
    e = '0; e.valid = 1; e.vid = 20; e.dev_id = 25; e.tx_port = 32; wr(2, e);
    e = '0; e.valid = 1; e.vid = 30; e.dev_id = 4;  e.tx_port = 40; wr(3, e);
    e = '0; e.valid = 0; e.vid = 40; e.dev_id = 4;  e.tx_port = 1;  wr(4, e);
    @(negedge clk); tbl_raddr = 1; #1;
    check(tbl_rdata.vid == 10 && tbl_rdata.dev_id == 7 && tbl_rdata.tx_port == 31, "table read back");

    f = build_frame(1, 12'd10, 40, 32'h1);
    exp_w.push_back(to_vs(f[0])); exp_w.push_back(to_vs(f[1]));
    exp_p.push_back(5); exp_p.push_back(5); exp_v.push_back(4); exp_v.push_back(4);
    n_pk++; n_fwd++;
    @(negedge clk); in_valid = 1; in_word = to_vs(f[0]); in_dev = 4;
    @(posedge clk); #1;
    check(out_valid && out_port == 5, "first word out one cycle after it is taken");
    in_word = to_vs(f[1]);
    @(posedge clk); #1; in_valid = 0;

    // Rate: a forwarded 10-word frame and a dropped 10-word frame each take
    // exactly 10 cycles at the input (one word per clock).
    begin
      int c0;
      repeat (3) @(posedge clk);
      f = build_frame(1, 12'd20, 320, 32'hBEEF0000);
      foreach (f[k]) begin exp_w.push_back(to_vs(f[k])); exp_p.push_back(32); exp_v.push_back(25); end
      n_pk++; n_fwd++;
      @(negedge clk); c0 = cyc;
      send(f, 25);
      check(cyc - c0 == 10, $sformatf("forwarded frame: %0d cycles for 10 words", cyc - c0));
      f = build_frame(1, 12'd70, 320, 32'hBEEF0001);
      n_pk++; n_miss++;
      @(negedge clk); c0 = cyc;
      send(f, 25);
      check(cyc - c0 == 10, $sformatf("dropped frame: %0d cycles for 10 words", cyc - c0));
    end

    rnd_ready = 1;
    for (int p = 0; p < 400; p++) begin
      bit t; int vid, dev, pt;
      int vids [5] = '{10, 20, 30, 40, 50};
      int devs [5] = '{4, 7, 25, 0, 12};
      t   = ($urandom % 5) != 0;
      vid = vids[$urandom % 5];
      dev = devs[$urandom % 5];
      f   = build_frame(t, 12'(vid), 60 + $urandom % 200, 32'(p));
      pt  = ref_port(t, vid, dev);
      n_pk++;
      if (pt == -1) n_unt++;
      else if (pt == -2) n_miss++;
      else begin
        n_fwd++;
        foreach (f[k]) begin exp_w.push_back(to_vs(f[k])); exp_p.push_back(pt); exp_v.push_back(dev); end
      end
      send(f, dev);
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
