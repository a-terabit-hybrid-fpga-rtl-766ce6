// tb_async_fifo: self-checking test of the dual-clock queue at its default
// size (66 words of 417 bits), with unrelated write and read clocks.
//
// Checks: empty after reset; exactly DEPTH words accepted before wready
// falls; the words come out in order and unchanged; a word written into an
// empty queue shows on rvalid after 2 or 3 read-clock edges; a long run with
// random valid/ready on both sides loses, duplicates and reorders nothing.
`timescale 1ns/1ps
module tb_async_fifo;
  localparam int unsigned W = 417;
  localparam int unsigned D = 66;

  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wvalid = 0, wready, rvalid, rready = 0;
  logic [W-1:0] wdata = '0, rdata;

  always #3.5 wclk = ~wclk;
  always #5.0 rclk = ~rclk;

  async_fifo dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] expq[$];

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  // Scoreboard on both sides.
  always @(posedge wclk) if (wrst_n && wvalid && wready) expq.push_back(wdata);
  always @(posedge rclk) begin
    if (rrst_n && rvalid && rready) begin
      if (expq.size() == 0) check(0, "read from empty queue");
      else begin
        logic [W-1:0] e;
        e = expq.pop_front();
        check(rdata == e, "read data matches write order");
      end
    end
  end

  initial begin : watchdog
    #2ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int accepted, lat;
  initial begin
    repeat (3) @(posedge rclk);
    wrst_n = 1; rrst_n = 1;
    repeat (5) @(posedge rclk);
    check(!rvalid, "empty after reset");
    check(wready, "not full after reset");

    // Fill without reading.
    accepted = 0;
    @(negedge wclk);
    while (wready) begin
      wvalid = 1; wdata = rnd_word();
      @(posedge wclk); accepted++;
      @(negedge wclk);
    end
    wvalid = 0;
    check(accepted == D, $sformatf("capacity %0d == %0d", accepted, D));
    repeat (6) @(posedge wclk);
    check(!wready, "stays full");

    // Drain.
    @(negedge rclk); rready = 1;
    while (expq.size() > 0) @(negedge rclk);
    rready = 0;
    repeat (4) @(posedge rclk);
    check(!rvalid, "empty after drain");
    repeat (6) @(posedge wclk);
    check(wready, "not full after drain");

    // Write-to-read latency into an empty queue.
    @(negedge wclk); wvalid = 1; wdata = rnd_word();
    @(posedge wclk); #0.1; wvalid = 0;
    lat = 0;
    while (!rvalid) begin @(posedge rclk); #0.1; lat++; end
    check(lat >= 2 && lat <= 3, $sformatf("write-to-read latency %0d rclk edges", lat));
    @(negedge rclk); rready = 1; @(posedge rclk); #0.1; rready = 0;

    // Random streaming on both sides.
    fork
      begin
        for (int n = 0; n < 3000; ) begin
          @(negedge wclk);
          if (wvalid && wready_q) n++;
          wvalid = ($urandom % 4) != 0;
          wdata  = rnd_word();
        end
        @(negedge wclk); wvalid = 0;
      end
      begin
        repeat (9000) begin
          @(negedge rclk);
          rready = ($urandom % 3) != 0;
        end
        rready = 1;
      end
    join
    repeat (20) @(posedge rclk);
    check(expq.size() == 0, "everything written was read");
    check(!rvalid, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // wready as seen at the last write edge (for counting accepted words).
  logic wready_q;
  always @(posedge wclk) wready_q <= wready;
endmodule
