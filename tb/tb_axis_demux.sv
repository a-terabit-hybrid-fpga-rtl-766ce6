// tb_axis_demux: self-checking test of the packet demultiplexer with 4
// outputs.
//
// Packets with random destinations and lengths are pushed while every output
// applies its own random back-pressure. Each output must receive exactly the
// words addressed to it, in order. With all outputs ready a word appears on
// its output one cycle after it was accepted, and the input is never stalled.
`timescale 1ns/1ps
module tb_axis_demux;
  localparam int unsigned N = 4, W = 20, IW = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          in_valid = 0, in_ready, in_last = 0;
  logic [W-1:0]  in_data = '0;
  logic [IW-1:0] in_dest = '0;
  logic          out_valid [N];
  logic          out_ready [N];
  logic [W-1:0]  out_data;
  logic          out_last;

  axis_demux #(.N(N), .WIDTH(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  initial begin : watchdog
    #1ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W:0] expq [N][$];
  bit rnd_ready = 0;
  int accepted = 0, delivered = 0, stalls = 0;
  logic [W:0] last_acc;
  int last_dest = -1;

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && !in_ready) stalls++;
      if (in_valid && in_ready) begin
        expq[in_dest].push_back({in_last, in_data});
        accepted++;
      end
      for (int i = 0; i < N; i++) begin
        if (out_valid[i] && out_ready[i]) begin
          delivered++;
          if (expq[i].size() == 0) check(0, "word on an output nothing was sent to");
          else check({out_last, out_data} == expq[i].pop_front(), $sformatf("output %0d word in order", i));
        end
      end
      for (int i = 0; i < N; i++) out_ready[i] <= rnd_ready ? ($urandom % 3 != 0) : 1'b1;
    end
  end

  task automatic send_packet(input int dest, input int len);
    for (int k = 0; k < len; k++) begin
      in_valid = 1; in_dest = IW'(dest); in_last = (k == len - 1);
      in_data  = W'($urandom);
      do @(posedge clk); while (!in_ready);
      #1;
    end
    in_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < N; i++) out_ready[i] = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // Latency with all outputs ready: accepted at edge t, visible after it.
    in_valid = 1; in_dest = 2; in_last = 1; in_data = 20'h5a5a5;
    @(posedge clk); #1;
    in_valid = 0;
    check(out_valid[2] && !out_valid[0] && !out_valid[1] && !out_valid[3] && out_data == 20'h5a5a5,
          "word on its output one cycle after acceptance");
    @(negedge clk);
    // Back-to-back with all ready: no stall.
    stalls = 0;
    for (int p = 0; p < 20; p++) send_packet(p % N, 3);
    check(stalls == 0, "no stall when all outputs ready");
    // Random back-pressure.
    rnd_ready = 1;
    for (int p = 0; p < 300; p++) send_packet($urandom % N, 1 + $urandom % 5);
    rnd_ready = 0;
    repeat (10) @(posedge clk);
    check(stalls > 0, "back-pressure stalled the input at least once");
    check(delivered == accepted, $sformatf("delivered %0d of %0d", delivered, accepted));
    for (int i = 0; i < N; i++) check(expq[i].size() == 0, "nothing left over");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
