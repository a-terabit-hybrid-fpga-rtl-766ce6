// tb_axis_rr_mux: self-checking test of the packet round-robin mux with 5
// inputs.
//
// Phase 1: every input always has one-word packets; the grants must rotate
// 0,1,2,3,4,0,... with one word per cycle. Phase 2: random packet lengths,
// random valid gaps and random back-pressure; every word must leave in order
// for its input, tagged with its input, and packets must never interleave.
`timescale 1ns/1ps
module tb_axis_rr_mux;
  localparam int unsigned N = 5, W = 24, IW = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          in_valid [N];
  logic          in_ready [N];
  logic [W-1:0]  in_data  [N];
  logic          in_last  [N];
  logic          out_valid, out_ready, out_last;
  logic [W-1:0]  out_data;
  logic [IW-1:0] out_src;

  axis_rr_mux #(.N(N), .WIDTH(W)) dut (.*);

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

  // Source model: per input a queue of {last, data}.
  logic [W:0] srcq [N][$];
  int unsigned seq [N];
  bit random_gaps = 0;
  logic gap [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      in_valid[i] = (srcq[i].size() > 0) && !gap[i];
      in_data[i]  = (srcq[i].size() > 0) ? srcq[i][0][W-1:0] : '0;
      in_last[i]  = (srcq[i].size() > 0) ? srcq[i][0][W]    : 1'b0;
    end
  end

  task automatic add_packet(input int i, input int len);
    for (int k = 0; k < len; k++) begin
      srcq[i].push_back({(k == len - 1), W'(i << 16 | (seq[i] & 16'hffff))});
      seq[i]++;
    end
  endtask

  // Sink: check order per input and no interleaving.
  int unsigned next_seq [N];
  bit in_pkt = 0;
  int unsigned pkt_src = 0;
  int grants [$];
  int words_out = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < N; i++) if (in_valid[i] && in_ready[i]) void'(srcq[i].pop_front());
      for (int i = 0; i < N; i++) gap[i] <= random_gaps && ($urandom % 3 == 0);
      if (out_valid && out_ready) begin
        words_out++;
        check(out_data[W-1:16] == W'(out_src), "word tagged with its input");
        check(out_data[15:0] == 16'(next_seq[out_src]), "in order per input");
        next_seq[out_src] = out_data[15:0] + 1;
        if (in_pkt) check(out_src == IW'(pkt_src), "packets not interleaved");
        else grants.push_back(int'(out_src));
        in_pkt  = !out_last;
        pkt_src = out_src;
      end
    end
  end

  int cyc;
  initial begin
    for (int i = 0; i < N; i++) begin seq[i] = 0; next_seq[i] = 0; gap[i] = 0; end
    out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Phase 1: all inputs backlogged with one-word packets.
    @(negedge clk);
    for (int i = 0; i < N; i++) for (int k = 0; k < 8; k++) add_packet(i, 1);
    cyc = 0;
    while (words_out < 8 * N) begin @(negedge clk); cyc++; end
    check(cyc == 8 * N, $sformatf("one word per cycle: %0d cycles for %0d words", cyc, 8 * N));
    for (int g = 0; g < grants.size(); g++)
      check(grants[g] == g % N, $sformatf("round-robin grant %0d is %0d", g, grants[g]));
    // Phase 2: random lengths, gaps and back-pressure.
    random_gaps = 1;
    for (int i = 0; i < N; i++) for (int k = 0; k < 40; k++) add_packet(i, 1 + $urandom % 6);
    while (1) begin
      bit empty;
      @(negedge clk);
      out_ready = ($urandom % 4) != 0;
      empty = 1;
      for (int i = 0; i < N; i++) if (srcq[i].size() > 0) empty = 0;
      if (empty) break;
    end
    repeat (2) @(negedge clk);
    for (int i = 0; i < N; i++) check(next_seq[i] == seq[i], "all words of each input delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
