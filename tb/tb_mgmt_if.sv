// tb_mgmt_if: self-checking test of the management interface.
//
// The testbench stands in for the IPI/OPI tables (arrays with a write port and
// a combinational read port), their counters, and the vS control logic (each
// vS answers a command after a random delay with data = command data + vS
// index). It checks table writes and read-back through the command channel,
// counter reads, error answers for out-of-range addresses and missing vS,
// relaying of vS commands to exactly the addressed vS, and the forwarding of
// many simultaneous vS answers under response back-pressure.
`timescale 1ns/1ps
module tb_mgmt_if;
  import vsw_pkg::*;

  localparam int unsigned NV = 26;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 1;
  mi_word_t  cmd = '0, rsp;
  logic      vs_cmd_valid [NV];
  logic      vs_cmd_ready [NV];
  mi_word_t  vs_cmd;
  logic      vs_rsp_valid [NV];
  logic      vs_rsp_ready [NV];
  mi_word_t  vs_rsp       [NV];
  logic      ig_we, eg_we;
  logic [4:0] ig_waddr, ig_raddr, eg_waddr, eg_raddr;
  ig_entry_t ig_wdata, ig_rdata;
  eg_entry_t eg_wdata, eg_rdata;
  logic [31:0] ipi_cnt [4];
  logic [31:0] opi_cnt [4];

  mgmt_if dut (.*);

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

  // Table stand-ins.
  ig_entry_t igt [32];
  eg_entry_t egt [32];
  int ig_writes = 0, eg_writes = 0;
  assign ig_rdata = igt[ig_raddr];
  assign eg_rdata = egt[eg_raddr];
  always @(posedge clk) begin
    if (ig_we) begin igt[ig_waddr] <= ig_wdata; ig_writes++; end
    if (eg_we) begin egt[eg_waddr] <= eg_wdata; eg_writes++; end
  end
  initial for (int i = 0; i < 4; i++) begin ipi_cnt[i] = 32'h100 + i; opi_cnt[i] = 32'h200 + i; end

  // vS stand-ins: accept a command, answer it later.
  mi_word_t vs_pend [NV][$];
  int vs_seen [NV];
  always @(posedge clk) begin
    for (int i = 0; i < NV; i++) begin
      if (!rst_n) begin vs_rsp_valid[i] <= 0; vs_cmd_ready[i] <= 1; vs_seen[i] = 0; end
      else begin
        if (vs_cmd_valid[i] && vs_cmd_ready[i]) begin
          mi_word_t a;
          a = vs_cmd; a.op = MI_RESP; a.data = vs_cmd.data + 128'(i);
          vs_pend[i].push_back(a);
          vs_seen[i]++;
        end
        if (vs_rsp_valid[i] && vs_rsp_ready[i]) vs_rsp_valid[i] <= 0;
        else if (!vs_rsp_valid[i] && vs_pend[i].size() > 0 && ($urandom % 3 == 0)) begin
          vs_rsp[i]       <= vs_pend[i].pop_front();
          vs_rsp_valid[i] <= 1;
        end
      end
    end
  end

  // Response collector.
  mi_word_t got [$];
  bit rnd_ready = 0;
  always @(posedge clk) begin
    if (rst_n && rsp_valid && rsp_ready) got.push_back(rsp);
    rsp_ready <= rnd_ready ? ($urandom % 2 == 0) : 1'b1;
  end

  task automatic send(input mi_op_e op, input mi_tgt_e tgt, input int dev, input int addr,
                      input logic [127:0] data);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.tgt = tgt; cmd.dev = 5'(dev); cmd.addr = 8'(addr); cmd.data = data;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  task automatic wait_rsp(output mi_word_t r);
    int t;
    t = 0;
    while (got.size() == 0 && t < 200) begin @(posedge clk); t++; end
    if (got.size() == 0) begin check(0, "answer arrived"); r = '0; end
    else r = got.pop_front();
  endtask

  initial begin
    mi_word_t r;
    ig_entry_t ie;
    eg_entry_t ee;
    int sent_vs;
    for (int i = 0; i < 32; i++) begin igt[i] = '0; egt[i] = '0; end
    for (int i = 0; i < NV; i++) begin vs_rsp[i] = '0; vs_rsp_valid[i] = 0; vs_cmd_ready[i] = 1; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Ingress table write and read back.
    ie = '0; ie.valid = 1; ie.vid = 12'h123; ie.port_mask = 33'h1_0000_0005; ie.dev_id = 9;
    send(MI_WRITE, MI_TGT_INGRESS, 0, 3, 128'(ie));
    wait_rsp(r);
    check(r.op == MI_RESP && r.tgt == MI_TGT_INGRESS && r.addr == 3 && r.data == 0, "ingress write acknowledged");
    check(igt[3] == ie && ig_writes == 1, "ingress entry written once");
    send(MI_READ, MI_TGT_INGRESS, 0, 3, '0);
    wait_rsp(r);
    check(r.data == 128'(ie), "ingress entry read back");

    // Egress table.
    ee = '0; ee.valid = 1; ee.vid = 12'h0aa; ee.dev_id = 17; ee.tx_port = 32;
    send(MI_WRITE, MI_TGT_EGRESS, 0, 31, 128'(ee));
    wait_rsp(r);
    check(r.op == MI_RESP && r.data == 0 && egt[31] == ee, "egress write");
    send(MI_READ, MI_TGT_EGRESS, 0, 31, '0);
    wait_rsp(r);
    check(r.data == 128'(ee), "egress entry read back");

    // Out of range.
    send(MI_WRITE, MI_TGT_EGRESS, 0, 40, 128'(ee));
    wait_rsp(r);
    check(r.data == '1 && eg_writes == 1, "out-of-range write refused");

    // Answer latency: in the response register one cycle after acceptance.
    send(MI_READ, MI_TGT_EGRESS, 0, 31, '0);    // returns #1 after the accepting edge
    check(!rsp_valid, "no answer at the accepting edge");
    @(posedge clk); #1;
    check(rsp_valid && rsp.data == 128'(ee), "answer one cycle after acceptance");
    wait_rsp(r);

    // Counters.
    for (int a = 0; a < 8; a++) begin
      send(MI_READ, MI_TGT_COUNTER, 0, a, '0);
      wait_rsp(r);
      check(r.data == 128'(a < 4 ? 32'h100 + a : 32'h200 + a - 4), $sformatf("counter %0d", a));
    end

    // One vS command: only the addressed channel sees it, answer relayed.
    send(MI_WRITE, MI_TGT_VS, 5, 7, 128'h1000);
    wait_rsp(r);
    check(vs_seen[5] == 1, "vS 5 got the command");
    check(r.op == MI_RESP && r.dev == 5 && r.addr == 7 && r.data == 128'h1005, "vS 5 answer relayed");
    for (int i = 0; i < NV; i++) if (i != 5) check(vs_seen[i] == 0, "other vS untouched");

    // Missing vS.
    send(MI_READ, MI_TGT_VS, 27, 0, '0);
    wait_rsp(r);
    check(r.dev == 27 && r.data == '1, "missing vS answered with error");

    // Burst to every vS with response back-pressure.
    rnd_ready = 1;
    for (int i = 0; i < NV; i++) send(MI_READ, MI_TGT_VS, i, i, 128'(i * 1000));
    sent_vs = NV;
    repeat (400) @(posedge clk);
    check(got.size() == sent_vs, $sformatf("%0d of %0d vS answers", got.size(), sent_vs));
    begin
      bit seen [NV];
      foreach (seen[i]) seen[i] = 0;
      while (got.size() > 0) begin
        r = got.pop_front();
        if (int'(r.dev) < NV) begin
          check(r.data == 128'(int'(r.dev) * 1000 + int'(r.dev)) && r.addr == r.dev, "vS answer content");
          check(!seen[r.dev], "each vS answers once");
          seen[r.dev] = 1;
        end else check(0, "answer from a vS that does not exist");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
