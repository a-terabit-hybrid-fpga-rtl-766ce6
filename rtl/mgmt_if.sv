// mgmt_if: on-chip side of the Management Interface (MI).
//
// The control software runs on an external microcontroller and talks to the
// chip through one 146-bit command channel; the MI gives it read and write
// access to the IPI Ingress table, the OPI Egress table, the IPI/OPI packet
// counters, and (by relaying) to the tables and registers inside each virtual
// switch (vS), through one 146-bit channel per vS.
//
// A command word is {op[1:0], tgt[2:0], dev[4:0], addr[7:0], data[127:0]}
// (vsw_pkg::mi_word_t). op is WRITE or READ; tgt selects:
//   INGRESS  entry addr of the Ingress table (data holds a vsw_pkg::ig_entry_t)
//   EGRESS   entry addr of the Egress table  (data holds a vsw_pkg::eg_entry_t)
//   COUNTER  addr 0-3: IPI packets/forwarded/untagged drops/miss drops,
//            addr 4-7: the same for the OPI (read only)
//   VS       the word is passed unchanged to vS dev on vs_cmd_valid[dev]
// Every INGRESS, EGRESS and COUNTER command is answered on the response
// channel with op = RESP and the header copied: a read returns the value in
// data, a write returns data = 0, and an address or vS outside the range
// returns data = all ones and changes nothing. A vS answers on its own
// response channel; the MI forwards those answers, round robin among the vS,
// with dev set to the answering vS. Its own answers go first.
//
// Timing: a table write takes effect at the clock edge that accepts the
// command; the answer is in the response register one cycle later (two cycles
// after acceptance when the response channel was busy). All channels use
// valid/ready. The MI runs on the ASIC core clock; the vS side of the
// channels is assumed to be synchronised to it by the vS wrapper.
//
// From the paper: a single input channel and 26 per-vS channels of 146 bits,
// and read/write access to the IPI and OPI tables and registers and to the
// vS match-action tables. The word layout, the answers and the arbitration
// are this design's own.
module mgmt_if
  import vsw_pkg::*;
#(
  parameter int unsigned NUM_VS     = N_VS,
  parameter int unsigned IG_ENTRIES = 32,
  parameter int unsigned EG_ENTRIES = 32,
  parameter int unsigned IG_AW      = $clog2(IG_ENTRIES),
  parameter int unsigned EG_AW      = $clog2(EG_ENTRIES),
  parameter int unsigned VS_IDX_W   = (NUM_VS > 1) ? $clog2(NUM_VS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,

  // External control layer.
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  mi_word_t          cmd,
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output mi_word_t          rsp,

  // Per-vS control channels.
  output logic              vs_cmd_valid [NUM_VS],
  input  logic              vs_cmd_ready [NUM_VS],
  output mi_word_t          vs_cmd,             // shared by all vS channels
  input  logic              vs_rsp_valid [NUM_VS],
  output logic              vs_rsp_ready [NUM_VS],
  input  mi_word_t          vs_rsp       [NUM_VS],

  // IPI Ingress table and counters.
  output logic              ig_we,
  output logic [IG_AW-1:0]  ig_waddr,
  output ig_entry_t         ig_wdata,
  output logic [IG_AW-1:0]  ig_raddr,
  input  ig_entry_t         ig_rdata,
  input  logic [31:0]       ipi_cnt [4],

  // OPI Egress table and counters.
  output logic              eg_we,
  output logic [EG_AW-1:0]  eg_waddr,
  output eg_entry_t         eg_wdata,
  output logic [EG_AW-1:0]  eg_raddr,
  input  eg_entry_t         eg_rdata,
  input  logic [31:0]       opi_cnt [4]
);
  // ---------------- command decode ----------------
  logic     own_v;        // an MI answer waits for the response register
  mi_word_t own_q;
  logic     vs_v;         // a command waits in the vS command register
  logic [VS_IDX_W-1:0] vs_dev_q;

  logic is_vs, is_local, accept, vs_free, own_free;
  logic ig_ok, eg_ok, vs_ok;
  mi_word_t answer;

  assign is_vs    = (cmd.tgt == MI_TGT_VS) && (cmd.op == MI_WRITE || cmd.op == MI_READ);
  assign is_local = (cmd.tgt != MI_TGT_VS) && (cmd.op == MI_WRITE || cmd.op == MI_READ);
  assign vs_ok    = int'(cmd.dev) < NUM_VS;
  assign ig_ok    = int'(cmd.addr) < IG_ENTRIES;
  assign eg_ok    = int'(cmd.addr) < EG_ENTRIES;
  assign vs_free  = !vs_v || vs_cmd_ready[vs_dev_q];
  assign own_free = !own_v;

  // A vS command needs the vS register (or, for a missing vS, the answer
  // slot); every other command needs the answer slot. NOPs are just taken.
  always_comb begin
    if (is_vs)         cmd_ready = vs_ok ? vs_free : own_free;
    else if (is_local) cmd_ready = own_free;
    else               cmd_ready = 1'b1;
  end
  assign accept = cmd_valid && cmd_ready;

  assign ig_raddr = IG_AW'(cmd.addr);
  assign eg_raddr = EG_AW'(cmd.addr);
  assign ig_waddr = IG_AW'(cmd.addr);
  assign eg_waddr = EG_AW'(cmd.addr);
  assign ig_wdata = ig_entry_t'(cmd.data[$bits(ig_entry_t)-1:0]);
  assign eg_wdata = eg_entry_t'(cmd.data[$bits(eg_entry_t)-1:0]);
  assign ig_we    = accept && is_local && cmd.op == MI_WRITE && cmd.tgt == MI_TGT_INGRESS && ig_ok;
  assign eg_we    = accept && is_local && cmd.op == MI_WRITE && cmd.tgt == MI_TGT_EGRESS  && eg_ok;

  always_comb begin
    answer      = cmd;
    answer.op   = MI_RESP;
    answer.data = '0;
    unique case (cmd.tgt)
      MI_TGT_INGRESS: begin
        if (!ig_ok)                answer.data = '1;
        else if (cmd.op == MI_READ) answer.data = 128'(ig_rdata);
      end
      MI_TGT_EGRESS: begin
        if (!eg_ok)                answer.data = '1;
        else if (cmd.op == MI_READ) answer.data = 128'(eg_rdata);
      end
      MI_TGT_COUNTER: begin
        if (cmd.addr < 8'd4)       answer.data = 128'(ipi_cnt[cmd.addr[1:0]]);
        else if (cmd.addr < 8'd8)  answer.data = 128'(opi_cnt[cmd.addr[1:0]]);
        else                       answer.data = '1;
      end
      default:                     answer.data = '1;   // missing vS or unknown target
    endcase
  end

  // ---------------- vS command register ----------------
  always_comb begin
    for (int unsigned i = 0; i < NUM_VS; i++)
      vs_cmd_valid[i] = vs_v && (vs_dev_q == VS_IDX_W'(i));
  end

  // ---------------- response register and arbitration ----------------
  logic                rsp_free;
  logic [VS_IDX_W-1:0] rr_q, rr_sel;
  logic                rr_any;

  assign rsp_free = !rsp_valid || rsp_ready;

  always_comb begin
    int unsigned idx;
    idx    = 0;
    rr_sel = rr_q;
    rr_any = 1'b0;
    for (int unsigned k = 1; k <= NUM_VS; k++) begin
      idx = int'(rr_q) + k;
      if (idx >= NUM_VS) idx -= NUM_VS;
      if (!rr_any && vs_rsp_valid[idx]) begin
        rr_any = 1'b1;
        rr_sel = VS_IDX_W'(idx);
      end
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < NUM_VS; i++)
      vs_rsp_ready[i] = rsp_free && !own_v && rr_any && (rr_sel == VS_IDX_W'(i));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_v     <= 1'b0;
      own_q     <= '0;
      vs_v      <= 1'b0;
      vs_dev_q  <= '0;
      vs_cmd    <= '0;
      rsp_valid <= 1'b0;
      rsp       <= '0;
      rr_q      <= VS_IDX_W'(NUM_VS - 1);
    end else begin
      // vS command register
      if (vs_v && vs_cmd_ready[vs_dev_q]) vs_v <= 1'b0;
      if (accept && is_vs && vs_ok) begin
        vs_v     <= 1'b1;
        vs_dev_q <= VS_IDX_W'(cmd.dev);
        vs_cmd   <= cmd;
      end

      // response register: own answers first, then vS answers round robin
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      if (rsp_free && own_v) begin
        rsp_valid <= 1'b1;
        rsp       <= own_q;
        own_v     <= 1'b0;
      end else if (rsp_free && rr_any) begin
        rsp_valid <= 1'b1;
        rsp       <= vs_rsp[rr_sel];
        rsp.dev   <= 5'(rr_sel);
        rr_q      <= rr_sel;
      end

      if (accept && (is_local || (is_vs && !vs_ok))) begin
        own_v <= 1'b1;
        own_q <= answer;
      end
    end
  end

endmodule
