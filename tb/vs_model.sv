// vs_model: behavioural stand-in for one virtual switch (vS) in the FPGA
// fabric, used only by the end-to-end testbench.
//
// Real vS instances are user pipelines (parser, match-action stages,
// deparser) generated for the FPGA; here a vS passes every frame from its
// input queue to its output queue unchanged, after a pipeline delay of LAT
// fabric-clock cycles, and keeps four 128-bit registers that the management
// channel can write and read (register 3 counts frames passed). Every
// management command is answered once.
module vs_model
  import vsw_pkg::*;
#(
  parameter int unsigned LAT = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     rx_valid,
  output logic     rx_ready,
  input  vs_word_t rx_word,
  output logic     tx_valid,
  input  logic     tx_ready,
  output vs_word_t tx_word,
  input  logic     ctl_valid,
  output logic     ctl_ready,
  input  mi_word_t ctl_word,
  output logic     ctlr_valid,
  input  logic     ctlr_ready,
  output mi_word_t ctlr_word
);
  // Pipeline: LAT stages, each may hold one word; it advances when the
  // output is free.
  logic     v [LAT];
  vs_word_t d [LAT];
  logic     advance;
  logic [127:0] regs [4];

  assign advance  = !v[LAT-1] || tx_ready;
  assign rx_ready = advance;
  assign tx_valid = v[LAT-1];
  assign tx_word  = d[LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin v[i] <= 1'b0; d[i] <= '0; end
      for (int i = 0; i < 4; i++) regs[i] <= '0;
      ctlr_valid <= 1'b0;
      ctlr_word  <= '0;
    end else begin
      if (advance) begin
        v[0] <= rx_valid;
        d[0] <= rx_word;
        for (int i = 1; i < LAT; i++) begin v[i] <= v[i-1]; d[i] <= d[i-1]; end
        if (v[LAT-1] && d[LAT-1].tlast) regs[3] <= regs[3] + 1;
      end
      if (ctlr_valid && ctlr_ready) ctlr_valid <= 1'b0;
      if (ctl_valid && ctl_ready) begin
        ctlr_valid <= 1'b1;
        ctlr_word  <= ctl_word;
        ctlr_word.op <= MI_RESP;
        if (ctl_word.op == MI_WRITE && ctl_word.addr < 3) begin
          regs[ctl_word.addr[1:0]] <= ctl_word.data;
          ctlr_word.data <= '0;
        end else begin
          ctlr_word.data <= regs[ctl_word.addr[1:0]];
        end
      end
    end
  end
  assign ctl_ready = !ctlr_valid;
endmodule
