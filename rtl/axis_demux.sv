// axis_demux: steers a packet stream into one of N queues (the trapezoids
// behind the IPI and behind the OPI).
//
// Each word arrives with the index of the queue it must go to (in_dest); the
// sender keeps in_dest constant for all words of one packet. The word is
// taken into a one-word output register and offered on out_valid[dest] only.
// A full destination queue stalls the input through in_ready, and only that
// queue: the register is freed as soon as the addressed queue takes the word.
//
// Timing: one register stage, so one cycle from input to output; one word per
// cycle when the addressed queue keeps out_ready high.
//
// From the paper: a demultiplexer between the IPI and the vS input queues and
// between the OPI and the TX queues (Fig. 2). The register stage is this
// design's own choice.
module axis_demux #(
  parameter int unsigned N     = 26,
  parameter int unsigned WIDTH = 289,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,

  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  input  logic             in_last,
  input  logic [IDX_W-1:0] in_dest,

  output logic             out_valid [N],
  input  logic             out_ready [N],
  output logic [WIDTH-1:0] out_data,     // shared by all outputs
  output logic             out_last
);
  logic             v_q;
  logic [IDX_W-1:0] dest_q;
  logic             mid_pkt;   // a packet is partly through
  logic [IDX_W-1:0] pkt_dest;
  logic             take;

  assign take     = out_ready[dest_q];
  assign in_ready = !v_q || take;

  always_comb begin
    for (int unsigned i = 0; i < N; i++)
      out_valid[i] = v_q && (dest_q == IDX_W'(i));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q      <= 1'b0;
      dest_q   <= '0;
      out_data <= '0;
      out_last <= 1'b0;
      mid_pkt  <= 1'b0;
      pkt_dest <= '0;
    end else begin
      if (in_valid && in_ready) begin
        v_q      <= 1'b1;
        dest_q   <= in_dest;
        out_data <= in_data;
        out_last <= in_last;
        mid_pkt  <= !in_last;
        pkt_dest <= in_dest;
      end else if (take) begin
        v_q <= 1'b0;
      end
    end
  end

  // The destination may only change between packets, and must exist.
  a_dest_range: assert property (@(posedge clk) disable iff (!rst_n)
                                 in_valid |-> (int'(in_dest) < N));
  a_dest_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                  (in_valid && mid_pkt) |-> (in_dest == pkt_dest));

endmodule
