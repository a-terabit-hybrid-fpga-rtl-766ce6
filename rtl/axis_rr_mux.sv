// axis_rr_mux: packet-granular round-robin multiplexer (the trapezoids in
// front of the IPI and of the OPI).
//
// N input streams, each a WIDTH-bit word with its own last flag, are merged
// into one stream without interleaving packets. When no packet is in flight
// the mux grants the first input with a word, searching from the one after the
// last input served; the grant then holds until that input's last word has
// passed. The granted index travels with every word on out_src, so the
// receiver knows which queue (RX port or vS) the packet came from.
//
// Timing: combinational from in_valid to out_valid and from out_ready to
// in_ready; no cycle is lost between packets. Registers: the in-packet flag and
// the grant/last-served index.
//
// From the paper: the IPI serializes the input packets to its parser and the
// OPI iterates over the vS output buffers. Round-robin order and packet
// granularity are this design's choice.
module axis_rr_mux #(
  parameter int unsigned N     = 33,
  parameter int unsigned WIDTH = 417,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,

  input  logic             in_valid [N],
  output logic             in_ready [N],
  input  logic [WIDTH-1:0] in_data  [N],
  input  logic             in_last  [N],

  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             out_last,
  output logic [IDX_W-1:0] out_src
);
  logic             busy;      // a packet is in flight from grant_q
  logic [IDX_W-1:0] grant_q;   // input of the packet in flight / last served
  logic [IDX_W-1:0] sel;
  logic             any;

  // Round-robin pick, starting after grant_q.
  always_comb begin
    int unsigned idx;
    idx = 0;
    sel = grant_q;
    any = 1'b0;
    if (busy) begin
      any = in_valid[grant_q];
    end else begin
      for (int unsigned k = 1; k <= N; k++) begin
        idx = int'(grant_q) + k;
        if (idx >= N) idx -= N;
        if (!any && in_valid[idx]) begin
          any = 1'b1;
          sel = IDX_W'(idx);
        end
      end
    end
  end

  assign out_valid = any;
  assign out_data  = in_data[sel];
  assign out_last  = in_last[sel];
  assign out_src   = sel;

  always_comb begin
    for (int unsigned i = 0; i < N; i++)
      in_ready[i] = out_ready && any && (sel == IDX_W'(i));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      grant_q <= IDX_W'(N - 1);   // first search starts at input 0
    end else if (out_valid && out_ready) begin
      grant_q <= sel;
      busy    <= !out_last;
    end
  end

endmodule
