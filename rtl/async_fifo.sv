// async_fifo: dual-clock queue used for all 118 packet queues of the SoC.
//
// Words are written in the wclk domain and read in the rclk domain. Each side
// keeps a pointer that counts modulo 2*DEPTH, so a full queue and an empty one
// are told apart by the pointer difference (DEPTH or 0). Pointers cross the
// clock boundary as Gray codes through two-flop synchronizers. DEPTH need not
// be a power of two (the queues are 66 and 52 words deep): a count c is sent
// as gray(c + OFS) with OFS = 2^k - DEPTH, k = clog2(DEPTH). The reflected Gray
// code is mirror-symmetric about 2^k, so the 2*DEPTH codes from 2^k - DEPTH to
// 2^k + DEPTH - 1 also change in one bit only when the count wraps, and the
// crossing stays safe.
//
// Interface: valid/ready on both sides. wready is low when full; rvalid is
// high when a word is available and rdata shows it (first-word fall-through).
// A word written is visible to the reader three rclk edges later at most
// (pointer register plus two synchronizer stages); freed space reaches the
// writer the same way. Both resets are asynchronous and active low; each must
// be released synchronously to its own clock.
//
// From the paper: asynchronous mode, write/read pointers with full/empty flags
// around the storage, and the queue sizes (66 x 417 for RX/TX queues, 52 x 289
// for vS queues). The Gray-code scheme, the synchronizer depth, the
// fall-through read and the use of a register array rather than the foundry's
// single-port SRAM macro are this design's own.
module async_fifo #(
  parameter int unsigned WIDTH = 417,
  parameter int unsigned DEPTH = 66
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wvalid,
  output logic             wready,
  input  logic [WIDTH-1:0] wdata,

  input  logic             rclk,
  input  logic             rrst_n,
  output logic             rvalid,
  input  logic             rready,
  output logic [WIDTH-1:0] rdata
);
  localparam int unsigned K   = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned PW  = K + 1;                  // pointer code width
  localparam int unsigned OFS = (1 << K) - DEPTH;
  localparam int unsigned AW  = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam logic [PW-1:0] TWO_D = PW'(2 * DEPTH);
  localparam logic [PW-1:0] D_P   = PW'(DEPTH);

  function automatic logic [PW-1:0] to_gray(input logic [PW-1:0] cnt);
    logic [PW-1:0] b;
    b = cnt + PW'(OFS);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [PW-1:0] from_gray(input logic [PW-1:0] g);
    logic [PW-1:0] b;
    b[PW-1] = g[PW-1];
    for (int i = PW - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b - PW'(OFS);
  endfunction

  // Count modulo 2*DEPTH -> storage address.
  function automatic logic [AW-1:0] addr_of(input logic [PW-1:0] cnt);
    return (cnt >= D_P) ? AW'(cnt - D_P) : AW'(cnt);
  endfunction

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] cnt);
    return (cnt == TWO_D - PW'(1)) ? '0 : cnt + PW'(1);
  endfunction

  logic [WIDTH-1:0] mem [DEPTH];

  // ---------------- write side ----------------
  logic [PW-1:0] wcnt, wgray;
  logic [PW-1:0] rcnt, rgray;
  logic [PW-1:0] rgray_s1, rgray_s2;
  logic [PW-1:0] rcnt_w, wfill;

  assign rcnt_w = from_gray(rgray_s2);
  assign wfill  = (wcnt >= rcnt_w) ? wcnt - rcnt_w : wcnt + TWO_D - rcnt_w;
  assign wready = (wfill != D_P);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wcnt     <= '0;
      wgray    <= to_gray('0);
      rgray_s1 <= to_gray('0);
      rgray_s2 <= to_gray('0);
    end else begin
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
      if (wvalid && wready) begin
        wcnt  <= incr(wcnt);
        wgray <= to_gray(incr(wcnt));
      end
    end
  end

  always_ff @(posedge wclk) begin
    if (wvalid && wready) mem[addr_of(wcnt)] <= wdata;
  end

  // ---------------- read side ----------------
  logic [PW-1:0] wgray_s1, wgray_s2;
  logic [PW-1:0] wcnt_r;

  assign wcnt_r = from_gray(wgray_s2);
  assign rvalid = (wcnt_r != rcnt);
  assign rdata  = mem[addr_of(rcnt)];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rcnt     <= '0;
      rgray    <= to_gray('0);
      wgray_s1 <= to_gray('0);
      wgray_s2 <= to_gray('0);
    end else begin
      wgray_s1 <= wgray;
      wgray_s2 <= wgray_s1;
      if (rvalid && rready) begin
        rcnt  <= incr(rcnt);
        rgray <= to_gray(incr(rcnt));
      end
    end
  end

  // The pointer code crossing to the other side changes in at most one bit.
  a_wgray_one_bit: assert property (@(posedge wclk) disable iff (!wrst_n)
                                     $countones(wgray ^ $past(wgray)) <= 1);
  a_rgray_one_bit: assert property (@(posedge rclk) disable iff (!rrst_n)
                                     $countones(rgray ^ $past(rgray)) <= 1);

endmodule
