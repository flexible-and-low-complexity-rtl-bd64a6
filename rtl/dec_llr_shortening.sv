// dec_llr_shortening: shortening support at the decoder input.
//
// A shortened code does not transmit positions whose value is known to be 0.
// The decoder still decodes the full mother code of length n, so the channel
// LLRs at those positions are replaced by the largest LLR of the format,
// which says "certainly 0" to the decoder. Which positions are shortened is
// kept in an n_max-bit mask memory (bit = 1: shortened), loaded once per
// code; this memory is the extra n_max bits of RAM that shortening costs.
//
// Interface: the input is a frame of max(1, n/(2P)) words of 2P LLRs
// (LLR_W-bit two's complement, a positive LLR favouring bit 0), with a
// placeholder at each shortened position; for n < 2P only the first n
// LLRs of the single word are used. in/out use a valid/ready handshake.
// The word position in the frame is counted here from log_n. The mask is
// loaded through mask_we/mask_waddr/mask_wdata, one word of 2P bits per
// address, while no frame is in flight.
//
// Timing: one register stage (the mask read is synchronous and happens in
// the cycle a word is accepted); full throughput of one word per cycle.
// Own choices: the word width of 2P LLRs (the decoder's memory word), the
// LLR width, the sign convention and the handshake.
module dec_llr_shortening #(
  parameter int unsigned NMAX  = 32768,
  parameter int unsigned P     = 256,
  parameter int unsigned LLR_W = 6,
  localparam int unsigned LANES    = 2 * P,
  localparam int unsigned LOG_NMAX = $clog2(NMAX),
  localparam int unsigned DEPTH    = (NMAX > LANES) ? NMAX / LANES : 1,
  localparam int unsigned AW       = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LNW      = $clog2(LOG_NMAX + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [LNW-1:0]         log_n,
  // shortening mask load port
  input  logic                   mask_we,
  input  logic [AW-1:0]          mask_waddr,
  input  logic [LANES-1:0]       mask_wdata,
  // channel LLRs in
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [LLR_W-1:0]       in_llr  [LANES],
  // LLRs out
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [LLR_W-1:0]       out_llr [LANES]
);

  localparam logic [LLR_W-1:0] LLR_MAX = {1'b0, {(LLR_W-1){1'b1}}};

  // words per frame - 1
  logic [AW-1:0] wlast;
  always_comb begin
    if (log_n > LNW'($clog2(LANES))) wlast = AW'((1 << (log_n - LNW'($clog2(LANES)))) - 1);
    else                             wlast = '0;
  end

  logic [AW-1:0]    widx;
  logic             accept;
  logic [LANES-1:0] mem [DEPTH];
  logic [LANES-1:0] mask_q;
  logic [LLR_W-1:0] llr_q [LANES];

  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (mask_we) mem[mask_waddr] <= mask_wdata;
    if (accept) begin
      mask_q <= mem[widx];
      llr_q  <= in_llr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx      <= '0;
      out_valid <= 1'b0;
    end else begin
      if (accept) widx <= (widx == wlast) ? '0 : widx + 1'b1;
      if (in_ready) out_valid <= in_valid;
    end
  end

  always_comb
    for (int j = 0; j < int'(LANES); j++)
      out_llr[j] = mask_q[j] ? LLR_MAX : llr_q[j];

endmodule
