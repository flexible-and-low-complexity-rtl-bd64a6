// sys_encoder: pipelined, rate- and length-flexible systematic polar encoder.
//
// Systematic encoding is done as two non-systematic passes with a zeroing
// step between them:
//   v_II  = v_I * F^(m)          (first flex_ns_encoder)
//   v_III = v_II with every frozen position set to 0   (mask memory)
//   x     = v_III * F^(m)        (second flex_ns_encoder)
// The input v_I is the length-n vector that already carries the information
// bits at the information positions and 0 elsewhere. Because the frozen set
// of a polar code is "domination contiguous", v_I -> x is a valid systematic
// encoder: x holds the information bits, in order, at the information
// positions. The mask memory decides those positions, so loading a mask of
// the bit-reversed information set gives parity bits at bit-reversed
// locations, and the plain set gives natural-order locations.
//
// Pipeline: first encoder -> register -> AND with mask word (memory read in
// the same cycle as the register load) -> register -> second encoder. These
// are the two pipeline levels of the paper's pipelined version, one before
// and one after the masking.
//
// Interface: frames are n/P consecutive P-bit words (one word, low n bits
// used, for n <= P). A free-running word counter t sets the phase of the
// encoder stages; a frame may start only when t is a multiple of n/P, which
// in_ready shows, and must then be delivered without gaps (in_ready stays 1
// for the rest of the frame). Back-to-back frames are always accepted, so
// the throughput is P bits per cycle. out_first marks the first word of each
// output frame. log_n, n_s and the mask may only change while the encoder is
// empty. n_s < n shortens the code: positions n_s .. n-1 are frozen by the
// input AND gates and come out as 0, to be dropped before transmission.
//
// Timing: the first output word appears 2*n/P cycles after the first input
// word (2 cycles for n <= P): (n/P - 1) cycles in each encoder plus the two
// pipeline registers. Counting both end cycles, as the paper does for its
// non-systematic encoder, this is 2*n/P + 1 cycles; the paper states
// 2*L_NS + 2 = 2*n/P + 2.
//
// Own choices: the word counter and in_ready alignment rule, active-low
// asynchronous reset on the control registers only, the synchronous read
// memory.
module sys_encoder #(
  parameter int unsigned NMAX = 16384,
  parameter int unsigned P    = 32,
  localparam int unsigned LOG_P    = $clog2(P),
  localparam int unsigned LOG_NMAX = $clog2(NMAX),
  localparam int unsigned NSTG     = LOG_NMAX - LOG_P,
  localparam int unsigned IDXW     = (NSTG > 0) ? NSTG : 1,
  localparam int unsigned LNW      = $clog2(LOG_NMAX + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // code configuration
  input  logic [LNW-1:0]    log_n,
  input  logic [LOG_NMAX:0] n_s,
  // mask memory load port
  input  logic              mask_we,
  input  logic [IDXW-1:0]   mask_waddr,
  input  logic [P-1:0]      mask_wdata,
  // input stream (v_I)
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [P-1:0]      u,
  // output stream (systematic codeword)
  output logic              out_valid,
  output logic              out_first,
  output logic [P-1:0]      x
);

  // ---------------- frame phase ----------------
  logic [LNW-1:0]  sel;
  logic [IDXW-1:0] wlast;       // n/P - 1 (0 for n <= P)
  logic [IDXW-1:0] t;           // free-running word counter
  logic            in_frame;
  logic            accept;
  logic [IDXW-1:0] widx;

  assign sel    = (log_n > LNW'(LOG_P)) ? LNW'(log_n - LNW'(LOG_P)) : '0;
  assign wlast  = IDXW'((1 << sel) - 1);
  assign widx   = t & wlast;
  assign in_ready = in_frame || (widx == '0);
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t        <= '0;
      in_frame <= 1'b0;
    end else begin
      t <= t + 1'b1;
      if (accept && widx == '0 && wlast != '0) in_frame <= 1'b1;
      else if (widx == wlast)                  in_frame <= 1'b0;
    end
  end

  // ---------------- first pass ----------------
  logic         v1;
  logic [P-1:0] x1;

  flex_ns_encoder #(.NMAX(NMAX), .P(P)) u_pass1 (
    .clk(clk), .rst_n(rst_n), .log_n(log_n), .n_s(n_s),
    .in_valid(accept), .u(u), .t_idx(t),
    .out_valid(v1), .x(x1)
  );

  // Frame index of the word leaving the first pass.
  logic [IDXW-1:0] idx1;
  assign idx1 = (t - wlast) & wlast;

  // ---------------- register, mask, register ----------------
  logic [P-1:0] mask_word;
  logic         v1_q, v2_q;
  logic [P-1:0] x1_q, x2_q;

  mask_memory #(.DEPTH(NMAX / P), .WIDTH(P)) u_mask (
    .clk(clk), .we(mask_we), .waddr(mask_waddr), .wdata(mask_wdata),
    .raddr(idx1), .rdata(mask_word)
  );

  always_ff @(posedge clk) begin
    x1_q <= x1;
    x2_q <= x1_q & mask_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q <= 1'b0;
      v2_q <= 1'b0;
    end else begin
      v1_q <= v1;
      v2_q <= v1_q;
    end
  end

  // ---------------- second pass ----------------
  logic [IDXW-1:0] t2;
  assign t2 = t - wlast - IDXW'(2);

  flex_ns_encoder #(.NMAX(NMAX), .P(P)) u_pass2 (
    .clk(clk), .rst_n(rst_n), .log_n(log_n), .n_s(n_s),
    .in_valid(v2_q), .u(x2_q), .t_idx(t2),
    .out_valid(out_valid), .x(x)
  );

  assign out_first = out_valid && (((t2 - wlast) & wlast) == '0);

  // A frame, once started, arrives without gaps.
  assert property (@(posedge clk) disable iff (!rst_n) in_frame |-> in_valid)
    else $error("sys_encoder: gap inside an input frame");

endmodule
