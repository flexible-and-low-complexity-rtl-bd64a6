// input_expander: places the information bits of a frame at the information
// positions of the code, producing the encoder input v_I (information bits at
// the positions marked 1 in the frozen-bit mask, 0 everywhere else).
//
// How it works: information bits arrive P per cycle and are appended to a
// 2P-bit buffer. For each output word w the mask word of w is read from the
// expander's own copy of the frozen-bit mask; output bit i takes buffer bit
// r(i), where r(i) is the number of mask ones below i in the word, and the
// buffer then drops the popcount(mask word) bits it used. A new input word is
// taken whenever the bits left after this cycle's output fit in P, so with
// an input that keeps up, every output word finds its bits in the buffer and
// the expander emits one word per cycle, matching the encoder's P bits per
// cycle.
//
// Interface:
//   log_n, k       code length (log2) and information bits per frame, k >= 1
//                  (with k = 0 nothing is produced); both, and the mask, may
//                  change only while the expander is empty.
//   mask_we/...    load the mask (same contents as the encoder's mask memory).
//   info_valid/info_ready/info
//                  information stream. Each frame starts in a fresh word and
//                  fills ceil(k/P) words, first bit in bit 0; the unused top
//                  bits of the last word are ignored. Once a frame's first
//                  output word has left, the rest of its information words
//                  must follow without gaps.
//   out_valid/out_ready/u
//                  v_I words in natural order, n/P per frame (one word, low n
//                  bits used, when n <= P); out_ready is the encoder's
//                  in_ready. The first word of a frame is offered only when
//                  min(P, k) of its bits are buffered, and inside a frame a
//                  word is offered in every cycle (an assertion checks this),
//                  which is what the encoder's gap-free frame rule needs.
// Timing: an information word accepted in cycle c can be used from cycle c+1.
// The mask read is synchronous; its address follows the next output word.
//
// The expansion step itself (put u_i at the i-th information position, zeros
// elsewhere) is the first step of the systematic encoding algorithm; the
// original design only names the "input preprocessor" that does it. The
// buffer, the k input, the framing of the information stream and the
// handshake are this design's own choices.
module input_expander #(
  parameter int unsigned NMAX = 16384,
  parameter int unsigned P    = 32,
  localparam int unsigned LOG_NMAX = $clog2(NMAX),
  localparam int unsigned LOG_P    = $clog2(P),
  localparam int unsigned NSTG     = LOG_NMAX - LOG_P,
  localparam int unsigned IDXW     = (NSTG > 0) ? NSTG : 1,
  localparam int unsigned LNW      = $clog2(LOG_NMAX + 1),
  localparam int unsigned CW       = $clog2(2 * P + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LNW-1:0]    log_n,
  input  logic [LOG_NMAX:0] k,
  input  logic              mask_we,
  input  logic [IDXW-1:0]   mask_waddr,
  input  logic [P-1:0]      mask_wdata,
  input  logic              info_valid,
  output logic              info_ready,
  input  logic [P-1:0]      info,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [P-1:0]      u
);

  // ---------------- frame position and mask word ----------------
  logic [LNW-1:0]  sel;
  logic [IDXW-1:0] wlast, w, w_next;
  logic [P-1:0]    mword, lenmask, m_eff;
  logic            fire_o, fire_i;

  assign sel   = (log_n > LNW'(LOG_P)) ? LNW'(log_n - LNW'(LOG_P)) : '0;
  assign wlast = IDXW'((1 << sel) - 1);
  assign w_next = !fire_o ? w : (w == wlast) ? '0 : w + 1'b1;

  mask_memory #(.DEPTH(1 << NSTG), .WIDTH(P)) u_mask (
    .clk(clk), .we(mask_we), .waddr(mask_waddr), .wdata(mask_wdata),
    .raddr(w_next), .rdata(mword)
  );

  // positions >= n of a one-word frame are never information positions
  always_comb begin
    for (int i = 0; i < int'(P); i++)
      lenmask[i] = (log_n >= LNW'(LOG_P)) || (i < (1 << log_n));
  end
  assign m_eff = mword & lenmask;

  // ---------------- scatter ----------------
  logic [2*P-1:0] buffer;
  logic [CW-1:0]  cnt, need, remain, take;
  logic [LOG_NMAX:0] in_left, frame_bits;

  always_comb begin
    logic [CW-1:0] r;
    r = '0;
    for (int i = 0; i < int'(P); i++) begin
      u[i] = m_eff[i] & buffer[r[CW-2:0]];
      r = r + CW'(m_eff[i]);
    end
    need = r;
  end

  // a frame's first word waits for min(P, k) bits; later words for their own
  assign frame_bits = (k < (LOG_NMAX+1)'(P)) ? k : (LOG_NMAX+1)'(P);
  assign out_valid  = (k != '0) && (cnt >= need) &&
                      ((w != '0) || ((LOG_NMAX+1)'(cnt) >= frame_bits));
  assign fire_o     = out_valid && out_ready;
  assign remain     = fire_o ? cnt - need : cnt;
  assign info_ready = (remain <= CW'(P));
  assign fire_i     = info_valid && info_ready;

  // bits of this input word that belong to the frame
  always_comb begin
    logic [LOG_NMAX:0] left;
    left = (in_left == '0) ? k : in_left;
    take = (left < (LOG_NMAX+1)'(P)) ? CW'(left) : CW'(P);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      w       <= '0;
      in_left <= '0;
    end else begin
      cnt <= remain + (fire_i ? take : '0);
      w   <= w_next;
      if (fire_i) in_left <= ((in_left == '0) ? k : in_left) - (LOG_NMAX+1)'(take);
    end
  end

  // the buffer is not reset: only its low cnt bits are ever used, and bits
  // above the kept ones are cleared before a new word is merged in
  always_ff @(posedge clk) begin
    logic [2*P-1:0] inw, keep;
    inw = '0;
    for (int i = 0; i < int'(P); i++) inw[i] = info[i] & (CW'(i) < take);
    keep = (2*P)'((2*P+1)'(1) << remain) - 1'b1;
    buffer <= ((buffer >> (fire_o ? need : '0)) & keep) |
              (fire_i ? (inw << remain) : '0);
  end

  // Inside a frame the expander must supply a word every cycle.
  assert property (@(posedge clk) disable iff (!rst_n) (w != '0) |-> out_valid)
    else $error("input_expander: information stream stalled inside a frame");

endmodule
