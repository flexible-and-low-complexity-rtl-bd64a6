// dec_input_buffer: channel input buffer of the flexible decoder.
//
// The decoder keeps one extra channel-vector buffer so that the next frame's
// LLRs can be loaded while the current frame is being decoded; the decoder
// then never waits for its input and keeps its throughput. It is built here
// as a ping-pong pair of banks, each holding one frame of up to n_max LLRs
// as NMAX/(2P) words of 2P LLRs. The writer fills one bank while the decoder
// reads the other; a bank changes hands when it is full (writer side) or
// released (decoder side).
//
// Interface:
//   write side  wr_valid/wr_ready/wr_llr: words of a frame in order; a frame
//               is max(1, n/(2P)) words for log_n = log2(n), which is
//               sampled with the first word and kept with the frame.
//   read side   frame_valid: a complete frame is ready; frame_log_n: its
//               length; rd_en/rd_addr: read a word, rd_llr holds it one
//               cycle later; frame_done: pulse when the decoder has finished
//               with the frame, which frees the bank.
// wr_ready falls only when both banks hold frames the decoder has not yet
// released. Own choices: the bank organisation, handshake and ports; the
// paper gives only the buffer's purpose.
module dec_input_buffer #(
  parameter int unsigned NMAX  = 32768,
  parameter int unsigned P     = 256,
  parameter int unsigned LLR_W = 6,
  localparam int unsigned LANES    = 2 * P,
  localparam int unsigned LOG_NMAX = $clog2(NMAX),
  localparam int unsigned DEPTH    = (NMAX > LANES) ? NMAX / LANES : 1,
  localparam int unsigned AW       = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LNW      = $clog2(LOG_NMAX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [LNW-1:0]   log_n,
  // write side (channel)
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [LLR_W-1:0] wr_llr [LANES],
  // read side (decoder)
  output logic             frame_valid,
  output logic [LNW-1:0]   frame_log_n,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [LLR_W-1:0] rd_llr [LANES],
  input  logic             frame_done
);

  logic [LANES*LLR_W-1:0] mem [2*DEPTH];
  logic [LANES*LLR_W-1:0] rd_word;
  logic [1:0]             full;
  logic [LNW-1:0]         bank_log_n [2];
  logic                   wbank, rbank;
  logic [AW-1:0]          wptr, wlast;
  logic                   accept;

  // words per frame - 1, for the frame being written
  always_comb begin
    logic [LNW-1:0] ln;
    ln = (wptr == '0) ? log_n : bank_log_n[wbank];
    if (ln > LNW'($clog2(LANES))) wlast = AW'((1 << (ln - LNW'($clog2(LANES)))) - 1);
    else                          wlast = '0;
  end

  assign wr_ready    = !full[wbank];
  assign accept      = wr_valid && wr_ready;
  assign frame_valid = full[rbank];
  assign frame_log_n = bank_log_n[rbank];

  always_ff @(posedge clk) begin
    if (accept) begin
      logic [LANES*LLR_W-1:0] w;
      for (int j = 0; j < int'(LANES); j++) w[j*LLR_W +: LLR_W] = wr_llr[j];
      mem[{wbank, wptr}] <= w;
      if (wptr == '0) bank_log_n[wbank] <= log_n;
    end
    if (rd_en) rd_word <= mem[{rbank, rd_addr}];
  end

  always_comb
    for (int j = 0; j < int'(LANES); j++) rd_llr[j] = rd_word[j*LLR_W +: LLR_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full  <= 2'b00;
      wbank <= 1'b0;
      rbank <= 1'b0;
      wptr  <= '0;
    end else begin
      if (accept) begin
        if (wptr == wlast) begin
          full[wbank] <= 1'b1;
          wbank       <= ~wbank;
          wptr        <= '0;
        end else begin
          wptr <= wptr + 1'b1;
        end
      end
      if (frame_done && full[rbank]) begin
        full[rbank] <= 1'b0;
        rbank       <= ~rbank;
      end
    end
  end

  // The decoder releases only a frame it was given.
  assert property (@(posedge clk) disable iff (!rst_n) frame_done |-> frame_valid)
    else $error("dec_input_buffer: frame_done without a frame");

endmodule
