// polar_codec_top: flexible systematic polar encoder and the flexible parts
// of the matching Fast-SSC decoder.
//
// Encoder path: input_expander takes the k information bits of a frame, P
// per cycle, and places them at the information positions (0 elsewhere);
// sys_encoder turns that length-n vector into the systematic codeword, P
// bits per cycle. Code length (2 .. n_max), rate, information set, parity
// placement (natural or bit-reversed) and shortening are all run-time
// settings (log_n, k, n_s, and the mask, written into both mask copies at
// once through enc_mask_*).
//
// Decoder front end: channel LLR words (2P LLRs) pass through
// dec_llr_shortening, which forces the LLRs of shortened positions to the
// largest value, into dec_input_buffer, which holds one frame for the
// decoder core while the next frame is loaded. dec_stage_limits turns the
// length of the frame being decoded and a stage index from the core into
// that stage's constituent-code length and memory word count. The Fast-SSC
// decoder core itself is not part of this RTL; its connections appear as the
// core_* ports.
//
// All sizes default to the main configurations: encoder n_max = 16384,
// P = 32; decoder n_max = 32768, P = 256. The LLR width is this design's
// choice. Timing of each path is described in the submodules.
module polar_codec_top #(
  parameter int unsigned ENC_NMAX = polar_pkg::ENC_NMAX,
  parameter int unsigned ENC_P    = polar_pkg::ENC_P,
  parameter int unsigned DEC_NMAX = polar_pkg::DEC_NMAX,
  parameter int unsigned DEC_P    = polar_pkg::DEC_P,
  parameter int unsigned LLR_W    = polar_pkg::LLR_W,
  localparam int unsigned E_LOG    = $clog2(ENC_NMAX),
  localparam int unsigned E_NSTG   = E_LOG - $clog2(ENC_P),
  localparam int unsigned E_IDXW   = (E_NSTG > 0) ? E_NSTG : 1,
  localparam int unsigned E_LNW    = $clog2(E_LOG + 1),
  localparam int unsigned D_LOG    = $clog2(DEC_NMAX),
  localparam int unsigned D_LANES  = 2 * DEC_P,
  localparam int unsigned D_DEPTH  = (DEC_NMAX > D_LANES) ? DEC_NMAX / D_LANES : 1,
  localparam int unsigned D_AW     = (D_DEPTH > 1) ? $clog2(D_DEPTH) : 1,
  localparam int unsigned D_LNW    = $clog2(D_LOG + 1)
) (
  input  logic               clk,
  input  logic               rst_n,

  // ---------------- encoder ----------------
  input  logic [E_LNW-1:0]   enc_log_n,
  input  logic [E_LOG:0]     enc_n_s,
  input  logic               enc_mask_we,
  input  logic [E_IDXW-1:0]  enc_mask_waddr,
  input  logic [ENC_P-1:0]   enc_mask_wdata,
  input  logic [E_LOG:0]     enc_k,
  input  logic               enc_info_valid,
  output logic               enc_info_ready,
  input  logic [ENC_P-1:0]   enc_info,
  output logic               enc_out_valid,
  output logic               enc_out_first,
  output logic [ENC_P-1:0]   enc_x,

  // ---------------- decoder front end ----------------
  input  logic [D_LNW-1:0]   dec_log_n,
  input  logic               dec_short_we,
  input  logic [D_AW-1:0]    dec_short_waddr,
  input  logic [D_LANES-1:0] dec_short_wdata,
  input  logic               ch_valid,
  output logic               ch_ready,
  input  logic [LLR_W-1:0]   ch_llr [D_LANES],

  // ---------------- to / from the Fast-SSC decoder core ----------------
  output logic               core_frame_valid,
  output logic [D_LNW-1:0]   core_frame_log_n,
  input  logic               core_rd_en,
  input  logic [D_AW-1:0]    core_rd_addr,
  output logic [LLR_W-1:0]   core_rd_llr [D_LANES],
  input  logic               core_frame_done,
  input  logic [D_LNW-1:0]   core_stage,
  output logic               core_stage_used,
  output logic [D_LNW-1:0]   core_stage_nv_log,
  output logic [D_LOG:0]     core_stage_nv,
  output logic [D_LOG:0]     core_stage_words
);

  // ---------------- encoder ----------------
  // information bits -> v_I (the expander keeps its own copy of the mask)
  logic             v_valid, v_ready;
  logic [ENC_P-1:0] v_word;

  input_expander #(.NMAX(ENC_NMAX), .P(ENC_P)) u_exp (
    .clk(clk), .rst_n(rst_n),
    .log_n(enc_log_n), .k(enc_k),
    .mask_we(enc_mask_we), .mask_waddr(enc_mask_waddr), .mask_wdata(enc_mask_wdata),
    .info_valid(enc_info_valid), .info_ready(enc_info_ready), .info(enc_info),
    .out_valid(v_valid), .out_ready(v_ready), .u(v_word)
  );

  sys_encoder #(.NMAX(ENC_NMAX), .P(ENC_P)) u_enc (
    .clk(clk), .rst_n(rst_n),
    .log_n(enc_log_n), .n_s(enc_n_s),
    .mask_we(enc_mask_we), .mask_waddr(enc_mask_waddr), .mask_wdata(enc_mask_wdata),
    .in_valid(v_valid), .in_ready(v_ready), .u(v_word),
    .out_valid(enc_out_valid), .out_first(enc_out_first), .x(enc_x)
  );

  // ---------------- decoder front end ----------------
  logic             s_valid, s_ready;
  logic [LLR_W-1:0] s_llr [D_LANES];

  dec_llr_shortening #(.NMAX(DEC_NMAX), .P(DEC_P), .LLR_W(LLR_W)) u_short (
    .clk(clk), .rst_n(rst_n), .log_n(dec_log_n),
    .mask_we(dec_short_we), .mask_waddr(dec_short_waddr), .mask_wdata(dec_short_wdata),
    .in_valid(ch_valid), .in_ready(ch_ready), .in_llr(ch_llr),
    .out_valid(s_valid), .out_ready(s_ready), .out_llr(s_llr)
  );

  dec_input_buffer #(.NMAX(DEC_NMAX), .P(DEC_P), .LLR_W(LLR_W)) u_inbuf (
    .clk(clk), .rst_n(rst_n), .log_n(dec_log_n),
    .wr_valid(s_valid), .wr_ready(s_ready), .wr_llr(s_llr),
    .frame_valid(core_frame_valid), .frame_log_n(core_frame_log_n),
    .rd_en(core_rd_en), .rd_addr(core_rd_addr), .rd_llr(core_rd_llr),
    .frame_done(core_frame_done)
  );

  dec_stage_limits #(.NMAX(DEC_NMAX), .P(DEC_P)) u_limits (
    .log_n(core_frame_log_n), .stage(core_stage),
    .used(core_stage_used), .nv_log(core_stage_nv_log),
    .nv(core_stage_nv), .words(core_stage_words)
  );

endmodule
