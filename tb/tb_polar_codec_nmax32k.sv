// tb_polar_codec_nmax32k: end-to-end test of polar_codec_top with the encoder built for n_max 32768, P 64 (decoder n_max 32768, P 256).
//
// Encoder side: for each code setting (length, shortened length, natural or
// bit-reversed parity placement) a random domination-contiguous information
// set is loaded into the mask memories and frames of k random information
// bits are streamed in, each frame starting in a fresh input word.
// Every output frame is compared with the reference two-pass systematic
// encoder and must carry the information bits unchanged at the information
// positions and 0 at shortened positions; the first output word must appear
// 2n/P cycles (2 for n <= P) after the expanded first word enters the
// systematic encoder (observed on the internal expander-encoder handshake).
// Decoder side: each codeword is sent over a noiseless BPSK channel as LLRs
// (random magnitudes, placeholder 0 at shortened positions) through the
// shortening unit into the input buffer. A stand-in for the decoder core
// reads each buffered frame, checks the hard decisions against the
// codeword, checks that shortened positions hold the largest LLR, and checks
// the stage limits n_v = 2^i n / n_max and max(1, n_v / 2P) for every stage.
// Mechanisms counted (each must occur when CHECK_MECH is set): encoder
// frame-alignment wait, back-to-back encoder frames, code length change,
// n < P, shortening, bit-reversed parity, channel back-pressure, and loading
// a frame while another is being decoded.
module tb_polar_codec_nmax32k;
  import polar_ref_pkg::*;

  localparam int unsigned EN = 32768, EP = 64, DN = 32768, DP = 256, LW = 6;
  localparam bit CHECK_MECH = 1'b1;
  localparam int EPI = EP;
  localparam int unsigned E_LOG = $clog2(EN);
  localparam int unsigned E_NSTG = E_LOG - $clog2(EP);
  localparam int unsigned E_LNW = $clog2(E_LOG + 1);
  localparam int unsigned D_LOG = $clog2(DN);
  localparam int unsigned D_LANES = 2 * DP;
  localparam int DLI = D_LANES;
  localparam int unsigned D_DEPTH = DN / D_LANES;
  localparam int unsigned D_AW = (D_DEPTH > 1) ? $clog2(D_DEPTH) : 1;
  localparam int unsigned D_LNW = $clog2(D_LOG + 1);
  localparam int WATCHDOG = 800000;

  logic clk = 0, rst_n = 0;
  logic [E_LNW-1:0] enc_log_n;
  logic [E_LOG:0] enc_n_s;
  logic enc_mask_we;
  logic [E_NSTG-1:0] enc_mask_waddr;
  logic [EP-1:0] enc_mask_wdata;
  logic [E_LOG:0] enc_k;
  logic enc_info_valid, enc_info_ready;
  logic [EP-1:0] enc_info;
  logic enc_out_valid, enc_out_first;
  logic [EP-1:0] enc_x;
  logic [D_LNW-1:0] dec_log_n;
  logic dec_short_we;
  logic [D_AW-1:0] dec_short_waddr;
  logic [D_LANES-1:0] dec_short_wdata;
  logic ch_valid, ch_ready;
  logic [LW-1:0] ch_llr [D_LANES];
  logic core_frame_valid;
  logic [D_LNW-1:0] core_frame_log_n;
  logic core_rd_en;
  logic [D_AW-1:0] core_rd_addr;
  logic [LW-1:0] core_rd_llr [D_LANES];
  logic core_frame_done;
  logic [D_LNW-1:0] core_stage;
  logic core_stage_used;
  logic [D_LNW-1:0] core_stage_nv_log;
  logic [D_LOG:0] core_stage_nv, core_stage_words;

  polar_codec_top #(.ENC_NMAX(EN), .ENC_P(EP), .DEC_NMAX(DN), .DEC_P(DP), .LLR_W(LW)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int m_align = 0, m_b2b = 0, m_lenchg = 0, m_small = 0, m_short = 0, m_rev = 0;
  int m_chstall = 0, m_overlap = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("cycle %0d: %s", cycle, msg);
  endtask

  class frame_c;
    int n, ns;
    bvec_t v;       // encoder input, after shortening
    bvec_t x;       // expected codeword
    bvec_t info;    // information positions
  endclass

  frame_c enc_q[$];     // frames inside the encoder
  frame_c ch_q[$];      // codewords waiting for the channel
  frame_c dec_q[$];     // frames sent to the decoder front end
  int first_cycle_q[$];
  int enc_frames_out = 0, dec_frames_done = 0, enc_frames_in = 0;

  // ---------------- encoder stimulus ----------------
  int enc_W = 1;       // words per frame of the current code
  task automatic enc_config(int ln, int ns, bit rev, int frames, int nseeds);
    int n, W, idx, kk, nw;
    bvec_t info, infor;
    n = 1 << ln;
    W = (n > EPI) ? n / EPI : 1;
    // draw information sets until one keeps at least one bit after shortening
    kk = 0;
    while (kk == 0) begin
      info = random_upset(n, nseeds, n);
      infor = new[n];
      for (int i = 0; i < n; i++) infor[i] = rev ? info[bitrev(i, ln)] : info[i];
      for (int i = ns; i < n; i++) infor[i] = 0;
      for (int i = 0; i < n; i++) kk += infor[i];
    end
    nw = (kk + EPI - 1) / EPI;
    // wait until the encoder is empty before changing the code
    while (enc_q.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);
    if (int'(enc_log_n) != ln) m_lenchg++;
    enc_log_n = E_LNW'(ln); enc_n_s = (E_LOG+1)'(ns); enc_k = (E_LOG+1)'(kk);
    enc_W = W;
    for (int q = 0; q < W; q++) begin
      enc_mask_we = 1; enc_mask_waddr = E_NSTG'(q);
      for (int i = 0; i < EPI; i++) begin
        idx = q * EPI + i;
        enc_mask_wdata[i] = (idx < n) ? infor[idx] : 1'b0;
      end
      @(negedge clk);
    end
    enc_mask_we = 0;
    repeat (2) @(negedge clk);
    for (int f = 0; f < frames; f++) begin
      frame_c fr;
      bit bits[$];
      int j;
      fr = new;
      fr.n = n; fr.ns = ns; fr.info = infor;
      fr.v = new[n];
      for (int b = 0; b < kk; b++) bits.push_back(bit'($urandom_range(1, 0)));
      j = 0;
      for (int i = 0; i < n; i++) begin
        fr.v[i] = infor[i] ? bits[j] : 1'b0;
        j += infor[i];
      end
      fr.x = sys_encode(fr.v, infor);
      if (n < EPI) m_small++;
      if (ns < n) m_short++;
      if (rev) m_rev++;
      enc_q.push_back(fr);
      for (int q = 0; q < nw; q++) begin
        enc_info_valid = 1;
        enc_info = EP'($urandom);   // bits past k in the last word are junk
        for (int i = 0; i < EPI; i++) if (q * EPI + i < kk) enc_info[i] = bits[q * EPI + i];
        #4;
        while (!enc_info_ready) begin @(negedge clk); #4; end
        @(negedge clk);
      end
      enc_info_valid = 0;
      enc_frames_in++;
      // sometimes leave a gap between frames
      if ($urandom_range(2, 0) == 0) repeat ($urandom_range(3 * W, 1)) @(negedge clk);
    end
  endtask

  // expanded words entering the systematic encoder: frame starts, alignment
  // waits, and the cycle each first output word is due
  int in_word = 0;
  always @(negedge clk) begin
    #4;
    if (rst_n && dut.v_valid) begin
      if (in_word == 0 && !dut.v_ready) m_align++;
      if (dut.v_ready) begin
        if (in_word == 0) first_cycle_q.push_back(cycle + 2 * enc_W);
        in_word = (in_word + 1 == enc_W) ? 0 : in_word + 1;
      end
    end else if (rst_n && in_word != 0) fail("encoder input stalled inside a frame");
  end

  // ---------------- encoder output monitor ----------------
  int out_word = 0, last_out = -10;
  always @(negedge clk) begin
    #4;
    if (rst_n && enc_out_valid) begin
      frame_c fr;
      int W;
      checks++;
      if (enc_q.size() == 0) fail("unexpected encoder output");
      else begin
        fr = enc_q[0];
        W = (fr.n > EPI) ? fr.n / EPI : 1;
        if (out_word == 0) begin
          int fc;
          if (last_out == cycle - 1) m_b2b++;
          fc = first_cycle_q.pop_front();
          checks++;
          if (fc != cycle) fail($sformatf("encoder latency: first word at %0d expected %0d", cycle, fc));
          if (!enc_out_first) fail("enc_out_first missing");
        end
        for (int i = 0; i < EPI; i++) begin
          int idx;
          idx = out_word * EPI + i;
          if (idx < fr.n) begin
            if (enc_x[i] !== fr.x[idx]) begin
              fail($sformatf("codeword bit %0d of n=%0d frame wrong", idx, fr.n));
            end
            if (fr.info[idx] && enc_x[i] !== fr.v[idx]) fail("codeword not systematic");
            if (idx >= fr.ns && enc_x[i] !== 1'b0) fail("shortened bit not zero");
          end
        end
        out_word++;
        last_out = cycle;
        if (out_word == W) begin
          out_word = 0;
          void'(enc_q.pop_front());
          ch_q.push_back(fr);
          enc_frames_out++;
        end
      end
    end
  end

  // ---------------- channel: codeword -> LLR words ----------------
  initial begin
    int cur_ln, cur_ns;
    ch_valid = 0; dec_short_we = 0; dec_short_waddr = '0; dec_short_wdata = '0;
    dec_log_n = D_LNW'(D_LOG);
    cur_ln = -1; cur_ns = -1;
    foreach (ch_llr[j]) ch_llr[j] = '0;
    wait (rst_n);
    forever begin
      frame_c fr;
      int ln, W;
      @(negedge clk);
      if (ch_q.size() == 0) continue;
      fr = ch_q.pop_front();
      ln = $clog2(fr.n);
      W = (fr.n > DLI) ? fr.n / DLI : 1;
      if (ln != cur_ln || fr.ns != cur_ns) begin
        // a new code needs an empty front end: wait until buffered frames are out
        while (dec_q.size() != 0) @(negedge clk);
        dec_log_n = D_LNW'(ln);
        for (int q = 0; q < W; q++) begin
          dec_short_we = 1; dec_short_waddr = D_AW'(q);
          for (int j = 0; j < DLI; j++) dec_short_wdata[j] = (q * DLI + j >= fr.ns);
          @(negedge clk);
        end
        dec_short_we = 0;
        cur_ln = ln; cur_ns = fr.ns;
      end
      dec_q.push_back(fr);
      for (int q = 0; q < W; q++) begin
        for (int j = 0; j < DLI; j++) begin
          int idx;
          idx = q * DLI + j;
          if (idx >= fr.n || idx >= fr.ns) ch_llr[j] = '0;
          else begin
            logic [LW-1:0] mag;
            mag = LW'($urandom_range((1 << (LW - 1)) - 1, 1));
            ch_llr[j] = fr.x[idx] ? -mag : mag;
          end
        end
        ch_valid = 1;
        #1;
        while (!ch_ready) begin m_chstall++; @(negedge clk); #1; end
        if (core_frame_valid) m_overlap++;
        @(negedge clk);
      end
      ch_valid = 0;
    end
  end

  // ---------------- decoder core stand-in ----------------
  initial begin
    core_rd_en = 0; core_rd_addr = '0; core_frame_done = 0; core_stage = '0;
    forever begin
      frame_c fr;
      int W;
      @(negedge clk);
      if (!core_frame_valid) continue;
      fr = dec_q[0];
      W = (fr.n > DLI) ? fr.n / DLI : 1;
      checks++;
      if (int'(core_frame_log_n) != $clog2(fr.n)) fail("decoder frame length wrong");
      for (int q = 0; q < W; q++) begin
        core_rd_en = 1; core_rd_addr = D_AW'(q);
        @(negedge clk);
        core_rd_en = 0;
        for (int j = 0; j < DLI; j++) begin
          int idx;
          idx = q * DLI + j;
          if (idx < fr.n) begin
            checks++;
            if (idx >= fr.ns) begin
              if (core_rd_llr[j] !== LW'((1 << (LW - 1)) - 1)) fail("shortened LLR not at maximum");
            end else if (core_rd_llr[j][LW-1] !== fr.x[idx] || core_rd_llr[j] == '0)
              fail($sformatf("hard decision wrong at %0d", idx));
          end
        end
      end
      // stage limits for this frame
      for (int s = 0; s <= int'(D_LOG); s++) begin
        longint nv;
        int w;
        core_stage = D_LNW'(s);
        #1;
        nv = (longint'(1) << s) * fr.n / DN;
        w = (nv == 0) ? 0 : (nv <= 2 * DP) ? 1 : int'(nv / (2 * DP));
        checks++;
        if (core_stage_used !== (nv != 0) || (nv != 0 && longint'(core_stage_nv) != nv)
            || int'(core_stage_words) != w)
          fail($sformatf("stage limits wrong: n=%0d stage=%0d", fr.n, s));
      end
      @(negedge clk);     // back in step with the clock
      // rest of the decoding time
      repeat ($urandom_range(3 * EN / EPI + 3 * W + 4, 0)) @(negedge clk);
      core_frame_done = 1;
      @(negedge clk);
      core_frame_done = 0;
      void'(dec_q.pop_front());
      dec_frames_done++;
    end
  end

  // ---------------- test sequence ----------------
  initial begin
    enc_info_valid = 0; enc_info = '0; enc_k = '0; enc_mask_we = 0; enc_mask_waddr = '0; enc_mask_wdata = '0;
    enc_log_n = E_LNW'(E_LOG); enc_n_s = (E_LOG+1)'(EN);
    repeat (3) @(negedge clk);
    rst_n = 1;
    enc_config(E_LOG, EN, 0, 4, 2);
    enc_config(E_LOG, EN, 1, 3, 3);
    enc_config(E_LOG - 2, EN / 4, 0, 3, 2);
    enc_config(2, 4, 0, 3, 1);
    enc_config($clog2(EP), EP, 1, 3, 2);
    enc_config(E_LOG, EN - 19, 0, 3, 3);
    enc_config(E_LOG - 1, EN / 2 - 5, 1, 2, 2);
    enc_config(3, 6, 0, 2, 1);
    // wait for everything to leave
    while (dec_frames_done != enc_frames_in) @(negedge clk);
    checks++;
    if (enc_frames_out != enc_frames_in) fail("encoder lost frames");
    $display("mechanisms: align=%0d back_to_back=%0d length_change=%0d n<P=%0d shortened=%0d reversed=%0d ch_stall=%0d load_while_decode=%0d",
             m_align, m_b2b, m_lenchg, m_small, m_short, m_rev, m_chstall, m_overlap);
    if (CHECK_MECH) begin
      checks += 8;
      if (m_align == 0)   fail("encoder alignment wait never happened");
      if (m_b2b == 0)     fail("no back-to-back encoder frames");
      if (m_lenchg == 0)  fail("code length never changed");
      if (m_small == 0)   fail("no code shorter than P");
      if (m_short == 0)   fail("no shortened code");
      if (m_rev == 0)     fail("no bit-reversed parity placement");
      if (m_chstall == 0) fail("channel back-pressure never happened");
      if (m_overlap == 0) fail("no loading while decoding");
    end
    $display("frames: %0d encoded, %0d decoded", enc_frames_out, dec_frames_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
