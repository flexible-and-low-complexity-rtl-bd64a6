// tb_input_expander: loads random domination-contiguous information sets
// (natural and bit-reversed, shortened, every length 2 .. NMAX, including
// n < P), streams frames of random information bits and checks every output
// word against the expansion computed here bit by bit: the j-th information
// bit of a frame must appear at the j-th information position, zeros
// elsewhere. The sink behaves like the encoder's aligned input: it may hold
// off only at the first word of a frame and then takes a word every cycle,
// and the test checks that the expander never leaves a gap inside a frame.
// It counts held-off frame starts, gaps in the information stream between
// frames, and frames that followed the previous one with no idle cycle.
module tb_input_expander;
  import polar_ref_pkg::*;

  localparam int unsigned NMAX = 128;
  localparam int unsigned P    = 8;
  localparam int unsigned LOG_NMAX = $clog2(NMAX);
  localparam int unsigned NSTG = LOG_NMAX - $clog2(P);
  localparam int unsigned LNW  = $clog2(LOG_NMAX + 1);
  localparam int PI = P;

  logic clk = 0, rst_n = 0;
  logic [LNW-1:0] log_n;
  logic [LOG_NMAX:0] k;
  logic mask_we;
  logic [NSTG-1:0] mask_waddr;
  logic [P-1:0] mask_wdata;
  logic info_valid, info_ready;
  logic [P-1:0] info;
  logic out_valid, out_ready;
  logic [P-1:0] u;

  int checks = 0, failures = 0, cycle = 0;
  int m_hold = 0, m_gap = 0, m_b2b = 0, frames_out = 0;

  input_expander #(.NMAX(NMAX), .P(P)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("cycle %0d: %s", cycle, msg);
  endtask

  logic [P-1:0] exp_q[$];     // expected output words
  int W;                      // words per frame of the current code
  bit running = 0;

  // ---------------- sink: aligned, gap-free frames ----------------
  initial begin
    int pos, last_word_cycle;
    pos = 0; last_word_cycle = -10;
    out_ready = 0;
    forever begin
      @(negedge clk);
      out_ready = (pos != 0) || ($urandom_range(2, 0) != 0);
      #4;
      if (!running) continue;
      if (pos == 0 && out_valid && !out_ready) m_hold++;
      if (pos != 0) begin
        checks++;
        if (!out_valid) fail("gap inside a frame");
      end
      if (out_valid && out_ready) begin
        checks++;
        if (exp_q.size() == 0) fail("unexpected word");
        else begin
          logic [P-1:0] e;
          e = exp_q.pop_front();
          if (u !== e) fail($sformatf("n=%0d word %0d: got %h exp %h", 1 << log_n, pos, u, e));
        end
        if (pos == 0 && last_word_cycle == cycle - 1) m_b2b++;
        last_word_cycle = cycle;
        pos = (pos + 1 == W) ? 0 : pos + 1;
        if (pos == 0) frames_out++;
      end
    end
  end

  // ---------------- source: one code setting ----------------
  task automatic run_config(int ln, int ns, bit rev, int frames);
    int n, kk, nw, idx;
    bvec_t inf, infr;
    n = 1 << ln;
    inf = random_upset(n, 1 + $urandom_range(2, 0), ns);
    infr = new[n];
    for (int i = 0; i < n; i++) infr[i] = rev ? inf[bitrev(i, ln)] : inf[i];
    for (int i = ns; i < n; i++) infr[i] = 0;
    kk = 0;
    for (int i = 0; i < n; i++) kk += infr[i];
    if (kk == 0) begin infr[0] = 1; kk = 1; end
    // the expander must be empty before the code changes
    while (exp_q.size() != 0) @(negedge clk);
    repeat (2) @(negedge clk);
    running = 0;
    log_n = LNW'(ln); k = (LOG_NMAX+1)'(kk);
    W = (n > PI) ? n / PI : 1;
    for (int q = 0; q < W; q++) begin
      mask_we = 1; mask_waddr = NSTG'(q);
      for (int i = 0; i < PI; i++) begin
        idx = q * PI + i;
        mask_wdata[i] = (idx < n) ? infr[idx] : 1'b0;
      end
      @(negedge clk);
    end
    mask_we = 0;
    repeat (2) @(negedge clk);
    running = 1;
    nw = (kk + PI - 1) / PI;
    for (int f = 0; f < frames; f++) begin
      bit bits[$];
      int j;
      for (int b = 0; b < kk; b++) bits.push_back(bit'($urandom_range(1, 0)));
      // expected v_I words
      j = 0;
      for (int q = 0; q < W; q++) begin
        logic [P-1:0] e;
        e = '0;
        for (int i = 0; i < PI; i++) begin
          idx = q * PI + i;
          if (idx < n && infr[idx]) begin e[i] = bits[j]; j++; end
        end
        exp_q.push_back(e);
      end
      // sometimes a gap before the frame's information words
      if ($urandom_range(2, 0) == 0) begin
        m_gap++;
        info_valid = 0;
        repeat ($urandom_range(2 * W + 2, 1)) @(negedge clk);
      end
      for (int q = 0; q < nw; q++) begin
        info_valid = 1;
        info = P'($urandom);   // bits beyond k in the last word are junk
        for (int i = 0; i < PI; i++) if (q * PI + i < kk) info[i] = bits[q * PI + i];
        #4;
        while (!info_ready) begin @(negedge clk); #4; end
        @(negedge clk);
      end
      info_valid = 0;
    end
  endtask

  initial begin
    info_valid = 0; info = '0; mask_we = 0; mask_waddr = '0; mask_wdata = '0;
    log_n = LNW'(LOG_NMAX); k = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ln = 1; ln <= int'(LOG_NMAX); ln++) begin
      run_config(ln, 1 << ln, 0, 5);
      run_config(ln, 1 << ln, 1, 5);
    end
    run_config(LOG_NMAX, NMAX - 21, 0, 5);
    run_config(LOG_NMAX - 1, NMAX / 2 - 3, 1, 5);
    run_config(3, 5, 0, 4);
    while (exp_q.size() != 0) @(negedge clk);
    repeat (4) @(negedge clk);
    $display("mechanisms: held_start=%0d source_gap=%0d back_to_back=%0d frames=%0d",
             m_hold, m_gap, m_b2b, frames_out);
    checks++;
    if (m_hold == 0) fail("frame start never held off");
    checks++;
    if (m_gap == 0) fail("no gap in the information stream");
    checks++;
    if (m_b2b == 0) fail("frames never back to back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
