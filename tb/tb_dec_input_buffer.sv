// tb_dec_input_buffer: a writer process streams frames of random LLRs of
// random lengths while a reader process, standing in for the decoder,
// waits for each frame, reads its words in random order over a random
// decoding time and releases it. Checks frame order, length and contents,
// and counts that loading-while-decoding and writer stalls (both banks
// busy) both occurred.
module tb_dec_input_buffer;
  localparam int unsigned NMAX = 64, P = 4, LLR_W = 5;
  localparam int unsigned LANES = 2 * P;
  localparam int LI = LANES;
  localparam int unsigned DEPTH = NMAX / LANES;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LNW = $clog2($clog2(NMAX) + 1);
  localparam int FRAMES = 24;
  typedef logic [LANES*LLR_W-1:0] flat_t;

  logic clk = 0, rst_n = 0;
  logic [LNW-1:0] log_n;
  logic wr_valid, wr_ready;
  logic [LLR_W-1:0] wr_llr [LANES];
  logic frame_valid;
  logic [LNW-1:0] frame_log_n;
  logic rd_en;
  logic [AW-1:0] rd_addr;
  logic [LLR_W-1:0] rd_llr [LANES];
  logic frame_done;
  int checks = 0, failures = 0, overlap = 0, stalls = 0;

  dec_input_buffer #(.NMAX(NMAX), .P(P), .LLR_W(LLR_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  flat_t frames_q[$];     // all words of all frames, in order
  int    len_q[$];        // log_n of each frame

  function automatic int words_of(int ln);
    return (ln > $clog2(LANES)) ? (1 << (ln - $clog2(LANES))) : 1;
  endfunction

  always @(posedge clk) begin
    if (rst_n && wr_valid && wr_ready && frame_valid) overlap++;
    if (rst_n && wr_valid && !wr_ready) stalls++;
  end

  // writer
  initial begin
    wr_valid = 0; log_n = LNW'($clog2(NMAX));
    foreach (wr_llr[j]) wr_llr[j] = '0;
    wait (rst_n);
    for (int f = 0; f < FRAMES; f++) begin
      int ln;
      ln = (f % 3 == 0) ? $clog2(NMAX) : int'($urandom_range($clog2(NMAX), 1));
      len_q.push_back(ln);
      for (int q = 0; q < words_of(ln); q++) begin
        flat_t w;
        @(negedge clk);
        w = {$urandom, $urandom};
        for (int j = 0; j < LI; j++) wr_llr[j] = w[j*LLR_W +: LLR_W];
        frames_q.push_back(w);
        log_n = LNW'(ln);
        wr_valid = 1;
        #1;
        while (!wr_ready) begin @(negedge clk); #1; end
      end
      @(negedge clk);
      wr_valid = 0;
    end
  end

  // reader (decoder stand-in)
  initial begin
    rd_en = 0; rd_addr = '0; frame_done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      int ln, W;
      flat_t words [DEPTH];
      @(negedge clk);
      while (!frame_valid) @(negedge clk);
      ln = len_q.pop_front();
      W = words_of(ln);
      checks++;
      if (int'(frame_log_n) != ln) begin failures++; $display("frame %0d: log_n %0d exp %0d", f, frame_log_n, ln); end
      for (int q = 0; q < W; q++) words[q] = frames_q.pop_front();
      for (int r = 0; r < 2 * W; r++) begin
        int a;
        flat_t got;
        a = int'($urandom_range(W - 1, 0));
        rd_en = 1; rd_addr = AW'(a);
        @(negedge clk);
        rd_en = 0;
        for (int j = 0; j < LI; j++) got[j*LLR_W +: LLR_W] = rd_llr[j];
        checks++;
        if (got != words[a]) begin
          failures++;
          if (failures < 10) $display("frame %0d word %0d: got %h exp %h", f, a, got, words[a]);
        end
      end
      repeat ($urandom_range(12, 0)) @(negedge clk);   // rest of decoding
      frame_done = 1;
      @(negedge clk);
      frame_done = 0;
    end
    checks += 2;
    if (overlap == 0) begin failures++; $display("no loading while decoding"); end
    if (stalls == 0)  begin failures++; $display("writer never stalled"); end
    $display("overlap=%0d stalls=%0d", overlap, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
