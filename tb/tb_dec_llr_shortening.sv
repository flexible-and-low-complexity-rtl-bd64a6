// tb_dec_llr_shortening: loads a random shortening mask, sends frames of
// random LLRs for several code lengths under random output back-pressure,
// and checks that every output word equals the input word with the masked
// positions replaced by the largest positive LLR, in order, none lost.
module tb_dec_llr_shortening;
  localparam int unsigned NMAX = 64, P = 4, LLR_W = 6;
  localparam int unsigned LANES = 2 * P;
  localparam int LI = LANES;
  localparam int unsigned DEPTH = NMAX / LANES;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LNW = $clog2($clog2(NMAX) + 1);

  logic clk = 0, rst_n = 0;
  logic [LNW-1:0] log_n;
  logic mask_we;
  logic [AW-1:0] mask_waddr;
  logic [LANES-1:0] mask_wdata;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [LLR_W-1:0] in_llr [LANES];
  logic [LLR_W-1:0] out_llr [LANES];
  int checks = 0, failures = 0, stalls = 0;

  dec_llr_shortening #(.NMAX(NMAX), .P(P), .LLR_W(LLR_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic [LLR_W-1:0] word_t [LANES];
  typedef logic [LANES*LLR_W-1:0] flat_t;
  flat_t exp_q[$];

  function automatic flat_t flatten(word_t w);
    flat_t f;
    for (int j = 0; j < LI; j++) f[j*LLR_W +: LLR_W] = w[j];
    return f;
  endfunction
  logic [LANES-1:0] mask_model [DEPTH];

  // output checker with random back-pressure
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      flat_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected word"); end
      else begin
        e = exp_q.pop_front();
        if (flatten(out_llr) != e) begin
          failures++;
          if (failures < 10) $display("mismatch: got %h exp %h", flatten(out_llr), e);
        end
      end
    end
    if (rst_n && out_valid && !out_ready) stalls++;
  end
  always @(negedge clk) out_ready <= ($urandom_range(3, 0) != 0);

  task automatic run(int ln, int frames);
    int W;
    word_t w, e;
    W = (ln > $clog2(LANES)) ? (1 << (ln - $clog2(LANES))) : 1;
    @(negedge clk);
    log_n = LNW'(ln);
    for (int a = 0; a < W; a++) begin
      mask_we = 1; mask_waddr = AW'(a); mask_wdata = LANES'($urandom);
      mask_model[a] = mask_wdata;
      @(negedge clk);
    end
    mask_we = 0;
    for (int f = 0; f < frames; f++)
      for (int q = 0; q < W; q++) begin
        for (int j = 0; j < LI; j++) begin
          w[j] = LLR_W'($urandom);
          e[j] = mask_model[q][j] ? LLR_W'((1 << (LLR_W - 1)) - 1) : w[j];
        end
        exp_q.push_back(flatten(e));
        in_valid = 1; in_llr = w;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        in_valid = 0;
        if ($urandom_range(3, 0) == 0) @(negedge clk);
      end
    repeat (20) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d words lost", exp_q.size()); exp_q.delete(); end
  endtask

  initial begin
    in_valid = 0; mask_we = 0; mask_waddr = '0; mask_wdata = '0; log_n = LNW'($clog2(NMAX));
    foreach (in_llr[j]) in_llr[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run($clog2(NMAX), 5);
    run($clog2(NMAX) - 2, 6);
    run(3, 4);
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
