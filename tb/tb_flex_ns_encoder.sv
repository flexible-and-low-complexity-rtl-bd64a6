// tb_flex_ns_encoder: for every code length 2 .. NMAX (including n < P) and
// for shortened lengths, sends back-to-back random frames and compares each
// output word with the reference transform of the frame after zeroing the
// positions >= n_s. Also checks that the first output word of a frame
// appears n/P - 1 cycles after its first input word (0 for n <= P) and that
// exactly one output word comes out per input word.
module tb_flex_ns_encoder;
  import polar_ref_pkg::*;

  localparam int unsigned NMAX = 128;
  localparam int unsigned P    = 8;
  localparam int unsigned LOG_NMAX = $clog2(NMAX);
  localparam int unsigned NSTG = LOG_NMAX - $clog2(P);
  localparam int unsigned LNW  = $clog2(LOG_NMAX + 1);
  localparam int FRAMES = 6;
  localparam int PI = P;

  logic clk = 0, rst_n = 0;
  logic [LNW-1:0] log_n;
  logic [LOG_NMAX:0] n_s;
  logic in_valid;
  logic [P-1:0] u;
  logic [NSTG-1:0] t_idx;
  logic out_valid;
  logic [P-1:0] x;
  int checks = 0, failures = 0;
  int cycle = 0;

  flex_ns_encoder #(.NMAX(NMAX), .P(P)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected output words and the cycle each first word must appear in
  logic [P-1:0] exp_q[$];
  int first_cycle_q[$];
  bit first_q[$];

  // Output monitor (samples just before the rising edge).
  always @(negedge clk) begin
    #4;
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output word at cycle %0d", cycle);
      end else begin
        logic [P-1:0] e;
        bit f;
        e = exp_q.pop_front();
        f = first_q.pop_front();
        if (x !== e) begin
          failures++;
          if (failures < 10) $display("cycle %0d n=%0d: got %h exp %h", cycle, 1 << log_n, x, e);
        end
        if (f) begin
          int fc;
          fc = first_cycle_q.pop_front();
          checks++;
          if (fc != cycle) begin
            failures++; $display("latency: first word at %0d, expected %0d", cycle, fc);
          end
        end
      end
    end
  end

  task automatic run_config(int ln, int ns);
    int n, W, nw;
    bvec_t v, xr;
    logic [P-1:0] words [NMAX/P];
    int idx;
    n = 1 << ln;
    W = (n > PI) ? n / PI : 1;
    @(negedge clk);
    log_n = LNW'(ln);
    n_s = (LOG_NMAX+1)'(ns);
    // no word may enter in the cycle the length changes
    in_valid = 0;
    @(negedge clk); t_idx = t_idx + 1'b1;
    // wait for alignment of the free-running index
    while ((int'(t_idx) % W) != 0) begin
      in_valid = 0; u = P'($urandom);
      @(negedge clk); t_idx = t_idx + 1'b1;
    end
    for (int f = 0; f < FRAMES; f++) begin
      v = new[n];
      for (int q = 0; q < W; q++) begin
        words[q] = P'($urandom);
        for (int i = 0; i < PI; i++) begin
          idx = q * PI + i;
          if (idx < n) v[idx] = (idx < ns) ? bit'(words[q][i]) : 1'b0;
        end
      end
      xr = transform(v);
      for (int q = 0; q < W; q++) begin
        logic [P-1:0] e;
        e = '0;
        for (int i = 0; i < PI; i++) if (q * PI + i < n) e[i] = xr[q * PI + i];
        exp_q.push_back(e);
        first_q.push_back(q == 0);
      end
      first_cycle_q.push_back(cycle + W - 1);
      for (int q = 0; q < W; q++) begin
        in_valid = 1; u = words[q];
        @(negedge clk); t_idx = t_idx + 1'b1;
      end
    end
    in_valid = 0;
    // drain, keeping the index running
    repeat (NMAX / P + 2) begin
      @(negedge clk); t_idx = t_idx + 1'b1; u = P'($urandom);
    end
    checks++;
    if (exp_q.size() != 0) begin
      failures++; $display("n=%0d: %0d words never came out", n, exp_q.size());
      exp_q.delete(); first_q.delete(); first_cycle_q.delete();
    end
  endtask

  initial begin
    in_valid = 0; u = '0; t_idx = '0; log_n = LNW'(LOG_NMAX); n_s = (LOG_NMAX+1)'(NMAX);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ln = 1; ln <= int'(LOG_NMAX); ln++) run_config(ln, 1 << ln);
    // shortened codes: n_s below n, also not multiples of P
    run_config(LOG_NMAX, NMAX - 37);
    run_config(LOG_NMAX - 1, NMAX / 2 - 5);
    run_config(2, 3);
    run_config(3, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
