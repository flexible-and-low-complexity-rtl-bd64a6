// tb_sys_encoder: loads information-set masks (natural and bit-reversed
// parity placement, shortened codes, every length 2 .. NMAX), streams
// back-to-back random frames and checks each output word against the
// reference two-pass algorithm. It also checks, independently of that
// reference, that the codeword is systematic (x = v_I on the information
// positions), that shortened positions come out as 0, that the first output
// word appears 2*n/P cycles (2 for n <= P) after the first input word, and
// that back-to-back frames are accepted without stalls.
module tb_sys_encoder;
  import polar_ref_pkg::*;

  localparam int unsigned NMAX = 128;
  localparam int unsigned P    = 8;
  localparam int PI = P;
  localparam int unsigned LOG_NMAX = $clog2(NMAX);
  localparam int unsigned NSTG = LOG_NMAX - $clog2(P);
  localparam int unsigned LNW  = $clog2(LOG_NMAX + 1);
  localparam int FRAMES = 4;

  logic clk = 0, rst_n = 0;
  logic [LNW-1:0] log_n;
  logic [LOG_NMAX:0] n_s;
  logic mask_we;
  logic [NSTG-1:0] mask_waddr;
  logic [P-1:0] mask_wdata;
  logic in_valid, in_ready;
  logic [P-1:0] u;
  logic out_valid, out_first;
  logic [P-1:0] x;
  int checks = 0, failures = 0, cycle = 0;

  sys_encoder #(.NMAX(NMAX), .P(P)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [P-1:0] exp_q[$];
  logic [P-1:0] vin_q[$];     // v_I words, for the systematic check
  logic [P-1:0] info_q[$];    // information mask words
  logic [P-1:0] zero_q[$];    // shortened-position mask words
  bit first_q[$];
  int first_cycle_q[$];

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("cycle %0d: %s", cycle, msg);
  endtask

  always @(negedge clk) begin
    #4;
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) fail("unexpected output word");
      else begin
        logic [P-1:0] e, vi, im, zm;
        bit f;
        e = exp_q.pop_front(); vi = vin_q.pop_front();
        im = info_q.pop_front(); zm = zero_q.pop_front();
        f = first_q.pop_front();
        if (x !== e) fail($sformatf("n=%0d got %h exp %h", 1 << log_n, x, e));
        checks++;
        if ((x & im) !== (vi & im)) fail("not systematic");
        checks++;
        if ((x & zm) !== '0) fail("shortened position not zero");
        checks++;
        if (out_first !== f) fail("out_first wrong");
        if (f) begin
          int fc;
          fc = first_cycle_q.pop_front();
          checks++;
          if (fc != cycle) fail($sformatf("latency: first word at %0d expected %0d", cycle, fc));
        end
      end
    end
  end

  task automatic run_config(int ln, int ns, bit reversed, int nseeds);
    int n, W, idx, acc;
    bvec_t info, infor, v, xr;
    logic [P-1:0] words [NMAX/P];
    n = 1 << ln;
    W = (n > PI) ? n / PI : 1;
    // information set: an up-set (domination contiguous), optionally
    // bit-reversed, with the shortened tail removed
    info = random_upset(n, nseeds, n);
    infor = new[n];
    for (int i = 0; i < n; i++) infor[i] = reversed ? info[bitrev(i, ln)] : info[i];
    for (int i = ns; i < n; i++) infor[i] = 0;
    @(negedge clk);
    log_n = LNW'(ln); n_s = (LOG_NMAX+1)'(ns);
    for (int q = 0; q < W; q++) begin
      mask_we = 1; mask_waddr = NSTG'(q);
      for (int i = 0; i < PI; i++) begin
        idx = q * PI + i;
        mask_wdata[i] = (idx < n) ? infor[idx] : 1'($urandom);
      end
      @(negedge clk);
    end
    mask_we = 0;
    for (int f = 0; f < FRAMES; f++) begin
      v = new[n];
      for (int q = 0; q < W; q++) begin
        logic [P-1:0] im, zm, vi;
        im = '0; zm = '0; vi = '0;
        words[q] = P'($urandom);
        for (int i = 0; i < PI; i++) begin
          idx = q * PI + i;
          if (idx < n) begin
            // junk on frozen-by-shortening positions: the AND gates must clear it
            if (idx >= ns) begin words[q][i] = 1'($urandom); zm[i] = 1; end
            else if (!infor[idx]) words[q][i] = 0;
            else im[i] = 1;
            v[idx] = (idx < ns) ? bit'(words[q][i]) : 1'b0;
            vi[i] = words[q][i];
          end
        end
        info_q.push_back(im); zero_q.push_back(zm); vin_q.push_back(vi);
      end
      xr = sys_encode(v, infor);
      for (int q = 0; q < W; q++) begin
        logic [P-1:0] e;
        e = '0;
        for (int i = 0; i < PI; i++) if (q * PI + i < n) e[i] = xr[q * PI + i];
        exp_q.push_back(e);
        first_q.push_back(q == 0);
      end
      for (int q = 0; q < W; q++) begin
        in_valid = 1; u = words[q];
        #1;
        acc = 0;
        while (!in_ready) begin
          if (q != 0 || f != 0) begin
            checks++; fail("stall inside back-to-back frames");
          end
          @(negedge clk); #1;
        end
        if (q == 0) first_cycle_q.push_back(cycle + 2 * W);
        @(negedge clk);
      end
    end
    in_valid = 0; u = P'($urandom);
    repeat (2 * NMAX / PI + 4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      fail($sformatf("n=%0d: %0d words never came out", n, exp_q.size()));
      exp_q.delete(); first_q.delete(); first_cycle_q.delete();
      vin_q.delete(); info_q.delete(); zero_q.delete();
    end
  endtask

  initial begin
    in_valid = 0; u = '0; mask_we = 0; mask_waddr = '0; mask_wdata = '0;
    log_n = LNW'(LOG_NMAX); n_s = (LOG_NMAX+1)'(NMAX);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ln = 1; ln <= int'(LOG_NMAX); ln++) begin
      run_config(ln, 1 << ln, 0, 2);
      run_config(ln, 1 << ln, 1, 3);
    end
    run_config(LOG_NMAX, NMAX - 21, 0, 3);
    run_config(LOG_NMAX - 1, NMAX / 2 - 9, 0, 2);
    run_config(3, 6, 0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
