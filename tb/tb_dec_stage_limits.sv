// tb_dec_stage_limits: exhaustive check of n_v(S_i) = 2^i n / n_max and of
// the word count max(1, n_v / 2P) for every code length and stage, at the
// default sizes (n_max = 32768, P = 256) and at a small size.
module tb_dec_stage_limits;
  int checks = 0, failures = 0;

  localparam int unsigned NMAX_A = 32768, P_A = 256;
  localparam int unsigned NMAX_B = 64,    P_B = 4;
  localparam int unsigned LNW_A = $clog2($clog2(NMAX_A) + 1);
  localparam int unsigned LNW_B = $clog2($clog2(NMAX_B) + 1);

  logic [LNW_A-1:0] ln_a, st_a, nvl_a;
  logic used_a;
  logic [$clog2(NMAX_A):0] nv_a, w_a;
  logic [LNW_B-1:0] ln_b, st_b, nvl_b;
  logic used_b;
  logic [$clog2(NMAX_B):0] nv_b, w_b;

  dec_stage_limits #(.NMAX(NMAX_A), .P(P_A)) dut_a (
    .log_n(ln_a), .stage(st_a), .used(used_a), .nv_log(nvl_a), .nv(nv_a), .words(w_a));
  dec_stage_limits #(.NMAX(NMAX_B), .P(P_B)) dut_b (
    .log_n(ln_b), .stage(st_b), .used(used_b), .nv_log(nvl_b), .nv(nv_b), .words(w_b));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_vals(int nmax, int p, int ln, int st, bit used, int nv, int w);
    longint n, env;
    int ew;
    bit eused;
    n = longint'(1) << ln;
    env = (longint'(1) << st) * n / nmax;     // 0 when the stage is unused
    eused = (env >= 1);
    ew = !eused ? 0 : (env <= 2 * p) ? 1 : int'(env / (2 * p));
    checks++;
    if (used !== eused || (eused && nv != int'(env)) || w != ew) begin
      failures++;
      if (failures < 10)
        $display("nmax=%0d n=%0d stage=%0d: got used=%0d nv=%0d w=%0d exp %0d %0d %0d",
                 nmax, n, st, used, nv, w, eused, env, ew);
    end
  endtask

  initial begin
    for (int ln = 1; ln <= 15; ln++)
      for (int st = 0; st <= 15; st++) begin
        ln_a = LNW_A'(ln); st_a = LNW_A'(st);
        #1;
        expect_vals(NMAX_A, P_A, ln, st, used_a, int'(nv_a), int'(w_a));
      end
    for (int ln = 1; ln <= 6; ln++)
      for (int st = 0; st <= 6; st++) begin
        ln_b = LNW_B'(ln); st_b = LNW_B'(st);
        #1;
        expect_vals(NMAX_B, P_B, ln, st, used_b, int'(nv_b), int'(w_b));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
