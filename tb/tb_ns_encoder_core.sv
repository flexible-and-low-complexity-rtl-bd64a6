// tb_ns_encoder_core: streams random words through the encoder core and
// checks every stage output beta[k] against the reference transform of the
// aligned block of 2^k words it must carry, 2^k - 1 cycles after the word
// entered (the stage latency).
module tb_ns_encoder_core;
  import polar_ref_pkg::*;

  localparam int unsigned NMAX = 128;
  localparam int unsigned P    = 4;
  localparam int unsigned NSTG = $clog2(NMAX) - $clog2(P);
  localparam int CYCLES = 700;

  logic clk = 0;
  logic [P-1:0] u;
  logic [NSTG-1:0] t_idx;
  logic [P-1:0] beta [NSTG+1];
  int checks = 0, failures = 0;
  logic [P-1:0] hist [CYCLES];

  ns_encoder_core #(.NMAX(NMAX), .P(P)) dut (.clk(clk), .u(u), .t_idx(t_idx), .beta(beta));

  always #5 clk = ~clk;

  initial begin
    repeat (CYCLES + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bvec_t blk, ref_x;
    int W, w, b;
    for (int c = 0; c < CYCLES; c++) begin
      @(negedge clk);
      u = P'($urandom);
      t_idx = NSTG'(c);
      hist[c] = u;
      #1;
      for (int k = 0; k <= int'(NSTG); k++) begin
        W = 1 << k;
        if (c < W - 1 + W) continue;        // pipeline still filling
        w = c - (W - 1);
        b = w / W;
        blk = new[W * P];
        for (int q = 0; q < W; q++)
          for (int i = 0; i < int'(P); i++) blk[q * P + i] = hist[b * W + q][i];
        ref_x = transform(blk);
        for (int i = 0; i < int'(P); i++) begin
          checks++;
          if (beta[k][i] !== ref_x[(w - b * W) * P + i]) begin
            failures++;
            if (failures < 10)
              $display("mismatch cycle %0d stage %0d bit %0d", c, k, i);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
