// ns_encoder_core: semi-parallel non-systematic polar encoder, x = u * F^(m).
//
// The encoder takes P bits per clock cycle, in natural order, and produces the
// encoded bits P per cycle, also in natural order. It is built from stages
// S_1 .. S_log2(NMAX). Stage S_s combines bit j with bit j + 2^(s-1)
// (x[j] = b[j] xor b[j + 2^(s-1)] where bit s-1 of j is 0; the other bit
// passes). Stages S_1 .. S_log2(P) pair bits that sit in the same input word
// and are plain XOR logic. A stage S_i above log2(P) pairs words that arrive
// 2^(i-log2(P)-1) cycles apart: each of its P lanes holds that many delay
// elements D, and a two-input multiplexer picks, on input 0, the delayed word
// and, on input 1, the delayed word xor the word now arriving. The multiplexer
// takes input 1 while the arriving word lies in the second half of its group
// of 2^(i-log2(P)) words, so the output of the stage is its input delayed by
// 2^(i-log2(P)-1) cycles and combined. This is the structure of the paper's
// non-systematic encoder figure (n = 16, P = 4 shown there).
//
// Interface: u is the input word; t_idx is the index of that word inside its
// frame, counted modulo NMAX/P (only its low log2(n/P) bits matter for a code
// of length n) and it must advance by one every cycle, including idle cycles,
// so that words still draining keep the right phase. beta[k] is the output of
// stage S_(log2(P)+k), k = 0 .. log2(NMAX/P); beta[0] is the purely
// combinational result.
//
// Timing: beta[k] carries the word that entered 2^k - 1 cycles earlier
// (beta[0] in the same cycle), so a frame of length n = 2^k * P leaves in
// the cycle its last word enters: n/P cycles counting the first input cycle
// and the first output cycle. The paths from u to beta are combinational, as
// in the paper (its critical path runs from the input to the output).
//
// Own choices: the delay elements are plain registers without reset (they
// hold data only; validity is tracked outside), and the stage phase is
// derived from t_idx rather than from a counter per stage.
module ns_encoder_core #(
  parameter int unsigned NMAX = 16384,
  parameter int unsigned P    = 32,
  localparam int unsigned LOG_P    = $clog2(P),
  localparam int unsigned LOG_NMAX = $clog2(NMAX),
  localparam int unsigned NSTG     = LOG_NMAX - LOG_P,
  localparam int unsigned IDXW     = (NSTG > 0) ? NSTG : 1
) (
  input  logic            clk,
  input  logic [P-1:0]    u,
  input  logic [IDXW-1:0] t_idx,
  output logic [P-1:0]    beta [NSTG+1]
);

  // ---------------- combinational stages S_1 .. S_log2(P) ----------------
  logic [P-1:0] beta0;

  always_comb begin
    logic [P-1:0] b, nb;
    b = u;
    for (int s = 1; s <= int'(LOG_P); s++) begin
      nb = b;
      for (int j = 0; j < int'(P); j++)
        if (((j >> (s - 1)) & 1) == 0) nb[j] = b[j] ^ b[j + (1 << (s - 1))];
      b = nb;
    end
    beta0 = b;
  end

  assign beta[0] = beta0;

  // ---------------- delay stages S_(log2(P)+1) .. S_log2(NMAX) -----------
  for (genvar k = 1; k <= NSTG; k++) begin : g_dly
    localparam int unsigned D = 1 << (k - 1);   // delay elements per lane
    logic [P-1:0]    sr [D];
    logic [P-1:0]    bin, bout;
    logic [IDXW-1:0] idx_here;                  // frame index of bin
    logic            sel;

    if (k == 1) begin : g_first
      assign bin = beta0;
    end else begin : g_next
      assign bin = g_dly[k-1].bout;
    end

    always_ff @(posedge clk) begin
      sr[0] <= bin;
      for (int j = 1; j < int'(D); j++) sr[j] <= sr[j-1];
    end

    // bin entered the encoder D-1 cycles ago.
    assign idx_here = t_idx - IDXW'(D - 1);
    assign sel      = idx_here[k-1];
    assign bout     = sel ? (sr[D-1] ^ bin) : sr[D-1];
    assign beta[k]  = bout;
  end

endmodule
