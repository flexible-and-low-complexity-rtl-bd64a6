// flex_ns_encoder: rate- and length-flexible non-systematic polar encoder.
//
// Wraps ns_encoder_core (built for the largest length NMAX) so that it
// encodes any code of length n = 2^log_n, 2 <= n <= NMAX, at P bits per cycle:
//   * Rate flexibility comes for free: the input already holds 0 at the
//     frozen positions, so the encoder needs no knowledge of the code rate.
//   * Length flexibility: a code of length n is complete at the output of
//     stage S_log2(n). A multiplexer with log2(NMAX/P)+1 inputs, selected by
//     log2(ceil(n/P)), picks beta_log2(P) .. beta_log2(NMAX) as the output.
//     For n < P the combinational stages would mix in bits at positions >= n,
//     so those inputs are forced to 0 by one AND gate per input bit.
//   * Shortening: the same AND gates zero the last n - n_s positions of the
//     frame (bit Pt+i is enabled only while Pt+i < n_s), which freezes the
//     shortened positions as the non-reversed shortening scheme requires.
//     With n_s = n only the length masking remains.
// The AND-gate enable is this design's reading of the paper: its text says
// inputs with index above n-1 are set to 0; its figure and its shortening
// formula print other thresholds (see the block notes in the README).
//
// Interface: u/in_valid carry one P-bit word per cycle; a frame is n/P
// consecutive valid words (one word, low n bits used, when n <= P). t_idx is
// the word's index in the frame, modulo NMAX/P, and must advance by one
// every cycle (see ns_encoder_core). log_n and n_s must stay constant while a
// frame is inside the encoder, and no word may enter in the cycle log_n
// changes: the validity history is cleared then. x/out_valid give the
// encoded word.
//
// Timing: the output word for frame word w appears (n/P - 1) cycles after
// word w entered (0 cycles for n <= P): the first output word appears in the
// cycle the last input word enters, i.e. a latency of n/P cycles counting
// both cycles, and a throughput of P bits per cycle.
module flex_ns_encoder #(
  parameter int unsigned NMAX = 16384,
  parameter int unsigned P    = 32,
  localparam int unsigned LOG_P    = $clog2(P),
  localparam int unsigned LOG_NMAX = $clog2(NMAX),
  localparam int unsigned NSTG     = LOG_NMAX - LOG_P,
  localparam int unsigned IDXW     = (NSTG > 0) ? NSTG : 1,
  localparam int unsigned LNW      = $clog2(LOG_NMAX + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LNW-1:0]    log_n,      // log2 of the code length
  input  logic [LOG_NMAX:0] n_s,        // positions kept (n_s = n: no shortening)
  input  logic              in_valid,
  input  logic [P-1:0]      u,
  input  logic [IDXW-1:0]   t_idx,
  output logic              out_valid,
  output logic [P-1:0]      x
);

  // log2(ceil(n/P)): the output multiplexer select.
  logic [LNW-1:0] sel;
  assign sel = (log_n > LNW'(LOG_P)) ? LNW'(log_n - LNW'(LOG_P)) : '0;

  // ---------------- input AND gates &_0 .. &_(P-1) ----------------
  logic [IDXW-1:0] wmask;
  logic [P-1:0]    u_masked;
  always_comb begin
    logic [LOG_NMAX:0] base;
    wmask = IDXW'((1 << sel) - 1);
    base  = (LOG_NMAX+1)'(t_idx & wmask) << LOG_P;
    for (int i = 0; i < int'(P); i++)
      u_masked[i] = u[i] & ((base + (LOG_NMAX+1)'(i)) < n_s);
  end

  // ---------------- encoder and stage-output multiplexer ----------------
  logic [P-1:0] beta [NSTG+1];

  ns_encoder_core #(.NMAX(NMAX), .P(P)) u_core (
    .clk  (clk),
    .u    (u_masked),
    .t_idx(t_idx),
    .beta (beta)
  );

  assign x = beta[sel];

  // ---------------- validity: in_valid delayed by 2^sel - 1 cycles ------
  if (NSTG == 0) begin : g_novalid
    assign out_valid = in_valid;
  end else begin : g_valid
    localparam int unsigned VD = (1 << NSTG) - 1;
    logic [VD-1:0]  vsr;
    logic [LNW-1:0] log_n_q;
    // A change of code length moves the output tap; the history recorded
    // for the old length is cleared so that it cannot show up as output.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vsr     <= '0;
        log_n_q <= '0;
      end else begin
        log_n_q <= log_n;
        if (log_n != log_n_q) vsr <= '0;
        else                  vsr <= (vsr << 1) | VD'(in_valid);
      end
    end
    // Handshake rule: no word enters in the cycle the length changes.
    assert property (@(posedge clk) disable iff (!rst_n)
                     (log_n != log_n_q) |-> !in_valid)
      else $error("flex_ns_encoder: input word in the cycle log_n changed");
    always_comb begin
      if (sel == 0) out_valid = in_valid;
      else          out_valid = vsr[(1 << sel) - 2];
    end
  end

  // log_n must name a supported length.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (log_n >= 1) && (log_n <= LNW'(LOG_NMAX)))
    else $error("flex_ns_encoder: log_n out of range");

endmodule
