// dec_stage_limits: per-stage limits of the length-flexible decoder.
//
// The decoder is laid out for the longest code, n_max, and always starts at
// stage S_log2(n_max); its memory per stage does not change with n. For a
// code of length n, stage S_i holds a constituent code of length
//     n_v(S_i) = 2^i * n / n_max            (the paper's equation for n_v)
// and an operation on that stage touches n_v / (2P) memory words of 2P
// values, at least one word. This block evaluates those limits from the
// code length given to the decoder, which is the only change the flexible
// decoder makes to the earlier fixed-length decoder.
//
// Interface: log_n = log2(n), stage = i (0 .. log2(n_max)). Outputs:
// used (stage holds at least one value for this n), nv_log = log2(n_v),
// nv = n_v, and words = max(1, n_v / (2P)) (0 when the stage is unused).
// Purely combinational; the caller registers it if timing requires.
module dec_stage_limits #(
  parameter int unsigned NMAX = 32768,
  parameter int unsigned P    = 256,
  localparam int unsigned LOG_NMAX = $clog2(NMAX),
  localparam int unsigned LOG_2P   = $clog2(2 * P),
  localparam int unsigned LNW      = $clog2(LOG_NMAX + 1)
) (
  input  logic [LNW-1:0]    log_n,
  input  logic [LNW-1:0]    stage,
  output logic              used,
  output logic [LNW-1:0]    nv_log,
  output logic [LOG_NMAX:0] nv,
  output logic [LOG_NMAX:0] words
);

  always_comb begin
    logic [LNW:0] sum;                 // i + log2(n), one bit wider
    sum    = {1'b0, stage} + {1'b0, log_n};
    used   = (sum >= (LNW+1)'(LOG_NMAX));
    nv_log = used ? LNW'(sum - (LNW+1)'(LOG_NMAX)) : '0;
    nv     = used ? ((LOG_NMAX+1)'(1) << nv_log) : '0;
    if (!used)                             words = '0;
    else if (nv_log <= LNW'(LOG_2P))       words = (LOG_NMAX+1)'(1);
    else                                   words = nv >> LOG_2P;
  end

endmodule
