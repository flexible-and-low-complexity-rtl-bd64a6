# Flexible systematic polar encoder and length-flexible decoder front end

A polar code of length n = 2^m is defined by the transform x = v · F^⊗m over GF(2),
where F = [[1,0],[1,1]], together with a set of information positions A. The
remaining positions are frozen to 0. Bit j of the transform is

    x_j = XOR of v_i over every i that "dominates" j,

where i dominates j when every 1 bit of j is also a 1 bit of i.

A *systematic* encoder places the k information bits directly in the codeword at
the positions A. It then computes the other n − k bits as parity. This RTL does
that with two passes of the ordinary (non-systematic) transform:

1. **Expand.** Put the information bits at the positions in A and zeros elsewhere.
   The result is v_I.
2. **First pass.** Compute v_II = v_I · F^⊗m.
3. **Mask.** Set every position of v_II that is not in A to 0. The result is v_III.
4. **Second pass.** Compute x = v_III · F^⊗m.

This is correct whenever A is *domination contiguous*. That means: if h and j are in
A, and h ⪰ i ⪰ j, then i is also in A. The frozen sets of polar codes built for real
channels always satisfy this. So do the bit-reversed versions of those sets.

The information set lives only in the mask of step 3. As a result, one datapath
serves several cases, changed by loading a different mask:
- any code rate;
- any information set;
- parity bits at natural positions;
- parity bits at bit-reversed positions, which the matching decoder prefers.

The hardware adds two more run-time features on top of this:
- **Any power-of-two code length** up to a build-time maximum n_max.
- **Shortening.** The last n − n_s positions are frozen and not transmitted. This
  gives any transmitted length n_s, not only powers of two.

The decoder side contains the parts of a Fast-SSC decoder that change when it must
handle every length up to n_max. The decoding core itself is a separate, existing
design and is not included (see "What is not here").

All RTL is synthesizable SystemVerilog (IEEE 1800-2017).

## Block overview

```
                       polar_codec_top
  ┌──────────────────────────────────────────────────────────────────────┐
  │ enc_info ─► input_expander (own mask copy)                           │
  │                 │ v_I                                                │
  │ sys_encoder     ▼                                                    │
  │           flex_ns_encoder ─► reg ─► AND ─► reg ─► flex_ns_encoder ──►│─ enc_x
  │            (pass 1)                  ▲             (pass 2)          │
  │                                 mask_memory                          │
  │                                                                      │
  │ ch_llr ─► dec_llr_shortening ─► dec_input_buffer ─► core_rd_llr      │─► to decoder core
  │                                   (2 banks)                          │
  │ core_stage ─► dec_stage_limits ─► core_stage_nv / _words             │
  └──────────────────────────────────────────────────────────────────────┘
```

| Module | Role |
|---|---|
| `polar_pkg` | Default sizes; `bit_reverse` helper. |
| `ns_encoder_core` | Semi-parallel transform, P bits/cycle, natural-order input and output. Exposes every stage output. |
| `flex_ns_encoder` | The core plus input AND gates and an output stage multiplexer. Handles any length n ≤ n_max and shortening. |
| `mask_memory` | The frozen-bit mask: n_max/P words of P bits. |
| `input_expander` | Step 1 of the algorithm: places the k information bits of a frame at the information positions, P bits per cycle. |
| `sys_encoder` | Two flexible encoders with the masking between them, pipelined. |
| `dec_llr_shortening` | Replaces the channel LLRs of shortened positions by the largest LLR, using an n_max-bit mask. |
| `dec_input_buffer` | Two-bank channel buffer, so one frame loads while the other is decoded. |
| `dec_stage_limits` | Constituent-code length and memory-word count per decoder stage, for the current n. |
| `polar_codec_top` | Wires the above together; the decoder core attaches through the `core_*` ports. |

Default sizes are the configurations the design was evaluated at:

| Side | n_max | P (bits or LLR pairs per cycle) |
|---|---|---|
| Encoder | 16384 | 32 |
| Decoder | 32768 | 256 |

The decoder memory word holds 2P = 512 LLRs. The LLR width, 6 bits, is a choice of
this implementation.

## The semi-parallel transform (`ns_encoder_core`)

The transform has m = log2 n stages. Stage S_s combines bit j with bit j + 2^(s−1):
the lower bit becomes their XOR and the upper bit passes through.

The encoder takes one P-bit word per cycle, in natural order. It is split at log2 P:

- **Stages S_1 … S_log2P** only pair bits inside one input word. They are pure XOR
  logic.
- **Stages above log2 P** pair words that arrive 2^(s − log2P − 1) cycles apart.
  Each of the P lanes has that many delay registers. A two-input multiplexer then
  picks one of:
  - the delayed word, while the arriving word is in the first half of its group of
    2^(s − log2P) words (the pair partner has not arrived yet);
  - the delayed word XOR the arriving word, during the second half.

Every stage above log2 P therefore delays its input stream by exactly as many cycles
as it buffers. The output comes out in natural order, P bits per cycle.

The multiplexer phase comes from the index of the word entering the stage. That
index is the word counter `t_idx` minus the delays already passed. So `t_idx` must
advance by one every cycle, including idle cycles.

`beta[k]` is the output of stage S_(log2P + k):

- A complete transform of length 2^k · P is available at `beta[k]`.
- Its first word appears 2^k − 1 cycles after its first input word. This is the
  cycle in which the last input word enters, so the latency is n/P cycles counted
  from first input to first output, inclusive.
- The paths from `u` to `beta` are combinational, so the critical path runs from the
  input to the output. Pipeline registers could be added at stage boundaries at the
  cost of latency; that was not done.

## Length flexibility and shortening (`flex_ns_encoder`)

A code of length n is complete at stage S_log2n, so the output is taken there.
A multiplexer with log2(n_max/P) + 1 inputs, `beta[0]` … `beta[log2(n_max/P)]`,
selects it. Its select signal is log2(ceil(n/P)).

For n < P, the combinational stages would mix in bits at positions ≥ n. One AND
gate per input bit forces those bits to 0. The same gates implement shortening.
Bit i of word t is enabled when

    P·t + i < n_s        (n_s = n when the code is not shortened)

**Departure to note.** The original description prints other thresholds for these
gates, in two places:
- "n ≥ 0, n ≥ 1, …, n ≥ ⌊(P−1)/2⌋" in the block diagram;
- en_i = [n ≥ ⌊(Pt+i)/2⌋] in the shortening formula.

Both would let bits at positions ≥ n through, which contradicts the stated purpose:
zero the inputs with index above n − 1, and the last n − n_s bits for shortening.
This RTL follows that stated purpose.

Valid tracking and the rules for changing n:
- `out_valid` is `in_valid` delayed through a shift register, tapped at 2^sel − 1.
- Changing `log_n` moves the tap, so the shift register is cleared when `log_n`
  changes.
- An assertion requires that no word enters in that cycle.

## Systematic encoder (`sys_encoder`)

The pipeline is:

```
pass-1 encoder → register → AND with mask word → register → pass-2 encoder
```

The mask memory is read in the cycle the first register loads. This keeps the
memory access and the AND gates out of the encoder paths. The mask is all that
distinguishes one code from another:

- bit i of word w is 1 when position w·P + i is an information position;
- use the bit-reversed image of the information set to put the parity bits at
  bit-reversed positions.

Shortening is done by the pass-1 AND gates, using n_s:
- positions n_s … n−1 must not be in the information set;
- the codeword has zeros at those positions, and the sender drops them.

**Frames and handshake.** A frame is n/P consecutive words (one word when n ≤ P). A
free-running word counter sets the phase of both encoders, so a frame may start only
when the counter is a multiple of n/P. `in_ready` shows when that is; after that, the
frame must arrive without gaps. Frames may follow each other back to back, giving a
sustained throughput of P bits per cycle. `out_first` marks the first word of each
output frame. `log_n`, `n_s` and the mask may change only while the encoder is
empty.

**Latency.** The first output word appears 2·n/P cycles after the first input word:
n/P − 1 cycles in each pass, plus the two registers. For n ≤ P it is 2 cycles.
Counting both end cycles, as for the single pass, this is 2n/P + 1. The original
design is quoted at 2·L_NS + 2 = 2n/P + 2 cycles. The one-cycle difference is not
explained there, and this RTL has no extra register to account for it.

For example, at the defaults with n = 16384 a frame is 512 words and the first
codeword word appears 1024 cycles after the first input word.

## Input expansion (`input_expander`)

The expander turns a stream of information bits into v_I, P bits per cycle:
- Each frame's k bits arrive in ceil(k/P) words and start in a fresh word. The
  unused top bits of the last word are ignored.
- The bits go into a 2P-bit buffer.
- For output word w, the expander reads mask word w from its own copy of the
  mask. The copy is written through the same port as the encoder's mask. Output
  bit i takes buffer bit r(i), where r(i) is the number of mask ones below bit i.
  The buffer then drops the popcount bits it used.
- A new information word is accepted whenever the bits left after the current
  cycle fit in P. So an input that supplies a word whenever asked never starves
  the output.

The systematic encoder needs its frames without gaps, so the expander does two
things:
- it offers a frame's first word only once min(P, k) of its bits are buffered;
- inside a frame, it offers a word in every cycle. An assertion checks this.

Its output handshake is the encoder's `in_ready`, which also does the frame
alignment. Setting k = 0 produces nothing. The original description names this
"input preprocessor" but gives no structure for it. The buffer-and-scatter
design, the k input and the framing of the information stream are this
implementation's own.

## Decoder front end

The decoder core is laid out for n_max and always starts at stage S_log2(n_max).
For a code of length n, stage S_i then holds a constituent code of length

    n_v(S_i) = 2^i · n / n_max

An operation at that stage touches n_v / 2P memory words of 2P values, and always
at least one. The memory per stage does not change with n. `dec_stage_limits`
computes, from log2 n and i:
- `used`: the stage holds at least one value;
- log2 n_v and n_v;
- the word count.

It is combinational. In a complete decoder this limit calculation replaces the
fixed-length limits; the rest of the core stays as it was.

**`dec_llr_shortening`** handles shortened positions, which are never received.
- Their LLRs are set to the largest positive value, meaning "certainly 0".
- The positions come from a mask memory of n_max bits: n_max/2P words of 2P bits.
  This mask is the only extra RAM that shortening costs.
- LLRs are two's complement, and positive means 0 is more likely.
- It has valid/ready on both sides and one register stage.

**`dec_input_buffer`** holds the next frame while the core decodes the current one.
- It has two banks, each one frame of up to n_max/2P words.
- The writer fills one bank while the core reads the other.
- A bank changes hands when it is full (writer side) or when the core releases it
  with `frame_done`.
- Each bank stores its own `log_n`, captured with the first word, so frames of
  different lengths can be queued.
- `wr_ready` falls only when both banks hold frames the core has not yet released.
- Reads have a latency of one cycle.

## What is not here

- **The Fast-SSC decoding core.** This is the processing units for rate-0, rate-1,
  repetition and single-parity-check nodes, the LLR and bit memories, and the
  instruction sequencing. It is an earlier, separately published design that this
  one reuses unchanged. Its connections to the front end are the `core_*` ports of
  `polar_codec_top`:
  - frame available, and its length;
  - word read, with a one-cycle latency;
  - frame release;
  - stage-limit lookup.
- **Alternatives to the chosen design**: the single-encoder, half-throughput
  variant, and the non-pipelined variant.

## Own choices, in one place

- **Sequencing**
  - The word counter and the `in_ready` frame-alignment rule of the encoder.
  - The whole input expander structure.
  - Valid tracking for variable latency.
- **Reset**
  - Active-low asynchronous reset, on control registers only. Data registers and
    memories are not reset.
- **Memories**
  - Both mask memories have a synchronous write port and a synchronous read port.
  - The encoder mask uses 1 for an information position; the decoder mask uses 1
    for a shortened position.
- **Decoder front end**
  - LLR width of 6 bits and its sign convention.
  - The two-bank buffer organisation and all front-end handshakes.
- **Lengths and shortening**
  - Code length given as log2 n.
  - Shortening length given as n_s.

## Verification

Each module has a self-checking testbench in `tb/`. The reference models are in
`tb/polar_ref_pkg.sv`:
- the transform, computed by recursion;
- the two-pass systematic algorithm;
- a generator of random domination-contiguous information sets;
- bit reversal.

Each testbench prints `TB_RESULT checks=… failures=…` and has a watchdog.

| Testbench | What it covers |
|---|---|
| `tb_ns_encoder_core` | Every stage output against the reference, including its latency. |
| `tb_flex_ns_encoder` | Every length 2 … n_max (n_max = 128, P = 8), including n < P, and shortened lengths. Checks latency and one output per input. |
| `tb_sys_encoder` | Natural and bit-reversed parity placement, shortening, every length. Checks the systematic property on its own (x = v_I on A; zeros at shortened positions) and the 2n/P latency. |
| `tb_input_expander` | Every length, natural and bit-reversed sets, shortening. Checks each v_I word bit by bit, that no gap occurs inside a frame, and counts held-off starts, source gaps and back-to-back frames. |
| `tb_mask_memory`, `tb_dec_stage_limits` (exhaustive), `tb_dec_llr_shortening` (with back-pressure), `tb_dec_input_buffer` | Their block, against its specification; `tb_dec_input_buffer` checks that loading overlapped decoding and that writes stalled. |
| `tb_polar_codec_top` | End to end at the default sizes. |
| `tb_polar_codec_small` | The same sequence at reduced sizes. |
| `tb_polar_codec_nmax32k` | The same sequence with the encoder built for n_max = 32768, P = 64. |

`tb_polar_codec_top` works as follows:
- It streams information bits for 23 frames over 8 code settings, through the
  expander and the encoder. It checks every codeword against the
  reference and checks that it is systematic.
- It maps each codeword to LLRs, with placeholders at the shortened positions, and
  feeds them through the decoder front end.
- A stand-in for the decoder core reads the frames back. It checks the hard
  decisions, the forced LLRs and the stage limits.

It counts each mechanism and fails if any never happened:
- alignment waits;
- back-to-back frames;
- length changes;
- n < P;
- shortening;
- bit-reversed parity;
- channel back-pressure;
- loading while decoding.

To simulate with Verilator (5.x), run from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -j 4 --top-module tb_polar_codec_top \
    -y rtl -y tb +libext+.sv -Irtl rtl/polar_pkg.sv tb/polar_ref_pkg.sv \
    tb/tb_polar_codec_top.sv -o sim
./obj_dir/sim
```

Change the top-module name and file to run another testbench. The default-size
end-to-end test builds in under 10 seconds and runs in under a second.
