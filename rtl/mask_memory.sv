// mask_memory: the frozen-bit mask memory of the systematic encoder.
//
// DEPTH words of WIDTH bits (NMAX/P words of P bits in the encoder). Bit i of
// word w is 1 when position w*P + i of the code is an information position
// (kept between the two encoding passes) and 0 when it is frozen. Loading a
// different mask changes the code rate, the information set, and whether the
// parity bits land at natural or bit-reversed positions, without touching the
// encoder datapath.
//
// Interface: one synchronous write port (we/waddr/wdata) used to load a code
// and one synchronous read port. Timing: rdata shows the word at raddr one
// cycle after raddr is presented. The memory has no reset; its contents
// must be loaded before use. The size follows the paper; the port
// arrangement and read latency are this design's choice.
module mask_memory #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
