// Weight buffer (WB) of one PU.
//
// A dual-port RAM of M x 16-bit words (default 512 bytes, i.e. 9 words of 28 weights
// for M = 28, 252 weights). Both ports write whole M-lane words. Port A reads a
// single 16-bit weight, addressed in weights: in a CONV layer one weight is read per
// cycle and broadcast to all PEs of the PU. Port B reads a whole word of M weights,
// one per PE, for FC layers where each PE computes a different output neuron.
// Addresses wrap modulo the capacity, so the buffer can be used as a ring that the
// loader refills behind the consumer (the paper does not say how WB is refilled; the
// ring addressing is this design's choice).
// Reads are synchronous: data one cycle after `a_re` / `b_re`, held until the next.
// Only one write port is exposed here; the second port is used for the wide read.
module weight_buffer #(
  parameter int unsigned M     = 28,
  parameter int unsigned WW    = 16,
  parameter int unsigned BYTES = 512,
  localparam int unsigned WORDS = BYTES / (M * WW / 8),
  localparam int unsigned CAP   = WORDS * M
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [15:0]          waddr,   // word address
  input  logic [M-1:0][WW-1:0] wdata,
  input  logic                 a_re,
  input  logic [15:0]          a_addr,  // weight address (narrow)
  output logic [WW-1:0]        a_data,
  input  logic                 b_re,
  input  logic [15:0]          b_addr,  // word address (wide)
  output logic [M-1:0][WW-1:0] b_data
);
  logic [M-1:0][WW-1:0] mem [WORDS];
  logic [15:0] a_lin, a_word, a_lane;

  always_comb begin
    a_lin  = 16'(a_addr % CAP);
    a_word = a_lin / M;
    a_lane = a_lin % M;
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr % WORDS] <= wdata;
    if (a_re) a_data <= mem[a_word][a_lane];
    if (b_re) b_data <= mem[b_addr % WORDS];
  end
endmodule
