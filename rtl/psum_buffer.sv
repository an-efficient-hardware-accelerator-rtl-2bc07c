// Partial-sum buffer (PSB): the private memory next to each PE.
//
// Holds one 32-bit partial sum per output position the PE is responsible for in the
// current tile, and after the last input channel the final sums until they are
// drained. Default 2 KB (512 x 32 bit), one FPGA block RAM per PE as in the paper.
// One synchronous read port and one write port. Read data appears the cycle after
// `re` and holds until the next read. A read of the address being written in the same
// cycle returns the new data (write-first forwarding), so a position revisited
// back-to-back never sees a stale sum; that forwarding is this design's choice.
module psum_buffer #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= (we && waddr == raddr) ? wdata : mem[raddr];
  end
endmodule
