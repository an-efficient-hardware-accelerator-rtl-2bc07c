// Activation buffer, used for both ABin and ABout.
//
// Activations are produced and consumed row by row in a fixed order, so both
// activation buffers are first-in first-out queues of whole rows: ABin holds row
// segments of (M-1)*S+R activations on their way from DRAM to the VGM, ABout holds
// M-activation output words on their way from the PUs to DRAM. The paper sizes both
// at 2 KB with a small depth; the depth here is 2 KB divided by the word size.
// Show-ahead: `dout` is the oldest entry whenever `empty` is low; `pop` removes it at
// the clock edge. `push` when full and `pop` when empty are ignored (and flagged by
// assertions). The FIFO organisation is this design's reading of "read row by row".
module act_fifo #(
  parameter int unsigned W     = 1904,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned PW   = $clog2(DEPTH + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         full,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic [PW-1:0] count
);
  logic [W-1:0] mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic do_push, do_pop;

  assign full    = (count == PW'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + PW'(do_push) - PW'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
