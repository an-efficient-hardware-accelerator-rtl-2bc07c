// Processing element: one multiply-accumulate lane of a PU.
//
// Each cycle with `valid` the PE multiplies the activation selected for it by the
// weight of the current step and adds the product to its accumulator. On the first
// weight of an output position (`first`) the accumulator starts from the partial
// sum read out of the PE's own partial-sum buffer, or from zero when `zero_base` says
// no earlier input channel contributed. On the last weight (`last`) the new sum is
// offered on `psum_out` with `psum_we` so the PU writes it back to the buffer in the
// same cycle.
//
// Zero gating: the accumulator register is only enabled when the zero discriminator
// reports a nonzero activation (`en`), or on `first` to load the base. A zero
// activation therefore costs no switching in the multiplier/accumulator.
//
// 8-bit mode (`int8`): the 16-bit activation lane carries two 8-bit activations that
// share the same 8-bit weight (w[7:0]); two products are formed (two DSP slices on an
// FPGA) and kept as two 16-bit partial sums concatenated in the 32-bit word
// {hi, lo}. That follows the paper's description of its 8-bit variant; the exact
// packing is this design's choice.
// Timing: inputs are sampled at the clock edge; psum_out/psum_we are combinational
// from the inputs and the accumulator (write in the same cycle as the last MAC).
module pe #(
  parameter int unsigned AW = 16,
  parameter int unsigned WW = 16,
  parameter int unsigned PW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid,
  input  logic          en,
  input  logic          first,
  input  logic          last,
  input  logic          zero_base,
  input  logic          int8,
  input  logic [AW-1:0] act,
  input  logic [WW-1:0] w,
  input  logic [PW-1:0] psum_in,
  output logic [PW-1:0] psum_out,
  output logic          psum_we,
  output logic [PW-1:0] acc
);
  logic [PW-1:0] base, prod, acc_next;
  logic signed [AW+WW-1:0] p16;
  logic signed [15:0] p8_lo, p8_hi;

  always_comb begin
    base  = first ? (zero_base ? '0 : psum_in) : acc;
    p16   = $signed(act) * $signed(w);
    p8_lo = $signed(act[AW/2-1:0]) * $signed(w[7:0]);
    p8_hi = $signed(act[AW-1:AW/2]) * $signed(w[7:0]);
    if (int8) prod = {p8_hi, p8_lo};
    else      prod = PW'(p16);
    if (!en) prod = '0;
    if (int8) acc_next = {base[PW-1:PW/2] + prod[PW-1:PW/2], base[PW/2-1:0] + prod[PW/2-1:0]};
    else      acc_next = base + prod;
    psum_out = acc_next;
    psum_we  = valid & last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       acc <= '0;
    else if (valid && (en || first))  acc <= acc_next;
  end
endmodule
