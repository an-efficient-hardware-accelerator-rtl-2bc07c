// Processing unit (PU): one output channel of the PE array.
//
// A PU holds M zero discriminators, M PEs, M partial-sum buffers (PSBs), one weight
// buffer (WB) and the normalization / activation / pooling stage, as in the paper's
// PU drawing. In a CONV layer its M PEs compute M neighbouring outputs of the same
// output row of this PU's output channel: each cycle one nonzero weight is read from
// the WB and shared by all PEs, and each PE receives its own activation from the VGM.
// In an FC layer (`fc`) the WB delivers M weights, one per PE (M output neurons), and
// all PEs share the single activation on VGM lane 0.
//
// Pipeline (two stages):
//   S0  control from the main controller: `mac_valid`, `wb_addr`, `psb_addr`,
//       `psb_rd`. The WB is read at `wb_addr`, and the PSBs at `psb_addr` when a new
//       output position starts (`first`) or when draining (`psb_rd`).
//   S1  one cycle later the VGM selection `sel`, the weight and the old partial sum
//       are all available; the PEs accumulate, and on `last` write the new sum back
//       to the PSB at the delayed address. `pp_op` (given by the controller in S1
//       timing) runs the post-processing on the PSB read data; `out` follows one
//       cycle later.
// `active` counts the PEs whose zero discriminator let them work this cycle, which
// exposes the gating for measurement.
module pu import sacc_pkg::*; #(
  parameter int unsigned M         = 28,
  parameter int unsigned PSB_DEPTH = 512,
  parameter int unsigned WB_BYTES  = 512,
  localparam int unsigned PAW      = $clog2(PSB_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // S0 control
  input  logic                 mac_valid,
  input  logic                 first,
  input  logic                 last,
  input  logic                 zero_base,
  input  logic                 fc,
  input  logic                 int8,
  input  logic [15:0]          wb_addr,
  input  logic [PAW-1:0]       psb_addr,
  input  logic                 psb_rd,
  // S1 inputs
  input  logic [M-1:0][15:0]   sel,
  input  pp_op_e               pp_op,
  input  logic                 relu,
  input  logic                 pool,
  input  logic [4:0]           shift,
  input  logic [31:0]          bias,
  // weight loading
  input  logic                 wb_we,
  input  logic [15:0]          wb_waddr,
  input  logic [M-1:0][15:0]   wb_wdata,
  // outputs
  output logic [M-1:0][15:0]   out,
  output logic [$clog2(M+1)-1:0] active
);
  logic                 v1, first1, last1, zb1, fc1, int81;
  logic [PAW-1:0]       addr1;
  logic [15:0]          w_narrow;
  logic [M-1:0][15:0]   w_wide;
  logic [M-1:0][31:0]   psum_rd, psum_wr;
  logic [M-1:0]         psum_we, en;
  logic [M-1:0][31:0]   acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; zb1 <= 1'b0; fc1 <= 1'b0; int81 <= 1'b0;
      addr1 <= '0;
    end else begin
      v1 <= mac_valid; first1 <= first; last1 <= last; zb1 <= zero_base;
      fc1 <= fc; int81 <= int8; addr1 <= psb_addr;
    end
  end

  weight_buffer #(.M(M), .WW(16), .BYTES(WB_BYTES)) u_wb (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata),
    .a_re(mac_valid && !fc), .a_addr(wb_addr), .a_data(w_narrow),
    .b_re(mac_valid && fc), .b_addr(wb_addr), .b_data(w_wide)
  );

  for (genvar m = 0; m < int'(M); m++) begin : g_lane
    logic [15:0] a;
    logic        en_lo, en_hi;
    assign a = fc1 ? sel[0] : sel[m];

    zero_discriminator #(.AW(16)) u_zd (.act(a), .en(en[m]), .en_lo, .en_hi);

    pe #(.AW(16), .WW(16), .PW(32)) u_pe (
      .clk, .rst_n, .valid(v1), .en(en[m]), .first(first1), .last(last1),
      .zero_base(zb1), .int8(int81), .act(a), .w(fc1 ? w_wide[m] : w_narrow),
      .psum_in(psum_rd[m]), .psum_out(psum_wr[m]), .psum_we(psum_we[m]), .acc(acc[m])
    );

    psum_buffer #(.DEPTH(PSB_DEPTH), .W(32)) u_psb (
      .clk, .re((mac_valid && first) || psb_rd), .raddr(psb_addr), .rdata(psum_rd[m]),
      .we(psum_we[m]), .waddr(addr1), .wdata(psum_wr[m])
    );
  end

  post_proc #(.M(M), .PW(32)) u_pp (
    .clk, .rst_n, .pp_op, .int8, .relu, .pool, .shift, .bias, .psum(psum_rd), .out
  );

  always_comb begin
    active = '0;
    for (int m = 0; m < int'(M); m++) active += ($clog2(M+1))'(v1 && en[m]);
  end
endmodule
