// Structured-sparse CNN accelerator, top level.
//
// N processing units (PUs) of M PEs each form the PE array; PU n computes output
// channel n of the current group of N output channels, PE m of a PU the m-th of M
// neighbouring outputs of one output row. One Vector Generator Module (VGM) feeds
// all PUs with the activations that belong to the current nonzero weight, and the
// main controller walks the layer loops over the compressed weight index held in the
// weight index buffer (WIB). Activations enter through the ABin FIFO as row segments
// and leave through the ABout FIFO as M-activation words, PU after PU.
//
// The DMA engine and the DRAM behind it are outside this module: their side of each
// buffer is a port of the top (WIB and WB write ports, ABin push, ABout pop), so an
// external loader decides what is streamed when. The expected order of the ABin
// stream is, for a CONV tile: for each input channel, output row t, column group g
// and kernel row kh, the D = (M-1)*S_MAX+R_MAX activations of input row t*S+kh
// starting at column g*M*S (zero beyond the row). For an FC layer: the input vector
// in chunks of D activations. Bias values per PU (output channel) are inputs.
//
// Timing: `start` (one cycle, while idle) launches the tile described by `cfg`;
// `done` pulses for one cycle when the last output word is in ABout. The `active_pes`
// output counts the PEs that were not zero-gated in the current cycle.
module sparse_accel_top import sacc_pkg::*; #(
  parameter int unsigned N         = 48,
  parameter int unsigned M         = 28,
  parameter int unsigned R_MAX     = 11,
  parameter int unsigned S_MAX     = 4,
  parameter int unsigned PSB_DEPTH = 512,   // 2 KB of 32-bit sums
  parameter int unsigned WB_BYTES  = 512,
  parameter int unsigned AB_BYTES  = 2048,  // ABin and ABout
  localparam int unsigned D         = (M - 1) * S_MAX + R_MAX,
  localparam int unsigned ABIN_DEPTH  = (AB_BYTES * 8) / (D * 16),
  localparam int unsigned ABOUT_DEPTH = (AB_BYTES * 8) / (M * 16)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  layer_cfg_t            cfg,
  output logic                  busy,
  output logic                  done,
  // WIB load
  input  logic                  wib_we,
  input  logic [1:0]            wib_part,
  input  logic [11:0]           wib_waddr,
  input  logic [15:0]           wib_wdata,
  // WB load, one write enable per PU
  input  logic [N-1:0]          wb_we,
  input  logic [15:0]           wb_waddr,
  input  logic [M-1:0][15:0]    wb_wdata,
  // per output channel bias for normalization
  input  logic [N-1:0][31:0]    bias,
  // ABin push side
  input  logic                  abin_push,
  input  logic [D-1:0][15:0]    abin_din,
  output logic                  abin_full,
  // ABout pop side
  input  logic                  about_pop,
  output logic [M-1:0][15:0]    about_dout,
  output logic                  about_empty,
  // status
  output logic [15:0]           wb_free_ptr,
  output logic [$clog2(N*M+1)-1:0] active_pes,
  output perf_t                 perf
);
  localparam int unsigned PAW = $clog2(PSB_DEPTH);
  localparam int unsigned NW  = (N > 1) ? $clog2(N) : 1;

  // WIB
  logic        off_re, rp_re, idx_re;
  logic [9:0]  off_addr;
  logic [12:0] rp_naddr;
  logic [13:0] idx_naddr;
  logic [15:0] off_data;
  logic [3:0]  rp_data, idx_data;
  // VGM
  vgm_op_e     vgm_op;
  logic        vgm_en, vgm_first, vgm_pop_ok, vgm_need_pop, vgm_sel_valid;
  logic [3:0]  vgm_index;
  logic [M-1:0][15:0] sel;
  // ABin / ABout
  logic               abin_empty, about_full, about_push;
  logic [D-1:0][15:0] abin_dout;
  logic [NW-1:0]      about_sel;
  logic [$clog2(ABIN_DEPTH+1)-1:0]  abin_count;
  logic [$clog2(ABOUT_DEPTH+1)-1:0] about_count;
  // PU control
  logic           mac_valid, first, last, zero_base, psb_rd;
  logic [15:0]    wb_addr;
  logic [PAW-1:0] psb_addr;
  pp_op_e         pp_op;
  logic [N-1:0][M-1:0][15:0] pu_out;
  logic [N-1:0][$clog2(M+1)-1:0] pu_active;

  main_controller #(.N(N), .M(M), .R_MAX(R_MAX), .PSB_DEPTH(PSB_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .off_re, .off_addr, .off_data, .rp_re, .rp_naddr, .rp_data,
    .idx_re, .idx_naddr, .idx_data,
    .vgm_op, .vgm_en, .vgm_index, .vgm_first, .vgm_pop_ok, .vgm_need_pop, .abin_empty,
    .mac_valid, .first, .last, .zero_base, .wb_addr, .psb_addr, .psb_rd, .pp_op,
    .about_push, .about_sel, .about_full, .wb_free_ptr, .perf
  );

  weight_index_buffer u_wib (
    .clk, .we(wib_we), .wpart(wib_part), .waddr(wib_waddr), .wdata(wib_wdata),
    .off_re, .off_addr, .off_data, .rp_re, .rp_naddr, .rp_data,
    .idx_re, .idx_naddr, .idx_data
  );

  act_fifo #(.W(D * 16), .DEPTH(ABIN_DEPTH)) u_abin (
    .clk, .rst_n, .push(abin_push), .din(abin_din), .full(abin_full),
    .pop(vgm_need_pop && vgm_en), .dout(abin_dout), .empty(abin_empty), .count(abin_count)
  );

  vgm #(.M(M), .AW(16), .R_MAX(R_MAX), .S_MAX(S_MAX)) u_vgm (
    .clk, .rst_n, .op(vgm_op), .en(vgm_en), .index(vgm_index), .first(vgm_first),
    .pop_ok(vgm_pop_ok), .stride(cfg.s), .din(abin_dout), .need_pop(vgm_need_pop),
    .sel, .sel_valid(vgm_sel_valid)
  );

  for (genvar n = 0; n < int'(N); n++) begin : g_pu
    // In FC layers only PU 0 works
    logic pu_on;
    assign pu_on = (cfg.mode == MODE_CONV) || (n == 0);

    pu #(.M(M), .PSB_DEPTH(PSB_DEPTH), .WB_BYTES(WB_BYTES)) u_pu (
      .clk, .rst_n,
      .mac_valid(mac_valid && pu_on), .first, .last, .zero_base,
      .fc(cfg.mode == MODE_FC), .int8(cfg.int8), .wb_addr, .psb_addr, .psb_rd,
      .sel, .pp_op, .relu(cfg.relu), .pool(cfg.pool), .shift(cfg.shift), .bias(bias[n]),
      .wb_we(wb_we[n]), .wb_waddr, .wb_wdata,
      .out(pu_out[n]), .active(pu_active[n])
    );
  end

  act_fifo #(.W(M * 16), .DEPTH(ABOUT_DEPTH)) u_about (
    .clk, .rst_n, .push(about_push), .din(pu_out[about_sel]), .full(about_full),
    .pop(about_pop), .dout(about_dout), .empty(about_empty), .count(about_count)
  );

  always_comb begin
    active_pes = '0;
    for (int n = 0; n < int'(N); n++) active_pes += ($clog2(N*M+1))'(pu_active[n]);
  end

  // The layer instruction must stay stable while a tile runs
  a_cfg_stable: assert property (@(posedge clk) disable iff (!rst_n) busy && !done |=> $stable(cfg));
endmodule
