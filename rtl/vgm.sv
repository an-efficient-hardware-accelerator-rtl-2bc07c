// Vector Generator Module (VGM): selects, for every nonzero weight, the activations
// the PEs need, and broadcasts them to all PUs.
//
// Because shape-wise pruning gives the N kernels processed together the same zero
// pattern, one VGM serves the whole PU array. It holds two registers of
// D = (M-1)*S_MAX + R_MAX activations: REG1 receives the next input-row segment from
// ABin, REG0 is the working copy that is shifted. Lane m of the output is
// REG0[m*stride], i.e. the input activation under weight (kh, kw) for the output
// column handled by PE m.
//
// CONV operations (index decoder + shifter, as in the paper's VGM drawing):
//   VGM_LOAD1  REG1 <= ABin head (pop).
//   VGM_ROW    first nonzero weight of a kernel row: REG0 <= REG1 shifted left by
//              `index` positions; if `pop_ok`, REG1 is refilled from ABin in the same
//              cycle, which overlaps the next row's fetch with this row's work.
//   VGM_STEP   further nonzero weight of the same row: REG0 shifted left by index+1
//              (the index counts zeros skipped, plus one for the weight just used).
// FC operations (this design's own scheme; the paper only says one activation is
// delivered per step): REG0/REG1 hold two consecutive D-activation chunks of the input
// vector and a pointer walks over them by the decoded jump; when it passes the end of
// REG0, REG1 moves into REG0 and the next chunk is popped. The selected activation is
// driven on every lane.
//   VGM_FC_LOAD  REG0 <= REG1, REG1 <= ABin head if `pop_ok`, pointer <= 0.
//   VGM_FC_STEP  pointer += jump, select.
// `first` marks the first weight of the FC vector (jump = index instead of index+1).
// `need_pop` is combinational from op/index/pop_ok; the controller gates `en` when
// ABin is empty. The selection `sel` is registered: valid the cycle after the op.
module vgm import sacc_pkg::*; #(
  parameter int unsigned M     = 28,
  parameter int unsigned AW    = 16,
  parameter int unsigned R_MAX = 11,
  parameter int unsigned S_MAX = 4,
  localparam int unsigned D    = (M - 1) * S_MAX + R_MAX
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  vgm_op_e              op,
  input  logic                 en,
  input  logic [3:0]           index,
  input  logic                 first,
  input  logic                 pop_ok,
  input  logic [2:0]           stride,
  input  logic [D-1:0][AW-1:0] din,
  output logic                 need_pop,
  output logic [M-1:0][AW-1:0] sel,
  output logic                 sel_valid
);
  localparam int unsigned PTRW = $clog2(2 * D + 1);

  logic [D-1:0][AW-1:0] reg0, reg1, src, shifted, reg0_n, reg1_n;
  logic [4:0]           jump;
  logic [PTRW-1:0]      ptr, ptr_sum, ptr_n;
  logic                 wrap, do_sel;
  logic [M-1:0][AW-1:0] sel_n;
  logic [AW-1:0]        fc_act;

  // Index decoder: zeros to skip before this weight
  always_comb begin
    jump = (op == VGM_ROW || (op == VGM_FC_STEP && first)) ? {1'b0, index} : {1'b0, index} + 5'd1;
  end

  // Shifter
  always_comb begin
    src = (op == VGM_ROW) ? reg1 : reg0;
    for (int k = 0; k < int'(D); k++)
      shifted[k] = (k + int'(jump) < int'(D)) ? src[k + int'(jump)] : '0;
  end

  always_comb begin
    ptr_sum  = ptr + PTRW'(jump);
    wrap    = (op == VGM_FC_STEP) && (ptr_sum >= PTRW'(D));
    ptr_n    = wrap ? ptr_sum - PTRW'(D) : ptr_sum;
    fc_act   = wrap ? reg1[ptr_n] : reg0[ptr_n];
    unique case (op)
      VGM_LOAD1:   need_pop = 1'b1;
      VGM_ROW:     need_pop = pop_ok;
      VGM_FC_LOAD: need_pop = pop_ok;
      VGM_FC_STEP: need_pop = wrap && pop_ok;
      default:     need_pop = 1'b0;
    endcase
    reg0_n = reg0;
    reg1_n = reg1;
    do_sel = 1'b0;
    sel_n  = sel;
    unique case (op)
      VGM_LOAD1: reg1_n = din;
      VGM_ROW: begin
        reg0_n = shifted;
        if (pop_ok) reg1_n = din;
        do_sel = 1'b1;
      end
      VGM_STEP: begin
        reg0_n = shifted;
        do_sel = 1'b1;
      end
      VGM_FC_LOAD: begin
        reg0_n = reg1;
        if (pop_ok) reg1_n = din;
      end
      VGM_FC_STEP: begin
        if (wrap) begin
          reg0_n = reg1;
          if (pop_ok) reg1_n = din;
        end
      end
      default: ;
    endcase
    if (op == VGM_FC_STEP) begin
      for (int m = 0; m < int'(M); m++) sel_n[m] = fc_act;
    end else if (do_sel) begin
      for (int m = 0; m < int'(M); m++) sel_n[m] = reg0_n[m * int'(stride)];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg0      <= '0;
      reg1      <= '0;
      ptr       <= '0;
      sel       <= '0;
      sel_valid <= 1'b0;
    end else begin
      sel_valid <= en && (do_sel || op == VGM_FC_STEP);
      if (en) begin
        reg0 <= reg0_n;
        reg1 <= reg1_n;
        sel  <= sel_n;
        if (op == VGM_FC_LOAD)      ptr <= '0;
        else if (op == VGM_FC_STEP) ptr <= ptr_n;
      end
    end
  end

  a_stride_ok: assert property (@(posedge clk) disable iff (!rst_n)
                                en && do_sel |-> stride >= 3'd1 && stride <= 3'(S_MAX));
endmodule
