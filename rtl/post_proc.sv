// Post-processing of one PU: normalization, activation and pooling.
//
// Works on the M final partial sums that the PU's partial-sum buffers put on their
// read ports during the drain phase, one output position at a time, and produces one
// M x 16-bit output word for ABout. The paper names the three stages and their order
// (normalization, activation, pooling); what each one computes is this design's choice:
//   normalization  y = saturate((psum + bias) >>> shift): per-output-channel bias and
//                  fixed-point rescale back to 16 bits (8 bits per half in int8 mode,
//                  where the 32-bit word holds two 16-bit sums).
//   activation     ReLU when `relu` is set.
//   pooling        2x2 max pooling with stride 2 when `pool` is set: PP_POOL_FIRST keeps
//                  the row of the upper output row, PP_FINAL of the lower row takes the
//                  maximum of each 2x2 block; output lanes 0..M/2-1 carry the M/2 pooled
//                  values, the upper lanes are zero. In int8 mode each byte is pooled
//                  on its own.
// Timing: `pp_op` refers to the data on `psum` in the same cycle; `out` is registered
// and valid from the cycle after PP_FINAL until the next PP_FINAL.
module post_proc #(
  parameter int unsigned M  = 28,
  parameter int unsigned PW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  sacc_pkg::pp_op_e     pp_op,
  input  logic                 int8,
  input  logic                 relu,
  input  logic                 pool,
  input  logic [4:0]           shift,
  input  logic [31:0]          bias,
  input  logic [M-1:0][PW-1:0] psum,
  output logic [M-1:0][15:0]   out
);
  logic [M-1:0][15:0] cur, prev, res;

  function automatic logic [15:0] norm16(input logic [PW-1:0] p, input logic [31:0] b,
                                        input logic [4:0] sh, input logic rl);
    logic signed [PW:0] t;
    logic [15:0] r;
    t = ($signed({p[PW-1], p}) + $signed({b[31], b})) >>> sh;
    if (t > 32767)       r = 16'h7fff;
    else if (t < -32768) r = 16'h8000;
    else                 r = t[15:0];
    if (rl && r[15]) r = '0;
    return r;
  endfunction

  function automatic logic [7:0] norm8(input logic [15:0] p, input logic [15:0] b,
                                      input logic [4:0] sh, input logic rl);
    logic signed [16:0] t;
    logic [7:0] r;
    t = ($signed({p[15], p}) + $signed({b[15], b})) >>> sh;
    if (t > 127)       r = 8'h7f;
    else if (t < -128) r = 8'h80;
    else               r = t[7:0];
    if (rl && r[7]) r = '0;
    return r;
  endfunction

  function automatic logic [7:0] max8(input logic [7:0] a, input logic [7:0] b);
    return ($signed(a) > $signed(b)) ? a : b;
  endfunction

  function automatic logic [15:0] max16(input logic [15:0] a, input logic [15:0] b);
    return ($signed(a) > $signed(b)) ? a : b;
  endfunction

  always_comb begin
    for (int m = 0; m < int'(M); m++) begin
      if (int8) cur[m] = {norm8(psum[m][PW-1:PW/2], bias[15:0], shift, relu),
                          norm8(psum[m][PW/2-1:0], bias[15:0], shift, relu)};
      else      cur[m] = norm16(psum[m], bias, shift, relu);
    end
    res = cur;
    if (pool) begin
      res = '0;
      for (int k = 0; k < int'(M / 2); k++) begin
        if (int8) begin
          res[k][15:8] = max8(max8(prev[2*k][15:8], prev[2*k+1][15:8]),
                              max8(cur[2*k][15:8],  cur[2*k+1][15:8]));
          res[k][7:0]  = max8(max8(prev[2*k][7:0], prev[2*k+1][7:0]),
                              max8(cur[2*k][7:0],  cur[2*k+1][7:0]));
        end else begin
          res[k] = max16(max16(prev[2*k], prev[2*k+1]), max16(cur[2*k], cur[2*k+1]));
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev <= '0;
      out  <= '0;
    end else begin
      if (pp_op == sacc_pkg::PP_POOL_FIRST) prev <= cur;
      if (pp_op == sacc_pkg::PP_FINAL)      out  <= res;
    end
  end
endmodule
