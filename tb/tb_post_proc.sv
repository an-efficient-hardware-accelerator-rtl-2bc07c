// Post-processing test: random partial sums through normalization (bias, shift,
// saturation), ReLU and 2x2 max pooling, in 16-bit and 8-bit mode, against a model.
module tb_post_proc;
  import sacc_pkg::*;
  localparam int M = 28;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pp_op_e pp_op;
  logic int8, relu, pool;
  logic [4:0] shift;
  logic [31:0] bias;
  logic [M-1:0][31:0] psum;
  logic [M-1:0][15:0] out;
  int checks = 0, failures = 0;
  post_proc #(.M(M), .PW(32)) dut (.*);

  function automatic int sat(input longint v, input int bits);
    longint hi = (64'sd1 <<< (bits - 1)) - 1;
    longint lo = -(64'sd1 <<< (bits - 1));
    return (v > hi) ? int'(hi) : (v < lo) ? int'(lo) : int'(v);
  endfunction

  function automatic logic [15:0] model(input logic [31:0] p);
    if (int8) begin
      int lo, hi;
      lo = sat((longint'($signed(p[15:0])) + longint'($signed(bias[15:0]))) >>> shift, 8);
      hi = sat((longint'($signed(p[31:16])) + longint'($signed(bias[15:0]))) >>> shift, 8);
      if (relu && lo < 0) lo = 0;
      if (relu && hi < 0) hi = 0;
      return {8'(hi), 8'(lo)};
    end else begin
      int v;
      v = sat((longint'($signed(p)) + longint'($signed(bias))) >>> shift, 16);
      if (relu && v < 0) v = 0;
      return 16'(v);
    end
  endfunction

  function automatic logic [15:0] mx(input logic [15:0] a, b, c, d);
    if (int8) begin
      logic signed [7:0] l, h;
      l = $signed(a[7:0]); h = $signed(a[15:8]);
      if ($signed(b[7:0]) > l) l = $signed(b[7:0]);
      if ($signed(c[7:0]) > l) l = $signed(c[7:0]);
      if ($signed(d[7:0]) > l) l = $signed(d[7:0]);
      if ($signed(b[15:8]) > h) h = $signed(b[15:8]);
      if ($signed(c[15:8]) > h) h = $signed(c[15:8]);
      if ($signed(d[15:8]) > h) h = $signed(d[15:8]);
      return {h, l};
    end else begin
      logic signed [15:0] r;
      r = $signed(a);
      if ($signed(b) > r) r = $signed(b);
      if ($signed(c) > r) r = $signed(c);
      if ($signed(d) > r) r = $signed(d);
      return r;
    end
  endfunction

  initial begin
    logic [M-1:0][15:0] first_row, exp_o;
    pp_op = PP_NONE; int8 = 0; relu = 0; pool = 0; shift = 0; bias = 0; psum = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      int8 = $urandom % 2; relu = $urandom % 2; pool = $urandom % 2;
      shift = 5'($urandom % 12); bias = $urandom % 2 ? $urandom : 32'($signed(int'($urandom % 2001) - 1000));
      for (int m = 0; m < M; m++) psum[m] = ($urandom % 2) ? $urandom : 32'($signed(int'($urandom % 100001) - 50000));
      for (int m = 0; m < M; m++) first_row[m] = model(psum[m]);
      pp_op = pool ? PP_POOL_FIRST : PP_FINAL;
      if (pool) begin
        @(negedge clk);
        for (int m = 0; m < M; m++) psum[m] = $urandom;
        pp_op = PP_FINAL;
      end
      exp_o = '0;
      for (int m = 0; m < M; m++) begin
        if (!pool) exp_o[m] = model(psum[m]);
        else if (m < M / 2) exp_o[m] = mx(first_row[2*m], first_row[2*m+1], model(psum[2*m]), model(psum[2*m+1]));
      end
      @(negedge clk);
      pp_op = PP_NONE;
      checks++;
      if (out !== exp_o) begin
        failures++;
        $display("FAIL int8=%0d relu=%0d pool=%0d got %h exp %h", int8, relu, pool, out, exp_o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
