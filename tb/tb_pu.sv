// PU test (M = 4): drives the PU with the control stream the main controller would
// issue and checks the drained outputs against a model.
// CONV: two input channels x three output positions x three nonzero weights; the
// first channel starts from zero, the second adds onto the partial sums read back from
// the PSBs; activations contain zeros (gated PEs). Then each position is drained
// through normalization (bias, shift) and ReLU and compared. FC: one wide weight word
// per step, activation on lane 0 shared by all PEs, five steps, then drained.
module tb_pu;
  import sacc_pkg::*;
  localparam int M = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic mac_valid, first, last, zero_base, fc, int8, psb_rd, relu, pool, wb_we;
  logic [15:0] wb_addr, wb_waddr;
  logic [3:0] psb_addr;
  logic [M-1:0][15:0] sel, wb_wdata, out;
  pp_op_e pp_op;
  logic [4:0] shift;
  logic [31:0] bias;
  logic [$clog2(M+1)-1:0] active;
  int checks = 0, failures = 0, gated = 0;
  pu #(.M(M), .PSB_DEPTH(16), .WB_BYTES(512)) dut (.*);

  int wts[64];
  logic [M-1:0][15:0] wwide[8];
  longint sums[4][M];

  function automatic logic [15:0] norm(input longint s);
    longint v = (s + longint'($signed(bias))) >>> shift;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    if (relu && v < 0) v = 0;
    return 16'(v);
  endfunction

  always @(posedge clk) if (rst_n && dut.v1 && active < M) gated++;

  task automatic drain_check(input int npos);
    for (int p = 0; p < npos; p++) begin
      @(negedge clk);
      psb_rd = 1; psb_addr = 4'(p);
      @(negedge clk);
      psb_rd = 0; pp_op = PP_FINAL;
      @(negedge clk);
      pp_op = PP_NONE;
      for (int m = 0; m < M; m++) begin
        checks++;
        if (out[m] !== norm(sums[p][m])) begin
          failures++;
          $display("FAIL pos %0d lane %0d got %h exp %h", p, m, out[m], norm(sums[p][m]));
        end
      end
    end
  endtask

  initial begin
    logic [M-1:0][15:0] pend;
    bit pend_v;
    {mac_valid, first, last, zero_base, fc, int8, psb_rd, relu, pool, wb_we} = '0;
    wb_addr = 0; wb_waddr = 0; psb_addr = 0; sel = '0; wb_wdata = '0; pp_op = PP_NONE;
    shift = 2; bias = 32'($signed(-20)); relu = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // weights: channel c, step k -> wts[c*3+k]
    for (int i = 0; i < 8; i++) begin
      for (int m = 0; m < M; m++) begin
        wts[i*M+m] = int'($urandom % 201) - 100;
        wwide[i][m] = 16'(wts[i*M+m]);
      end
      @(negedge clk);
      wb_we = 1; wb_waddr = 16'(i); wb_wdata = wwide[i];
    end
    @(negedge clk);
    wb_we = 0;
    for (int p = 0; p < 4; p++) for (int m = 0; m < M; m++) sums[p][m] = 0;
    // CONV stream
    pend_v = 0;
    for (int c = 0; c < 2; c++)
      for (int p = 0; p < 3; p++)
        for (int k = 0; k < 3; k++) begin
          logic [M-1:0][15:0] a;
          @(negedge clk);
          if (pend_v) sel = pend;
          mac_valid = 1; first = (k == 0); last = (k == 2); zero_base = (c == 0);
          wb_addr = 16'(c * 3 + k); psb_addr = 4'(p);
          for (int m = 0; m < M; m++) begin
            a[m] = ($urandom % 3 == 0) ? 16'h0 : 16'(int'($urandom % 601) - 300);
            sums[p][m] += longint'($signed(a[m])) * wts[c * 3 + k];
          end
          pend = a; pend_v = 1;
        end
    @(negedge clk);
    sel = pend; mac_valid = 0; first = 0; last = 0;
    @(negedge clk);
    drain_check(3);
    checks++;
    if (gated == 0) begin failures++; $display("FAIL no gated PE seen"); end
    // FC stream: lane m computes neuron m
    fc = 1; relu = 0; shift = 0; bias = 7;
    for (int m = 0; m < M; m++) sums[0][m] = 0;
    pend_v = 0;
    for (int k = 0; k < 5; k++) begin
      logic [15:0] a;
      @(negedge clk);
      if (pend_v) sel = pend;
      mac_valid = 1; first = (k == 0); last = (k == 4); zero_base = 1;
      wb_addr = 16'(k); psb_addr = 0;
      a = 16'(int'($urandom % 601) - 300);
      for (int m = 0; m < M; m++) sums[0][m] += longint'($signed(a)) * wts[k*M+m];
      pend = '0; pend[0] = a; pend[1] = 16'h5555;  // other lanes must be ignored
      pend_v = 1;
    end
    @(negedge clk);
    sel = pend; mac_valid = 0; first = 0; last = 0;
    @(negedge clk);
    drain_check(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
