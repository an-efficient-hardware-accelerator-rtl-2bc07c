// PSB test: random writes and reads against a model memory, including reads of the
// address written in the same cycle (write-first forwarding), and read data holding
// while `re` is low.
module tb_psum_buffer;
  localparam int DEPTH = 512;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re, we;
  logic [8:0] raddr, waddr;
  logic [31:0] rdata, wdata;
  int checks = 0, failures = 0;
  logic [31:0] model [DEPTH];
  logic [31:0] exp_d;
  logic exp_v;
  psum_buffer #(.DEPTH(DEPTH), .W(32)) dut (.*);
  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0; exp_v = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 9'(a); wdata = $urandom; model[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (rdata !== exp_d) begin failures++; $display("FAIL read got %h exp %h", rdata, exp_d); end
      end
      re = $urandom % 2; we = $urandom % 2;
      raddr = 9'($urandom); waddr = ($urandom % 4 == 0) ? raddr : 9'($urandom);
      wdata = $urandom;
      if (re) begin
        exp_d = (we && waddr == raddr) ? wdata : model[raddr];
        exp_v = 1;
      end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
