// WB test at the default size (M = 28, 512 bytes = 9 words): fill with random words,
// then check narrow reads (one 16-bit weight, address wrapping at the capacity) and
// wide reads (all M weights of a word) against the written data.
module tb_weight_buffer;
  localparam int M = 28, WORDS = 512 / (M * 2), CAP = WORDS * M;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, a_re, b_re;
  logic [15:0] waddr, a_addr, b_addr;
  logic [M-1:0][15:0] wdata, b_data;
  logic [15:0] a_data;
  logic [M-1:0][15:0] model [WORDS];
  int checks = 0, failures = 0;
  weight_buffer #(.M(M), .WW(16), .BYTES(512)) dut (.*);
  initial begin
    we = 0; a_re = 0; b_re = 0; waddr = 0; a_addr = 0; b_addr = 0; wdata = '0;
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk);
      we = 1; waddr = 16'(w);
      for (int m = 0; m < M; m++) wdata[m] = 16'($urandom);
      model[w] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 1000; i++) begin
      int a, b;
      a = $urandom % (3 * CAP);
      b = $urandom % (2 * WORDS);
      @(negedge clk);
      a_re = 1; a_addr = 16'(a); b_re = 1; b_addr = 16'(b);
      @(negedge clk);
      a_re = 0; b_re = 0;
      checks += 2;
      if (a_data !== model[(a % CAP) / M][(a % CAP) % M]) begin
        failures++; $display("FAIL narrow %0d got %h", a, a_data);
      end
      if (b_data !== model[b % WORDS]) begin
        failures++; $display("FAIL wide %0d", b);
      end
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
