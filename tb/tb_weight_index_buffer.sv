// WIB test with the compressed index of the paper's CONV example (3 channels of a
// 3x3 kernel): Offset = 4 3 5, R_pointer = 1 2 1 2 0 1 2 2 1,
// Index = 1 0 1 2 1 0 2 0 1 0 0 1, written as 16-bit words with four nibbles each,
// plus random fill of all three parts. Every nibble is read back by nibble address.
module tb_weight_index_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, off_re, rp_re, idx_re;
  logic [1:0] wpart;
  logic [11:0] waddr;
  logic [15:0] wdata, off_data;
  logic [9:0] off_addr;
  logic [12:0] rp_naddr;
  logic [13:0] idx_naddr;
  logic [3:0] rp_data, idx_data;
  int checks = 0, failures = 0;
  int offs[3] = '{4, 3, 5};
  int rps[9]  = '{1, 2, 1, 2, 0, 1, 2, 2, 1};
  int idxs[12] = '{1, 0, 1, 2, 1, 0, 2, 0, 1, 0, 0, 1};
  logic [3:0] rp_m [2048];
  logic [3:0] idx_m [4096];
  logic [15:0] off_m [512];
  weight_index_buffer dut (.*);

  task automatic wr(input int part, input int a, input logic [15:0] d);
    @(negedge clk);
    we = 1; wpart = 2'(part); waddr = 12'(a); wdata = d;
    @(negedge clk);
    we = 0;
  endtask

  initial begin
    we = 0; off_re = 0; rp_re = 0; idx_re = 0; wpart = 0; waddr = 0; wdata = 0;
    off_addr = 0; rp_naddr = 0; idx_naddr = 0;
    for (int a = 0; a < 512; a++) off_m[a] = (a < 3) ? 16'(offs[a]) : 16'($urandom);
    for (int a = 0; a < 2048; a++) rp_m[a] = (a < 9) ? 4'(rps[a]) : 4'($urandom);
    for (int a = 0; a < 4096; a++) idx_m[a] = (a < 12) ? 4'(idxs[a]) : 4'($urandom);
    for (int a = 0; a < 512; a++) wr(0, a, off_m[a]);
    for (int a = 0; a < 512; a++) wr(1, a, {rp_m[4*a+3], rp_m[4*a+2], rp_m[4*a+1], rp_m[4*a]});
    for (int a = 0; a < 1024; a++) wr(2, a, {idx_m[4*a+3], idx_m[4*a+2], idx_m[4*a+1], idx_m[4*a]});
    for (int i = 0; i < 3000; i++) begin
      int oa, ra, ia;
      oa = (i < 3) ? i : $urandom % 512;
      ra = (i < 9) ? i : $urandom % 2048;
      ia = (i < 12) ? i : $urandom % 4096;
      @(negedge clk);
      off_re = 1; rp_re = 1; idx_re = 1;
      off_addr = 10'(oa); rp_naddr = 13'(ra); idx_naddr = 14'(ia);
      @(negedge clk);
      off_re = 0; rp_re = 0; idx_re = 0;
      checks += 3;
      if (off_data !== off_m[oa]) begin failures++; $display("FAIL offset %0d", oa); end
      if (rp_data !== rp_m[ra])   begin failures++; $display("FAIL rp %0d", ra); end
      if (idx_data !== idx_m[ia]) begin failures++; $display("FAIL idx %0d", ia); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
