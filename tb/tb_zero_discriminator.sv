// Checks the zero-value discriminator on all 16-bit values with a zero byte and on
// random values: en, en_lo and en_hi against a direct comparison.
module tb_zero_discriminator;
  logic [15:0] act;
  logic en, en_lo, en_hi;
  int checks = 0, failures = 0;
  zero_discriminator #(.AW(16)) dut (.*);
  task automatic check(input logic [15:0] a);
    act = a;
    #1;
    checks++;
    if (en !== (a != 0) || en_lo !== (a[7:0] != 0) || en_hi !== (a[15:8] != 0)) begin
      failures++;
      $display("FAIL act=%h en=%b lo=%b hi=%b", a, en, en_lo, en_hi);
    end
  endtask
  initial begin
    check(16'h0000);
    for (int i = 0; i < 256; i++) begin
      check(16'(i));
      check(16'(i << 8));
    end
    repeat (500) check(16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
