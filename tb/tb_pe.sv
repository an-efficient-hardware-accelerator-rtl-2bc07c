// PE test: random sequences of MAC steps in 16-bit and dual 8-bit mode, with zero
// activations (gated), base loading from psum_in or zero, and write-back on `last`.
// A software accumulator gives the expected values.
module tb_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid, en, first, last, zero_base, int8;
  logic [15:0] act, w;
  logic [31:0] psum_in, psum_out, acc;
  logic psum_we;
  int checks = 0, failures = 0;
  pe #(.AW(16), .WW(16), .PW(32)) dut (.*);

  longint model;
  int lo, hi;

  function automatic int s8(input logic [7:0] v);
    return int'($signed(v));
  endfunction

  initial begin
    {valid, en, first, last, zero_base, int8} = '0;
    act = 0; w = 0; psum_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pos = 0; pos < 200; pos++) begin
      int len;
      len = 1 + $urandom % 6;
      int8 = pos >= 100;
      zero_base = $urandom % 2;
      psum_in = $urandom;
      model = zero_base ? 0 : longint'($signed(psum_in));
      lo = zero_base ? 0 : int'($signed(psum_in[15:0]));
      hi = zero_base ? 0 : int'($signed(psum_in[31:16]));
      for (int s = 0; s < len; s++) begin
        @(negedge clk);
        valid = 1; first = (s == 0); last = (s == len - 1);
        act = ($urandom % 3 == 0) ? 16'h0 : 16'($urandom);
        w = 16'($urandom);
        en = (act != 0);
        if (int8) begin
          lo += s8(act[7:0]) * s8(w[7:0]);
          hi += s8(act[15:8]) * s8(w[7:0]);
        end else model += longint'($signed(act)) * longint'($signed(w));
        #1;
        if (last) begin
          checks++;
          if (!psum_we) begin failures++; $display("FAIL no write on last"); end
          checks++;
          if (int8 ? (psum_out !== {16'(hi), 16'(lo)}) : (psum_out !== 32'(model))) begin
            failures++;
            $display("FAIL pos %0d int8=%0d got %h exp %h", pos, int8, psum_out,
                     int8 ? {16'(hi), 16'(lo)} : 32'(model));
          end
        end else begin
          checks++;
          if (psum_we) begin failures++; $display("FAIL write before last"); end
        end
      end
      @(negedge clk);
      valid = 0; first = 0; last = 0;
      // gated PE keeps its accumulator
      begin
        logic [31:0] held;
        held = acc;
        valid = 1; en = 0; act = 0; w = 16'h1234;
        @(negedge clk);
        valid = 0;
        checks++;
        if (acc !== held) begin failures++; $display("FAIL gated PE changed its sum"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
