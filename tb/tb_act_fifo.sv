// Activation FIFO test at the ABout default size (448-bit words, depth 36): random
// push/pop traffic against a queue model, checking order, data, count, full and empty.
module tb_act_fifo;
  localparam int W = 448, DEPTH = 36;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0;
  int saw_full = 0;
  act_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      checks++;
      if (count != q.size() || full != (q.size() == DEPTH) || empty != (q.size() == 0)) begin
        failures++;
        $display("FAIL flags count=%0d model=%0d", count, q.size());
      end
      if (full) saw_full++;
      if (!empty) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("FAIL head data"); end
      end
      push = !full && ($urandom % 100) < ((i / 500) % 2 ? 30 : 70);
      pop  = !empty && ($urandom % 100) < 50;
      din  = {14{$urandom}};
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    checks++;
    if (saw_full == 0) begin failures++; $display("FAIL never full"); end
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
