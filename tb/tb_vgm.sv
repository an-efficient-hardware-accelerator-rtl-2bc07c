// VGM test.
// Part 1 replays the paper's VGM example (M = 4, stride 1, R = 3, register depth 6):
// buffer 0,1,2,...; index sequence 1, 0 in kernel row 0, then 0 for the next row.
// Expected selections: {1,2,3,4}, {2,3,4,5}, then after the reload from REG1 {0,1,2,3}.
// Part 2 drives random operation sequences (CONV rows and steps at strides 1..4, FC
// loads and steps with chunk crossings) into a second instance (M = 4, R_MAX = 5,
// S_MAX = 4, depth 17) and compares selections and pop requests with a model of the
// two registers written here.
module tb_vgm;
  import sacc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- part 1 instance
  localparam int D1 = 6;
  vgm_op_e op1; logic en1, first1, pop_ok1, np1, sv1;
  logic [3:0] idx1;
  logic [D1-1:0][15:0] din1;
  logic [3:0][15:0] sel1;
  vgm #(.M(4), .AW(16), .R_MAX(3), .S_MAX(1)) u1 (
    .clk, .rst_n, .op(op1), .en(en1), .index(idx1), .first(first1), .pop_ok(pop_ok1),
    .stride(3'd1), .din(din1), .need_pop(np1), .sel(sel1), .sel_valid(sv1));

  // ---------------- part 2 instance
  localparam int M = 4, D = 17;
  vgm_op_e op; logic en, first, pop_ok, np, sv;
  logic [3:0] idx;
  logic [2:0] stride;
  logic [D-1:0][15:0] din;
  logic [M-1:0][15:0] sel;
  vgm #(.M(M), .AW(16), .R_MAX(5), .S_MAX(4)) u2 (
    .clk, .rst_n, .op, .en, .index(idx), .first, .pop_ok, .stride, .din,
    .need_pop(np), .sel, .sel_valid(sv));

  int r0[D], r1[D], ptr;
  int exp_sel[M];

  task automatic check1(input int a, b, c, d);
    checks++;
    if (sel1[0] != 16'(a) || sel1[1] != 16'(b) || sel1[2] != 16'(c) || sel1[3] != 16'(d) || !sv1) begin
      failures++;
      $display("FAIL fig example got %0d %0d %0d %0d", sel1[0], sel1[1], sel1[2], sel1[3]);
    end
  endtask

  initial begin
    op1 = VGM_NOP; en1 = 1; first1 = 0; pop_ok1 = 0; idx1 = 0;
    op = VGM_NOP; en = 1; first = 0; pop_ok = 0; idx = 0; stride = 1;
    for (int e = 0; e < D1; e++) din1[e] = 16'(e);
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // part 1: REG1 <= row segment 0..5
    @(negedge clk); op1 = VGM_LOAD1;
    @(negedge clk); op1 = VGM_ROW; idx1 = 1; pop_ok1 = 1;   // REG1 also refilled with the same row
    @(negedge clk); check1(1, 2, 3, 4); op1 = VGM_STEP; idx1 = 0; pop_ok1 = 0;
    @(negedge clk); check1(2, 3, 4, 5); op1 = VGM_ROW; idx1 = 0;
    @(negedge clk); check1(0, 1, 2, 3); op1 = VGM_NOP;

    // part 2: random
    for (int e = 0; e < D; e++) begin r0[e] = 0; r1[e] = 0; end
    ptr = 0;
    for (int i = 0; i < 4000; i++) begin
      int kind;
      bit do_chk, exp_np;
      @(negedge clk);
      kind = $urandom % 6;
      for (int e = 0; e < D; e++) din[e] = 16'($urandom);
      idx = 4'($urandom);
      pop_ok = $urandom % 2;
      first = $urandom % 4 == 0;
      stride = 3'(1 + $urandom % 4);
      en = ($urandom % 8) != 0;
      do_chk = 0;
      case (kind)
        0: begin op = VGM_LOAD1; exp_np = 1; end
        1: begin op = VGM_ROW; exp_np = pop_ok; end
        2: begin op = VGM_STEP; exp_np = 0; end
        3: begin op = VGM_FC_LOAD; exp_np = pop_ok; end
        default: begin
          int j, nptr; bit wr;
          op = VGM_FC_STEP;
          j = first ? idx : idx + 1;
          nptr = ptr + j;
          wr = nptr >= D;
          exp_np = wr && pop_ok;
        end
      endcase
      #1;
      checks++;
      if (np !== exp_np) begin failures++; $display("FAIL need_pop op=%0d", op); end
      // update model
      if (en) begin
        int t0[D];
        case (op)
          VGM_LOAD1: for (int e = 0; e < D; e++) r1[e] = int'(din[e]);
          VGM_ROW, VGM_STEP: begin
            int sh;
            sh = (op == VGM_ROW) ? idx : idx + 1;
            for (int e = 0; e < D; e++) t0[e] = (e + sh < D) ? ((op == VGM_ROW) ? r1[e + sh] : r0[e + sh]) : 0;
            r0 = t0;
            if (op == VGM_ROW && pop_ok) for (int e = 0; e < D; e++) r1[e] = int'(din[e]);
            for (int m = 0; m < M; m++) exp_sel[m] = r0[m * stride];
            do_chk = 1;
          end
          VGM_FC_LOAD: begin
            r0 = r1; ptr = 0;
            if (pop_ok) for (int e = 0; e < D; e++) r1[e] = int'(din[e]);
          end
          default: begin
            int j, nptr;
            j = first ? idx : idx + 1;
            nptr = ptr + j;
            if (nptr >= D) begin
              nptr -= D;
              r0 = r1;
              if (pop_ok) for (int e = 0; e < D; e++) r1[e] = int'(din[e]);
            end
            ptr = nptr;
            for (int m = 0; m < M; m++) exp_sel[m] = r0[ptr];
            do_chk = 1;
          end
        endcase
      end
      @(posedge clk);
      #1;
      if (do_chk) begin
        checks++;
        for (int m = 0; m < M; m++)
          if (int'(sel[m]) != exp_sel[m] || !sv) begin
            failures++;
            $display("FAIL sel op=%0d lane %0d got %0d exp %0d", op, m, sel[m], exp_sel[m]);
            break;
          end
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
