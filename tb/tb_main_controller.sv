// Main controller test (N = 2, M = 4, R_MAX = 3) with a real WIB holding a random
// shape-wise pruned index for a CONV tile (C = 3, R = 3, U_t = 2, G = 2).
// The testbench walks the dataflow loop nest itself (input channel, output row,
// column group, kernel row, nonzero weight) and expects, for each nonzero weight and
// output position, exactly one VGM_ROW/VGM_STEP with the right step index, first/last
// flags, weight address and PSB address, in order. ABin emptiness is randomised; the
// number of ABin pops must equal the number of row segments, the number of skipped
// rows and of ABout pushes must match, and the MAC count must equal
// positions x nonzero weights (one cycle per nonzero weight).
module tb_main_controller;
  import sacc_pkg::*;
  localparam int N = 2, M = 4, R = 3, C = 3, UT = 2, G = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  layer_cfg_t cfg;
  logic off_re, rp_re, idx_re;
  logic [9:0] off_addr; logic [12:0] rp_naddr; logic [13:0] idx_naddr;
  logic [15:0] off_data; logic [3:0] rp_data, idx_data;
  vgm_op_e vgm_op; logic vgm_en, vgm_first, vgm_pop_ok, vgm_need_pop, abin_empty;
  logic [3:0] vgm_index;
  logic mac_valid, first, last, zero_base, psb_rd, about_push, about_full;
  logic [15:0] wb_addr, wb_free_ptr;
  logic [5:0] psb_addr;
  pp_op_e pp_op;
  logic [0:0] about_sel;
  perf_t perf;
  logic we; logic [1:0] wpart; logic [11:0] waddr; logic [15:0] wdata;

  main_controller #(.N(N), .M(M), .R_MAX(R), .PSB_DEPTH(64)) dut (.*);
  weight_index_buffer u_wib (.clk, .we, .wpart, .waddr, .wdata, .off_re, .off_addr, .off_data,
                             .rp_re, .rp_naddr, .rp_data, .idx_re, .idx_naddr, .idx_data);

  assign vgm_need_pop = (vgm_op == VGM_LOAD1) || (vgm_op == VGM_ROW && vgm_pop_ok);

  int checks = 0, failures = 0;
  bit mask[C][R][R];
  int exp_op[$], exp_idx[$], exp_first[$], exp_last[$], exp_wb[$], exp_psb[$], exp_zb[$];
  int pops = 0, pushes = 0, rows_total = 0, exp_skip = 0, stalls = 0;
  int rps[$], idxs[$];

  task automatic wr(input int part, input int a, input int d);
    @(negedge clk);
    we = 1; wpart = 2'(part); waddr = 12'(a); wdata = 16'(d);
    @(negedge clk);
    we = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (vgm_need_pop && vgm_en) pops++;
    if (vgm_need_pop && !vgm_en) stalls++;
    if (about_push) pushes++;
    if (mac_valid) begin
      checks++;
      if (exp_op.size() == 0) begin
        failures++; $display("FAIL unexpected MAC");
      end else begin
        int o, ix, f, l, wa, pa, zb;
        o = exp_op.pop_front(); ix = exp_idx.pop_front(); f = exp_first.pop_front();
        l = exp_last.pop_front(); wa = exp_wb.pop_front(); pa = exp_psb.pop_front();
        zb = exp_zb.pop_front();
        if (int'(vgm_op) != o || int'(vgm_index) != ix || int'(first) != f || int'(last) != l ||
            int'(wb_addr) != wa || int'(psb_addr) != pa || int'(zero_base) != zb) begin
          failures++;
          $display("FAIL step op=%0d/%0d idx=%0d/%0d first=%0d/%0d last=%0d/%0d wb=%0d/%0d psb=%0d/%0d zb=%0d/%0d",
                   vgm_op, o, vgm_index, ix, first, f, last, l, wb_addr, wa, psb_addr, pa, zero_base, zb);
        end
      end
    end
  end

  always @(negedge clk) begin
    abin_empty  = ($urandom % 3) == 0;
    about_full  = ($urandom % 4) == 0;
  end

  initial run();

  task automatic run();
    bit started = 0;
    start = 0; cfg = '0; we = 0; wpart = 0; waddr = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < C; c++)
      for (int a = 0; a < R; a++)
        for (int b = 0; b < R; b++) mask[c][a][b] = (c == 0) ? 0 : ($urandom % 2);
    mask[1][1] = '{0, 0, 0};
    mask[2][0][2] = 1;
    for (int c = 0; c < C; c++) begin
      int off = 0;
      for (int a = 0; a < R; a++) begin
        int prev = -1, cnt = 0;
        for (int b = 0; b < R; b++) if (mask[c][a][b]) begin
          idxs.push_back(b - prev - 1); prev = b; cnt++;
        end
        rps.push_back(cnt); off += cnt;
      end
      wr(0, c, off);
    end
    for (int w = 0; w < 4; w++) begin
      int d0 = 0, d1 = 0;
      for (int q = 0; q < 4; q++) begin
        if (4*w+q < rps.size()) d0 |= rps[4*w+q] << (4*q);
        if (4*w+q < idxs.size()) d1 |= idxs[4*w+q] << (4*q);
      end
      wr(1, w, d0);
      wr(2, w, d1);
    end
    // expected stream, Algorithm-2 order
    begin
      int i0 = 0;
      for (int c = 0; c < C; c++) begin
        int off = 0;
        for (int a = 0; a < R; a++) off += rps[c*R+a];
        for (int t = 0; t < UT; t++)
          for (int g = 0; g < G; g++) begin
            int k = 0;
            for (int a = 0; a < R; a++) begin
              rows_total++;
              if (rps[c*R+a] == 0) exp_skip++;
              for (int kw = 0; kw < rps[c*R+a]; kw++) begin
                exp_op.push_back(kw == 0 ? int'(VGM_ROW) : int'(VGM_STEP));
                exp_idx.push_back(idxs[i0 + k]);
                exp_first.push_back(k == 0);
                exp_last.push_back(k == off - 1);
                exp_wb.push_back(100 + i0 + k);
                exp_psb.push_back(t * G + g);
                exp_zb.push_back(!started);
                k++;
              end
            end
          end
        i0 += off;
        if (off != 0) started = 1;
      end
    end
    cfg.mode = MODE_CONV; cfg.r = 4'(R); cfg.s = 3'd1; cfg.c = 12'(C); cfg.ut = 10'(UT);
    cfg.g = 10'(G); cfg.wb_base = 16'd100;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    checks++; if (exp_op.size() != 0) begin failures++; $display("FAIL %0d MACs missing", exp_op.size()); end
    checks++; if (pops != rows_total) begin failures++; $display("FAIL pops %0d rows %0d", pops, rows_total); end
    checks++; if (perf.skip_rows != 32'(exp_skip)) begin failures++; $display("FAIL skip %0d exp %0d", perf.skip_rows, exp_skip); end
    checks++; if (pushes != UT * G * N) begin failures++; $display("FAIL pushes %0d", pushes); end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no stall seen"); end
    checks++; if (wb_free_ptr != 16'(100 + idxs.size())) begin failures++; $display("FAIL wb_free_ptr %0d", wb_free_ptr); end
    $display("cycles=%0d mac=%0d skip=%0d stalls=%0d", perf.cycles, perf.mac_cycles, perf.skip_rows, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
