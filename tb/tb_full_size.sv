// End-to-end test of the accelerator at the default (paper) size: 48 PUs of 28 PEs,
// R_MAX=11, S_MAX=4, 2 KB PSB per PU, 512 B WB per PU, 2 KB ABin / ABout. The top is
// instantiated with no parameter override.
//
// Same method as the reduced-size end-to-end test: random shape-wise pruned kernels
// are compressed into Offset / R_pointer / Index, loaded through the WIB and WB write
// ports, input rows are streamed into ABin at a random rate and ABout is drained at a
// random rate; outputs are compared with a direct convolution (or matrix-vector
// product) plus bias / shift / saturate / ReLU / max-pool. MAC cycles (one per nonzero
// weight and output position) and skipped rows are checked per layer.
// Cases: 3x3 stride 1 over one full column group (V=28) with an all-pruned channel;
// 3x3 stride 2 with pooling; FC with a filler zero; 8-bit mode over two column groups
// packed into one lane group; an 11x11 stride-4 layer (AlexNet conv1 shape) which
// uses the full VGM depth of 119 activations. Each mechanism must occur at least once.
module tb_full_size;
  import sacc_pkg::*;

  localparam int N = 48, M = 28, R_MAX = 11, S_MAX = 4;
  localparam int D = (M - 1) * S_MAX + R_MAX;
  localparam int CM = 4, HM = 24, WM = 128;   // reference array bounds

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start;
  layer_cfg_t cfg;
  logic busy, done;
  logic wib_we; logic [1:0] wib_part; logic [11:0] wib_waddr; logic [15:0] wib_wdata;
  logic [N-1:0] wb_we; logic [15:0] wb_waddr; logic [M-1:0][15:0] wb_wdata;
  logic [N-1:0][31:0] bias;
  logic abin_push, abin_full; logic [D-1:0][15:0] abin_din;
  logic about_pop, about_empty; logic [M-1:0][15:0] about_dout;
  logic [15:0] wb_free_ptr;
  logic [$clog2(N*M+1)-1:0] active_pes;
  perf_t perf;

  sparse_accel_top dut (.*);

  int checks = 0, failures = 0;
  int n_gated = 0, n_skip = 0, n_stall_in = 0, n_stall_out = 0;
  int n_pool = 0, n_fc = 0, n_int8 = 0, n_stride2 = 0;

  // reference data
  int X [CM][HM][WM];
  int W [N][CM][R_MAX][R_MAX];
  bit mask [CM][R_MAX][R_MAX];
  int XF [64];
  int WF [M][64];
  bit maskf [64];

  logic [D*16-1:0] abin_q[$];
  logic [M*16-1:0] exp_q[$];
  int   idx_list[$];
  logic [M-1:0][15:0] wbw [N][$];
  int   rp_list[$];

  // ---------------------------------------------------------------- helpers
  function automatic int sat(input longint v, input int bits);
    longint hi = (64'sd1 <<< (bits - 1)) - 1;
    longint lo = -(64'sd1 <<< (bits - 1));
    if (v > hi) return int'(hi);
    if (v < lo) return int'(lo);
    return int'(v);
  endfunction

  function automatic int post16(input longint s, input int b, input int sh, input bit rl);
    int r = sat((s + b) >>> sh, 16);
    if (rl && r < 0) r = 0;
    return r;
  endfunction

  function automatic int wrap16(input longint v);
    logic signed [15:0] w16;
    w16 = 16'(v);
    return int'(w16);
  endfunction

  function automatic int post8(input longint s16, input int b, input int sh, input bit rl);
    int r = sat((longint'(s16) + longint'(wrap16(b))) >>> sh, 8);
    if (rl && r < 0) r = 0;
    return r;
  endfunction

  function automatic int rnd_act(input int zero_pct, input int mag);
    if (int'($urandom % 100) < zero_pct) return 0;
    return int'($urandom % (2 * mag + 1)) - mag;
  endfunction

  task automatic wib_write(input int part, input int addr, input int data);
    @(negedge clk);
    wib_we = 1; wib_part = 2'(part); wib_waddr = 12'(addr); wib_wdata = 16'(data);
    @(negedge clk);
    wib_we = 0;
  endtask

  task automatic wib_write_nibbles(input int part, input int list[$]);
    for (int w = 0; w < (list.size() + 3) / 4; w++) begin
      int word = 0;
      for (int q = 0; q < 4; q++)
        if (w * 4 + q < list.size()) word |= (list[w * 4 + q] & 15) << (4 * q);
      wib_write(part, w, word);
    end
  endtask

  task automatic wb_write_all();
    for (int n = 0; n < N; n++)
      for (int w = 0; w < wbw[n].size(); w++) begin
        @(negedge clk);
        wb_we = '0; wb_we[n] = 1'b1; wb_waddr = 16'(w); wb_wdata = wbw[n][w];
        @(negedge clk);
        wb_we = '0;
      end
  endtask

  // ---------------------------------------------------------------- stream drivers
  int in_rate = 60, out_rate = 40;
  always @(negedge clk) begin
    abin_push = 1'b0;
    if (rst_n && abin_q.size() > 0 && !abin_full && int'($urandom % 100) < in_rate) begin
      abin_din  = abin_q.pop_front();
      abin_push = 1'b1;
    end
    about_pop = 1'b0;
    if (rst_n && !about_empty && int'($urandom % 100) < out_rate) begin
      about_pop = 1'b1;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output %h", about_dout);
      end else begin
        logic [M*16-1:0] e;
        e = exp_q.pop_front();
        if (about_dout !== e) begin
          failures++;
          $display("FAIL out got %h exp %h", about_dout, e);
        end
      end
    end
  end

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.g_pu[0].u_pu.v1 && active_pes < (cfg.mode == MODE_FC ? M : N * M)) n_gated++;
    if (perf.stall_abin  != 0 && busy) n_stall_in  = 1;
    if (perf.stall_about != 0 && busy) n_stall_out = 1;
  end

  // ---------------------------------------------------------------- CONV case
  task automatic run_conv(input int C, input int R, input int S, input int V, input int UT,
                          input bit pool, input bit relu, input bit int8, input bit pruned_ch0,
                          input int shift);
    int G, Gp, H, Win, nnz_total, exp_skip, i;
    int y [N][HM][WM];
    G   = (V + M - 1) / M;
    Gp  = int8 ? (G + 1) / 2 : G;        // lane groups the controller walks
    H   = (UT - 1) * S + R;
    Win = (V - 1) * S + R;
    // random pattern and data
    for (int c = 0; c < C; c++)
      for (int a = 0; a < R; a++)
        for (int b = 0; b < R; b++) begin
          mask[c][a][b] = ($urandom % 100) < 45;
          if (pruned_ch0 && c == 0) mask[c][a][b] = 0;
        end
    // make sure kernel row 1 of channel C-1 is empty (row skip) and something is left
    if (R > 1) for (int b = 0; b < R; b++) mask[C-1][1][b] = 0;
    mask[C-1][0][R-1] = 1;
    for (int n = 0; n < N; n++)
      for (int c = 0; c < C; c++)
        for (int a = 0; a < R; a++)
          for (int b = 0; b < R; b++) begin
            int v;
            v = int8 ? int'($urandom % 15) - 7 : int'($urandom % 61) - 30;
            if (v == 0) v = 1;
            W[n][c][a][b] = mask[c][a][b] ? v : 0;
          end
    for (int c = 0; c < CM; c++)
      for (int h = 0; h < HM; h++)
        for (int w = 0; w < WM; w++)
          X[c][h][w] = (c < C && h < H && w < Win) ? rnd_act(35, int8 ? 9 : 200) : 0;
    for (int n = 0; n < N; n++) bias[n] = 32'($signed(int'($urandom % 101) - 50));

    // compress: Offset, R_pointer, Index, weights
    idx_list.delete(); rp_list.delete();
    for (int n = 0; n < N; n++) wbw[n].delete();
    nnz_total = 0; exp_skip = 0;
    begin
      int pos = 0;
      logic [M-1:0][15:0] word [N];
      for (int c = 0; c < C; c++) begin
        int off = 0;
        for (int a = 0; a < R; a++) begin
          int cnt = 0, prev = -1;
          for (int b = 0; b < R; b++) if (mask[c][a][b]) begin
            idx_list.push_back(b - prev - 1);
            prev = b;
            cnt++;
            for (int n = 0; n < N; n++) begin
              word[n][pos % M] = 16'(W[n][c][a][b]);
              if (pos % M == M - 1) wbw[n].push_back(word[n]);
            end
            pos++;
          end
          rp_list.push_back(cnt);
          off += cnt;
        end
        wib_write(0, c, off);
        nnz_total += off;
      end
      if (pos % M != 0) for (int n = 0; n < N; n++) wbw[n].push_back(word[n]);
    end
    // skipped rows: every position of every kernel row with R_pointer == 0
    for (int q = 0; q < rp_list.size(); q++) if (rp_list[q] == 0) exp_skip += UT * Gp;
    wib_write_nibbles(1, rp_list);
    wib_write_nibbles(2, idx_list);
    wb_write_all();

    // ABin stream
    for (int c = 0; c < C; c++)
      for (int t = 0; t < UT; t++)
        for (int g = 0; g < Gp; g++)
          for (int a = 0; a < R; a++) begin
            logic [D-1:0][15:0] seg;
            for (int e = 0; e < D; e++) begin
              if (int8) begin
                int x0, x1, col0, col1;
                col0 = (2 * g) * M * S + e;
                col1 = (2 * g + 1) * M * S + e;
                x0 = (col0 < WM) ? X[c][t * S + a][col0] : 0;
                x1 = (col1 < WM) ? X[c][t * S + a][col1] : 0;
                seg[e] = {8'(x1), 8'(x0)};
              end else begin
                int col;
                col = g * M * S + e;
                seg[e] = (col < WM) ? 16'(X[c][t * S + a][col]) : '0;
              end
            end
            abin_q.push_back(seg);
          end

    // reference convolution over the zero-padded input
    for (int n = 0; n < N; n++)
      for (int t = 0; t < UT; t++)
        for (int v = 0; v < (int8 ? 2 * Gp : G) * M; v++) begin
          longint s = 0;
          for (int c = 0; c < C; c++)
            for (int a = 0; a < R; a++)
              for (int b = 0; b < R; b++) begin
                int col = v * S + b;
                if (col < WM) s += longint'(W[n][c][a][b]) * X[c][t * S + a][col];
              end
          if (int8) y[n][t][v] = post8(wrap16(s), int'(bias[n]), shift, relu);
          else      y[n][t][v] = post16(s, int'(bias[n]), shift, relu);
        end
    for (int t = 0; t < UT; t += (pool ? 2 : 1))
      for (int g = 0; g < Gp; g++)
        for (int n = 0; n < N; n++) begin
          logic [M-1:0][15:0] e;
          e = '0;
          for (int m = 0; m < M; m++) begin
            if (pool && m >= M / 2) continue;
            if (int8) begin
              int lo, hi;
              if (pool) begin
                lo = y[n][t][2*g*M + 2*m];
                hi = y[n][t][(2*g+1)*M + 2*m];
                for (int dy = 0; dy < 2; dy++)
                  for (int dx = 0; dx < 2; dx++) begin
                    if (y[n][t+dy][2*g*M + 2*m + dx] > lo) lo = y[n][t+dy][2*g*M + 2*m + dx];
                    if (y[n][t+dy][(2*g+1)*M + 2*m + dx] > hi) hi = y[n][t+dy][(2*g+1)*M + 2*m + dx];
                  end
              end else begin
                lo = y[n][t][2*g*M + m];
                hi = y[n][t][(2*g+1)*M + m];
              end
              e[m] = {8'(hi), 8'(lo)};
            end else if (pool) begin
              int mx = y[n][t][g*M + 2*m];
              for (int dy = 0; dy < 2; dy++)
                for (int dx = 0; dx < 2; dx++)
                  if (y[n][t+dy][g*M + 2*m + dx] > mx) mx = y[n][t+dy][g*M + 2*m + dx];
              e[m] = 16'(mx);
            end else e[m] = 16'(y[n][t][g*M + m]);
          end
          exp_q.push_back(e);
        end

    cfg = '0;
    cfg.mode = MODE_CONV; cfg.int8 = int8; cfg.relu = relu; cfg.pool = pool;
    cfg.shift = 5'(shift); cfg.r = 4'(R); cfg.s = 3'(S); cfg.c = 12'(C);
    cfg.ut = 10'(UT); cfg.g = 10'(Gp);
    run_and_wait();
    checks++;
    if (perf.mac_cycles != 32'(nnz_total * UT * Gp)) begin
      failures++;
      $display("FAIL mac cycles %0d expected %0d", perf.mac_cycles, nnz_total * UT * Gp);
    end
    checks++;
    if (perf.skip_rows != 32'(exp_skip)) begin
      failures++;
      $display("FAIL skipped rows %0d expected %0d", perf.skip_rows, exp_skip);
    end
    if (perf.skip_rows != 0) n_skip++;
    if (pool) n_pool++;
    if (int8) n_int8++;
    if (S == 2) n_stride2++;
    $display("conv C=%0d R=%0d S=%0d V=%0d UT=%0d pool=%0d int8=%0d: cycles=%0d mac=%0d skip=%0d stall_in=%0d stall_out=%0d",
             C, R, S, V, UT, pool, int8, perf.cycles, perf.mac_cycles, perf.skip_rows,
             perf.stall_abin, perf.stall_about);
  endtask

  // ---------------------------------------------------------------- FC case
  task automatic run_fc(input int CIN, input int shift);
    int entries = 0, prev = -1, chunks;
    idx_list.delete();
    wbw[0].delete();
    // at M=28 the 512 B WB holds 9 wide words, so at most 9 entries are drawn here:
    // up to 3 random in 0..2, fixed at 4 and 25, up to 3 random in 26..28, one filler
    for (int c = 0; c < CIN; c++) maskf[c] = (c < 3 || (c > 25 && c < 29)) && ($urandom % 100) < 60;
    maskf[4] = 1; maskf[25] = 1;   // gap of 20 zeros: needs a filler
    for (int c = 0; c < CIN; c++) XF[c] = rnd_act(30, 300);
    for (int m = 0; m < M; m++)
      for (int c = 0; c < CIN; c++) WF[m][c] = maskf[c] ? int'($urandom % 201) - 100 : 0;
    bias[0] = 32'($signed(int'($urandom % 101) - 50));
    for (int c = 0; c < CIN; c++) if (maskf[c]) begin
      int gap = c - prev - 1;
      while (gap > 15) begin
        logic [M-1:0][15:0] z;
        z = '0;
        idx_list.push_back(15);
        wbw[0].push_back(z);
        prev += 16;
        gap -= 16;
      end
      begin
        logic [M-1:0][15:0] wv;
        for (int m = 0; m < M; m++) wv[m] = 16'(WF[m][c]);
        idx_list.push_back(gap);
        wbw[0].push_back(wv);
      end
      prev = c;
    end
    entries = idx_list.size();
    wib_write(0, 0, entries);
    wib_write_nibbles(2, idx_list);
    for (int w = 0; w < wbw[0].size(); w++) begin
      @(negedge clk);
      wb_we = '0; wb_we[0] = 1'b1; wb_waddr = 16'(w); wb_wdata = wbw[0][w];
      @(negedge clk);
      wb_we = '0;
    end
    chunks = (CIN + D - 1) / D;
    for (int q = 0; q < chunks; q++) begin
      logic [D-1:0][15:0] seg;
      for (int e = 0; e < D; e++) seg[e] = (q * D + e < CIN) ? 16'(XF[q * D + e]) : '0;
      abin_q.push_back(seg);
    end
    begin
      logic [M-1:0][15:0] e;
      for (int m = 0; m < M; m++) begin
        longint s = 0;
        for (int c = 0; c < CIN; c++) s += longint'(WF[m][c]) * XF[c];
        e[m] = 16'(post16(s, int'(bias[0]), shift, 1'b0));
      end
      exp_q.push_back(e);
    end
    cfg = '0;
    cfg.mode = MODE_FC; cfg.shift = 5'(shift); cfg.fc_chunks = 16'(chunks);
    run_and_wait();
    checks++;
    if (perf.mac_cycles != 32'(entries)) begin
      failures++;
      $display("FAIL FC mac cycles %0d expected %0d", perf.mac_cycles, entries);
    end
    n_fc++;
    $display("fc CIN=%0d entries=%0d: cycles=%0d", CIN, entries, perf.cycles);
  endtask

  task automatic run_and_wait();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(posedge clk);
    // wait for the output queue to drain
    while (exp_q.size() != 0 || !about_empty) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (abin_q.size() != 0 || dut.abin_count != 0) begin
      failures++;
      $display("FAIL ABin stream not consumed exactly (%0d left)", abin_q.size() + int'(dut.abin_count));
    end
  endtask

  initial begin
    start = 0; cfg = '0; wib_we = 0; wib_part = 0; wib_waddr = 0; wib_wdata = 0;
    wb_we = '0; wb_waddr = 0; wb_wdata = '0; bias = '0; abin_push = 0; abin_din = '0;
    about_pop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    out_rate = 5;
    run_conv(3, 3, 1, 28, 2, 1'b0, 1'b1, 1'b0, 1'b1, 4);
    out_rate = 40; in_rate = 2;
    run_conv(2, 3, 2, 28, 2, 1'b1, 1'b1, 1'b0, 1'b0, 3);
    in_rate = 60;
    run_fc(40, 6);
    run_conv(2, 3, 1, 56, 2, 1'b0, 1'b1, 1'b1, 1'b0, 4);
    in_rate = 100; out_rate = 100;
    run_conv(1, 11, 4, 28, 2, 1'b0, 1'b0, 1'b0, 1'b0, 7);
    // every mechanism must have happened
    checks++; if (n_gated == 0)     begin failures++; $display("FAIL zero gating never seen"); end
    checks++; if (n_skip == 0)      begin failures++; $display("FAIL row skip never seen"); end
    checks++; if (n_stall_in == 0)  begin failures++; $display("FAIL ABin stall never seen"); end
    checks++; if (n_stall_out == 0) begin failures++; $display("FAIL ABout stall never seen"); end
    checks++; if (n_pool == 0 || n_fc == 0 || n_int8 == 0 || n_stride2 == 0) begin
      failures++; $display("FAIL a mode was not exercised");
    end
    $display("mechanisms: gated_cycles=%0d skip_cases=%0d stall_in=%0d stall_out=%0d pool=%0d fc=%0d int8=%0d stride2=%0d",
             n_gated, n_skip, n_stall_in, n_stall_out, n_pool, n_fc, n_int8, n_stride2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
