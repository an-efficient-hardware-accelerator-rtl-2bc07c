// Main controller: walks the sparse-wise dataflow loop nest of one layer tile and
// turns the compressed weight index into per-cycle control of the VGM and the PUs.
//
// A tile is started with `start` and a decoded layer instruction `cfg`.
//
// CONV layer, loop order (outer to inner) as in the paper's dataflow pseudo code:
//   input channel ic -> output row t (U_t rows) -> column group g (ceil(V/M)) ->
//   kernel row kh -> nonzero weight kw of that row (R_pointer[ic*R+kh] of them).
// For each input channel the controller first copies Offset[ic], the R R_pointers and
// the Offset[ic] step indexes of that channel from the WIB into a small register cache
// (one nibble per cycle; this loading scheme and its cost of 1+R+Offset cycles per
// channel are this design's choice). It then replays the cache for every output
// position of the tile, one nonzero weight per cycle: the first weight of a row is a
// VGM_ROW (REG0 reloaded from REG1, which is refilled from ABin at the same time),
// further weights are VGM_STEP. A kernel row with no nonzero weight only advances
// REG1 (one cycle, counted as a skipped row). The weight address is the running
// position in the channel's nonzero list, as in the pseudo code (i, Offset). The PSB
// address of a position is t*G+g. The first input channel that has any nonzero weight
// starts its sums from zero (`zero_base`); later channels add to the PSB content.
//
// FC layer: Offset[0] holds the number of (nonzero plus filler) weights of the vector.
// The controller streams the step indexes from the WIB (one per cycle, read one cycle
// ahead), and issues VGM_FC_STEP with a wide weight read of M weights per step. Only PU
// 0 works in FC layers, as the paper prescribes when bandwidth is the limit.
//
// Drain: after the last channel each output position is read from all PSBs, passed
// through post-processing (two positions per output word with 2x2 pooling) and the
// PUs' output words are pushed into ABout in turns, PU 0 first.
//
// Back-pressure: a VGM operation that needs an ABin row waits while ABin is empty, and
// a push waits while ABout is full; everything else holds meanwhile.
// Weight refill: `wb_free_ptr` tells an external loader how far the WBs have been read
// (narrow weight address in CONV, wide word in FC) so that it can refill the WB ring
// behind it. There is no flow control in the other direction: the loader must stay
// ahead of the read pointer. The multi-row mapping for layers narrower than M is not
// built; such layers leave lanes idle.
// Timing: all outputs are combinational from the state registers and the inputs;
// `pp_op` is aligned with the PSB read data (one cycle after `psb_rd`).
module main_controller import sacc_pkg::*; #(
  parameter int unsigned N         = 48,
  parameter int unsigned M         = 28,
  parameter int unsigned R_MAX     = 11,
  parameter int unsigned PSB_DEPTH = 512,
  localparam int unsigned PAW      = $clog2(PSB_DEPTH),
  localparam int unsigned NW       = (N > 1) ? $clog2(N) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  layer_cfg_t      cfg,
  output logic            busy,
  output logic            done,
  // WIB read ports
  output logic            off_re,
  output logic [9:0]      off_addr,
  input  logic [15:0]     off_data,
  output logic            rp_re,
  output logic [12:0]     rp_naddr,
  input  logic [3:0]      rp_data,
  output logic            idx_re,
  output logic [13:0]     idx_naddr,
  input  logic [3:0]      idx_data,
  // VGM
  output vgm_op_e         vgm_op,
  output logic            vgm_en,
  output logic [3:0]      vgm_index,
  output logic            vgm_first,
  output logic            vgm_pop_ok,
  input  logic            vgm_need_pop,
  input  logic            abin_empty,
  // PU array
  output logic            mac_valid,
  output logic            first,
  output logic            last,
  output logic            zero_base,
  output logic [15:0]     wb_addr,
  output logic [PAW-1:0]  psb_addr,
  output logic            psb_rd,
  output pp_op_e          pp_op,
  // ABout
  output logic            about_push,
  output logic [NW-1:0]   about_sel,
  input  logic            about_full,
  // status
  output logic [15:0]     wb_free_ptr,
  output perf_t           perf
);
  typedef enum logic [3:0] {
    S_IDLE, S_OFF_RD, S_RP_LD, S_IDX_LD, S_PREF, S_RUN,
    S_FC_PREF0, S_FC_PREF1, S_FC_RUN,
    S_DR_RD, S_DR_RD2, S_DR_CAP, S_DR_WR, S_DONE
  } state_e;

  localparam int unsigned CACHE = R_MAX * R_MAX;

  state_e      state;
  layer_cfg_t  c;
  logic [11:0] ic;
  logic [9:0]  t, g;
  logic [3:0]  kh, kw;
  logic [7:0]  k;         // CONV: position in the channel's nonzero list
  logic [15:0] kf;        // FC: position in the vector's index list
  logic [7:0]  j;         // cache loader counter
  logic [PAW-1:0] p;
  logic [15:0] i_base, off_cnt;
  logic        started;
  logic [15:0] chunks;
  logic [NW-1:0] kpu;
  logic [3:0]  rp_c  [R_MAX];
  logic [3:0]  idx_c [CACHE];

  logic        go, more_rows, row_empty, last_kw, last_kh, last_pos, pushing;
  logic [3:0]  rp_cur;
  logic [9:0]  dr_ut, dr_g, t_step;
  logic [NW-1:0] npu_m1;

  always_comb begin
    rp_cur    = rp_c[kh];
    row_empty = (rp_cur == '0);
    last_kw   = (kw + 4'd1 >= rp_cur);
    last_kh   = (kh + 4'd1 == c.r);
    last_pos  = (t + 10'd1 == c.ut) && (g + 10'd1 == c.g);
    more_rows = !((ic + 12'd1 == c.c) && last_pos && last_kh);
    dr_ut     = (c.mode == MODE_FC) ? 10'd1 : c.ut;
    dr_g      = (c.mode == MODE_FC) ? 10'd1 : c.g;
    t_step    = (c.pool && c.mode == MODE_CONV) ? 10'd2 : 10'd1;
    npu_m1    = (c.mode == MODE_FC) ? '0 : NW'(N - 1);
  end

  // ---------------------------------------------------------------- outputs
  always_comb begin
    busy = (state != S_IDLE);
    done = (state == S_DONE);
    off_re = 1'b0; off_addr = c.off_base + 10'(ic);
    rp_re = 1'b0;  rp_naddr = 13'(c.rp_base + 13'(ic * c.r) + 13'(j));
    idx_re = 1'b0; idx_naddr = 14'(c.idx_base + 14'(i_base) + 14'(j));
    vgm_op = VGM_NOP; vgm_index = '0; vgm_first = 1'b0; vgm_pop_ok = 1'b0;
    mac_valid = 1'b0; first = 1'b0; last = 1'b0; zero_base = !started;
    wb_addr = c.wb_base + i_base + 16'(k);
    psb_addr = p; psb_rd = 1'b0; pp_op = PP_NONE;
    about_push = 1'b0; about_sel = kpu;

    unique case (state)
      S_OFF_RD: off_re = 1'b1;
      S_RP_LD:  rp_re  = (j < 8'(c.r));
      S_IDX_LD: idx_re = (16'(j) < off_cnt);
      S_PREF:   vgm_op = VGM_LOAD1;
      S_RUN: begin
        if (row_empty) begin
          vgm_op = more_rows ? VGM_LOAD1 : VGM_NOP;
        end else begin
          vgm_op     = (kw == '0) ? VGM_ROW : VGM_STEP;
          vgm_index  = idx_c[k];
          vgm_pop_ok = (kw == '0) && more_rows;
          mac_valid  = 1'b1;
          first      = (k == '0);
          last       = (16'(k) + 16'd1 == off_cnt);
        end
      end
      S_FC_PREF0: begin
        vgm_op    = VGM_LOAD1;
        idx_re    = 1'b1;
        idx_naddr = 14'(c.idx_base);
      end
      S_FC_PREF1: begin
        vgm_op     = VGM_FC_LOAD;
        vgm_pop_ok = (chunks < c.fc_chunks);
      end
      S_FC_RUN: begin
        vgm_op     = VGM_FC_STEP;
        vgm_index  = idx_data;
        vgm_first  = (kf == '0);
        vgm_pop_ok = (chunks < c.fc_chunks);
        mac_valid  = 1'b1;
        first      = (kf == '0);
        last       = (kf + 16'd1 == off_cnt);
        zero_base  = 1'b1;
        wb_addr    = c.wb_base + kf;
        psb_addr   = '0;
        idx_naddr  = 14'(c.idx_base + 14'(kf) + 14'd1);
      end
      S_DR_RD: begin
        psb_rd   = 1'b1;
        psb_addr = PAW'(t * dr_g + g);
      end
      S_DR_RD2: begin
        psb_rd   = 1'b1;
        psb_addr = PAW'((t + 10'd1) * dr_g + g);
        pp_op    = PP_POOL_FIRST;
      end
      S_DR_CAP: pp_op = PP_FINAL;
      S_DR_WR:  about_push = !about_full;
      default: ;
    endcase

    go     = !(vgm_need_pop && abin_empty);
    vgm_en = go;
    if (!go) mac_valid = 1'b0;
    if (state == S_FC_RUN) idx_re = go && (kf + 16'd1 < off_cnt);
    pushing = about_push;
  end

  assign wb_free_ptr = c.wb_base + ((c.mode == MODE_FC) ? kf : i_base);

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c <= '0;
      ic <= '0; t <= '0; g <= '0; kh <= '0; kw <= '0; k <= '0; kf <= '0; j <= '0;
      p <= '0; i_base <= '0; off_cnt <= '0; started <= 1'b0; chunks <= '0; kpu <= '0;
      perf <= '0;
      for (int x = 0; x < int'(R_MAX); x++) rp_c[x] <= '0;
      for (int x = 0; x < int'(CACHE); x++) idx_c[x] <= '0;
    end else begin
      if (busy) perf.cycles <= perf.cycles + 1;
      if (mac_valid) perf.mac_cycles <= perf.mac_cycles + 1;
      if (vgm_need_pop && abin_empty) perf.stall_abin <= perf.stall_abin + 1;
      if (state == S_DR_WR && about_full) perf.stall_about <= perf.stall_about + 1;
      if (pushing) perf.out_words <= perf.out_words + 1;
      if (vgm_need_pop && go) chunks <= chunks + 1;

      unique case (state)
        S_IDLE: if (start) begin
          c <= cfg;
          ic <= '0; i_base <= '0; started <= 1'b0; chunks <= '0; j <= '0;
          perf <= '0;
          state <= S_OFF_RD;
        end
        S_OFF_RD: begin
          j <= '0;
          state <= (c.mode == MODE_FC) ? S_FC_PREF0 : S_RP_LD;
        end
        S_RP_LD: begin
          if (j == '0) off_cnt <= off_data;
          if (j != '0) rp_c[j - 8'd1] <= rp_data;
          if (j == 8'(c.r)) begin
            j <= '0;
            state <= S_IDX_LD;
          end else j <= j + 8'd1;
        end
        S_IDX_LD: begin
          if (j != '0) idx_c[j - 8'd1] <= idx_data;
          if (16'(j) == off_cnt) begin
            j <= '0;
            t <= '0; g <= '0; kh <= '0; kw <= '0; k <= '0; p <= '0;
            state <= (ic == '0) ? S_PREF : S_RUN;
          end else j <= j + 8'd1;
        end
        S_PREF: if (go) state <= S_RUN;
        S_RUN: if (go) begin
          if (row_empty) perf.skip_rows <= perf.skip_rows + 1;
          if (!row_empty && !last_kw) begin
            kw <= kw + 4'd1;
            k  <= k + 8'd1;
          end else begin
            kw <= '0;
            if (!row_empty) k <= k + 8'd1;
            if (!last_kh) kh <= kh + 4'd1;
            else begin
              kh <= '0;
              k  <= '0;
              if (!last_pos) begin
                p <= p + 1'b1;
                if (g + 10'd1 == c.g) begin
                  g <= '0;
                  t <= t + 10'd1;
                end else g <= g + 10'd1;
              end else begin
                i_base  <= i_base + off_cnt;
                started <= started | (off_cnt != '0);
                if (ic + 12'd1 == c.c) begin
                  t <= '0; g <= '0; kpu <= '0;
                  state <= S_DR_RD;
                end else begin
                  ic <= ic + 12'd1;
                  state <= S_OFF_RD;
                end
              end
            end
          end
        end
        S_FC_PREF0: if (go) begin
          off_cnt <= off_data;
          state <= S_FC_PREF1;
        end
        S_FC_PREF1: if (go) begin
          kf <= '0;
          state <= S_FC_RUN;
        end
        S_FC_RUN: if (go) begin
          kf <= kf + 16'd1;
          if (kf + 16'd1 == off_cnt) begin
            t <= '0; g <= '0; kpu <= '0;
            state <= S_DR_RD;
          end
        end
        S_DR_RD:  state <= (c.pool && c.mode == MODE_CONV) ? S_DR_RD2 : S_DR_CAP;
        S_DR_RD2: state <= S_DR_CAP;
        S_DR_CAP: begin
          kpu <= '0;
          state <= S_DR_WR;
        end
        S_DR_WR: if (pushing) begin
          if (kpu == npu_m1) begin
            if (g + 10'd1 >= dr_g) begin
              g <= '0;
              if (t + t_step >= dr_ut) state <= S_DONE;
              else begin
                t <= t + t_step;
                state <= S_DR_RD;
              end
            end else begin
              g <= g + 10'd1;
              state <= S_DR_RD;
            end
          end else kpu <= kpu + 1'b1;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cache_fits: assert property (@(posedge clk) disable iff (!rst_n)
                                 state == S_RP_LD && j == 8'd1 |-> off_cnt <= 16'(CACHE));
  a_rp_fits:    assert property (@(posedge clk) disable iff (!rst_n)
                                 state == S_IDLE && start && cfg.mode == MODE_CONV |-> cfg.r <= 4'(R_MAX));
endmodule
