// engine_ctrl: sequencer of the CNN engine. For one layer it walks the
// output tiles (row tile rt, column tile ct) and, for each, the ceil(P/T_P)
// P-tiles, waiting until the weights tile and the activations tile of the
// P-tile are both in their buffers (and, at the first P-tile, until an
// output bank is free). Within a P-tile every active column c < C' (C' =
// T_C, or cols_last in the last column tile) streams its R' rows (T_R, or
// rows_last) through its PE, one row per cycle, accumulating into the output
// buffer (output stationary); the first P-tile overwrites instead of adding.
//
// Input-selective PEs (Sec. III-E): when bal_en is set and C' < T_C, every
// idle PE c >= max(C', AUG_FROM) becomes a helper of column
// j = (c - h0) mod C' (h0 = first helper), in helper group g = 1 + (c - h0)
// div C'. Weight vectors walk down the R chain of the PE array, so the
// helper captures column j's weights at cycle d+1 (d = c - j) and works from
// cycle d+2. Each cycle, column j's row counter hands out consecutive rows
// to the main PE (rank 0) and to the helpers of column j that are already
// working (rank g): work stealing from a shared per-column row counter.
// The helper mapping, the capture timing and the per-column counters are
// this design's own mechanism; the paper gives the idea (idle PEs take a
// neighbour's weights and process other rows of T_R), the R/switch
// structure (Fig. 4) and a runtime model (Eq. (5)) but no controller.
//
// Timing per P-tile: one cycle in S_WAIT (if the buffers are ready) plus the
// run, which lasts R' cycles without helpers and less with them; after the
// last P-tile of an output tile the PE pipeline is drained (LAT+1 cycles)
// and the output bank committed. Stat outputs: `steal` is high in a cycle in
// which some helper PE processes a row.
// The generator-only fields of the shared layer_cfg_t (ksq_sel, nb,
// alpha_base) are not used by this controller.
module engine_ctrl
  import unzip_pkg::*;
#(
  parameter int unsigned T_R      = 64,
  parameter int unsigned T_C      = 48,
  parameter int unsigned AUG_FROM = 1,
  parameter int unsigned LAT      = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  layer_cfg_t              cfg,
  input  logic                    w_ready,
  input  logic                    in_ready,
  input  logic                    out_wr_ready,
  output logic                    w_release,
  output logic                    in_release,
  output logic                    out_commit,
  output logic                    iss_valid [T_C],
  output logic                    iss_first,
  output logic [$clog2(T_R)-1:0]  iss_row [T_C],
  output logic [$clog2(T_C)-1:0]  iss_col [T_C],
  output logic                    chain_load,
  output logic                    chain_shift,
  output logic                    cap [T_C],
  output logic                    use_cap [T_C],
  output logic                    busy,
  output logic                    done,
  output logic                    steal
);
  localparam int unsigned RW  = $clog2(T_R);
  localparam int unsigned CCW = $clog2(T_C);
  localparam int unsigned GW  = $clog2(T_C + 1);

  typedef enum logic [2:0] {S_IDLE, S_MAP, S_WAIT, S_RUN, S_DRAIN} state_t;
  state_t state;

  layer_cfg_t    c;
  logic [CW-1:0] rt, ct, pt;
  logic [CW-1:0] cp, rp;           // active columns / rows of this output tile
  logic [CW-1:0] s;                // cycle within the P-tile run
  logic [CW-1:0] cnt [T_C];        // next row of each column
  logic [GW-1:0] rg;               // helper groups already working
  logic [CW-1:0] nrt;              // cycle at which the next group starts
  logic [3:0]    drain;

  // helper map of the current output tile
  logic [CCW-1:0] map_j [T_C];
  logic [GW-1:0]  map_g [T_C];
  logic           map_h [T_C];
  logic [CW-1:0]  map_d [T_C];
  logic [GW-1:0]  hj    [T_C];
  logic [CW-1:0]  d1;

  // ---- mapping for the next output tile (combinational, registered in S_MAP)
  logic [CW-1:0]  cp_n, rp_n;
  logic [CCW-1:0] n_j [T_C];
  logic [GW-1:0]  n_g [T_C];
  logic           n_h [T_C];
  logic [CW-1:0]  n_d [T_C];
  logic [GW-1:0]  n_hj [T_C];
  logic [CW-1:0]  n_d1;

  assign cp_n = (ct == c.n_ct - 1'b1) ? c.cols_last : CW'(T_C);
  assign rp_n = (rt == c.n_rt - 1'b1) ? c.rows_last : CW'(T_R);

  always_comb begin
    logic [CW-1:0] jj;
    logic [GW-1:0] gg;
    logic          seen;
    jj = '0; gg = GW'(1); seen = 1'b0; n_d1 = '0;
    for (int i = 0; i < T_C; i++) begin
      n_j[i] = CCW'(i); n_g[i] = '0; n_h[i] = 1'b0; n_d[i] = '0; n_hj[i] = '0;
    end
    for (int i = 0; i < T_C; i++) begin
      if (c.bal_en && CW'(i) >= cp_n && i >= AUG_FROM && i > 0 && cp_n != 0) begin
        n_j[i] = CCW'(jj);
        n_g[i] = gg;
        n_h[i] = 1'b1;
        n_d[i] = CW'(i) - jj;
        if (!seen) n_d1 = CW'(i);
        seen = 1'b1;
        n_hj[jj[CCW-1:0]] = n_hj[jj[CCW-1:0]] + 1'b1;
        jj = jj + 1'b1;
        if (jj == cp_n) begin jj = '0; gg = gg + 1'b1; end
      end
    end
  end

  // ---- issue logic for the current cycle of a run -----------------------------
  logic [CW-1:0] row_c [T_C];
  logic          rdy_c [T_C];
  logic [CW-1:0] cnt_n [T_C];
  logic          run_done;

  always_comb begin
    steal = 1'b0;
    for (int i = 0; i < T_C; i++) begin
      if (map_h[i]) begin
        rdy_c[i] = (map_g[i] <= rg);
        row_c[i] = cnt[map_j[i]] + CW'(map_g[i]);
      end else begin
        rdy_c[i] = (CW'(i) < cp);
        row_c[i] = cnt[i];
      end
      iss_valid[i] = (state == S_RUN) && rdy_c[i] && (row_c[i] < rp);
      iss_row[i]   = row_c[i][RW-1:0];
      iss_col[i]   = map_h[i] ? map_j[i] : CCW'(i);
      cap[i]       = (state == S_RUN) && map_h[i] && (s == map_d[i] + 1'b1);
      use_cap[i]   = map_h[i];
      if (map_h[i] && iss_valid[i]) steal = 1'b1;
    end
    run_done = 1'b1;
    for (int i = 0; i < T_C; i++) begin
      cnt_n[i] = cnt[i] + 1'b1 + CW'((rg < hj[i]) ? rg : hj[i]);
      if (CW'(i) < cp && cnt_n[i] < rp) run_done = 1'b0;
    end
  end

  assign iss_first   = (pt == '0);
  assign chain_load  = (state == S_RUN) && (s == '0);
  assign chain_shift = (state == S_RUN) && (s != '0);
  assign w_release   = (state == S_RUN) && run_done;
  assign in_release  = (state == S_RUN) && run_done;
  assign out_commit  = (state == S_DRAIN) && (drain == 4'(LAT));
  assign busy        = (state != S_IDLE);

  wire last_pt = (pt == c.n_pt - 1'b1);
  wire last_ct = (ct == c.n_ct - 1'b1);
  wire last_rt = (rt == c.n_rt - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c <= '0;
      {rt, ct, pt, cp, rp, s, nrt, d1} <= '0;
      rg <= '0; drain <= '0; done <= 1'b0;
      for (int i = 0; i < T_C; i++) begin
        cnt[i] <= '0; map_j[i] <= '0; map_g[i] <= '0; map_h[i] <= 1'b0;
        map_d[i] <= '0; hj[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          c <= cfg;
          {rt, ct, pt} <= '0;
          state <= S_MAP;
        end
        S_MAP: begin
          cp <= cp_n; rp <= rp_n; d1 <= n_d1;
          for (int i = 0; i < T_C; i++) begin
            map_j[i] <= n_j[i]; map_g[i] <= n_g[i]; map_h[i] <= n_h[i];
            map_d[i] <= n_d[i]; hj[i] <= n_hj[i];
          end
          state <= S_WAIT;
        end
        S_WAIT: if (w_ready && in_ready && (pt != '0 || out_wr_ready)) begin
          s   <= '0;
          rg  <= '0;
          nrt <= d1 + CW'(2);
          for (int i = 0; i < T_C; i++) cnt[i] <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          s <= s + 1'b1;
          for (int i = 0; i < T_C; i++) cnt[i] <= cnt_n[i];
          if (s + 1'b1 == nrt) begin
            rg  <= rg + 1'b1;
            nrt <= nrt + cp;
          end
          if (run_done) begin
            if (last_pt) begin
              drain <= '0;
              state <= S_DRAIN;
            end else begin
              pt <= pt + 1'b1;
              state <= S_WAIT;
            end
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 4'(LAT)) begin
            pt <= '0;
            ct <= ct + 1'b1;
            if (last_ct) begin
              ct <= '0;
              rt <= rt + 1'b1;
            end
            if (last_ct && last_rt) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              state <= S_MAP;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // two ports never write the same output element in one cycle
  for (genvar a = 0; a < T_C; a++) begin : g_uniq
    for (genvar b = a + 1; b < T_C; b++) begin : g_b
      a_uniq: assert property (@(posedge clk) disable iff (!rst_n)
        !(iss_valid[a] && iss_valid[b] && iss_row[a] == iss_row[b] && iss_col[a] == iss_col[b]))
        else $error("engine_ctrl: PEs %0d and %0d issue the same output element", a, b);
    end
  end
endmodule
