// Self-checking testbench for cnn_wgen (the whole weights generator).
// Two instances share one small layer shape: M = 32 (> K^2) and M = 8
// (< K^2 = 16), with T_P = 16, T_C = 4 and filter sizes {16, 4}. For each of
// four layers (both filter sizes, rho = 1 and rho < 1, ragged P and C edges)
// the alpha buffer is filled in the generator's order, the layer is run and
// every generated T_P x T_C tile is compared with weights computed here
// directly from W[p][c] = sum_j alpha[p / K^2][c][j] * code_j[p mod K^2]
// (codes built by the OVSF tree recursion, saturated to 16 bits, zero outside
// the layer). With the weights buffer released without delay, consecutive tiles
// must be ceil(T_P*T_C/M) * nb cycles apart (Fig. 2); with a slow consumer,
// the generator must stall without losing data.
module tb_cnn_wgen;
  import unzip_pkg::*;
  localparam int TP = 16, TC = 4, AD = 2048;
  localparam int unsigned L2 [2] = '{16, 4};
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic start = 0;
  layer_cfg_t cfg;

  // ---------------- reference data -------------------------------------------
  int code [16][16];
  task automatic build(input int L);
    int c [16][16];
    c[0][0] = 1;
    for (int len = 1; len < L; len *= 2) begin
      int n [16][16];
      for (int i = 0; i < len; i++)
        for (int e = 0; e < len; e++) begin
          n[2*i][e] = c[i][e];     n[2*i][len+e]   =  c[i][e];
          n[2*i+1][e] = c[i][e];   n[2*i+1][len+e] = -c[i][e];
        end
      c = n;
    end
    code = c;
  endtask

  int n_in, n_out, ksq, nb, n_pt, n_ct, n_rt;
  int alpha [64][16][16];   // [n_in][n_out][j]

  function automatic int wref(input int p, input int c);
    int s;
    s = 0;
    if (p >= n_in * ksq || c >= n_out) return 0;
    for (int j = 0; j < nb; j++) s += alpha[p / ksq][c][j] * code[j][p % ksq];
    return (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
  endfunction

  // alpha of lane f, subtile i, basis j of tile (ct, pt) for subtile size m
  function automatic int alpha_word(input int m, input int ct, input int pt, input int i,
                                    input int j, input int f);
    int eb, c, p0, no, ni;
    if (m >= ksq) begin
      if (f >= m / ksq) return 0;
      eb = i * (m / ksq) + f;
    end else begin
      if (f != 0) return 0;
      eb = (i * m) / ksq;
    end
    c  = (eb * ksq) / TP;
    p0 = (eb * ksq) % TP;
    no = ct * TC + c;
    ni = (pt * TP + p0) / ksq;
    if (no >= n_out || ni >= n_in) return 0;
    return alpha[ni][no][j];
  endfunction

  // ---------------- one generator + weights-buffer model per M -----------------
  generate
    for (genvar gi = 0; gi < 2; gi++) begin : g_inst
      localparam int MM  = (gi == 0) ? 32 : 8;
      localparam int NF  = MM / 4;
      localparam int NS  = TP * TC / MM;
      logic a_wr_en = 0;
      logic [$clog2(AD)-1:0] a_wr_addr;
      logic [NF*WL-1:0] a_wr_data;
      logic wb_wr_en, wb_wr_bank, wb_wr_tile_last, busy, done;
      logic [$clog2(NS+1)-1:0] wb_wr_sub;
      word_t wb_wr_data [MM];
      logic [1:0] wb_full;
      int slow;          // consumer delay in cycles
      int tile_no, last_commit, gaps_ok, stalls;
      int tile [TP*TC];

      cnn_wgen #(.M(MM), .T_P(TP), .T_C(TC), .KSQ_MAX(16), .N_KS(2), .KSQ_LIST(L2),
                 .N_F(NF), .A_DEPTH(AD)) dut (
        .clk, .rst_n, .start, .cfg, .busy, .done,
        .a_wr_en, .a_wr_addr, .a_wr_data,
        .wb_wr_en, .wb_wr_bank, .wb_wr_sub, .wb_wr_tile_last, .wb_wr_data, .wb_full);

      int cyc = 0;
      int rel_cnt [2];
      always @(posedge clk) begin
        cyc++;
        if (busy && wb_full == 2'b11) stalls++;
        for (int b = 0; b < 2; b++)
          if (wb_full[b]) begin
            if (rel_cnt[b] >= slow) begin wb_full[b] <= 1'b0; rel_cnt[b] <= 0; end
            else rel_cnt[b] <= rel_cnt[b] + 1;
          end
        if (wb_wr_en) begin
          checks++;
          if (wb_full[wb_wr_bank]) begin failures++; $display("M=%0d write into full bank", MM); end
          for (int k = 0; k < MM; k++) tile[int'(wb_wr_sub) * MM + k] = int'(wb_wr_data[k]);
          if (wb_wr_tile_last) begin
            int pt, ct;
            wb_full[wb_wr_bank] <= 1'b1;
            pt = tile_no % n_pt;
            ct = (tile_no / n_pt) % n_ct;
            for (int c = 0; c < TC; c++)
              for (int p = 0; p < TP; p++) begin
                checks++;
                if (tile[c*TP + p] != wref(pt*TP + p, ct*TC + c)) begin
                  failures++;
                  if (failures < 10) $display("M=%0d tile %0d p=%0d c=%0d got %0d exp %0d", MM, tile_no, p, c,
                                              tile[c*TP + p], wref(pt*TP + p, ct*TC + c));
                end
              end
            if (slow == 0 && tile_no > 0 && nb >= 4) begin
              checks++;
              if (cyc - last_commit != NS * nb) begin
                failures++; $display("M=%0d tile gap %0d exp %0d", MM, cyc - last_commit, NS * nb);
              end else gaps_ok++;
            end
            last_commit = cyc;
            tile_no++;
          end
        end
      end

      task automatic load_alphas();
        int addr;
        addr = 0;
        for (int ct = 0; ct < n_ct; ct++)
          for (int pt = 0; pt < n_pt; pt++)
            for (int i = 0; i < NS; i++)
              for (int j = 0; j < nb; j++) begin
                @(negedge clk);
                a_wr_en = 1; a_wr_addr = $clog2(AD)'(addr);
                for (int f = 0; f < NF; f++) a_wr_data[f*WL +: WL] = WL'(alpha_word(MM, ct, pt, i, j, f));
                addr++;
              end
        @(negedge clk); a_wr_en = 0;
      endtask
    end
  endgenerate

  initial begin
    int stall_total;
    repeat (3) @(posedge clk); rst_n = 1;
    g_inst[0].stalls = 0; g_inst[1].stalls = 0;
    g_inst[0].gaps_ok = 0; g_inst[1].gaps_ok = 0;
    for (int layer = 0; layer < 4; layer++) begin
      int sel;
      sel   = layer % 2;
      ksq   = L2[sel];
      nb    = (layer < 2) ? ksq : ksq / 2;
      n_in  = (layer == 3) ? 7 : 5;
      n_out = (layer == 1) ? 6 : 9;
      n_rt  = 2;
      n_pt  = (n_in * ksq + TP - 1) / TP;
      n_ct  = (n_out + TC - 1) / TC;
      build(ksq);
      for (int a = 0; a < n_in; a++) for (int b = 0; b < n_out; b++) for (int j = 0; j < 16; j++)
        alpha[a][b][j] = (layer == 2 && j < 2) ? 20000 : int'($urandom % 4001) - 2000;
      cfg = '0;
      cfg.ksq_sel = 4'(sel); cfg.nb = CW'(nb); cfg.n_rt = CW'(n_rt); cfg.n_ct = CW'(n_ct);
      cfg.n_pt = CW'(n_pt); cfg.alpha_base = 0;
      g_inst[0].slow = (layer == 3) ? 60 : 0;
      g_inst[1].slow = (layer == 2) ? 60 : 0;
      g_inst[0].tile_no = 0; g_inst[1].tile_no = 0;
      fork
        g_inst[0].load_alphas();
        g_inst[1].load_alphas();
      join
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      fork
        @(posedge g_inst[0].done);
        @(posedge g_inst[1].done);
      join
      repeat (80) @(negedge clk);   // let the consumer model drain
      checks += 2;
      if (g_inst[0].tile_no != n_rt * n_ct * n_pt) begin failures++; $display("inst0 tiles %0d", g_inst[0].tile_no); end
      if (g_inst[1].tile_no != n_rt * n_ct * n_pt) begin failures++; $display("inst1 tiles %0d", g_inst[1].tile_no); end
    end
    stall_total = g_inst[0].stalls + g_inst[1].stalls;
    checks += 2;
    if (stall_total == 0) begin failures++; $display("no back-pressure stall happened"); end
    if (g_inst[0].gaps_ok == 0 || g_inst[1].gaps_ok == 0) begin failures++; $display("rate never checked"); end
    $display("stall cycles %0d, rate checks %0d/%0d", stall_total, g_inst[0].gaps_ok, g_inst[1].gaps_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
