// Workload testbench: real layer shapes of the evaluated networks run
// through unzipfpga_top at its default parameters. 3x3 layers are run as 4x4
// filters (K^2 = 16) with nb = floor(rho*16) basis vectors; channel counts
// and map sizes are those of the standard networks. Layers:
//   * ResNet18/34 last stage: 512 -> 512 channels, 7x7 output (49 rows),
//     rho = 0.125 (nb = 2): 11 column tiles, 512 P-tiles;
//   * SqueezeNet1.1 fire9 expand3x3: 64 -> 256 channels, 13x13 output
//     (169 rows, three row tiles), rho = 0.5 (nb = 8).
// Alphas and activations are random; every output is compared with a
// reference computed here from the alphas and the OVSF codes built by the
// code-tree recursion.
module tb_workload_layers;
  import unzip_pkg::*;
  localparam int TR = 64, TP = 16, TC = 48, MM = 128, NF = 8, AD = 262144, KSQ = 16;
  localparam int NS = TP * TC / MM;
  localparam int RB = $clog2(TR), CB = $clog2(TC), AB = $clog2(AD);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic start = 0, busy, done, steal, wgen_stall;
  layer_cfg_t cfg;
  logic a_wr_en = 0;
  logic [$clog2(AD)-1:0] a_wr_addr;
  logic [NF*WL-1:0] a_wr_data;
  logic in_wr_en = 0, in_commit = 0, in_wr_ready;
  logic [$clog2(TR)-1:0] in_wr_row, out_row;
  word_t in_wr_data [TP];
  logic out_ready, out_rd_en = 0, out_release = 0;
  logic [$clog2(TC)-1:0] out_col;
  word_t out_data;

  unzipfpga_top dut (.*);

  // ---------------- reference ------------------------------------------------
  int code [16][16];
  initial begin
    int c [16][16];
    c[0][0] = 1;
    for (int len = 1; len < 16; len *= 2) begin
      int n [16][16];
      for (int i = 0; i < len; i++)
        for (int e = 0; e < len; e++) begin
          n[2*i][e] = c[i][e];   n[2*i][len+e]   =  c[i][e];
          n[2*i+1][e] = c[i][e]; n[2*i+1][len+e] = -c[i][e];
        end
      c = n;
    end
    code = c;
  end

  int R, n_in, n_out, nb, n_rt, n_ct, n_pt, shift;
  int alpha [512][512][16];   // [input channel][output channel][j]
  int x [192][8192];          // activations [row][p]
  int wtab [8192][512];       // reference weights W[p][c] of the current layer

  function automatic int wcalc(input int p, input int c);
    int s;
    s = 0;
    for (int j = 0; j < nb; j++) s += alpha[p / KSQ][c][j] * code[j][p % KSQ];
    return (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
  endfunction

  function automatic int wref(input int p, input int c);
    if (p >= n_in * KSQ || c >= n_out) return 0;
    return wtab[p][c];
  endfunction

  function automatic int oref(input int r, input int c);
    longint s;
    s = 0;
    for (int p = 0; p < n_in * KSQ; p++) s += longint'(x[r][p]) * longint'(wref(p, c));
    s = longint'(acc_t'(s)) >>> shift;
    return (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
  endfunction

  // alpha word of lane f for subtile i, basis j of tile (ct, pt); M >= K^2
  function automatic int alpha_word(input int ct, input int pt, input int i, input int j,
                                    input int f);
    int eb, c, p0, no, ni;
    eb = i * (MM / KSQ) + f;
    c  = (eb * KSQ) / TP;
    p0 = (eb * KSQ) % TP;
    no = ct * TC + c;
    ni = (pt * TP + p0) / KSQ;
    if (no >= n_out || ni >= n_in) return 0;
    return alpha[ni][no][j];
  endfunction

  // ---------------- mechanism counters ----------------------------------------
  int n_steal = 0, n_stall = 0, n_wait_w = 0, n_wait_in = 0, n_wait_out = 0;
  int n_rag_r = 0, n_rag_c = 0, n_nobal = 0, n_tiles_out = 0;
  always @(posedge clk) if (rst_n) begin
    if (steal) n_steal++;
    if (wgen_stall) n_stall++;
    if (dut.u_eng.u_ctrl.state == 3'd2) begin
      if (!dut.u_eng.u_ctrl.w_ready) n_wait_w++;
      if (!dut.u_eng.u_ctrl.in_ready) n_wait_in++;
      if (dut.u_eng.u_ctrl.pt == '0 && !dut.u_eng.u_ctrl.out_wr_ready) n_wait_out++;
    end
  end

  int in_gap, out_delay;

  task automatic feed_inputs();
    for (int rt = 0; rt < n_rt; rt++)
      for (int ct = 0; ct < n_ct; ct++)
        for (int pt = 0; pt < n_pt; pt++) begin
          @(negedge clk iff in_wr_ready);
          repeat ($urandom % (in_gap + 1)) @(negedge clk);
          for (int r = 0; r < TR; r++) begin
            in_wr_en = 1; in_wr_row = RB'(r);
            for (int p = 0; p < TP; p++) in_wr_data[p] = word_t'(x[rt*TR + r][pt*TP + p]);
            @(negedge clk);
          end
          in_wr_en = 0; in_commit = 1;
          @(negedge clk);
          in_commit = 0;
        end
  endtask

  task automatic drain_outputs();
    for (int rt = 0; rt < n_rt; rt++)
      for (int ct = 0; ct < n_ct; ct++) begin
        int rp, cp;
        rp = (rt == n_rt-1) ? R - rt*TR : TR;
        cp = (ct == n_ct-1) ? n_out - ct*TC : TC;
        if (rp < TR) n_rag_r++;
        if (cp < TC) n_rag_c++;
        @(negedge clk iff out_ready);
        repeat ($urandom % (out_delay + 1)) @(negedge clk);
        for (int r = 0; r < rp; r++)
          for (int c = 0; c < cp; c++) begin
            int e;
            out_rd_en = 1; out_row = RB'(r); out_col = CB'(c);
            @(negedge clk);
            e = oref(rt*TR + r, ct*TC + c);
            checks++;
            if (int'(out_data) != e) begin
              failures++;
              if (failures < 10) $display("out[%0d][%0d] = %0d, expected %0d", rt*TR + r, ct*TC + c, out_data, e);
            end
          end
        out_rd_en = 0; out_release = 1;
        @(negedge clk);
        out_release = 0;
        n_tiles_out++;
      end
  endtask

  task automatic run_layer(input int rr, input int ni, input int no, input int nbb, input bit bal,
                           input int sh, input int ig, input int od);
    int addr;
    R = rr; n_in = ni; n_out = no; nb = nbb; shift = sh; in_gap = ig; out_delay = od;
    n_rt = (R + TR - 1) / TR; n_ct = (n_out + TC - 1) / TC; n_pt = (n_in * KSQ + TP - 1) / TP;
    for (int a = 0; a < n_in; a++) for (int b = 0; b < n_out; b++) for (int j = 0; j < 16; j++)
      alpha[a][b][j] = int'($urandom % 129) - 64;
    $display("layer: %0d rows, %0d input channels, %0d output channels, nb = %0d", R, n_in, n_out, nb);
    for (int r = 0; r < R; r++) for (int p = 0; p < n_in * KSQ; p++)
      x[r][p] = int'($urandom % 256) - 128;
    for (int p = 0; p < n_in * KSQ; p++) for (int c = 0; c < n_out; c++) wtab[p][c] = wcalc(p, c);
    // alpha buffer, in the generator's order
    addr = 0;
    for (int ct = 0; ct < n_ct; ct++) for (int pt = 0; pt < n_pt; pt++)
      for (int i = 0; i < NS; i++) for (int j = 0; j < nb; j++) begin
        @(negedge clk);
        a_wr_en = 1; a_wr_addr = AB'(addr);
        for (int f = 0; f < NF; f++) a_wr_data[f*WL +: WL] = WL'(alpha_word(ct, pt, i, j, f));
        addr++;
      end
    @(negedge clk); a_wr_en = 0;
    cfg = '0;
    cfg.ksq_sel = 0; cfg.nb = CW'(nb); cfg.n_rt = CW'(n_rt); cfg.n_ct = CW'(n_ct);
    cfg.n_pt = CW'(n_pt); cfg.rows_last = CW'(R - (n_rt-1)*TR);
    cfg.cols_last = CW'(n_out - (n_ct-1)*TC); cfg.alpha_base = 0; cfg.bal_en = bal;
    cfg.out_shift = 5'(shift);
    if (!bal) n_nobal++;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      feed_inputs();
      drain_outputs();
      @(posedge clk iff done);
    join
    repeat (5) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy after the layer"); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    //        R  n_in n_out nb bal shift in_gap out_delay
    // ResNet18/34 last stage, 3x3 conv 512 -> 512 on a 7x7 map, OVSF25 (rho = 0.125)
    run_layer(49, 512, 512,  2, 1, 10,    0,    0);
    // SqueezeNet1.1 fire9 expand3x3, 64 -> 256 on a 13x13 map, OVSF50 (rho = 0.5)
    run_layer(169, 64, 256,  8, 1,  8,    0,    0);
    $display("steal %0d, wgen stall %0d, wait w/in/out %0d/%0d/%0d, ragged r/c %0d/%0d, no-bal layers %0d, tiles %0d",
             n_steal, n_stall, n_wait_w, n_wait_in, n_wait_out, n_rag_r, n_rag_c, n_nobal, n_tiles_out);
    checks++; if (n_steal == 0) begin failures++; $display("work stealing never happened"); end
    checks++; if (n_rag_r == 0 || n_rag_c == 0) begin failures++; $display("a tiling case never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
