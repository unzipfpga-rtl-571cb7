// Self-checking testbench for cnn_engine at reduced size (T_R = 8, T_P = 16,
// T_C = 4, M = 32). Weights tiles are written straight into the weights
// buffer (as the generator would: M elements per cycle, column-major), and
// activation and output tiles are moved with random gaps and delays. Every
// output element is compared with sat16((sum_p x[r][p] * W[p][c]) >>> s)
// computed here. Layers cover several row, column and P tiles, ragged last
// tiles, and work stealing on and off; the same layer run with and without
// stealing must finish faster with it. Counted (failure if never seen): work
// stealing, waits for weights, activations and a free output bank.
module tb_cnn_engine;
  import unzip_pkg::*;
  localparam int TR = 8, TP = 16, TC = 4, MM = 32, NF = 2, AD = 4096, KSQ = 16;
  localparam int NS = TP * TC / MM;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic start = 0, busy, done, steal;
  layer_cfg_t cfg;
  logic wb_wr_en = 0, wb_wr_bank = 0, wb_wr_tile_last = 0;
  logic [$clog2(NS+1)-1:0] wb_wr_sub;
  word_t wb_wr_data [MM];
  logic [1:0] wb_full;
  logic in_wr_en = 0, in_commit = 0, in_wr_ready;
  logic [$clog2(TR)-1:0] in_wr_row, out_row;
  word_t in_wr_data [TP];
  logic out_ready, out_rd_en = 0, out_release = 0;
  logic [$clog2(TC)-1:0] out_col;
  word_t out_data;

  cnn_engine #(.T_R(TR), .T_P(TP), .T_C(TC), .M(MM), .AUG_FROM(1)) dut (.*);

  // ---------------- reference ------------------------------------------------
  int R, n_in, n_out, nb, n_rt, n_ct, n_pt, shift;
  int wt [128][16];           // W[p][c]
  int x [32][128];            // activations [row][p]

  function automatic int wref(input int p, input int c);
    if (p >= n_in * KSQ || c >= n_out) return 0;
    return wt[p][c];
  endfunction

  function automatic int oref(input int r, input int c);
    longint s;
    s = 0;
    for (int p = 0; p < n_in * KSQ; p++) s += longint'(x[r][p]) * longint'(wref(p, c));
    s = longint'(acc_t'(s)) >>> shift;
    return (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
  endfunction

  // ---------------- mechanism counters ----------------------------------------
  int n_steal = 0, n_wait_w = 0, n_wait_in = 0, n_wait_out = 0;
  int n_rag_r = 0, n_rag_c = 0, n_nobal = 0, n_tiles_out = 0;
  always @(posedge clk) if (rst_n) begin
    if (steal) n_steal++;
    if (dut.u_ctrl.state == 3'd2) begin
      if (!dut.u_ctrl.w_ready) n_wait_w++;
      if (!dut.u_ctrl.in_ready) n_wait_in++;
      if (dut.u_ctrl.pt == '0 && !dut.u_ctrl.out_wr_ready) n_wait_out++;
    end
  end

  int in_gap, out_delay, w_gap;

  logic bank = 1'b0;          // weights bank the next tile goes to
  task automatic feed_weights();
    for (int rt = 0; rt < n_rt; rt++)
      for (int ct = 0; ct < n_ct; ct++)
        for (int pt = 0; pt < n_pt; pt++) begin
          @(negedge clk iff !wb_full[bank]);
          repeat ($urandom % (w_gap + 1)) @(negedge clk);
          for (int s = 0; s < NS; s++) begin
            wb_wr_en = 1; wb_wr_bank = bank; wb_wr_sub = 2'(s); wb_wr_tile_last = (s == NS-1);
            for (int k = 0; k < MM; k++) begin
              int e;
              e = s*MM + k;
              wb_wr_data[k] = word_t'(wref(pt*TP + e % TP, ct*TC + e / TP));
            end
            @(negedge clk);
          end
          wb_wr_en = 0; wb_wr_tile_last = 0;
          bank = !bank;
        end
  endtask

  task automatic feed_inputs();
    for (int rt = 0; rt < n_rt; rt++)
      for (int ct = 0; ct < n_ct; ct++)
        for (int pt = 0; pt < n_pt; pt++) begin
          @(negedge clk iff in_wr_ready);
          repeat ($urandom % (in_gap + 1)) @(negedge clk);
          for (int r = 0; r < TR; r++) begin
            in_wr_en = 1; in_wr_row = 3'(r);
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
            out_rd_en = 1; out_row = 3'(r); out_col = 2'(c);
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

  int run_cycles;
  task automatic run_layer(input int rr, input int ni, input int no, input bit bal,
                           input int sh, input int ig, input int od, input int wg, input bit keep);
    int t0;
    R = rr; n_in = ni; n_out = no; shift = sh; in_gap = ig; out_delay = od; w_gap = wg;
    n_rt = (R + TR - 1) / TR; n_ct = (n_out + TC - 1) / TC; n_pt = (n_in * KSQ + TP - 1) / TP;
    if (!keep) begin
      for (int p = 0; p < 128; p++) for (int c = 0; c < 16; c++) wt[p][c] = int'($urandom % 2049) - 1024;
      for (int r = 0; r < 32; r++) for (int p = 0; p < 128; p++)
        x[r][p] = (r < R && p < n_in * KSQ) ? int'($urandom % 256) - 128 : 0;
    end
    cfg = '0;
    cfg.nb = CW'(1); cfg.n_rt = CW'(n_rt); cfg.n_ct = CW'(n_ct);
    cfg.n_pt = CW'(n_pt); cfg.rows_last = CW'(R - (n_rt-1)*TR);
    cfg.cols_last = CW'(n_out - (n_ct-1)*TC); cfg.bal_en = bal;
    cfg.out_shift = 5'(shift);
    if (!bal) n_nobal++;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time / 10;
    fork
      feed_weights();
      feed_inputs();
      drain_outputs();
      begin @(posedge clk iff done); run_cycles = $time / 10 - t0; end
    join
    repeat (5) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy after the layer"); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    begin
      int slow, fast;
      //        R  n_in n_out bal shift in_gap out_delay w_gap keep
      run_layer(12, 2,  6,  1,  6,    0,    0,   0, 0);
      run_layer(12, 2,  6,  0,  4,    6,   40,  10, 0);
      run_layer(20, 3,  5,  1,  8,   30,    5,   0, 0);
      // same single-column layer with and without stealing, buffers always ready
      run_layer( 8, 1,  1,  0,  2,    0,    0,   0, 0);
      slow = run_cycles;
      run_layer( 8, 1,  1,  1,  2,    0,    0,   0, 1);
      fast = run_cycles;
      checks++;
      if (fast >= slow) begin failures++; $display("stealing did not shorten the layer: %0d vs %0d", fast, slow); end
      $display("one-column layer: %0d cycles without stealing, %0d with", slow, fast);
    end
    $display("steal %0d, wait w/in/out %0d/%0d/%0d, ragged r/c %0d/%0d, no-bal layers %0d, tiles %0d",
             n_steal, n_wait_w, n_wait_in, n_wait_out, n_rag_r, n_rag_c, n_nobal, n_tiles_out);
    checks++; if (n_steal == 0)    begin failures++; $display("work stealing never happened"); end
    checks++; if (n_wait_w == 0)   begin failures++; $display("engine never waited for weights"); end
    checks++; if (n_wait_in == 0)  begin failures++; $display("engine never waited for activations"); end
    checks++; if (n_wait_out == 0) begin failures++; $display("engine never waited for an output bank"); end
    checks++; if (n_rag_r == 0 || n_rag_c == 0 || n_nobal == 0) begin failures++; $display("a tiling case never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
