// Self-checking testbench for engine_ctrl. A model of the PE array's weight
// forwarding chain (R registers, capture registers, switches) decides which
// weight column each issuing PE really uses; that column must equal the
// column the controller tags the result with. For every P-tile each valid
// (row, column) of the output tile must be issued exactly once, the run
// length must match an independent count of the work-stealing schedule
// (R' cycles without helpers), iss_first must mark P-tile 0 only, and one
// output commit must follow each output tile. Buffer readiness is random.
module tb_engine_ctrl;
  import unzip_pkg::*;
  localparam int TR = 8, TC = 6, AUG = 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic start = 0, w_ready = 0, in_ready = 0, out_wr_ready = 0;
  layer_cfg_t cfg;
  logic w_release, in_release, out_commit, iss_first, chain_load, chain_shift;
  logic busy, done, steal;
  logic iss_valid [TC], cap [TC], use_cap [TC];
  logic [$clog2(TR)-1:0] iss_row [TC];
  logic [$clog2(TC)-1:0] iss_col [TC];
  engine_ctrl #(.T_R(TR), .T_C(TC), .AUG_FROM(AUG)) dut (.*);

  // chain model: which weight column each register holds
  int rch [TC], capc [TC];
  always @(posedge clk) begin
    for (int c = TC-1; c >= 1; c--) begin
      if (cap[c]) capc[c] <= rch[c];
      if (chain_load) rch[c] <= c;
      else if (chain_shift) rch[c] <= (c > 1) ? rch[c-1] : 0;
    end
  end

  int seen [TR][TC];
  int cyc = 0, run_start = -1, n_steal = 0, n_commit = 0, n_bal_runs = 0;
  int cur_rp, cur_cp, cur_pt, exp_first;
  always @(posedge clk) cyc++;

  function automatic int model_run(input int rp, input int cp, input bit bal);
    int hs [TC][$];      // start cycles of helpers per column
    int k, worst;
    k = 0;
    if (bal)
      for (int c = 0; c < TC; c++)
        if (c >= cp && c >= AUG && c > 0) begin
          int j = k % cp;
          hs[j].push_back(c - j + 2);
          k++;
        end
    worst = 0;
    for (int j = 0; j < cp; j++) begin
      int rem, s;
      rem = rp; s = 0;
      while (rem > 0) begin
        int h = 1;
        foreach (hs[j][i]) if (hs[j][i] <= s) h++;
        rem -= h; s++;
      end
      if (s > worst) worst = s;
    end
    return worst;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (steal) n_steal++;
    if (out_commit) n_commit++;
    if (chain_load) begin
      run_start = cyc;
      foreach (seen[r, c]) seen[r][c] = 0;
      checks++;
      if (iss_first != (cur_pt == 0)) begin failures++; $display("iss_first wrong"); end
    end
    for (int c = 0; c < TC; c++) if (iss_valid[c]) begin
      int wc;
      wc = use_cap[c] ? capc[c] : c;
      checks++;
      if (wc != int'(iss_col[c])) begin failures++; $display("PE %0d uses column %0d, tagged %0d", c, wc, iss_col[c]); end
      checks++;
      if (iss_row[c] >= cur_rp || iss_col[c] >= cur_cp) begin failures++; $display("out of range issue"); end
      else seen[iss_row[c]][iss_col[c]]++;
    end
    if (w_release) begin
      int exp_len;
      for (int r = 0; r < cur_rp; r++) for (int c = 0; c < cur_cp; c++) begin
        checks++;
        if (seen[r][c] != 1) begin failures++; $display("(%0d,%0d) issued %0d times", r, c, seen[r][c]); end
      end
      exp_len = model_run(cur_rp, cur_cp, cfg.bal_en);
      if (cfg.bal_en && cur_cp < TC) n_bal_runs++;
      checks++;
      if (cyc - run_start + 1 != exp_len) begin
        failures++; $display("run length %0d expected %0d (rp %0d cp %0d bal %0d)", cyc - run_start + 1, exp_len, cur_rp, cur_cp, cfg.bal_en);
      end
      if (!cfg.bal_en) begin checks++; if (exp_len != cur_rp) failures++; end
    end
  end

  // random buffer readiness: a ready flag drops after each release
  always @(negedge clk) begin
    w_ready      = ($urandom % 4) != 0;
    in_ready     = ($urandom % 3) != 0;
    out_wr_ready = ($urandom % 2) != 0;
  end

  task automatic run_layer(input int nrt, input int nct, input int npt, input int rl, input int cl, input bit bal);
    int tiles0;
    cfg = '0;
    cfg.n_rt = CW'(nrt); cfg.n_ct = CW'(nct); cfg.n_pt = CW'(npt);
    cfg.rows_last = CW'(rl); cfg.cols_last = CW'(cl); cfg.bal_en = bal;
    tiles0 = n_commit;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      begin
        for (int rt = 0; rt < nrt; rt++) for (int ct = 0; ct < nct; ct++)
          for (int pt = 0; pt < npt; pt++) begin
            cur_rp = (rt == nrt-1) ? rl : TR;
            cur_cp = (ct == nct-1) ? cl : TC;
            cur_pt = pt;
            @(posedge clk iff (rst_n && w_release)); #1;
          end
      end
    join_none
    @(posedge clk iff done);
    checks++;
    if (n_commit - tiles0 != nrt*nct) begin failures++; $display("commits %0d expected %0d", n_commit - tiles0, nrt*nct); end
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run_layer(1, 1, 1, TR, TC, 1);
    run_layer(1, 1, 2, 5, 1, 1);     // one column: five helpers
    run_layer(2, 2, 2, 3, 2, 1);
    run_layer(1, 2, 1, TR, 3, 0);
    for (int i = 0; i < 60; i++)
      run_layer(1 + $urandom % 2, 1 + $urandom % 3, 1 + $urandom % 3,
                1 + $urandom % TR, 1 + $urandom % TC, 1'($urandom % 4 != 0));
    checks++; if (n_steal == 0 || n_bal_runs == 0) begin failures++; $display("work stealing never happened"); end
    $display("steal cycles %0d, balanced runs %0d", n_steal, n_bal_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
