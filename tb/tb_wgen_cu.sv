// Self-checking testbench for wgen_cu. A small layer (3 subtiles per tile,
// nb = 4, 2x2 output tiles, 3 P-tiles) is run against a model of the
// double-buffered weights buffer whose consumer releases banks after a
// random delay. Checked: every issued cycle pops the generator and reads the
// alpha address the nested loops predict (restarting at each row tile), the
// first/last/sub/bank/tile_last sideband one cycle later, that a bank is never
// written while full, that an unstalled tile takes exactly N_SUB*nb cycles,
// that back-pressure stalls did happen, and that done arrives.
module tb_wgen_cu;
  import unzip_pkg::*;
  localparam int NSUB = 3, AD = 4096;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic start = 0;
  layer_cfg_t cfg;
  logic gen_load, gen_busy, gen_adv, a_rd_en;
  logic [$clog2(AD)-1:0] a_rd_addr;
  logic d_valid, d_first, d_last, d_bank, d_tile_last;
  logic [$clog2(NSUB+1)-1:0] d_sub;
  logic [1:0] wb_full;
  logic busy, done;

  wgen_cu #(.N_SUB(NSUB), .A_DEPTH(AD)) dut (.*);

  // generator load model: busy for nb cycles after load
  int ld_cnt = 0;
  assign gen_busy = (ld_cnt != 0);
  always @(posedge clk) if (gen_load) ld_cnt <= int'(cfg.nb); else if (ld_cnt > 0) ld_cnt <= ld_cnt - 1;

  // weights buffer model: commit 3 cycles after a tile_last word, release by the engine later
  int commit_dly [$];
  logic commit_bank [$];
  int rel_timer = 0;
  logic rd_bank = 0;
  int stalls = 0;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin wb_full <= 0; rd_bank <= 0; end
    else begin
      if (d_valid) begin
        checks++;
        if (wb_full[d_bank]) begin failures++; $display("tile written into a full bank"); end
      end
      if (d_valid && d_tile_last) begin commit_dly.push_back(3); commit_bank.push_back(d_bank); end
      foreach (commit_dly[i]) commit_dly[i]--;
      if (commit_dly.size() > 0 && commit_dly[0] == 0) begin
        logic cb;
        void'(commit_dly.pop_front());
        cb = commit_bank.pop_front();
        wb_full[cb] <= 1'b1;
      end
      if (wb_full[rd_bank]) begin
        if (rel_timer == 0) rel_timer <= 1 + ($urandom % 40);
        else if (rel_timer == 1) begin wb_full[rd_bank] <= 1'b0; rd_bank <= ~rd_bank; rel_timer <= 0; end
        else rel_timer <= rel_timer - 1;
      end
      if (busy && !dut.issue && dut.state == 3'd3) stalls++;
    end
  end

  initial begin
    int nb, n_rt, n_ct, n_pt, idx, tiles, start_cyc, cyc;
    nb = 4; n_rt = 2; n_ct = 2; n_pt = 3;
    cfg = '0; cfg.nb = CW'(nb); cfg.n_rt = CW'(n_rt); cfg.n_ct = CW'(n_ct); cfg.n_pt = CW'(n_pt);
    cfg.alpha_base = 32'd100;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    idx = 0; tiles = 0; cyc = 0; start_cyc = 0;
    for (int rt = 0; rt < n_rt; rt++)
      for (int ct = 0; ct < n_ct; ct++)
        for (int pt = 0; pt < n_pt; pt++)
          for (int s = 0; s < NSUB; s++)
            for (int j = 0; j < nb; j++) begin
              int addr;
              addr = 100 + ((ct * n_pt + pt) * NSUB + s) * nb + j;
              while (!(a_rd_en)) begin @(negedge clk); cyc++; end
              if (s == 0 && j == 0) start_cyc = cyc;
              checks += 2;
              if (!gen_adv) failures++;
              if (a_rd_addr != 12'(addr)) begin failures++; $display("addr %0d exp %0d", a_rd_addr, addr); end
              @(negedge clk); cyc++;
              checks++;
              if (!d_valid || d_first != (j == 0) || d_last != (j == nb-1) || d_sub != 2'(s) ||
                  d_tile_last != (s == NSUB-1 && j == nb-1) || d_bank != 1'(tiles % 2)) begin
                failures++; $display("sideband mismatch t=%0d s=%0d j=%0d", tiles, s, j);
              end
              if (s == NSUB-1 && j == nb-1) begin
                checks++;
                // a tile that started without waiting issues back to back
                if (cyc - start_cyc != NSUB * nb) begin failures++; $display("tile took %0d cycles", cyc - start_cyc); end
                tiles++;
              end
            end
    checks++;
    if (a_rd_en) begin failures++; $display("extra issue"); end
    fork
      begin repeat (50) @(negedge clk); failures++; $display("no done"); end
      begin @(posedge done); end
    join_any
    disable fork;
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never happened"); end
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
