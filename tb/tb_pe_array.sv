// Self-checking testbench for pe_array. Each tile holds a random weights
// tile stable, loads the forwarding chain and shifts it for T_C cycles while
// random PEs capture the chain value and random PEs switch to their captured
// weights. Every PE issues random activation vectors; the expected dot
// product uses the weights a reference chain model says the PE sees, and the
// result must appear two cycles later with the right tag, added to psum_in
// unless `first` was set.
module tb_pe_array;
  import unzip_pkg::*;
  localparam int TP = 4, TC = 6, AUG = 2, TW = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t w_col [TC][TP], act [TC][TP];
  logic iss_valid [TC], cap [TC], use_cap [TC], res_valid [TC];
  logic iss_first, chain_load = 0, chain_shift = 0;
  logic [TW-1:0] iss_tag [TC], res_tag [TC];
  acc_t psum_in [TC], psum_out [TC];
  pe_array #(.T_P(TP), .T_C(TC), .AUG_FROM(AUG), .TAG_W(TW)) dut (.*);

  word_t rch [TC][TP], capv [TC][TP]; // weights held by R / capture regs
  typedef struct { int tag; longint dot; bit first; } exp_t;
  exp_t q [TC][$];
  int n_cap_used = 0;

  always @(posedge clk) if (rst_n) begin
    // check results
    for (int c = 0; c < TC; c++) if (res_valid[c]) begin
      exp_t e;
      checks++;
      if (q[c].size() == 0) begin failures++; $display("PE %0d unexpected result", c); end
      else begin
        e = q[c].pop_front();
        if (int'(res_tag[c]) != e.tag ||
            psum_out[c] != acc_t'((e.first ? 0 : longint'(psum_in[c])) + e.dot)) begin
          failures++; $display("PE %0d tag %0d/%0d value %0d", c, res_tag[c], e.tag, psum_out[c]);
        end
      end
    end
    // record issues with the weights each PE currently sees
    for (int c = 0; c < TC; c++) if (iss_valid[c]) begin
      exp_t e;
      bit uc;
      uc = (c >= AUG && c > 0 && use_cap[c]);
      if (uc) n_cap_used++;
      e.tag = int'(iss_tag[c]); e.first = iss_first; e.dot = 0;
      for (int p = 0; p < TP; p++)
        e.dot += longint'(act[c][p]) * longint'(uc ? capv[c][p] : w_col[c][p]);
      q[c].push_back(e);
    end
    // chain model
    for (int c = TC-1; c >= 1; c--) begin
      if (cap[c]) capv[c] <= rch[c];
      if (chain_load) rch[c] <= w_col[c];
      else if (chain_shift) rch[c] <= (c > 1) ? rch[c-1] : w_col[0];
    end
  end

  initial begin
    for (int c = 0; c < TC; c++) begin iss_valid[c] = 0; cap[c] = 0; use_cap[c] = 0; end
    iss_first = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      foreach (w_col[c, p]) w_col[c][p] = word_t'($urandom);
      for (int s = 0; s <= TC + 4; s++) begin
        @(negedge clk);
        chain_load = (s == 0); chain_shift = (s != 0);
        iss_first = 1'($urandom);
        for (int c = 0; c < TC; c++) begin
          cap[c] = 1'($urandom % 3 == 0);
          iss_valid[c] = 1'($urandom % 4 != 0);
          iss_tag[c] = TW'($urandom);
          psum_in[c] = acc_t'($urandom);
          for (int p = 0; p < TP; p++) act[c][p] = word_t'($urandom);
        end
        if (s == 0) for (int c = 0; c < TC; c++) cap[c] = 1'b0;
        if (s == 1 && t == 0) for (int c = 0; c < TC; c++) cap[c] = 1'b1;  // no stale capture in tile 0
        if (s == 2) for (int c = 0; c < TC; c++) use_cap[c] = 1'($urandom % 2);
      end
      @(negedge clk);
      for (int c = 0; c < TC; c++) begin iss_valid[c] = 0; cap[c] = 0; use_cap[c] = 0; end
      chain_shift = 0;
      repeat (3) @(negedge clk);
    end
    for (int c = 0; c < TC; c++) begin checks++; if (q[c].size() != 0) failures++; end
    checks++; if (n_cap_used == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
