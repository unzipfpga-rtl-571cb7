// Self-checking testbench for output_buffer: several ports perform
// read-modify-write accumulation on distinct entries each cycle; after the
// commit the DMA port must read every entry (one cycle of latency), shifted
// right by `shift` and saturated to 16 bits, while the engine already
// accumulates into the other bank.
module tb_output_buffer;
  import unzip_pkg::*;
  localparam int TR = 8, TC = 6, NP = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic wr_ready, commit = 0, out_ready, out_rd_en = 0, out_release = 0;
  logic [$clog2(TR)-1:0] ps_row [NP], out_row;
  logic [$clog2(TC)-1:0] ps_col [NP], out_col;
  acc_t ps_data [NP], wr_data [NP];
  logic wr_en [NP];
  logic [4:0] shift;
  word_t out_data;
  output_buffer #(.T_R(TR), .T_C(TC), .N_PORT(NP)) dut (.*);

  longint ref_t [2][TR][TC];
  int n_sat = 0;

  task automatic accumulate(input int t);
    for (int r = 0; r < TR; r++) for (int c = 0; c < TC; c++) ref_t[t%2][r][c] = 0;
    for (int pass = 0; pass < 3; pass++)
      for (int r = 0; r < TR; r++) begin
        @(negedge clk);
        // port i handles column (i + r) mod TC of row r: all entries distinct
        for (int i = 0; i < NP; i++) begin
          ps_row[i] = 3'(r); ps_col[i] = 3'((i + r) % TC);
          wr_en[i] = 1;
        end
        #1;
        for (int i = 0; i < NP; i++) begin
          int v;
          v = (t == 1) ? 600000 : int'($urandom % 200001) - 100000;
          wr_data[i] = (pass == 0) ? acc_t'(v) : ps_data[i] + acc_t'(v);
          ref_t[t%2][r][(i + r) % TC] = (pass == 0) ? v : ref_t[t%2][r][(i + r) % TC] + v;
        end
      end
    @(negedge clk);
    for (int i = 0; i < NP; i++) wr_en[i] = 0;
    commit = 1; @(negedge clk); commit = 0;
  endtask

  task automatic drain(input int t);
    for (int r = 0; r < TR; r++) for (int c = 0; c < TC; c++) begin
      longint e;
      out_rd_en = 1; out_row = 3'(r); out_col = 3'(c);
      @(negedge clk);
      e = ref_t[t%2][r][c] >>> shift;
      if (e > 32767) begin e = 32767; n_sat++; end
      if (e < -32768) begin e = -32768; n_sat++; end
      checks++;
      if (longint'(out_data) != e) begin failures++; $display("t%0d r%0d c%0d got %0d exp %0d", t, r, c, out_data, e); end
    end
    out_rd_en = 0;
    out_release = 1; @(negedge clk); out_release = 0;
  endtask

  initial begin
    for (int i = 0; i < NP; i++) wr_en[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    accumulate(0);
    checks++; if (!out_ready || !wr_ready) failures++;
    for (int t = 1; t < 6; t++) begin
      shift = 5'(t * 2);
      accumulate(t);
      drain(t - 1);
    end
    drain(5);
    checks++; if (n_sat == 0) begin failures++; $display("saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
