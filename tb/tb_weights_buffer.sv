// Self-checking testbench for weights_buffer: tiles are written subtile by
// subtile into alternating banks; after the commit the column read ports
// must show w_col[c][p] = written element c*T_P + p, the full flags must
// follow commit/release, and writing the second bank must not disturb the
// bank being read.
module tb_weights_buffer;
  import unzip_pkg::*;
  localparam int TP = 16, TC = 8, M = 32, NS = TP*TC/M;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic wr_en = 0, wr_bank = 0, wr_tile_last = 0, rd_release = 0, rd_ready;
  logic [$clog2(NS+1)-1:0] wr_sub;
  word_t wr_data [M];
  logic [1:0] full;
  word_t w_col [TC][TP];
  weights_buffer #(.T_P(TP), .T_C(TC), .M(M)) dut (.*);

  int tiles [2][TP*TC];

  task automatic write_tile(input int t, input logic b);
    for (int s = 0; s < NS; s++) begin
      @(negedge clk);
      wr_en = 1; wr_bank = b; wr_sub = 3'(s); wr_tile_last = (s == NS-1);
      for (int k = 0; k < M; k++) begin
        tiles[t%2][s*M + k] = int'($urandom % 65536) - 32768;
        wr_data[k] = word_t'(tiles[t%2][s*M + k]);
      end
    end
    @(negedge clk); wr_en = 0; wr_tile_last = 0;
  endtask

  task automatic check_read(input int t);
    for (int c = 0; c < TC; c++) for (int p = 0; p < TP; p++) begin
      checks++;
      if (int'(w_col[c][p]) != tiles[t%2][c*TP + p]) begin failures++; $display("t%0d c%0d p%0d", t, c, p); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    write_tile(0, 0);
    checks++; if (full != 2'b01 || !rd_ready) begin failures++; $display("full %b", full); end
    check_read(0);
    write_tile(1, 1);
    checks++; if (full != 2'b11) begin failures++; $display("full %b", full); end
    check_read(0);           // still reading bank 0
    @(negedge clk); rd_release = 1; @(negedge clk); rd_release = 0;
    checks++; if (full != 2'b10) begin failures++; $display("full %b", full); end
    check_read(1);
    for (int t = 2; t < 12; t++) begin
      write_tile(t, 1'(t % 2));
      @(negedge clk); rd_release = 1; @(negedge clk); rd_release = 0;
      check_read(t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
