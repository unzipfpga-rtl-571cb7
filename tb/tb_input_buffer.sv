// Self-checking testbench for input_buffer: tiles of T_R rows are written,
// committed and read back through all row ports at once with random row
// indices; the second bank is filled while the first is being read, and the
// ready flags must follow commit/release.
module tb_input_buffer;
  import unzip_pkg::*;
  localparam int TR = 16, TP = 8, NR = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic wr_en = 0, wr_commit = 0, wr_ready, rd_ready, rd_release = 0;
  logic [$clog2(TR)-1:0] wr_row, rd_row [NR];
  word_t wr_data [TP], rd_data [NR][TP];
  input_buffer #(.T_R(TR), .T_P(TP), .N_RD(NR)) dut (.*);

  int tiles [2][TR][TP];

  task automatic fill(input int t);
    for (int r = 0; r < TR; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 4'(r);
      for (int p = 0; p < TP; p++) begin tiles[t%2][r][p] = int'($urandom % 65536) - 32768; wr_data[p] = word_t'(tiles[t%2][r][p]); end
    end
    @(negedge clk); wr_en = 0; wr_commit = 1; @(negedge clk); wr_commit = 0;
  endtask

  task automatic readall(input int t);
    for (int it = 0; it < 20; it++) begin
      for (int i = 0; i < NR; i++) rd_row[i] = 4'($urandom);
      #1;
      for (int i = 0; i < NR; i++) for (int p = 0; p < TP; p++) begin
        checks++;
        if (int'(rd_data[i][p]) != tiles[t%2][rd_row[i]][p]) begin failures++; $display("t%0d port%0d", t, i); end
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    checks++; if (!wr_ready || rd_ready) failures++;
    fill(0);
    checks++; if (!rd_ready || !wr_ready) failures++;
    fill(1);
    checks++; if (wr_ready) begin failures++; $display("both banks full but wr_ready"); end
    readall(0);
    for (int t = 1; t < 8; t++) begin
      @(negedge clk); rd_release = 1; @(negedge clk); rd_release = 0;
      readall(t);
      fill(t + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
