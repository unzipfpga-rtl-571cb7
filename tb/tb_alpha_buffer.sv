// Self-checking testbench for alpha_buffer: random words written to random
// addresses are read back through the registered read port (one cycle of
// latency) and compared lane by lane with a shadow copy.
module tb_alpha_buffer;
  import unzip_pkg::*;
  localparam int NF = 8, D = 1024;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic wr_en = 0, rd_en = 0;
  logic [$clog2(D)-1:0] wr_addr, rd_addr;
  logic [NF*WL-1:0] wr_data;
  word_t rd_data [NF];
  logic [NF*WL-1:0] shadow [D];
  logic written [D];

  alpha_buffer #(.N_F(NF), .DEPTH(D)) dut (.*);

  initial begin
    for (int a = 0; a < D; a++) written[a] = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      wr_en = 1;
      wr_addr = 10'($urandom);
      for (int f = 0; f < NF; f++) wr_data[f*WL +: WL] = WL'($urandom);
      shadow[wr_addr] = wr_data;
      written[wr_addr] = 1;
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 2000; it++) begin
      logic [$clog2(D)-1:0] a;
      a = 10'($urandom);
      if (!written[a]) continue;
      rd_en = 1; rd_addr = a;
      @(negedge clk); rd_en = 0;
      // hold: output must keep its value while rd_en is low
      @(negedge clk);
      for (int f = 0; f < NF; f++) begin
        checks++;
        if (rd_data[f] !== shadow[a][f*WL +: WL]) begin
          failures++; $display("addr %0d lane %0d: %h exp %h", a, f, rd_data[f], shadow[a][f*WL +: WL]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
