// Self-checking testbench for wgen_adder_array: random runs of 1..16
// increments (first on the first, last on the last, back to back with no
// gap) must produce, one cycle after the last, the saturated sum of each
// element's increments together with the last increment's tag.
module tb_wgen_adder_array;
  import unzip_pkg::*;
  localparam int M = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_valid = 0, first = 0, last = 0, out_valid;
  logic [7:0] in_tag, out_tag;
  logic signed [WL:0] incr [M];
  word_t weights [M];

  wgen_adder_array #(.M(M), .KSQ_MAX(16), .TAG_W(8)) dut (.*);

  int sum [M];
  int n_sat = 0;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int run = 0; run < 400; run++) begin
      int n; bit big;
      n = 1 + ($urandom % 16);
      big = (run % 5 == 0);
      for (int k = 0; k < M; k++) sum[k] = 0;
      for (int j = 0; j < n; j++) begin
        in_valid = 1; first = (j == 0); last = (j == n - 1); in_tag = 8'(run);
        for (int k = 0; k < M; k++) begin
          int v;
          v = big ? (30000 - int'($urandom % 4000)) * ((k % 2) ? 1 : -1) : int'($urandom % 2001) - 1000;
          incr[k] = (WL+1)'(v);
          sum[k] += v;
        end
        @(negedge clk);
        if (j == n - 1) begin
          in_valid = 0;
          checks++;
          if (!out_valid || out_tag != 8'(run)) begin failures++; $display("valid/tag run %0d", run); end
          for (int k = 0; k < M; k++) begin
            int e;
            e = (sum[k] > 32767) ? 32767 : (sum[k] < -32768) ? -32768 : sum[k];
            if (e != sum[k]) n_sat++;
            checks++;
            if (int'(weights[k]) != e) begin failures++; $display("run %0d k %0d got %0d exp %0d", run, k, weights[k], e); end
          end
        end else begin
          checks++;
          if (out_valid) begin failures++; $display("early valid"); end
        end
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
