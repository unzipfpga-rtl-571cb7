// Self-checking testbench for wgen_mult_array: random basis bits and alphas;
// every element must equal +alpha or -alpha of the alpha lane of its K^2
// block (lane k / K^2 for M >= K^2), one cycle later, tag included. Filter
// sizes 16 and 4 are both exercised (M = 32, 8 lanes).
module tb_wgen_mult_array;
  import unzip_pkg::*;
  localparam int M = 32, NF = 8;
  localparam int unsigned L2 [2] = '{16, 4};
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [3:0] ksq_sel;
  logic in_valid = 0, out_valid;
  logic [7:0] in_tag, out_tag;
  logic [M-1:0] vec;
  word_t alpha [NF];
  logic signed [WL:0] incr [M];

  wgen_mult_array #(.M(M), .N_F(NF), .N_KS(2), .KSQ_LIST(L2), .TAG_W(8)) dut (.*);

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      logic [M-1:0] v; word_t a [NF]; int ks;
      @(negedge clk);
      ksq_sel = 4'(it % 2); ks = L2[ksq_sel];
      v = M'({$urandom, $urandom});
      for (int f = 0; f < NF; f++) a[f] = (it % 7 == 0) ? word_t'(16'h8000) : word_t'($urandom);
      vec = v; alpha = a; in_valid = 1; in_tag = 8'(it);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_tag != 8'(it)) begin failures++; $display("valid/tag"); end
      for (int k = 0; k < M; k++) begin
        int exp;
        exp = v[k] ? int'(a[k / ks]) : -int'(a[k / ks]);
        checks++;
        if (int'(incr[k]) != exp) begin failures++; $display("k=%0d got %0d exp %0d", k, incr[k], exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
