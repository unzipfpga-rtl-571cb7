// Self-checking testbench for pe: random activation/weight vectors issued
// back to back; two cycles later each result must be the dot product plus
// the partial sum presented on psum_in (or the bare dot product when the
// issue was flagged first), with the tag carried along.
module tb_pe;
  import unzip_pkg::*;
  localparam int TP = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_valid = 0, in_first = 0, out_valid;
  logic [11:0] in_tag, out_tag;
  word_t act [TP], w [TP];
  acc_t psum_in, psum_out;
  pe #(.T_P(TP), .TAG_W(12)) dut (.*);

  longint exp_q [$];
  logic   first_q [$];
  logic [11:0] tag_q [$];
  int latency_ok = 0;

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      // check the output produced by the issue two cycles ago
      if (out_valid) begin
        longint e; logic f;
        e = exp_q.pop_front(); f = first_q.pop_front();
        psum_in = acc_t'($urandom);
        #1;
        checks++;
        if (psum_out !== acc_t'(e + (f ? 0 : longint'(psum_in))) || out_tag !== tag_q.pop_front()) begin
          failures++; $display("it %0d got %0d exp %0d", it, psum_out, e);
        end
      end
      in_valid = ($urandom % 4 != 0);
      in_first = $urandom % 2;
      in_tag = 12'($urandom);
      if (in_valid) begin
        longint d;
        d = 0;
        for (int p = 0; p < TP; p++) begin
          act[p] = word_t'($urandom); w[p] = word_t'($urandom);
          if (it % 50 == 0) begin act[p] = word_t'(16'h8000); w[p] = word_t'(16'h8000); end
          d += longint'(act[p]) * longint'(w[p]);
        end
        exp_q.push_back(d); first_q.push_back(in_first); tag_q.push_back(in_tag);
      end
      // the result must not appear after one cycle only
      @(posedge clk); #1;
      if (in_valid) begin
        checks++;
        if (dut.out_valid && exp_q.size() == 1) begin failures++; $display("latency too short"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
