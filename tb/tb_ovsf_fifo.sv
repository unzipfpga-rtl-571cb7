// Self-checking testbench for ovsf_fifo: random push/pop traffic (including
// simultaneous push and pop while full) compared against a queue model.
module tb_ovsf_fifo;
  localparam int W = 16, D = 16;
  logic clk = 0, rst_n = 0, clr = 0, push = 0, pop = 0;
  logic [W-1:0] din, dout;
  logic empty, full;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  ovsf_fifo #(.W(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // compare head and flags with the model before acting
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == D) || count != q.size()) begin
        failures++; $display("flag mismatch size=%0d count=%0d", q.size(), count);
      end
      if (q.size() > 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("head %h exp %h", dout, q[0]); end
      end
      pop  = ($urandom % 3 != 0) && q.size() > 0;
      push = ($urandom % 2 == 0) && (q.size() < D || pop);
      if (it > 1000 && it < 1300) begin push = (q.size() < D) || pop; end
      din  = W'($urandom);
      clr  = (it == 2500);
      @(posedge clk); #1;
      if (clr) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
      push = 0; pop = 0; clr = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
