// Self-checking testbench for ovsf_generator. The reference OVSF codes are
// built here by the tree recursion (C_2L[2i] = C_L[i] C_L[i],
// C_2L[2i+1] = C_L[i] -C_L[i]), independently of the package function. For
// each configuration the generator is loaded with nb codes and popped for
// several subtiles; the slice for subtile i and basis vector j must equal
// element (i*M + k) mod K^2 of code j, for k = 0..M-1. The codes are also
// checked to be mutually orthogonal. Two instances cover M > K^2 (M = 24)
// and M < K^2 (M = 8), each with filter sizes 16 and 4.
module tb_ovsf_generator;
  import unzip_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int unsigned L2 [2] = '{16, 4};
  logic [3:0] sel;
  logic [CW-1:0] nb;
  logic load = 0, adv = 0;
  logic busy_a, busy_b, val_a, val_b;
  logic [23:0] out_a;
  logic [7:0]  out_b;

  ovsf_generator #(.M(24), .KSQ_MAX(16), .N_KS(2), .KSQ_LIST(L2)) ga (
    .clk, .rst_n, .ksq_sel(sel), .nb, .load, .busy(busy_a), .adv, .vec_out(out_a), .vec_valid(val_a));
  ovsf_generator #(.M(8), .KSQ_MAX(16), .N_KS(2), .KSQ_LIST(L2)) gb (
    .clk, .rst_n, .ksq_sel(sel), .nb, .load, .busy(busy_b), .adv, .vec_out(out_b), .vec_valid(val_b));

  int code [16][16];   // code[idx][element] in {+1,-1} for the current length
  task automatic build(input int L);
    int c [16][16];
    c[0][0] = 1;
    for (int len = 1; len < L; len *= 2) begin
      int n [16][16];
      for (int i = 0; i < len; i++)
        for (int e = 0; e < len; e++) begin
          n[2*i][e] = c[i][e];     n[2*i][len+e]   =  c[i][e];
          n[2*i+1][e] = c[i][e];   n[2*i+1][len+e] = -c[i][e];
        end
      c = n;
    end
    code = c;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cfgi = 0; cfgi < 4; cfgi++) begin
      int L, nbv;
      sel = 4'(cfgi % 2);
      L   = L2[sel];
      nbv = (cfgi < 2) ? L : (L / 2);
      nb  = CW'(nbv);
      build(L);
      // orthogonality of the reference set
      for (int a = 0; a < L; a++) for (int b = 0; b < L; b++) begin
        int dot;
        dot = 0;
        for (int e = 0; e < L; e++) dot += code[a][e] * code[b][e];
        checks++;
        if (dot != ((a == b) ? L : 0)) failures++;
      end
      @(negedge clk); load = 1; @(negedge clk); load = 0;
      while (busy_a) @(negedge clk);
      for (int i = 0; i < 5; i++)
        for (int j = 0; j < nbv; j++) begin
          adv = 1;
          @(negedge clk);
          adv = 0;
          checks += 2;
          if (!val_a || !val_b) begin failures++; $display("no valid"); end
          for (int k = 0; k < 24; k++)
            if (out_a[k] !== (code[j][(i*24 + k) % L] == 1)) begin
              failures++; $display("M=24 L=%0d i=%0d j=%0d k=%0d", L, i, j, k); break;
            end
          for (int k = 0; k < 8; k++)
            if (out_b[k] !== (code[j][(i*8 + k) % L] == 1)) begin
              failures++; $display("M=8 L=%0d i=%0d j=%0d k=%0d", L, i, j, k); break;
            end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
