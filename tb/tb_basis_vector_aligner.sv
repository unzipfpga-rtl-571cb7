// Self-checking testbench for basis_vector_aligner: for several subtile sizes
// M and filter sizes K^2 the rotated vector must satisfy
// out[b] = in[(b + M) mod K^2] and be zero above K^2.
module tb_basis_vector_aligner;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int unsigned L3 [3] = '{16, 4, 1};
  logic [3:0]  sel;
  logic [15:0] vin;
  logic [15:0] o6, o128, o3;
  basis_vector_aligner #(.M(6),   .KSQ_MAX(16), .N_KS(3), .KSQ_LIST(L3)) d6   (.ksq_sel(sel), .vec_in(vin), .vec_out(o6));
  basis_vector_aligner #(.M(128), .KSQ_MAX(16), .N_KS(3), .KSQ_LIST(L3)) d128 (.ksq_sel(sel), .vec_in(vin), .vec_out(o128));
  basis_vector_aligner #(.M(3),   .KSQ_MAX(16), .N_KS(3), .KSQ_LIST(L3)) d3   (.ksq_sel(sel), .vec_in(vin), .vec_out(o3));

  function automatic logic [15:0] model(input logic [15:0] v, input int m, input int ksq);
    logic [15:0] r = '0;
    for (int b = 0; b < ksq; b++) r[b] = v[(b + m) % ksq];
    return r;
  endfunction

  initial begin
    for (int it = 0; it < 300; it++) begin
      sel = 4'(it % 3);
      vin = 16'($urandom);
      vin = vin & 16'((1 << L3[sel]) - 1);
      #1;
      checks += 3;
      if (o6   !== model(vin, 6,   L3[sel])) begin failures++; $display("M=6 ksq=%0d in=%h out=%h", L3[sel], vin, o6); end
      if (o128 !== model(vin, 128, L3[sel])) begin failures++; $display("M=128 ksq=%0d in=%h out=%h", L3[sel], vin, o128); end
      if (o3   !== model(vin, 3,   L3[sel])) begin failures++; $display("M=3 ksq=%0d in=%h out=%h", L3[sel], vin, o3); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
