// wgen_mult_array: the M-wide multiplier array of the weights generator
// (Alg. 1 line 6: incr_k = vec_j(k) * alpha_k).
//
// Each element k receives one basis-vector bit (1 = +1, 0 = -1) and the alpha
// of the K^2-element filter block it falls in. Because the subtile size M and
// T_P are multiples of (or divide) K^2, element k belongs to block
// floor(k / K^2) of the subtile when M >= K^2, and to block 0 when M < K^2;
// the alpha lane is chosen with fixed wiring per supported K^2 (ksq_sel).
// Multiplying by +-1 is a conditional negation, one cycle, registered; the
// result is WL+1 bits wide so that -(-2^(WL-1)) does not overflow. A
// sideband tag travels with the data. The lane wiring is this design's
// choice; the paper only states that the array is M wide.
module wgen_mult_array
  import unzip_pkg::*;
#(
  parameter int unsigned M        = 128,
  parameter int unsigned N_F      = 8,
  parameter int unsigned N_KS     = 1,
  parameter int unsigned KSQ_LIST [N_KS] = '{16},
  parameter int unsigned TAG_W    = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [3:0]              ksq_sel,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic [M-1:0]            vec,
  input  word_t                   alpha [N_F],
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output logic signed [WL:0]      incr [M]
);
  // alpha seen by each element, one wiring per filter size
  word_t a_sel [N_KS][M];
  for (genvar s = 0; s < N_KS; s++) begin : g_opt
    for (genvar k = 0; k < M; k++) begin : g_k
      localparam int unsigned LANE = (M >= KSQ_LIST[s]) ? k / KSQ_LIST[s] : 0;
      assign a_sel[s][k] = alpha[LANE];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
    end
  end

  for (genvar k = 0; k < M; k++) begin : g_mul
    logic signed [WL:0] a;
    always_comb begin
      a = (WL+1)'(a_sel[0][k]);
      for (int s = 0; s < N_KS; s++)
        if (ksq_sel == 4'(s)) a = (WL+1)'(a_sel[s][k]);
    end
    always_ff @(posedge clk) begin
      if (in_valid) incr[k] <= vec[k] ? a : -a;
    end
  end
endmodule
