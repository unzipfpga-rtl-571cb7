// pe: a processing element of the CNN engine (Fig. 1 and Fig. 4): T_P
// multipliers, an adder tree and a final adder that adds the dot product to
// the running partial sum of its output element.
//
// Timing: operands are sampled when in_valid is high; the products are
// registered (stage 1) and the adder-tree sum is registered (stage 2), so
// out_valid and out_tag follow in_valid by two cycles. The final adder is
// combinational on the output side: psum_out = (first ? 0 : psum_in) + dot,
// where psum_in is the partial sum read from the output buffer for the
// element named by out_tag, and psum_out is written back there in the same
// cycle. The feedback loop drawn around the last adder in Fig. 1 is thus
// closed through the output buffer, which caches the partial sums of all
// T_R rows (output-stationary dataflow). Register placement is this design's
// choice. Operands are WL-bit signed; products and sums are ACC_W bits and
// wrap on overflow.
module pe
  import unzip_pkg::*;
#(
  parameter int unsigned T_P   = 16,
  parameter int unsigned TAG_W = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               in_first,
  input  logic [TAG_W-1:0]   in_tag,
  input  word_t              act [T_P],
  input  word_t              w   [T_P],
  output logic               out_valid,
  output logic [TAG_W-1:0]   out_tag,
  input  acc_t               psum_in,
  output acc_t               psum_out
);
  acc_t              prod [T_P];
  acc_t              dot;
  logic              v1, f1, f2;
  logic [TAG_W-1:0]  t1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; out_valid <= 1'b0;
      f1 <= 1'b0; f2 <= 1'b0;
      t1 <= '0;   out_tag <= '0;
    end else begin
      v1 <= in_valid;      out_valid <= v1;
      f1 <= in_first;      f2 <= f1;
      t1 <= in_tag;        out_tag <= t1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int p = 0; p < T_P; p++) prod[p] <= acc_t'(act[p]) * acc_t'(w[p]);
  end

  // adder tree (written as a sum; synthesis builds the tree)
  acc_t tree;
  always_comb begin
    tree = '0;
    for (int p = 0; p < T_P; p++) tree = tree + prod[p];
  end

  always_ff @(posedge clk) begin
    if (v1) dot <= tree;
  end

  assign psum_out = (f2 ? acc_t'(0) : psum_in) + dot;
endmodule
