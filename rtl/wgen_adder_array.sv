// wgen_adder_array: the M-wide adder (accumulator) array of the weights
// generator (Alg. 1 line 7).
//
// Every valid cycle each element adds its increment to its accumulator; an
// increment flagged `first` restarts the accumulator (the CU's reset of the
// accumulators at a new subtile, done without a bubble). On the increment
// flagged `last` (the rho*K^2-th basis vector) the finished subtile is
// registered on `weights` with out_valid high for one cycle, together with the
// tag that came with that last increment. Accumulators are
// WL + 1 + log2(KSQ_MAX) bits; the finished weight is saturated to WL bits.
// Saturation is this design's choice: the paper gives no rounding rule.
module wgen_adder_array
  import unzip_pkg::*;
#(
  parameter int unsigned M       = 128,
  parameter int unsigned KSQ_MAX = 16,
  parameter int unsigned TAG_W   = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    first,
  input  logic                    last,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic signed [WL:0]      incr [M],
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output word_t                   weights [M]
);
  localparam int unsigned AW = WL + 1 + $clog2(KSQ_MAX);
  localparam logic signed [AW-1:0] WMAX = AW'((1 << (WL-1)) - 1);
  localparam logic signed [AW-1:0] WMIN = -AW'(1 << (WL-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid && last) out_tag <= in_tag;
    end
  end

  for (genvar k = 0; k < M; k++) begin : g_acc
    logic signed [AW-1:0] acc, nxt;
    assign nxt = (first ? '0 : acc) + AW'(incr[k]);
    always_ff @(posedge clk) begin
      if (in_valid) acc <= nxt;
      if (in_valid && last)
        weights[k] <= (nxt > WMAX) ? WMAX[WL-1:0] :
                      (nxt < WMIN) ? WMIN[WL-1:0] : nxt[WL-1:0];
    end
  end
endmodule
