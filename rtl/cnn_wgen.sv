// cnn_wgen: the CNN hardware weights generator (CNN-WGen, Fig. 3). It turns
// the compact per-layer representation -- alpha coefficients in the alpha
// buffer and binary OVSF basis vectors -- into the dense T_P x T_C weights
// tiles the CNN engine consumes, one M-weight subtile every nb = rho*K^2
// cycles, i.e. a whole tile every (T_P*T_C/M) * nb cycles (Fig. 2, Eq. (3)).
//
// Pipeline: the CU issues one basis vector per cycle (cycle 0); the OVSF
// generator's top register and the alpha buffer's registered read deliver
// the M-bit basis slice and the N_F alphas (cycle 1); the multiplier array
// forms +-alpha (cycle 2); the adder array accumulates and, on the last basis
// vector of a subtile, registers the M finished weights (cycle 3), which are
// written to the weights buffer at subtile offset sub*M of the bank chosen
// by the CU. Generated filters are K^2-element blocks laid out down the
// columns of the weights matrix (row p = channel*K^2 + position), which needs
// T_P to be a multiple of K^2 and M to be a multiple or a divisor of K^2.
// Host side: a write port into the alpha buffer. Engine side: the weights
// buffer write port and its two bank-full flags.
module cnn_wgen
  import unzip_pkg::*;
#(
  parameter int unsigned M        = 128,
  parameter int unsigned T_P      = 16,
  parameter int unsigned T_C      = 48,
  parameter int unsigned KSQ_MAX  = 16,
  parameter int unsigned N_KS     = 1,
  parameter int unsigned KSQ_LIST [N_KS] = '{16},
  parameter int unsigned N_F      = M / KSQ_MIN_OF(KSQ_LIST),
  parameter int unsigned A_DEPTH  = 262144
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  layer_cfg_t                  cfg,
  output logic                        busy,
  output logic                        done,
  // alpha buffer write port (host / DMA)
  input  logic                        a_wr_en,
  input  logic [$clog2(A_DEPTH)-1:0]  a_wr_addr,
  input  logic [N_F*WL-1:0]           a_wr_data,
  // weights buffer write port
  output logic                        wb_wr_en,
  output logic                        wb_wr_bank,
  output logic [$clog2(T_P*T_C/M+1)-1:0] wb_wr_sub,
  output logic                        wb_wr_tile_last,
  output word_t                       wb_wr_data [M],
  input  logic [1:0]                  wb_full
);
  function automatic int unsigned KSQ_MIN_OF(input int unsigned l [N_KS]);
    int unsigned mn = l[0];
    for (int i = 1; i < N_KS; i++) if (l[i] < mn) mn = l[i];
    return mn;
  endfunction

  localparam int unsigned N_SUB = T_P * T_C / M;
  localparam int unsigned SW    = $clog2(N_SUB + 1);
  localparam int unsigned TW    = 1 + SW + 1;      // {bank, sub, tile_last}

  logic                       gen_load, gen_busy, gen_adv;
  logic                       a_rd_en;
  logic [$clog2(A_DEPTH)-1:0] a_rd_addr;
  logic                       d_valid, d_first, d_last, d_bank, d_tile_last;
  logic [SW-1:0]              d_sub;
  logic [M-1:0]               vec;
  logic                       vec_valid;
  word_t                      alpha [N_F];

  wgen_cu #(.N_SUB(N_SUB), .A_DEPTH(A_DEPTH)) u_cu (
    .clk, .rst_n, .start, .cfg,
    .gen_load, .gen_busy, .gen_adv,
    .a_rd_en, .a_rd_addr,
    .d_valid, .d_first, .d_last, .d_bank, .d_sub, .d_tile_last,
    .wb_full, .busy, .done
  );

  ovsf_generator #(.M(M), .KSQ_MAX(KSQ_MAX), .N_KS(N_KS), .KSQ_LIST(KSQ_LIST)) u_ovsf (
    .clk, .rst_n, .ksq_sel(cfg.ksq_sel), .nb(cfg.nb),
    .load(gen_load), .busy(gen_busy), .adv(gen_adv),
    .vec_out(vec), .vec_valid
  );

  alpha_buffer #(.N_F(N_F), .DEPTH(A_DEPTH)) u_alpha (
    .clk, .wr_en(a_wr_en), .wr_addr(a_wr_addr), .wr_data(a_wr_data),
    .rd_en(a_rd_en), .rd_addr(a_rd_addr), .rd_data(alpha)
  );

  logic                 m_valid;
  logic [TW+1:0]        m_tag;
  logic signed [WL:0]   incr [M];

  wgen_mult_array #(.M(M), .N_F(N_F), .N_KS(N_KS), .KSQ_LIST(KSQ_LIST), .TAG_W(TW+2)) u_mul (
    .clk, .rst_n, .ksq_sel(cfg.ksq_sel),
    .in_valid(d_valid), .in_tag({d_first, d_last, d_bank, d_sub, d_tile_last}),
    .vec, .alpha,
    .out_valid(m_valid), .out_tag(m_tag), .incr
  );

  logic [TW-1:0] s_tag;

  wgen_adder_array #(.M(M), .KSQ_MAX(KSQ_MAX), .TAG_W(TW)) u_add (
    .clk, .rst_n,
    .in_valid(m_valid), .first(m_tag[TW+1]), .last(m_tag[TW]), .in_tag(m_tag[TW-1:0]),
    .incr,
    .out_valid(wb_wr_en), .out_tag(s_tag), .weights(wb_wr_data)
  );

  assign {wb_wr_bank, wb_wr_sub, wb_wr_tile_last} = s_tag;

  // the basis-vector slice and the CU's control word must arrive together
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n) d_valid == vec_valid)
    else $error("cnn_wgen: basis vector and control out of step");
endmodule
