// unzipfpga_top: the accelerator of Fig. 1 -- the CNN hardware weights
// generator (CNN-WGen) feeding a GEMM CNN engine of input-selective PEs, with
// double-buffered input, weights and output buffers. Only the alpha
// coefficients of a layer live in on-chip memory; the dense weights are
// generated on chip, tile by tile, from alphas and binary OVSF basis vectors,
// so off-chip traffic during a layer is reduced to activations.
//
// The DMA engine, the off-chip memory and the host processor are outside
// this module; their buffer-side signals are its ports:
//   * cfg + start: the layer descriptor written by the host (hold cfg stable
//     while busy); done pulses when both the generator and the engine have
//     finished the layer.
//   * a_wr_*: loading the alpha buffer (before the layer starts).
//   * in_*: one T_P-activation row per cycle into the input buffer bank
//     that in_wr_ready reports free; in_commit hands the tile to the engine.
//     Tiles must arrive in the engine's order: for each row tile, for each
//     column tile, for each P-tile.
//   * out_*: when out_ready is high an output tile can be read, one element
//     per cycle with one cycle of read latency; out_release frees it.
// Parameter defaults: T_P = 16, T_C = 48 and M = 128 give
// M + T_P*T_C = 896 multipliers, within the 900 DSPs of the Z7045 used in the
// paper's evaluation (16-bit, one DSP per MAC); T_R = 64. The paper's DSE
// picks these per CNN-FPGA pair and does not list them, so these are this
// design's choice. Supported filter sizes: K^2 = 16 (3x3 layers are run as
// 4x4 filters whose extra taps multiply zero activations).
module unzipfpga_top
  import unzip_pkg::*;
#(
  parameter int unsigned T_R      = 64,
  parameter int unsigned T_P      = 16,
  parameter int unsigned T_C      = 48,
  parameter int unsigned M        = 128,
  parameter int unsigned KSQ_MAX  = 16,
  parameter int unsigned N_KS     = 1,
  parameter int unsigned KSQ_LIST [N_KS] = '{16},
  parameter int unsigned N_F      = 8,
  parameter int unsigned A_DEPTH  = 262144,
  parameter int unsigned AUG_FROM = 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  layer_cfg_t                      cfg,
  output logic                            busy,
  output logic                            done,
  output logic                            steal,
  output logic                            wgen_stall,
  // alpha buffer load
  input  logic                            a_wr_en,
  input  logic [$clog2(A_DEPTH)-1:0]      a_wr_addr,
  input  logic [N_F*WL-1:0]               a_wr_data,
  // activations in
  input  logic                            in_wr_en,
  input  logic [$clog2(T_R)-1:0]          in_wr_row,
  input  word_t                           in_wr_data [T_P],
  input  logic                            in_commit,
  output logic                            in_wr_ready,
  // activations out
  output logic                            out_ready,
  input  logic                            out_rd_en,
  input  logic [$clog2(T_R)-1:0]          out_row,
  input  logic [$clog2(T_C)-1:0]          out_col,
  output word_t                           out_data,
  input  logic                            out_release
);
  localparam int unsigned SW = $clog2(T_P*T_C/M + 1);

  logic            wb_wr_en, wb_wr_bank, wb_wr_tile_last;
  logic [SW-1:0]   wb_wr_sub;
  word_t           wb_wr_data [M];
  logic [1:0]      wb_full;
  logic            g_busy, g_done, e_busy, e_done, g_fin, e_fin;

  cnn_wgen #(.M(M), .T_P(T_P), .T_C(T_C), .KSQ_MAX(KSQ_MAX), .N_KS(N_KS),
             .KSQ_LIST(KSQ_LIST), .N_F(N_F), .A_DEPTH(A_DEPTH)) u_wgen (
    .clk, .rst_n, .start, .cfg, .busy(g_busy), .done(g_done),
    .a_wr_en, .a_wr_addr, .a_wr_data,
    .wb_wr_en, .wb_wr_bank, .wb_wr_sub, .wb_wr_tile_last, .wb_wr_data, .wb_full
  );

  cnn_engine #(.T_R(T_R), .T_P(T_P), .T_C(T_C), .M(M), .AUG_FROM(AUG_FROM)) u_eng (
    .clk, .rst_n, .start, .cfg, .busy(e_busy), .done(e_done), .steal,
    .wb_wr_en, .wb_wr_bank, .wb_wr_sub, .wb_wr_tile_last, .wb_wr_data, .wb_full,
    .in_wr_en, .in_wr_row, .in_wr_data, .in_commit, .in_wr_ready,
    .out_ready, .out_rd_en, .out_row, .out_col, .out_data, .out_release
  );

  // layer completion: both halves have reported done
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_fin <= 1'b0; e_fin <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        g_fin <= 1'b0; e_fin <= 1'b0;
      end else begin
        if (g_done) g_fin <= 1'b1;
        if (e_done) e_fin <= 1'b1;
        if ((g_fin || g_done) && (e_fin || e_done)) begin
          done <= 1'b1; g_fin <= 1'b0; e_fin <= 1'b0;
        end
      end
    end
  end

  assign busy = g_busy || e_busy;
  // the generator is held back because both weights banks are occupied
  assign wgen_stall = g_busy && (wb_full == 2'b11);
endmodule
