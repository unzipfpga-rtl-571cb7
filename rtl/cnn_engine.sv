// cnn_engine: the core CNN engine (Fig. 1) executing a CONV or FC layer as a
// blocked GEMM: an R x P activations matrix times a P x C weights matrix,
// tiled <T_R, T_P, T_C>. T_P is unrolled inside each PE (T_P multipliers),
// T_C across the PEs; the T_R rows of an activations tile are pipelined
// through the array, one row per PE per cycle, and the partial sums of the
// T_R x T_C output tile stay in the output buffer until all ceil(P/T_P)
// P-tiles have been accumulated (output-stationary dataflow).
//
// Contents: the double-buffered weights buffer (written by the weights
// generator), the double-buffered input buffer (written by the DMA, one row
// of T_P activations per cycle, with a row port per PE), the double-buffered
// output buffer (read by the DMA), the input-selective PE array and its
// controller. A tile waits in the buffers until both of its operands are
// present, so weight generation, input transfer, computation and output
// transfer overlap as the coarse pipeline of the paper's performance model.
// Interfaces are valid/ready style levels: in_wr_ready / out_ready tell the
// DMA side when a bank can be written / read, wb_full tells the generator
// which weights banks are occupied.
module cnn_engine
  import unzip_pkg::*;
#(
  parameter int unsigned T_R      = 64,
  parameter int unsigned T_P      = 16,
  parameter int unsigned T_C      = 48,
  parameter int unsigned M        = 128,
  parameter int unsigned AUG_FROM = 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  layer_cfg_t                      cfg,
  output logic                            busy,
  output logic                            done,
  output logic                            steal,
  // weights buffer write port (from the weights generator)
  input  logic                            wb_wr_en,
  input  logic                            wb_wr_bank,
  input  logic [$clog2(T_P*T_C/M+1)-1:0]  wb_wr_sub,
  input  logic                            wb_wr_tile_last,
  input  word_t                           wb_wr_data [M],
  output logic [1:0]                      wb_full,
  // input buffer write port (DMA)
  input  logic                            in_wr_en,
  input  logic [$clog2(T_R)-1:0]          in_wr_row,
  input  word_t                           in_wr_data [T_P],
  input  logic                            in_commit,
  output logic                            in_wr_ready,
  // output buffer read port (DMA)
  output logic                            out_ready,
  input  logic                            out_rd_en,
  input  logic [$clog2(T_R)-1:0]          out_row,
  input  logic [$clog2(T_C)-1:0]          out_col,
  output word_t                           out_data,
  input  logic                            out_release
);
  localparam int unsigned RW    = $clog2(T_R);
  localparam int unsigned CCW   = $clog2(T_C);
  localparam int unsigned TAG_W = RW + CCW;

  word_t w_col [T_C][T_P];
  word_t act   [T_C][T_P];
  logic  w_ready, w_release, in_ready, in_release, ob_wr_ready, ob_commit;
  logic  iss_valid [T_C];
  logic  iss_first;
  logic [RW-1:0]  iss_row [T_C];
  logic [CCW-1:0] iss_col [T_C];
  logic [TAG_W-1:0] iss_tag [T_C], res_tag [T_C];
  logic  chain_load, chain_shift;
  logic  cap [T_C], use_cap [T_C];
  logic  res_valid [T_C];
  acc_t  psum_in [T_C], psum_out [T_C];
  logic [RW-1:0]  ps_row [T_C];
  logic [CCW-1:0] ps_col [T_C];

  weights_buffer #(.T_P(T_P), .T_C(T_C), .M(M)) u_wbuf (
    .clk, .rst_n,
    .wr_en(wb_wr_en), .wr_bank(wb_wr_bank), .wr_sub(wb_wr_sub),
    .wr_tile_last(wb_wr_tile_last), .wr_data(wb_wr_data),
    .full(wb_full), .rd_release(w_release), .rd_ready(w_ready), .w_col
  );

  input_buffer #(.T_R(T_R), .T_P(T_P), .N_RD(T_C)) u_ibuf (
    .clk, .rst_n,
    .wr_en(in_wr_en), .wr_row(in_wr_row), .wr_data(in_wr_data),
    .wr_commit(in_commit), .wr_ready(in_wr_ready),
    .rd_ready(in_ready), .rd_release(in_release), .rd_row(iss_row), .rd_data(act)
  );

  engine_ctrl #(.T_R(T_R), .T_C(T_C), .AUG_FROM(AUG_FROM), .LAT(2)) u_ctrl (
    .clk, .rst_n, .start, .cfg,
    .w_ready, .in_ready, .out_wr_ready(ob_wr_ready),
    .w_release, .in_release, .out_commit(ob_commit),
    .iss_valid, .iss_first, .iss_row, .iss_col,
    .chain_load, .chain_shift, .cap, .use_cap,
    .busy, .done, .steal
  );

  for (genvar i = 0; i < T_C; i++) begin : g_tag
    assign iss_tag[i] = {iss_row[i], iss_col[i]};
    assign {ps_row[i], ps_col[i]} = res_tag[i];
  end

  pe_array #(.T_P(T_P), .T_C(T_C), .AUG_FROM(AUG_FROM), .TAG_W(TAG_W)) u_pes (
    .clk, .rst_n, .w_col, .act,
    .iss_valid, .iss_first, .iss_tag,
    .chain_load, .chain_shift, .cap, .use_cap,
    .res_valid, .res_tag, .psum_in, .psum_out
  );

  output_buffer #(.T_R(T_R), .T_C(T_C), .N_PORT(T_C)) u_obuf (
    .clk, .rst_n,
    .wr_ready(ob_wr_ready), .commit(ob_commit),
    .ps_row, .ps_col, .ps_data(psum_in),
    .wr_en(res_valid), .wr_data(psum_out),
    .out_ready, .out_rd_en, .out_row, .out_col,
    .shift(cfg.out_shift), .out_data, .out_release
  );
endmodule
