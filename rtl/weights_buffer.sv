// weights_buffer: the double-buffered T_P x T_C weights tile between the
// weights generator and the PE array (Fig. 4, "Weights Buffer").
//
// The generator writes one M-weight subtile per write, at flat offset sub*M
// of the bank it names; flat index e = c*T_P + p, i.e. the tile is filled
// column after column as in Fig. 2. A write flagged tile_last commits the
// bank. The engine reads the bank rd_bank as T_C column vectors of T_P
// weights (one per PE, combinational) and releases it when done, so the
// generation of the next tile overlaps the processing of the current one.
// Double buffering and the flat write layout are this design's choices; the
// paper names the buffer and says the generator writes it.
module weights_buffer
  import unzip_pkg::*;
#(
  parameter int unsigned T_P = 16,
  parameter int unsigned T_C = 48,
  parameter int unsigned M   = 128
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             wr_en,
  input  logic                             wr_bank,
  input  logic [$clog2(T_P*T_C/M+1)-1:0]   wr_sub,
  input  logic                             wr_tile_last,
  input  word_t                            wr_data [M],
  output logic [1:0]                       full,
  input  logic                             rd_release,
  output logic                             rd_ready,
  output word_t                            w_col [T_C][T_P]
);
  localparam int unsigned N = T_P * T_C;

  word_t mem [2][N];
  logic  wr_ptr_unused, rd_bank;

  pingpong_ctrl u_pp (
    .clk, .rst_n,
    .commit(wr_en && wr_tile_last), .release_bank(rd_release),
    .wr_bank(wr_ptr_unused), .rd_bank, .full
  );

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int k = 0; k < M; k++)
        mem[wr_bank][int'(wr_sub) * M + k] <= wr_data[k];
  end

  assign rd_ready = full[rd_bank];

  for (genvar c = 0; c < T_C; c++) begin : g_c
    for (genvar p = 0; p < T_P; p++) begin : g_p
      assign w_col[c][p] = mem[rd_bank][c*T_P + p];
    end
  end

  // the generator fills the banks in the same alternating order
  a_bank_order: assert property (@(posedge clk) disable iff (!rst_n)
                                 (wr_en && wr_tile_last) |-> (wr_bank == wr_ptr_unused))
    else $error("weights_buffer: tile committed out of bank order");
endmodule
