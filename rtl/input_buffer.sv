// input_buffer: the double-buffered T_R x T_P activations tile (Fig. 1).
//
// The DMA side writes one row of T_P activations per cycle into bank
// wr_bank and commits the bank when the tile is complete (wr_ready says the
// bank is free). The engine side reads bank rd_bank through N_RD independent
// row ports, combinational, and releases the bank when it has finished with
// the tile. The N_RD > 1 row ports are the reorganisation the paper asks for
// so that PEs that steal work can process different rows in the same cycle;
// one port per PE (N_RD = T_C) is this design's choice.
module input_buffer
  import unzip_pkg::*;
#(
  parameter int unsigned T_R  = 64,
  parameter int unsigned T_P  = 16,
  parameter int unsigned N_RD = 48
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // DMA side
  input  logic                      wr_en,
  input  logic [$clog2(T_R)-1:0]    wr_row,
  input  word_t                     wr_data [T_P],
  input  logic                      wr_commit,
  output logic                      wr_ready,
  // engine side
  output logic                      rd_ready,
  input  logic                      rd_release,
  input  logic [$clog2(T_R)-1:0]    rd_row [N_RD],
  output word_t                     rd_data [N_RD][T_P]
);
  word_t mem [2][T_R][T_P];
  logic  wr_bank, rd_bank;
  logic [1:0] full;

  pingpong_ctrl u_pp (
    .clk, .rst_n, .commit(wr_commit), .release_bank(rd_release),
    .wr_bank, .rd_bank, .full
  );

  assign wr_ready = !full[wr_bank];
  assign rd_ready = full[rd_bank];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_row] <= wr_data;
  end

  for (genvar i = 0; i < N_RD; i++) begin : g_rd
    assign rd_data[i] = mem[rd_bank][rd_row[i]];
  end

  a_wr_free: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> wr_ready)
    else $error("input_buffer: write into a full bank");
endmodule
