// alpha_buffer: on-chip RAM holding the alpha coefficients (the learnt
// scalars of the OVSF linear combinations) of a layer.
//
// Organised, as the paper requires, with N_P = N_f parallel lanes so that the
// alphas of all N_f filters touched by one M-weight subtile are read in a
// single cycle: every word holds N_F alphas of WL bits. Depth follows Eq. (2):
// number of alphas divided by the number of lanes. The host stores the alphas
// in the order the generator consumes them (row tile, column tile, P tile,
// subtile, basis vector), so the read address simply counts up; that static
// layout is this design's choice. One write port (host/DMA side) and one
// read port with a registered output: rd_data is valid the cycle after rd_en.
// Default N_F = 8 is Eq. (1) with M = 128, T_P = 16, K_max^2 = 16. Default
// DEPTH = 262144 words holds one layer of 512x512 4x4-generated filters at
// rho = 0.5 (512*512*8 / 8), the largest OVSF50 layer of ResNet18/34.
module alpha_buffer
  import unzip_pkg::*;
#(
  parameter int unsigned N_F   = 8,
  parameter int unsigned DEPTH = 262144
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  logic [N_F*WL-1:0]         wr_data,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output word_t                     rd_data [N_F]
);
  logic [N_F*WL-1:0] mem [DEPTH];
  logic [N_F*WL-1:0] q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) q <= mem[rd_addr];
  end

  for (genvar f = 0; f < N_F; f++) begin : g_lane
    assign rd_data[f] = q[f*WL +: WL];
  end
endmodule
