// output_buffer: the double-buffered T_R x T_C output tile (Fig. 1), which
// also caches the partial sums of the output-stationary dataflow.
//
// Engine side: N_PORT read-modify-write ports, one per PE. Port i reads the
// partial sum at (ps_row[i], ps_col[i]) of bank wr_bank combinationally and
// writes wr_data[i] back at the same place when wr_en[i] is high; the engine
// guarantees that ports never write the same entry in one cycle. The engine
// commits the bank when the output tile is complete. DMA side: out_rd_en
// reads (out_row, out_col) of bank rd_bank; one cycle later out_data holds the
// partial sum shifted right arithmetically by `shift` and saturated to WL
// bits. out_release frees the bank. The re-quantisation on read is this
// design's choice: the paper only says outputs leave with wordlength WL.
module output_buffer
  import unzip_pkg::*;
#(
  parameter int unsigned T_R    = 64,
  parameter int unsigned T_C    = 48,
  parameter int unsigned N_PORT = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // engine side
  output logic                    wr_ready,
  input  logic                    commit,
  input  logic [$clog2(T_R)-1:0]  ps_row [N_PORT],
  input  logic [$clog2(T_C)-1:0]  ps_col [N_PORT],
  output acc_t                    ps_data [N_PORT],
  input  logic                    wr_en [N_PORT],
  input  acc_t                    wr_data [N_PORT],
  // DMA side
  output logic                    out_ready,
  input  logic                    out_rd_en,
  input  logic [$clog2(T_R)-1:0]  out_row,
  input  logic [$clog2(T_C)-1:0]  out_col,
  input  logic [4:0]              shift,
  output word_t                   out_data,
  input  logic                    out_release
);
  acc_t mem [2][T_R][T_C];
  logic wr_bank, rd_bank;
  logic [1:0] full;

  pingpong_ctrl u_pp (
    .clk, .rst_n, .commit, .release_bank(out_release),
    .wr_bank, .rd_bank, .full
  );

  assign wr_ready  = !full[wr_bank];
  assign out_ready = full[rd_bank];

  for (genvar i = 0; i < N_PORT; i++) begin : g_ps
    assign ps_data[i] = mem[wr_bank][ps_row[i]][ps_col[i]];
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_PORT; i++)
      if (wr_en[i]) mem[wr_bank][ps_row[i]][ps_col[i]] <= wr_data[i];
  end

  localparam acc_t OMAX = acc_t'((1 <<< (WL-1)) - 1);
  localparam acc_t OMIN = -acc_t'(1 <<< (WL-1));
  acc_t shifted;
  assign shifted = mem[rd_bank][out_row][out_col] >>> shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_data <= '0;
    else if (out_rd_en)
      out_data <= (shifted > OMAX) ? OMAX[WL-1:0] :
                  (shifted < OMIN) ? OMIN[WL-1:0] : shifted[WL-1:0];
  end
endmodule
