// wgen_cu: control unit (CU in Fig. 3) of the weights generator. It runs the
// three pipelined loops of TiWGen (Alg. 1) for one layer:
//   for each output tile (row tile rt, column tile ct)
//     for each T_P x T_C weights tile (pt)         -- tiles loop
//       for each of the N_SUB = T_P*T_C/M subtiles -- subtiles loop
//         for each of the nb = rho*K^2 basis vectors -- basis vectors loop
// issuing one (basis vector, alpha word) pair per cycle. The weights of a
// layer are regenerated for every row tile, as the performance model of the
// paper assumes (t_CNN-WGen is counted per output tile).
//
// Per issued cycle the CU pops the OVSF generator (adv), reads the next alpha
// word (the address counts up from the layer's base and restarts at every row
// tile) and sends first/last flags plus a tag {bank, subtile, tile_last} down
// the datapath, one cycle behind, to line up with the registered alpha and
// basis-vector outputs. Before the first issue of a tile it waits until the
// target bank of the double-buffered weights buffer is empty and not still
// being filled (back-pressure from the CNN engine). A layer starts with a
// pulse on start: the OVSF FIFO is first loaded (nb cycles), then tiles are
// issued back to back, so a tile takes exactly N_SUB*nb cycles when the
// engine keeps up; done pulses once the last weights have left the datapath.
// Only the descriptor fields the generator needs (nb, tile counts,
// alpha_base) are read; the engine-only fields of the shared layer_cfg_t
// (rows_last, cols_last, bal_en, out_shift) are left unused here on purpose.
module wgen_cu
  import unzip_pkg::*;
#(
  parameter int unsigned N_SUB   = 6,
  parameter int unsigned A_DEPTH = 262144
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  layer_cfg_t                 cfg,
  // OVSF generator
  output logic                       gen_load,
  input  logic                       gen_busy,
  output logic                       gen_adv,
  // alpha buffer
  output logic                       a_rd_en,
  output logic [$clog2(A_DEPTH)-1:0] a_rd_addr,
  // datapath control, aligned with alpha/basis-vector data
  output logic                       d_valid,
  output logic                       d_first,
  output logic                       d_last,
  output logic                       d_bank,
  output logic [$clog2(N_SUB+1)-1:0] d_sub,
  output logic                       d_tile_last,
  // weights buffer state
  input  logic [1:0]                 wb_full,
  output logic                       busy,
  output logic                       done
);
  localparam int unsigned SW = $clog2(N_SUB + 1);
  localparam int unsigned AAW = $clog2(A_DEPTH);

  typedef enum logic [2:0] {S_IDLE, S_LOAD0, S_LOAD, S_RUN, S_DRAIN} state_t;
  state_t state;

  logic [CW-1:0] rt, ct, pt, j;
  logic [SW-1:0] sub;
  logic          bank;
  logic [1:0]    inflight;
  logic [2:0]    drain;
  layer_cfg_t    c;

  wire at_tile_start = (sub == '0) && (j == '0);
  wire bank_ok       = !wb_full[bank] && !inflight[bank];
  wire issue         = (state == S_RUN) && (!at_tile_start || bank_ok);
  wire last_j        = (j == c.nb - 1'b1);
  wire last_sub      = (sub == SW'(N_SUB - 1));
  wire last_pt       = (pt == c.n_pt - 1'b1);
  wire last_ct       = (ct == c.n_ct - 1'b1);
  wire last_rt       = (rt == c.n_rt - 1'b1);
  wire tile_end      = last_j && last_sub;

  assign gen_adv  = issue;
  assign a_rd_en  = issue;
  assign gen_load = (state == S_LOAD0);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      {rt, ct, pt, j} <= '0;
      sub       <= '0;
      bank      <= 1'b0;
      inflight  <= '0;
      a_rd_addr <= '0;
      drain     <= '0;
      done      <= 1'b0;
      c         <= '0;
      d_valid   <= 1'b0;
      d_first   <= 1'b0;
      d_last    <= 1'b0;
      d_bank    <= 1'b0;
      d_sub     <= '0;
      d_tile_last <= 1'b0;
    end else begin
      done    <= 1'b0;
      d_valid <= issue;
      if (issue) begin
        d_first     <= (j == '0);
        d_last      <= last_j;
        d_bank      <= bank;
        d_sub       <= sub;
        d_tile_last <= tile_end;
      end
      for (int b = 0; b < 2; b++)
        if (wb_full[b]) inflight[b] <= 1'b0;

      case (state)
        S_IDLE: if (start) begin
          c         <= cfg;
          state     <= S_LOAD0;
          {rt, ct, pt, j} <= '0;
          sub       <= '0;
          a_rd_addr <= AAW'(cfg.alpha_base);
        end
        S_LOAD0: state <= S_LOAD;
        S_LOAD:  if (!gen_busy) state <= S_RUN;
        S_RUN: if (issue) begin
          a_rd_addr <= a_rd_addr + 1'b1;
          j <= j + 1'b1;
          if (last_j) begin
            j   <= '0;
            sub <= sub + 1'b1;
            if (last_sub) begin
              sub <= '0;
              inflight[bank] <= 1'b1;
              bank <= ~bank;
              pt <= pt + 1'b1;
              if (last_pt) begin
                pt <= '0;
                ct <= ct + 1'b1;
                if (last_ct) begin
                  ct <= '0;
                  rt <= rt + 1'b1;
                  a_rd_addr <= AAW'(c.alpha_base);
                  if (last_rt) begin
                    state <= S_DRAIN;
                    drain <= '0;
                  end
                end
              end
            end
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd4) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
