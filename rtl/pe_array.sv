// pe_array: the input-selective PE array (Fig. 4). T_C PEs, PE c normally
// computing output column c of the tile with weight column c of the weights
// buffer. Every PE but the first has
//   * a forwarding register R, loaded from its own weight column and then
//     shifted from its upper neighbour (R of PE c-1, or the weight column of
//     PE 0): after s shifts R of PE c holds weight column c-s, so a weight
//     vector walks down the array one PE per cycle over neighbour-only wires.
// The PEs from index AUG_FROM upward, the ones that some layer leaves idle,
// are further equipped with
//   * a capture register that keeps the vector passing through R when the
//     controller says so (cap);
//   * a switch (two-input multiplexer) in front of the dot-product unit that
//     takes either the PE's own weight column or the captured one (use_cap).
// An idle PE of a narrow layer thereby obtains the weights of a busy column
// and, with rows handed to it by the controller, steals part of that
// column's T_R rows. The R register and the switch are from Fig. 4; loading
// R in parallel and shifting it, and the separate capture register, are this
// design's reading of the figure (the paper does not detail the timing).
// The dot-product units (pe) are unchanged. Per-PE issue ports carry the
// activation row (read by the caller from the input buffer), first flag and
// a tag; results appear two cycles later on res_valid/res_tag with the
// partial-sum read/modify port of each PE.
module pe_array
  import unzip_pkg::*;
#(
  parameter int unsigned T_P      = 16,
  parameter int unsigned T_C      = 48,
  parameter int unsigned AUG_FROM = 1,
  parameter int unsigned TAG_W    = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  word_t              w_col   [T_C][T_P],
  input  word_t              act     [T_C][T_P],
  input  logic               iss_valid [T_C],
  input  logic               iss_first,
  input  logic [TAG_W-1:0]   iss_tag [T_C],
  input  logic               chain_load,
  input  logic               chain_shift,
  input  logic               cap     [T_C],
  input  logic               use_cap [T_C],
  output logic               res_valid [T_C],
  output logic [TAG_W-1:0]   res_tag [T_C],
  input  acc_t               psum_in [T_C],
  output acc_t               psum_out [T_C]
);
  word_t r_fwd [T_C][T_P];   // forwarding registers R
  word_t w_cap [T_C][T_P];   // captured weights
  word_t w_pe  [T_C][T_P];   // weights at each PE's dot-product unit

  for (genvar c = 0; c < T_C; c++) begin : g_pe
    // R: forwarding register, present in every PE but the first
    if (c > 0) begin : g_fwd
      always_ff @(posedge clk) begin
        if (chain_load)       r_fwd[c] <= w_col[c];
        else if (chain_shift) r_fwd[c] <= (c > 1) ? r_fwd[c-1] : w_col[0];
      end
    end else begin : g_nofwd
      assign r_fwd[c] = w_col[c];
    end
    // capture register and switch: only the PEs that can be idle
    if (c >= AUG_FROM && c > 0) begin : g_aug
      always_ff @(posedge clk) begin
        if (cap[c]) w_cap[c] <= r_fwd[c];
      end
      assign w_pe[c] = use_cap[c] ? w_cap[c] : w_col[c];
    end else begin : g_plain
      assign w_cap[c] = w_col[c];
      assign w_pe[c]  = w_col[c];
    end

    pe #(.T_P(T_P), .TAG_W(TAG_W)) u_pe (
      .clk, .rst_n,
      .in_valid (iss_valid[c]),
      .in_first (iss_first),
      .in_tag   (iss_tag[c]),
      .act      (act[c]),
      .w        (w_pe[c]),
      .out_valid(res_valid[c]),
      .out_tag  (res_tag[c]),
      .psum_in  (psum_in[c]),
      .psum_out (psum_out[c])
    );
  end
endmodule
