// ovsf_generator: produces, one per cycle, the M-bit slice of a basis vector
// that the multiplier array needs for the current subtile (TiWGen, Alg. 1).
//
// Structure (Fig. 3, top): an OVSF FIFO holding the layer's nb basis vectors,
// a top register that receives the vector popped from the FIFO, the basis
// vector aligner that writes a rotated copy of the popped vector back into
// the FIFO in the same cycle, and the output construction:
//   M <= K^2: the M low bits of the top register are sent out;
//   M >  K^2: the vector is repeated floor(M/K^2) times in the low part and its
//             mod(M,K^2) low bits fill the top of the M-bit output.
// Both cases are out[k] = top[k mod K^2]. After nb pops every vector has been
// rotated once, so the next subtile reads correctly aligned vectors without
// any selection multiplexer. One wiring per entry of KSQ_LIST is built and
// ksq_sel picks the layer's at run time.
//
// Interface: a pulse on load starts filling the FIFO with OVSF codes 0..nb-1
// of length K^2 (one per cycle, busy is high meanwhile); codes come from a
// small constant table built from the OVSF recursion. Each cycle with adv high
// pops one vector; its output slice appears in vec_out with vec_valid one
// cycle later. Loading the codes from constants (rather than from the host)
// and using the first nb codes of the tree are this design's choices.
// The FIFO's full and count outputs are left open: the load sequence and
// the one-pop-one-push rotation keep the occupancy at nb by construction.
module ovsf_generator
  import unzip_pkg::*;
#(
  parameter int unsigned M        = 128,
  parameter int unsigned KSQ_MAX  = 16,
  parameter int unsigned N_KS     = 1,
  parameter int unsigned KSQ_LIST [N_KS] = '{16}
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        ksq_sel,
  input  logic [CW-1:0]     nb,
  input  logic              load,
  output logic              busy,
  input  logic              adv,
  output logic [M-1:0]      vec_out,
  output logic              vec_valid
);
  localparam int unsigned IW = $clog2(KSQ_MAX + 1);

  // ---- constant code table -------------------------------------------------
  logic [KSQ_MAX-1:0] code_tab [N_KS][KSQ_MAX];
  for (genvar s = 0; s < N_KS; s++) begin : g_tab
    for (genvar i = 0; i < KSQ_MAX; i++) begin : g_idx
      for (genvar b = 0; b < KSQ_MAX; b++) begin : g_bit
        if (b < KSQ_LIST[s] && i < KSQ_LIST[s]) begin : g_v
          assign code_tab[s][i][b] = ovsf_bit(KSQ_LIST[s], i, b);
        end else begin : g_z
          assign code_tab[s][i][b] = 1'b0;
        end
      end
    end
  end

  // ---- load sequencer --------------------------------------------------------
  logic [IW-1:0]       ld_idx;
  logic                ld_push;
  logic [KSQ_MAX-1:0]  ld_code;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      ld_idx <= '0;
    end else if (load) begin
      busy   <= 1'b1;
      ld_idx <= '0;
    end else if (busy) begin
      if (CW'(ld_idx) + 1 >= nb) busy <= 1'b0;
      ld_idx <= ld_idx + 1'b1;
    end
  end
  assign ld_push = busy;

  always_comb begin
    ld_code = '0;
    for (int s = 0; s < N_KS; s++)
      if (ksq_sel == 4'(s)) ld_code = code_tab[s][ld_idx[$clog2(KSQ_MAX)-1:0]];
  end

  // ---- FIFO, aligner, top register ------------------------------------------
  logic [KSQ_MAX-1:0] head, rotated, top;
  logic               f_empty;
  wire                do_adv = adv && !busy && !f_empty;

  ovsf_fifo #(.W(KSQ_MAX), .DEPTH(KSQ_MAX)) u_fifo (
    .clk, .rst_n,
    .clr  (load),
    .push (ld_push || do_adv),
    .din  (ld_push ? ld_code : rotated),
    .pop  (do_adv),
    .dout (head),
    .empty(f_empty),
    .full (),
    .count()
  );

  basis_vector_aligner #(.M(M), .KSQ_MAX(KSQ_MAX), .N_KS(N_KS), .KSQ_LIST(KSQ_LIST)) u_align (
    .ksq_sel, .vec_in(head), .vec_out(rotated)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      top       <= '0;
      vec_valid <= 1'b0;
    end else begin
      vec_valid <= do_adv;
      if (do_adv) top <= head;
    end
  end

  // ---- output construction (self-concatenation) ------------------------------
  logic [M-1:0] tiled [N_KS];
  for (genvar s = 0; s < N_KS; s++) begin : g_out
    for (genvar k = 0; k < M; k++) begin : g_k
      assign tiled[s][k] = top[k % KSQ_LIST[s]];
    end
  end

  always_comb begin
    vec_out = tiled[0];
    for (int s = 0; s < N_KS; s++)
      if (ksq_sel == 4'(s)) vec_out = tiled[s];
  end

  // the FIFO never holds more vectors than a filter has elements
  a_nb_range: assert property (@(posedge clk) disable iff (!rst_n)
                               load |-> (nb >= 1 && nb <= CW'(KSQ_MAX)))
    else $error("ovsf_generator: nb out of range");
endmodule
