// basis_vector_aligner: rotates a K^2-bit basis vector so that, when it is
// read out of the OVSF FIFO again for the next subtile, its bit 0 lines up
// with the first weight of that subtile.
//
// For a layer with filter size K^2 and subtile size M the next subtile starts
// M weights later, so the vector is rotated by s = mod(M, K^2) positions
// toward bit 0: out[b] = in[(b + s) mod K^2]. For M > K^2 this is the paper's
// "left circ-shift of K^2 - mod(M,K^2)" (a rotation by K^2 - s toward the MSB
// is the same rotation as s toward the LSB). For M <= K^2 the paper's text
// says "M-bit left circular shift"; the aligner follows Fig. 3, where the M
// bits just sent out move to the top of the vector, i.e. a rotation by M
// toward bit 0 (s = M). One fixed rotation is built for every filter size in
// KSQ_LIST (all powers of two, at most KSQ_MAX); ksq_sel picks the layer's
// one at run time, so there is no generic barrel shifter. Purely
// combinational. Bits above the layer's K^2 are driven to zero.
// With the default M = 128 and K^2 = 16 every subtile starts on a kernel
// boundary, so the rotation for that size is zero and the aligner reduces to
// wiring; the rotations matter for M not a multiple of K^2 (e.g. M = 24) or
// for M < K^2, which other parameter choices give.
module basis_vector_aligner #(
  parameter int unsigned M        = 128,
  parameter int unsigned KSQ_MAX  = 16,
  parameter int unsigned N_KS     = 1,
  parameter int unsigned KSQ_LIST [N_KS] = '{16}
) (
  input  logic [3:0]         ksq_sel,
  input  logic [KSQ_MAX-1:0] vec_in,
  output logic [KSQ_MAX-1:0] vec_out
);
  logic [KSQ_MAX-1:0] rot [N_KS];

  for (genvar s = 0; s < N_KS; s++) begin : g_opt
    localparam int unsigned KSQ   = KSQ_LIST[s];
    localparam int unsigned SHIFT = M % KSQ;
    for (genvar b = 0; b < KSQ_MAX; b++) begin : g_bit
      if (b < KSQ) begin : g_in
        assign rot[s][b] = vec_in[(b + SHIFT) % KSQ];
      end else begin : g_out
        assign rot[s][b] = 1'b0;
      end
    end
  end

  always_comb begin
    vec_out = rot[0];
    for (int s = 0; s < N_KS; s++)
      if (ksq_sel == 4'(s)) vec_out = rot[s];
  end
endmodule
