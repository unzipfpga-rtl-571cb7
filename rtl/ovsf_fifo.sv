// ovsf_fifo: the OVSF FIFO of the weights generator. It holds the binary
// basis vectors that the current layer uses (one vector per entry, the
// layer's K^2 bits in the low bits of each entry).
//
// A plain synchronous FIFO with a combinational head (dout shows the oldest
// entry whenever the FIFO is not empty). push and pop may happen in the same
// cycle, also when the FIFO is full; the generator does exactly that in
// steady state, popping a vector and pushing its rotated copy back, so the
// occupancy stays at the number of basis vectors of the layer. clr empties it.
// Depth and width default to K_max^2 = 16 entries of 16 bits, the
// K_max^2 * K_max^2 bits the paper budgets for the OVSF FIFO.
// The register-file organisation and the flags are this design's own choice.
module ovsf_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clr,
  input  logic                         push,
  input  logic [W-1:0]                 din,
  input  logic                         pop,
  output logic [W-1:0]                 dout,
  output logic                         empty,
  output logic                         full,
  output logic [$clog2(DEPTH+1)-1:0]   count
);
  localparam int unsigned AW = (DEPTH <= 1) ? 1 : $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  assign empty = (count == 0);
  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign dout  = mem[rd_ptr];

  wire do_pop  = pop && !empty;
  wire do_push = push && (!full || do_pop);

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (clr) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_push && !do_pop)      count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  // pushing into a full FIFO without a pop would lose a basis vector
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  (push && full) |-> pop)
    else $error("ovsf_fifo: push while full");
endmodule
