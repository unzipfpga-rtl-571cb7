// pingpong_ctrl: bank bookkeeping for a double buffer. The producer fills
// bank wr_bank and commits it; the consumer works on bank rd_bank and
// releases it. full[b] is set by a commit and cleared by a release; both
// pointers toggle on their own event. A commit into a full bank or a release
// of an empty one is a protocol error and is flagged by an assertion.
module pingpong_ctrl (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       commit,
  input  logic       release_bank,
  output logic       wr_bank,
  output logic       rd_bank,
  output logic [1:0] full
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_bank <= 1'b0;
      rd_bank <= 1'b0;
      full    <= '0;
    end else begin
      if (commit) begin
        full[wr_bank] <= 1'b1;
        wr_bank       <= ~wr_bank;
      end
      if (release_bank) begin
        full[rd_bank] <= 1'b0;
        rd_bank       <= ~rd_bank;
      end
    end
  end

  a_commit:  assert property (@(posedge clk) disable iff (!rst_n) commit |-> !full[wr_bank])
    else $error("pingpong_ctrl: commit into a full bank");
  a_release: assert property (@(posedge clk) disable iff (!rst_n) release_bank |-> full[rd_bank])
    else $error("pingpong_ctrl: release of an empty bank");
endmodule
