// sync_2ff: two-flop synchronizer for a multi-bit Gray-coded bus (or a single
// bit) entering the dst_clk domain. Only safe for values of which at most one
// bit changes per source clock, which is why the pointers passed through it
// are Gray coded. Reset clears both stages.
module sync_2ff #(
  parameter int unsigned W = 1
) (
  input  logic         dst_clk,
  input  logic         dst_rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] meta;

  always_ff @(posedge dst_clk or negedge dst_rst_n) begin
    if (!dst_rst_n) begin
      meta <= '0;
      q    <= '0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
