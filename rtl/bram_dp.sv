// bram_dp: one dual-clock block RAM of an APP's input bank.
//
// Simple dual port: the write port runs on the upstream (producer) clock, the
// read port on the APU clock, which is what lets data cross between the two
// clock domains. The read is registered (one cycle of latency), as in an FPGA
// block RAM. The dual-clock operation is from the paper; the depth, the
// registered read and the absence of a read enable are choices of this design.
module bram_dp #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          wr_clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_clk,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge wr_clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge rd_clk) begin
    rd_data <= mem[rd_addr];
  end
endmodule
