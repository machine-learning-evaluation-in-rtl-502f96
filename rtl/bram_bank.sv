// bram_bank: a stack of NSLOT dual-clock BRAMs that together buffer NSLOT
// events from one source.
//
// Each BRAM holds one event. The writer addresses the BRAM chosen by wr_slot,
// the reader the BRAM chosen by rd_slot; both slot numbers come from the
// source's synchronization register. Read data appears one rd_clk cycle after
// rd_addr/rd_slot (the slot select is registered along with the BRAM output).
// The stacking of BRAMs into a multi-event bank is from the paper; NSLOT = 4
// and DEPTH = 256 words are choices of this design (256 covers the largest
// event used here: header plus 225 jet-image pixels).
module bram_bank #(
  parameter int unsigned NSLOT = 4,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 16,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned SW   = (NSLOT > 1) ? $clog2(NSLOT) : 1
) (
  input  logic          wr_clk,
  input  logic          wr_en,
  input  logic [SW-1:0] wr_slot,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_clk,
  input  logic [SW-1:0] rd_slot,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0]  slot_data [NSLOT];
  logic [SW-1:0] rd_slot_q;

  for (genvar s = 0; s < NSLOT; s++) begin : g_bram
    bram_dp #(.DEPTH(DEPTH), .W(W)) u_bram (
      .wr_clk (wr_clk),
      .wr_en  (wr_en && (wr_slot == SW'(s))),
      .wr_addr(wr_addr),
      .wr_data(wr_data),
      .rd_clk (rd_clk),
      .rd_addr(rd_addr),
      .rd_data(slot_data[s])
    );
  end

  always_ff @(posedge rd_clk) rd_slot_q <= rd_slot;

  assign rd_data = slot_data[rd_slot_q];
endmodule
