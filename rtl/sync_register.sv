// sync_register: the Synchronization Register (SR) of one input source of an
// APP. It decides when data from that source is ready and which BRAM of the
// source's bank is written and which is read.
//
// It works like the pointer half of an asynchronous FIFO whose entries are
// whole events. The writer (upstream clock) fills the BRAM wr_slot and then
// pulses wr_commit; the write pointer advances. The reader (APU clock) sees
// rd_ready while the BRAM rd_slot holds a committed event, and pulses
// rd_release when it has finished with it; the read pointer advances. Both
// pointers are kept one bit wider than the slot number and cross the clock
// boundary in Gray code through two-flop synchronizers, so wr_full (write
// domain) and rd_ready (read domain) are conservative: they may lag by two or
// three cycles of the other clock but never claim a slot that is not free or
// not complete. Because the pointer crosses after the data was written, the
// BRAM contents are stable when the reader sees them.
//
// The SR's role (detect readiness of a source, govern storage and retrieval in
// its BRAM stack) is from the paper; the Gray-pointer implementation, the
// commit/release pulses and the per-domain active-low asynchronous resets are
// choices of this design. NSLOT must be a power of two.
module sync_register #(
  parameter int unsigned NSLOT = 4,
  localparam int unsigned SW   = (NSLOT > 1) ? $clog2(NSLOT) : 1,
  localparam int unsigned PW   = SW + 1
) (
  // write (upstream) domain
  input  logic          wr_clk,
  input  logic          wr_rst_n,
  input  logic          wr_commit,   // current write slot holds a complete event
  output logic [SW-1:0] wr_slot,
  output logic          wr_full,     // no free slot: the writer must wait
  // read (APU) domain
  input  logic          rd_clk,
  input  logic          rd_rst_n,
  input  logic          rd_release,  // reader is done with rd_slot
  output logic [SW-1:0] rd_slot,
  output logic          rd_ready     // rd_slot holds a complete event
);
  logic [PW-1:0] wptr, rptr;            // binary pointers
  logic [PW-1:0] wgray, rgray;          // Gray versions, registered
  logic [PW-1:0] rgray_w, wgray_r;      // synchronized into the other domain

  function automatic logic [PW-1:0] bin2gray(input logic [PW-1:0] b);
    return b ^ (b >> 1);
  endfunction

  // Write domain
  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wptr  <= '0;
      wgray <= '0;
    end else if (wr_commit && !wr_full) begin
      wptr  <= wptr + 1'b1;
      wgray <= bin2gray(wptr + 1'b1);
    end
  end

  sync_2ff #(.W(PW)) u_sync_r2w (.dst_clk(wr_clk), .dst_rst_n(wr_rst_n), .d(rgray), .q(rgray_w));

  // Full when the write pointer is a whole lap ahead of the read pointer:
  // in Gray code the two MSBs differ and the rest are equal.
  if (PW > 2) begin : g_full_wide
    assign wr_full = (wgray == {~rgray_w[PW-1:PW-2], rgray_w[PW-3:0]});
  end else begin : g_full_narrow
    assign wr_full = (wgray == ~rgray_w);
  end
  assign wr_slot = wptr[SW-1:0];

  // Read domain
  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rptr  <= '0;
      rgray <= '0;
    end else if (rd_release && rd_ready) begin
      rptr  <= rptr + 1'b1;
      rgray <= bin2gray(rptr + 1'b1);
    end
  end

  sync_2ff #(.W(PW)) u_sync_w2r (.dst_clk(rd_clk), .dst_rst_n(rd_rst_n), .d(wgray), .q(wgray_r));

  assign rd_ready = (rgray != wgray_r);
  assign rd_slot  = rptr[SW-1:0];
endmodule
