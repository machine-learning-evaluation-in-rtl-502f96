// app: an Algorithm Processing Platform, the wrapper that gives one APU its
// input buffering and clock-domain crossing.
//
// For each of N_SRC upstream sources the APP holds a bank of NSLOT dual-clock
// BRAMs (one event each) and that source's synchronization register. A source
// writes an event into the BRAM named by up_slot on its own clock, then
// pulses up_commit; while up_full is high it must not start another event.
// The sync controller, on the APU clock, starts the APU once every source has
// its next event ready and the downstream bank (whose dn_full arrives on the
// APU clock) has room, and frees the input BRAMs when the APU reports
// event_done. The APU reads the banks through one port: rd_src selects the
// source, rd_addr the word, and data return one cycle later. The APU's output
// leaves on dn_wr_* / dn_commit, on the APU clock, for the next APP's bank.
//
// The parts (BRAM banks on two clocks, SRs, a sync controller FSM, the APU)
// and their roles are from the paper (its Fig. 2); the port protocol, the
// slot count and the in-order alignment of sources are this design's.
module app
  import gep_pkg::*;
#(
  parameter model_e      MODEL = MODEL_DNN_BTAG,
  parameter int unsigned N_SRC = 1,
  parameter int unsigned NSLOT = 4,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned SW   = (NSLOT > 1) ? $clog2(NSLOT) : 1,
  localparam int unsigned SRCW = (N_SRC > 1) ? $clog2(N_SRC) : 1
) (
  // upstream sources, each on its own clock
  input  logic [N_SRC-1:0]  up_clk,
  input  logic [N_SRC-1:0]  up_rst_n,
  input  logic [N_SRC-1:0]  up_wr_en,
  input  logic [AW-1:0]     up_wr_addr [N_SRC],
  input  word_t             up_wr_data [N_SRC],
  input  logic [N_SRC-1:0]  up_commit,
  output logic [SW-1:0]     up_slot    [N_SRC],
  output logic [N_SRC-1:0]  up_full,
  // APU clock domain
  input  logic              clk,
  input  logic              rst_n,
  output logic              dn_wr_en,
  output logic [AW-1:0]     dn_wr_addr,
  output word_t             dn_wr_data,
  output logic              dn_commit,
  input  logic              dn_full,
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  word_t             cfg_data,
  // status
  output logic              busy,
  output logic              event_done,
  output logic              stall_skew,
  output logic              stall_full
);
  logic [N_SRC-1:0] src_ready;
  logic [SW-1:0]    rd_slot [N_SRC];
  word_t            bank_data [N_SRC];
  logic             src_release, event_ready;
  logic [SRCW-1:0]  rd_src, rd_src_q;
  logic [AW-1:0]    rd_addr;

  for (genvar s = 0; s < N_SRC; s++) begin : g_src
    sync_register #(.NSLOT(NSLOT)) u_sr (
      .wr_clk(up_clk[s]), .wr_rst_n(up_rst_n[s]), .wr_commit(up_commit[s]),
      .wr_slot(up_slot[s]), .wr_full(up_full[s]),
      .rd_clk(clk), .rd_rst_n(rst_n), .rd_release(src_release),
      .rd_slot(rd_slot[s]), .rd_ready(src_ready[s]));

    bram_bank #(.NSLOT(NSLOT), .DEPTH(DEPTH), .W(WORD_W)) u_bank (
      .wr_clk(up_clk[s]), .wr_en(up_wr_en[s]), .wr_slot(up_slot[s]),
      .wr_addr(up_wr_addr[s]), .wr_data(up_wr_data[s]),
      .rd_clk(clk), .rd_slot(rd_slot[s]), .rd_addr(rd_addr), .rd_data(bank_data[s]));
  end

  sync_controller #(.N_SRC(N_SRC)) u_ctrl (
    .clk, .rst_n, .src_ready, .dn_full, .event_ready, .event_done,
    .src_release, .stall_skew, .stall_full);

  // the source select travels with the one-cycle BRAM read latency
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_src_q <= '0;
    else        rd_src_q <= rd_src;
  end

  apu #(.MODEL(MODEL), .N_SRC(N_SRC), .AW(AW)) u_apu (
    .clk, .rst_n, .event_ready, .event_done, .rd_src, .rd_addr,
    .rd_data(bank_data[rd_src_q]),
    .dn_wr_en, .dn_wr_addr, .dn_wr_data, .dn_commit, .cfg_we, .cfg_addr, .cfg_data);

  assign busy = event_ready;
endmodule
