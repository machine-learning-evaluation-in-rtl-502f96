// gep_ml_top: the machine-learning part of a Global Event Processor: the four
// ML algorithms evaluated for the trigger, each as an APU inside its own APP,
// each followed by the BRAM bank that buffers its results for the consumer.
//
//   APP 0  B-tagging DNN  (16-32-32-5)      sources 0 and 1   clk_nn  (200 MHz)
//   APP 1  VBF BDT        (10 trees, d=4)   source  2         clk_bdt (320 MHz)
//   APP 2  MET BDT        (40 trees, d=6)   source  3         clk_bdt (320 MHz)
//   APP 3  q/g CNN        (15x15 image)     source  4         clk_nn  (200 MHz)
//
// Upstream producers (detector links or upstream APUs, outside this block)
// write events into the APPs' input banks on their own clocks up_clk[s]: an
// event is a header word at address 0 giving the index of the last valid
// word, followed by that many payload words; up_commit publishes it, up_full
// says the bank has no free BRAM. Each APU writes its result event (same
// layout) into its output bank on its APP clock. The consumer reads results
// on out_clk: out_ready[a] says APP a's oldest result is complete,
// out_rd_addr/out_rd_data read it (one-cycle latency), out_release frees it.
// cfg_* load weights and trees, on clk_nn for APPs 0 and 3 and clk_bdt for 1
// and 2. Status pulses event_done, stall_skew and stall_full come from each
// APP's sync controller.
//
// From the paper: the APP structure, the dual-clock banks between APUs, the
// four models and their clocks. Choices of this design: the pairing of
// models with source ports (the DNN's 16 features arriving as two 8-word
// events from two sources shows the alignment of skewed sources), the
// separate output banks standing for the downstream APPs of the dataflow
// graph, and all port protocols.
module gep_ml_top
  import gep_pkg::*;
#(
  parameter int unsigned NSLOT = 4,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned N_UP  = 5,
  localparam int unsigned N_APP = 4,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned SW    = (NSLOT > 1) ? $clog2(NSLOT) : 1
) (
  // upstream sources
  input  logic [N_UP-1:0]   up_clk,
  input  logic [N_UP-1:0]   up_rst_n,
  input  logic [N_UP-1:0]   up_wr_en,
  input  logic [AW-1:0]     up_wr_addr [N_UP],
  input  word_t             up_wr_data [N_UP],
  input  logic [N_UP-1:0]   up_commit,
  output logic [N_UP-1:0]   up_full,
  // APU clocks
  input  logic              clk_nn,
  input  logic              rst_nn_n,
  input  logic              clk_bdt,
  input  logic              rst_bdt_n,
  // weight / tree loading, one port per APP
  input  logic [N_APP-1:0]  cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr [N_APP],
  input  word_t             cfg_data [N_APP],
  // consumer side of the result banks
  input  logic              out_clk,
  input  logic              out_rst_n,
  output logic [N_APP-1:0]  out_ready,
  input  logic [AW-1:0]     out_rd_addr [N_APP],
  output word_t             out_rd_data [N_APP],
  input  logic [N_APP-1:0]  out_release,
  // status (APP clock domains)
  output logic [N_APP-1:0]  event_done,
  output logic [N_APP-1:0]  stall_skew,
  output logic [N_APP-1:0]  stall_full
);
  localparam model_e MODELS [N_APP] = '{MODEL_DNN_BTAG, MODEL_BDT_VBF, MODEL_BDT_MET, MODEL_CNN_QG};

  logic [N_APP-1:0] app_clk, app_rst_n;
  assign app_clk   = {clk_nn, clk_bdt, clk_bdt, clk_nn};
  assign app_rst_n = {rst_nn_n, rst_bdt_n, rst_bdt_n, rst_nn_n};

  logic [N_APP-1:0] dn_wr_en, dn_commit, dn_full, busy;
  logic [AW-1:0]    dn_wr_addr [N_APP];
  word_t            dn_wr_data [N_APP];
  logic [SW-1:0]    dn_slot    [N_APP];
  logic [SW-1:0]    out_slot   [N_APP];

  // APP 0: two sources
  logic [SW-1:0] up_slot0 [2];
  app #(.MODEL(MODEL_DNN_BTAG), .N_SRC(2), .NSLOT(NSLOT), .DEPTH(DEPTH)) u_app_dnn (
    .up_clk(up_clk[1:0]), .up_rst_n(up_rst_n[1:0]), .up_wr_en(up_wr_en[1:0]),
    .up_wr_addr(up_wr_addr[0:1]), .up_wr_data(up_wr_data[0:1]), .up_commit(up_commit[1:0]),
    .up_slot(up_slot0), .up_full(up_full[1:0]),
    .clk(app_clk[0]), .rst_n(app_rst_n[0]),
    .dn_wr_en(dn_wr_en[0]), .dn_wr_addr(dn_wr_addr[0]), .dn_wr_data(dn_wr_data[0]),
    .dn_commit(dn_commit[0]), .dn_full(dn_full[0]),
    .cfg_we(cfg_we[0]), .cfg_addr(cfg_addr[0]), .cfg_data(cfg_data[0]),
    .busy(busy[0]), .event_done(event_done[0]), .stall_skew(stall_skew[0]),
    .stall_full(stall_full[0]));

  // APPs 1..3: one source each, source a+1
  for (genvar a = 1; a < N_APP; a++) begin : g_app
    logic [SW-1:0] up_slot [1];
    app #(.MODEL(MODELS[a]), .N_SRC(1), .NSLOT(NSLOT), .DEPTH(DEPTH)) u_app (
      .up_clk(up_clk[a+1]), .up_rst_n(up_rst_n[a+1]), .up_wr_en(up_wr_en[a+1]),
      .up_wr_addr(up_wr_addr[a+1:a+1]), .up_wr_data(up_wr_data[a+1:a+1]),
      .up_commit(up_commit[a+1]), .up_slot(up_slot), .up_full(up_full[a+1]),
      .clk(app_clk[a]), .rst_n(app_rst_n[a]),
      .dn_wr_en(dn_wr_en[a]), .dn_wr_addr(dn_wr_addr[a]), .dn_wr_data(dn_wr_data[a]),
      .dn_commit(dn_commit[a]), .dn_full(dn_full[a]),
      .cfg_we(cfg_we[a]), .cfg_addr(cfg_addr[a]), .cfg_data(cfg_data[a]),
      .busy(busy[a]), .event_done(event_done[a]), .stall_skew(stall_skew[a]),
      .stall_full(stall_full[a]));
  end

  // result banks: written on the APP clock, read on out_clk
  for (genvar a = 0; a < N_APP; a++) begin : g_out
    sync_register #(.NSLOT(NSLOT)) u_sr (
      .wr_clk(app_clk[a]), .wr_rst_n(app_rst_n[a]), .wr_commit(dn_commit[a]),
      .wr_slot(dn_slot[a]), .wr_full(dn_full[a]),
      .rd_clk(out_clk), .rd_rst_n(out_rst_n), .rd_release(out_release[a]),
      .rd_slot(out_slot[a]), .rd_ready(out_ready[a]));

    bram_bank #(.NSLOT(NSLOT), .DEPTH(DEPTH), .W(WORD_W)) u_bank (
      .wr_clk(app_clk[a]), .wr_en(dn_wr_en[a]), .wr_slot(dn_slot[a]),
      .wr_addr(dn_wr_addr[a]), .wr_data(dn_wr_data[a]),
      .rd_clk(out_clk), .rd_slot(out_slot[a]), .rd_addr(out_rd_addr[a]),
      .rd_data(out_rd_data[a]));
  end
endmodule
