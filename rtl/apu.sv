// apu: an Algorithm Processing Unit that runs one machine-learning model.
//
// It pairs the ASM (ml_asm), which turns the addressable input buffer into a
// word stream and the model's result into buffer writes, with one ML core
// chosen by MODEL: the B-tagging DNN, the VBF or MET BDT, or the q/g CNN.
// The APU talks to its APP through four bundles: event_ready/event_done with
// the sync controller, a read port into the input banks (data one cycle after
// address), a write port with commit into the downstream bank, and the
// core's weight-load port. Processing time per event is the stream length
// (header read plus payload words), the model latency, and N_OUT+1 writes.
//
// The split of an APU into ASM plus generated core is from the paper. The
// per-model parameters (tree counts, depths, feature counts, latencies) are
// the paper's; the selection by a parameter is this design's.
module apu
  import gep_pkg::*;
#(
  parameter model_e      MODEL = MODEL_DNN_BTAG,
  parameter int unsigned N_SRC = 1,
  parameter int unsigned AW    = 8,
  localparam int unsigned SRCW = (N_SRC > 1) ? $clog2(N_SRC) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              event_ready,
  output logic              event_done,
  output logic [SRCW-1:0]   rd_src,
  output logic [AW-1:0]     rd_addr,
  input  word_t             rd_data,
  output logic              dn_wr_en,
  output logic [AW-1:0]     dn_wr_addr,
  output word_t             dn_wr_data,
  output logic              dn_commit,
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  word_t             cfg_data
);
  function automatic int unsigned n_out_of(model_e m);
    case (m)
      MODEL_DNN_BTAG: return 5;
      MODEL_CNN_QG:   return 2;
      default:        return 1;
    endcase
  endfunction

  localparam int unsigned N_OUT = n_out_of(MODEL);

  logic  nn_in_valid, nn_in_last, nn_out_valid;
  word_t nn_in_data;
  word_t nn_out_data [N_OUT];

  ml_asm #(.N_SRC(N_SRC), .N_OUT(N_OUT), .AW(AW), .W(WORD_W)) u_asm (
    .clk, .rst_n, .event_ready, .event_done, .rd_src, .rd_addr, .rd_data,
    .nn_in_valid, .nn_in_last, .nn_in_data, .nn_out_valid, .nn_out_data,
    .dn_wr_en, .dn_wr_addr, .dn_wr_data, .dn_commit);

  if (MODEL == MODEL_DNN_BTAG) begin : g_dnn
    dnn_btag u_core (
      .clk, .rst_n, .in_valid(nn_in_valid), .in_last(nn_in_last), .in_data(nn_in_data),
      .out_valid(nn_out_valid), .out_data(nn_out_data), .cfg_we, .cfg_addr, .cfg_data);
  end else if (MODEL == MODEL_BDT_VBF) begin : g_vbf
    bdt_engine #(.NT(10), .DEPTH(4), .NF(5), .FW(12), .LATENCY(7)) u_core (
      .clk, .rst_n, .in_valid(nn_in_valid), .in_last(nn_in_last), .in_data(nn_in_data),
      .out_valid(nn_out_valid), .out_data(nn_out_data), .cfg_we, .cfg_addr, .cfg_data);
  end else if (MODEL == MODEL_BDT_MET) begin : g_met
    bdt_engine #(.NT(40), .DEPTH(6), .NF(8), .FW(12), .LATENCY(11)) u_core (
      .clk, .rst_n, .in_valid(nn_in_valid), .in_last(nn_in_last), .in_data(nn_in_data),
      .out_valid(nn_out_valid), .out_data(nn_out_data), .cfg_we, .cfg_addr, .cfg_data);
  end else begin : g_cnn
    cnn_qg u_core (
      .clk, .rst_n, .in_valid(nn_in_valid), .in_last(nn_in_last), .in_data(nn_in_data),
      .out_valid(nn_out_valid), .out_data(nn_out_data), .cfg_we, .cfg_addr, .cfg_data);
  end
endmodule
