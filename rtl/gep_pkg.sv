// gep_pkg: constants and types shared by the APP/APU machine-learning data path.
//
// Every buffer between APUs holds 16-bit words. One event occupies one BRAM of
// a bank: address 0 holds the index of the last valid word (so an event with N
// payload words has header N and payload at addresses 1..N), the payload
// follows. The header convention follows the paper's ASM ("the first data
// contains the index of the last valid data"); the 16-bit word, the Q6.10
// fixed-point format (the usual hls4ml default ap_fixed<16,6>) and the Q2.14
// probability format are choices of this design.
package gep_pkg;

  // Width of one buffer word and of every ML-core input/output word.
  localparam int unsigned WORD_W = 16;
  // Fractional bits of the signed fixed-point format used by the neural nets.
  localparam int unsigned FRAC_W = 10;
  // Fractional bits of a softmax probability (1.0 = 2**PROB_FRAC).
  localparam int unsigned PROB_FRAC = 14;
  // Width of the configuration (weight load) address bus of the ML cores.
  localparam int unsigned CFG_AW = 16;

  typedef logic [WORD_W-1:0]        word_t;
  typedef logic signed [WORD_W-1:0] sword_t;

  // Which ML core an APU carries (the four models of the paper's evaluation).
  typedef enum logic [1:0] {
    MODEL_DNN_BTAG = 2'd0,  // hls4ml dense network, 16-32-32-5
    MODEL_BDT_VBF  = 2'd1,  // fwX BDT, 10 trees of depth 4, 5 features
    MODEL_BDT_MET  = 2'd2,  // fwX BDT, 40 trees of depth 6, 8 features
    MODEL_CNN_QG   = 2'd3   // hls4ml CNN on a 15x15 jet image
  } model_e;

  // Saturate a wide signed value to a signed WORD_W-bit word.
  function automatic sword_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

endpackage
