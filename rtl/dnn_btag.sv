// dnn_btag: the B-tagging dense neural network, 16 inputs, hidden layers of
// 32 and 32 neurons, 5 softmax outputs.
//
// Input: one Q6.10 feature per clock on in_valid/in_data, in_last on the 16th
// (features beyond 16 are ignored). The layer-1 products are formed in the
// cycle of the last word, so the network output follows with a latency of
// exactly 10 clocks counted from the cycle in which in_last is presented:
// 3 dense layers of 2 stages each plus 4 softmax stages. Output: five class
// probabilities in Q2.14, valid for one cycle with out_valid.
//
// Weights and biases are loaded through cfg_we/cfg_addr/cfg_data (signed
// Q6.10) at this address map: W1[j][i] at j*16+i (0..511), b1 at 512+j,
// W2[j][i] at 544+j*32+i, b2 at 1568+j, W3[j][i] at 1600+j*32+i, b3 at 1760+j.
// Everything is cleared by reset.
//
// From the paper: the layer widths (Fig. 4: R^16, R^32, R^32, R^5), the
// softmax output, the 10-cycle latency. Choices of this design: ReLU in the
// hidden layers, the Q6.10 format, fully parallel multipliers (the paper's
// 625 DSPs suggest its core shares multipliers) and weights in registers.
module dnn_btag
  import gep_pkg::*;
#(
  parameter int unsigned N_IN  = 16,
  parameter int unsigned N_H1  = 32,
  parameter int unsigned N_H2  = 32,
  parameter int unsigned N_OUT = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_last,
  input  word_t             in_data,
  output logic              out_valid,
  output word_t             out_data [N_OUT],
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  word_t             cfg_data
);
  localparam int unsigned A_B1 = N_H1*N_IN;
  localparam int unsigned A_W2 = A_B1 + N_H1;
  localparam int unsigned A_B2 = A_W2 + N_H2*N_H1;
  localparam int unsigned A_W3 = A_B2 + N_H2;
  localparam int unsigned A_B3 = A_W3 + N_OUT*N_H2;
  localparam int unsigned A_END = A_B3 + N_OUT;
  localparam int unsigned IW    = $clog2(N_IN);

  sword_t w1 [N_H1][N_IN];
  sword_t b1 [N_H1];
  sword_t w2 [N_H2][N_H1];
  sword_t b2 [N_H2];
  sword_t w3 [N_OUT][N_H2];
  sword_t b3 [N_OUT];

  // weight loading
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w1 <= '{default: '0}; b1 <= '{default: '0};
      w2 <= '{default: '0}; b2 <= '{default: '0};
      w3 <= '{default: '0}; b3 <= '{default: '0};
    end else if (cfg_we) begin
      int unsigned a;
      a = int'(cfg_addr);
      if (a < A_B1)       w1[a / N_IN][a % N_IN]            <= cfg_data;
      else if (a < A_W2)  b1[a - A_B1]                      <= cfg_data;
      else if (a < A_B2)  w2[(a-A_W2) / N_H1][(a-A_W2) % N_H1] <= cfg_data;
      else if (a < A_W3)  b2[a - A_B2]                      <= cfg_data;
      else if (a < A_B3)  w3[(a-A_W3) / N_H2][(a-A_W3) % N_H2] <= cfg_data;
      else if (a < A_END) b3[a - A_B3]                      <= cfg_data;
    end
  end

  // stream-to-vector conversion
  sword_t x_q [N_IN];
  sword_t x_c [N_IN];
  logic [$clog2(N_IN+1)-1:0] idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0;
      x_q <= '{default: '0};
    end else if (in_valid) begin
      if (idx < ($bits(idx))'(N_IN)) x_q[idx[IW-1:0]] <= in_data;
      idx <= in_last ? '0 : ((idx < ($bits(idx))'(N_IN)) ? idx + 1'b1 : idx);
    end
  end

  always_comb begin
    x_c = x_q;
    if (in_valid && idx < ($bits(idx))'(N_IN)) x_c[idx[IW-1:0]] = in_data;
  end

  logic   v1, v2, v3;
  sword_t h1 [N_H1];
  sword_t h2 [N_H2];
  sword_t lg [N_OUT];

  dense_layer #(.NI(N_IN), .NO(N_H1), .RELU(1'b1)) u_l1 (
    .clk, .rst_n, .in_valid(in_valid && in_last), .x(x_c), .w(w1), .b(b1),
    .out_valid(v1), .y(h1));
  dense_layer #(.NI(N_H1), .NO(N_H2), .RELU(1'b1)) u_l2 (
    .clk, .rst_n, .in_valid(v1), .x(h1), .w(w2), .b(b2), .out_valid(v2), .y(h2));
  dense_layer #(.NI(N_H2), .NO(N_OUT), .RELU(1'b0)) u_l3 (
    .clk, .rst_n, .in_valid(v2), .x(h2), .w(w3), .b(b3), .out_valid(v3), .y(lg));
  softmax_unit #(.N(N_OUT)) u_softmax (
    .clk, .rst_n, .in_valid(v3), .logit(lg), .out_valid(out_valid), .prob(out_data));
endmodule
