// cnn_qg: quark/gluon jet-image classifier, streaming one pixel per clock.
//
// Input: the 15x15 jet image in row-major order, one pixel per clock on
// in_valid/in_data[7:0] (0..255, read as a fraction p/256), in_last on the
// 225th. Network: 2x2 convolution with 4 filters and ReLU (14x14x4), 2x2
// max-pooling (7x7x4 = 196 values), a dense layer to 2 logits, softmax.
// Output: P(quark-like class 0), P(class 1) in Q2.14, for one cycle on
// out_valid.
//
// How it streams: a one-row line buffer plus the previous pixel give the
// 2x2 window that ends at each incoming pixel, so a convolution result per
// filter is produced every cycle once the first row is in (stage 1). A row
// of 7 running maxima per filter builds each pooled value; when the last of
// its four inputs arrives the pooled value is complete (stage 2). Its four
// products with the dense weights of both classes are registered (stage 3)
// and added to the two accumulators (stage 4); after the 49th pooled value the
// logits get their bias (stage 5) and go through the 4-stage softmax. The
// image is never stored. out_valid rises 233 clocks after the cycle in which
// the first pixel is presented (224 more pixels, then 9 stages).
//
// Configuration (signed Q6.10): conv weight f*4+tap at f*4+tap (tap 0..3 =
// upper-left, upper-right, lower-left, lower-right), conv bias f at 16+f,
// dense weight at 20+o*196+((pr*7+pc)*4+f), dense bias o at 412+o. Reset
// clears everything.
//
// From the paper: the image size and scaling to 0..255, 4 filters of 2x2 with
// ReLU, 2x2 max-pooling, the softmax over quark/gluon and the 233-cycle
// latency at 200 MHz. Choices of this design: a single dense layer of 2
// outputs after pooling (the paper speaks of "final fully connected layers"
// without sizes), the formats, and the streaming structure.
module cnn_qg
  import gep_pkg::*;
#(
  parameter int unsigned IMG   = 15,
  parameter int unsigned NFILT = 4,
  parameter int unsigned N_OUT = 2
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
  localparam int unsigned CONV = IMG - 1;          // 14
  localparam int unsigned POOL = CONV / 2;         // 7
  localparam int unsigned NPOOL = POOL*POOL;       // 49
  localparam int unsigned NDIN = NPOOL*NFILT;      // 196
  localparam int unsigned A_CB = NFILT*4;
  localparam int unsigned A_DW = A_CB + NFILT;
  localparam int unsigned A_DB = A_DW + N_OUT*NDIN;
  localparam int unsigned A_END = A_DB + N_OUT;
  localparam int unsigned RW = $clog2(IMG);
  localparam int unsigned PW = $clog2(NPOOL);
  localparam int unsigned JW = $clog2(POOL);

  sword_t cw [NFILT][4];
  sword_t cb [NFILT];
  sword_t dw [N_OUT][NDIN];
  sword_t db [N_OUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cw <= '{default: '0}; cb <= '{default: '0};
      dw <= '{default: '0}; db <= '{default: '0};
    end else if (cfg_we) begin
      int unsigned a;
      a = int'(cfg_addr);
      if (a < A_CB)       cw[a/4][a%4]                   <= cfg_data;
      else if (a < A_DW)  cb[a-A_CB]                     <= cfg_data;
      else if (a < A_DB)  dw[(a-A_DW)/NDIN][(a-A_DW)%NDIN] <= cfg_data;
      else if (a < A_END) db[a-A_DB]                     <= cfg_data;
    end
  end

  // ---------------- stage 1: 2x2 window and convolution ----------------
  logic [RW-1:0] r, c;
  logic [7:0]    lb [IMG];     // previous row
  logic [7:0]    ul;           // pixel (r-1, c-1)
  logic [7:0]    lp;           // pixel (r, c-1)
  logic [7:0]    px;
  assign px = in_data[7:0];

  logic          cv_valid;
  logic [RW-1:0] cv_i, cv_j;   // position of the conv output
  sword_t        cv_q [NFILT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; c <= '0; ul <= '0; lp <= '0;
      lb <= '{default: '0};
      cv_valid <= 1'b0; cv_i <= '0; cv_j <= '0;
      cv_q <= '{default: '0};
    end else begin
      cv_valid <= 1'b0;
      if (in_valid) begin
        lb[c] <= px;
        ul    <= lb[c];
        lp    <= px;
        if (r != '0 && c != '0) begin
          cv_valid <= 1'b1;
          cv_i     <= r - 1'b1;
          cv_j     <= c - 1'b1;
          for (int f = 0; f < NFILT; f++) begin
            logic signed [31:0] acc;
            sword_t             s;
            acc = 32'(signed'({1'b0, ul}))    * 32'(cw[f][0])
                + 32'(signed'({1'b0, lb[c]})) * 32'(cw[f][1])
                + 32'(signed'({1'b0, lp}))    * 32'(cw[f][2])
                + 32'(signed'({1'b0, px}))    * 32'(cw[f][3]);
            s = sat16(48'(acc >>> 8) + 48'(cb[f]));
            cv_q[f] <= (s < 0) ? 16'sd0 : s;
          end
        end
        if (in_last || c == RW'(IMG-1)) begin
          c <= '0;
          r <= (in_last || r == RW'(IMG-1)) ? '0 : r + 1'b1;
        end else begin
          c <= c + 1'b1;
        end
      end
    end
  end

  // ---------------- stage 2: 2x2 max-pooling ----------------
  sword_t        pbuf [POOL][NFILT];
  logic          pl_valid;
  logic [PW-1:0] pl_idx;
  sword_t        pl_q [NFILT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pbuf <= '{default: '0};
      pl_valid <= 1'b0; pl_idx <= '0;
      pl_q <= '{default: '0};
    end else begin
      pl_valid <= 1'b0;
      if (cv_valid && cv_i < RW'(2*POOL) && cv_j < RW'(2*POOL)) begin
        logic [JW-1:0] pj;
        pj = JW'(cv_j >> 1);
        for (int f = 0; f < NFILT; f++) begin
          sword_t m;
          m = (!cv_i[0] && !cv_j[0]) ? cv_q[f]
            : ((cv_q[f] > pbuf[pj][f]) ? cv_q[f] : pbuf[pj][f]);
          pbuf[pj][f] <= m;
          pl_q[f]     <= m;
        end
        if (cv_i[0] && cv_j[0]) begin
          pl_valid <= 1'b1;
          pl_idx   <= PW'((int'(cv_i) >> 1) * POOL + (int'(cv_j) >> 1));
        end
      end
    end
  end

  // ---------------- stages 3-5: dense layer ----------------
  logic               pr_valid, pr_first, pr_last;
  logic signed [31:0] prod [N_OUT][NFILT];
  logic               ac_valid;
  logic signed [47:0] acc  [N_OUT];
  logic               lg_valid;
  sword_t             lg   [N_OUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pr_valid <= 1'b0; pr_first <= 1'b0; pr_last <= 1'b0;
      prod <= '{default: '0};
      ac_valid <= 1'b0; acc <= '{default: '0};
      lg_valid <= 1'b0; lg <= '{default: '0};
    end else begin
      // stage 3: products
      pr_valid <= pl_valid;
      pr_first <= pl_valid && (pl_idx == '0);
      pr_last  <= pl_valid && (pl_idx == PW'(NPOOL-1));
      for (int o = 0; o < N_OUT; o++)
        for (int f = 0; f < NFILT; f++)
          prod[o][f] <= 32'(pl_q[f]) * 32'(dw[o][int'(pl_idx)*NFILT + f]);
      // stage 4: accumulate
      ac_valid <= pr_valid && pr_last;
      if (pr_valid) begin
        for (int o = 0; o < N_OUT; o++) begin
          logic signed [47:0] s;
          s = pr_first ? 48'sd0 : acc[o];
          for (int f = 0; f < NFILT; f++) s += 48'(prod[o][f]);
          acc[o] <= s;
        end
      end
      // stage 5: bias and rescale
      lg_valid <= ac_valid;
      for (int o = 0; o < N_OUT; o++)
        lg[o] <= sat16((acc[o] >>> FRAC_W) + 48'(db[o]));
    end
  end

  softmax_unit #(.N(N_OUT)) u_softmax (
    .clk, .rst_n, .in_valid(lg_valid), .logit(lg), .out_valid(out_valid), .prob(out_data));
endmodule
