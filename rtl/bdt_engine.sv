// bdt_engine: boosted-decision-tree evaluator in the style of the fwX
// "parallel decision paths" cores, used for the VBF classifier
// (NT=10, DEPTH=4, NF=5, LATENCY=7) and the missing-transverse-momentum
// regression (NT=40, DEPTH=6, NF=8, LATENCY=11).
//
// Input: one feature per clock on in_valid/in_data (its low FW bits, an
// unsigned quantized code), in_last on the final one. All NT trees walk in
// parallel, one tree level per clock: at a node the tree goes to the right
// child when x[feature] > threshold, else to the left. Each tree is a full
// binary tree stored in heap order (node k has children 2k and 2k+1; nodes
// 1..2**DEPTH-1, leaves 2**DEPTH..2**(DEPTH+1)-1). After DEPTH levels the
// reached leaf values are summed and saturated to a signed 16-bit score, then
// delayed to give exactly LATENCY clocks from the cycle in which in_last is
// presented to out_valid. A new event may start every cycle after in_last.
//
// Configuration: word address t*2**(DEPTH+1)+k. For 1 <= k < 2**DEPTH the
// word is a node {feature[15:12], threshold[11:0]}; for k >= 2**DEPTH it is a
// signed leaf value. Reset clears all nodes and leaves.
//
// From the paper: tree counts, depths, feature counts, the 12-bit feature
// width (Table 2; the 7-bit m_jj is zero-extended) and the latencies in
// clocks (7 and 11 at 320 MHz). Choices of this design: the heap layout,
// the > comparison, the 16-bit leaves and the registers holding the trees
// (the paper's cores use BRAM), and the output delay that pads the DEPTH+1
// pipeline stages to the reported latency.
module bdt_engine
  import gep_pkg::*;
#(
  parameter int unsigned NT      = 10,
  parameter int unsigned DEPTH   = 4,
  parameter int unsigned NF      = 5,
  parameter int unsigned FW      = 12,
  parameter int unsigned LATENCY = 7
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_last,
  input  word_t             in_data,
  output logic              out_valid,
  output word_t             out_data [1],
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  word_t             cfg_data
);
  localparam int unsigned NN  = 2**DEPTH;          // nodes 1..NN-1, leaves NN..2NN-1
  localparam int unsigned KW  = DEPTH + 1;         // width of a heap index
  localparam int unsigned PAD = LATENCY - DEPTH - 1;
  localparam int unsigned IW  = (NF > 1) ? $clog2(NF) : 1;   // feature index width

  // parameter sanity (elaboration-time)
  if (LATENCY < DEPTH + 1) begin : g_bad_latency
    $error("bdt_engine: LATENCY must be at least DEPTH+1");
  end
  if (NF > 16) begin : g_bad_nf
    $error("bdt_engine: at most 16 features (4-bit feature index)");
  end

  logic [15:0]        node [NT][NN];
  logic signed [15:0] leaf [NT][NN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      node <= '{default: '0};
      leaf <= '{default: '0};
    end else if (cfg_we) begin
      int unsigned t, k;
      t = int'(cfg_addr) / (2*NN);
      k = int'(cfg_addr) % (2*NN);
      if (t < NT) begin
        if (k >= NN) leaf[t][k-NN] <= cfg_data;
        else         node[t][k]    <= cfg_data;
      end
    end
  end

  // stream-to-vector conversion
  logic [FW-1:0] x_q [NF];
  logic [FW-1:0] x_c [NF];
  logic [$clog2(NF+1)-1:0] idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0;
      x_q <= '{default: '0};
    end else if (in_valid) begin
      if (idx < ($bits(idx))'(NF)) x_q[idx[IW-1:0]] <= in_data[FW-1:0];
      idx <= in_last ? '0 : ((idx < ($bits(idx))'(NF)) ? idx + 1'b1 : idx);
    end
  end

  always_comb begin
    x_c = x_q;
    if (in_valid && idx < ($bits(idx))'(NF)) x_c[idx[IW-1:0]] = in_data[FW-1:0];
  end

  // one decision step: heap index k at features x -> child index
  function automatic logic [KW-1:0] step(input logic [15:0] nd, input logic [FW-1:0] xv [NF],
                                         input logic [KW-1:0] k);
    logic [3:0]    f;
    logic [FW-1:0] v;
    f = nd[15:12];
    v = (int'(f) < NF) ? xv[f[IW-1:0]] : '0;
    return {k[KW-2:0], (v > nd[FW-1:0])};
  endfunction

  // level pipeline: stage s holds the heap index after s+1 decisions
  logic [KW-1:0] k_q   [DEPTH][NT];
  logic [FW-1:0] xs_q  [DEPTH][NF];
  logic [DEPTH:0] vs_q;                 // vs_q[s]: stage s valid, vs_q[DEPTH]: sum valid
  logic signed [15:0] sum_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_q   <= '{default: '0};
      xs_q  <= '{default: '0};
      vs_q  <= '0;
      sum_q <= '0;
    end else begin
      vs_q[0] <= in_valid && in_last;
      xs_q[0] <= x_c;
      for (int t = 0; t < NT; t++) k_q[0][t] <= step(node[t][1], x_c, KW'(1));
      for (int s = 1; s < DEPTH; s++) begin
        vs_q[s] <= vs_q[s-1];
        xs_q[s] <= xs_q[s-1];
        for (int t = 0; t < NT; t++)
          k_q[s][t] <= step(node[t][k_q[s-1][t][DEPTH-1:0]], xs_q[s-1], k_q[s-1][t]);
      end
      vs_q[DEPTH] <= vs_q[DEPTH-1];
      begin
        logic signed [31:0] acc;
        acc = '0;
        for (int t = 0; t < NT; t++) acc += 32'(leaf[t][k_q[DEPTH-1][t][DEPTH-1:0]]);
        sum_q <= sat16(48'(acc));
      end
    end
  end

  // output delay to the reported latency
  logic               v_d [PAD+1];
  logic signed [15:0] s_d [PAD+1];
  assign v_d[0] = vs_q[DEPTH];
  assign s_d[0] = sum_q;
  for (genvar p = 1; p <= PAD; p++) begin : g_pad
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v_d[p] <= 1'b0;
        s_d[p] <= '0;
      end else begin
        v_d[p] <= v_d[p-1];
        s_d[p] <= s_d[p-1];
      end
    end
  end

  assign out_valid   = v_d[PAD];
  assign out_data[0] = s_d[PAD];
endmodule
