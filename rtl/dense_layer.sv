// dense_layer: fully parallel fixed-point dense (fully connected) layer.
//
// y_j = act( sum_i w[j][i]*x[i] + b[j] ) for j = 0..NO-1, all Q6.10.
// Two register stages: all NO*NI products are registered in the first, the
// sums (bias added, rescaled to Q6.10, saturated, optionally passed through
// ReLU) in the second, so out_valid follows in_valid by 2 cycles and a new
// input vector can be accepted every cycle. The weights are inputs, held by
// the parent in loadable registers.
//
// This mirrors the fully unrolled dense layers hls4ml generates in its
// latency strategy; the two-stage split and the formats are this design's.
module dense_layer
  import gep_pkg::*;
#(
  parameter int unsigned NI   = 16,
  parameter int unsigned NO   = 32,
  parameter bit          RELU = 1'b1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  sword_t x [NI],
  input  sword_t w [NO][NI],
  input  sword_t b [NO],
  output logic   out_valid,
  output sword_t y [NO]
);
  logic signed [31:0] prod [NO][NI];
  logic               vld1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld1      <= 1'b0;
      out_valid <= 1'b0;
      for (int j = 0; j < NO; j++) begin
        y[j] <= '0;
        for (int i = 0; i < NI; i++) prod[j][i] <= '0;
      end
    end else begin
      vld1      <= in_valid;
      out_valid <= vld1;
      for (int j = 0; j < NO; j++)
        for (int i = 0; i < NI; i++)
          prod[j][i] <= 32'(x[i]) * 32'(w[j][i]);
      for (int j = 0; j < NO; j++) begin
        logic signed [47:0] acc;
        sword_t             s;
        acc = 48'(b[j]) <<< FRAC_W;
        for (int i = 0; i < NI; i++) acc += 48'(prod[j][i]);
        s = sat16(acc >>> FRAC_W);
        y[j] <= (RELU && s < 0) ? 16'sd0 : s;
      end
    end
  end
endmodule
