// bdt_check: drives one bdt_engine configuration for tb_bdt_engine and
// compares its scores with a reference tree walk (x[f] > threshold goes
// right; heap-ordered nodes and leaves as documented in bdt_engine).
module bdt_check
  import gep_pkg::*;
#(
  parameter int NT = 10, DEPTH = 4, NF = 5, LATENCY = 7
) (
  input  logic clk,
  input  logic rst_n,
  input  int   cyc,
  ref    int   checks,
  ref    int   failures,
  output bit   done
);
  localparam int NN = 2**DEPTH, NEV = 60;
  logic in_valid = 0, in_last = 0, out_valid;
  word_t in_data = '0;
  word_t out_data [1];
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  word_t cfg_data = '0;
  int feat [NT][NN], thr [NT][NN], leafv [NT][NN];
  int x [NEV][NF];
  int last_cycle [NEV];
  int nout = 0;

  bdt_engine #(.NT(NT), .DEPTH(DEPTH), .NF(NF), .FW(12), .LATENCY(LATENCY)) dut (
    .clk, .rst_n, .in_valid, .in_last, .in_data, .out_valid, .out_data,
    .cfg_we, .cfg_addr, .cfg_data);

  function automatic int score(int e);
    int s;
    s = 0;
    for (int t = 0; t < NT; t++) begin
      int k;
      k = 1;
      for (int d = 0; d < DEPTH; d++) k = 2*k + ((x[e][feat[t][k]] > thr[t][k]) ? 1 : 0);
      s += leafv[t][k - NN];
    end
    return (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
  endfunction

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (int'(signed'(out_data[0])) != score(nout)) begin
      failures++;
      $display("NT=%0d event %0d: got %0d exp %0d", NT, nout, signed'(out_data[0]), score(nout));
    end
    checks++;
    if (cyc - last_cycle[nout] != LATENCY) begin
      failures++;
      $display("NT=%0d latency %0d, expected %0d", NT, cyc - last_cycle[nout], LATENCY);
    end
    nout++;
  end

  initial begin
    done = 0;
    for (int t = 0; t < NT; t++)
      for (int k = 0; k < NN; k++) begin
        feat[t][k]  = $urandom_range(0, NF-1);
        thr[t][k]   = $urandom_range(0, 4095);
        leafv[t][k] = int'($urandom_range(0, 2000)) - 1000;
      end
    for (int e = 0; e < NEV; e++)
      for (int f = 0; f < NF; f++) x[e][f] = (e % 5 == 0) ? thr[0][1] : $urandom_range(0, 4095);
    @(posedge rst_n);
    for (int t = 0; t < NT; t++) begin
      for (int k = 1; k < NN; k++) begin
        @(negedge clk);
        cfg_we = 1; cfg_addr = CFG_AW'(t*2*NN + k); cfg_data = word_t'((feat[t][k] << 12) | thr[t][k]);
      end
      for (int k = 0; k < NN; k++) begin
        @(negedge clk);
        cfg_we = 1; cfg_addr = CFG_AW'(t*2*NN + NN + k); cfg_data = word_t'(leafv[t][k]);
      end
    end
    @(negedge clk) cfg_we = 0;
    for (int e = 0; e < NEV; e++) begin
      for (int f = 0; f < NF; f++) begin
        @(negedge clk);
        in_valid = 1; in_data = word_t'(x[e][f]); in_last = (f == NF-1);
        if (in_last) last_cycle[e] = cyc;
      end
      if (e % 4 == 3) begin @(negedge clk) in_valid = 0; in_last = 0; end
    end
    @(negedge clk) in_valid = 0; in_last = 0;
    repeat (LATENCY + 5) @(negedge clk);
    checks++;
    if (nout != NEV) begin failures++; $display("NT=%0d: %0d results for %0d events", NT, nout, NEV); end
    done = 1;
  end
endmodule
