// tb_dnn_btag: loads random weights through the configuration port, streams
// random 16-feature events back to back, and compares the five outputs
// bit-exactly with a reference forward pass (Q6.10 dense layers with ReLU,
// then the documented softmax approximation). Also checks the 10-cycle
// latency from the cycle in which in_last is presented.
module tb_dnn_btag;
  import gep_pkg::*;
  localparam int NI = 16, NH1 = 32, NH2 = 32, NO = 5, NEV = 40, LAT = 10;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, out_valid;
  word_t in_data = '0;
  word_t out_data [NO];
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  word_t cfg_data = '0;
  int checks = 0, failures = 0;
  int cyc = 0, nout = 0;

  int w1 [NH1][NI], b1 [NH1], w2 [NH2][NH1], b2 [NH2], w3 [NO][NH2], b3 [NO];
  int x [NEV][NI];
  int last_cycle [NEV];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  dnn_btag dut (.*);

  function automatic int sat(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction
  function automatic int ref_exp(int d);
    longint y; int n, f;
    y = (longint'(d) * 23637) >>> 14;
    n = int'(y >>> 10); f = int'(y & 1023);
    return (n >= 15) ? 0 : ((16384 - f * 8) >>> n);
  endfunction

  task automatic forward(input int xi [NI], output int p [NO]);
    int h1 [NH1], h2 [NH2], z [NO], e [NO], m, sum;
    longint acc;
    for (int j = 0; j < NH1; j++) begin
      acc = longint'(b1[j]) * 1024;
      for (int i = 0; i < NI; i++) acc += longint'(xi[i]) * w1[j][i];
      h1[j] = sat(acc >>> 10); if (h1[j] < 0) h1[j] = 0;
    end
    for (int j = 0; j < NH2; j++) begin
      acc = longint'(b2[j]) * 1024;
      for (int i = 0; i < NH1; i++) acc += longint'(h1[i]) * w2[j][i];
      h2[j] = sat(acc >>> 10); if (h2[j] < 0) h2[j] = 0;
    end
    m = -100000;
    for (int j = 0; j < NO; j++) begin
      acc = longint'(b3[j]) * 1024;
      for (int i = 0; i < NH2; i++) acc += longint'(h2[i]) * w3[j][i];
      z[j] = sat(acc >>> 10);
      if (z[j] > m) m = z[j];
    end
    sum = 0;
    for (int j = 0; j < NO; j++) begin e[j] = ref_exp(m - z[j]); sum += e[j]; end
    for (int j = 0; j < NO; j++) p[j] = (e[j] * 16384) / sum;
  endtask

  task automatic cfg(int a, int v);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_data = word_t'(v);
  endtask

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int p [NO];
    forward(x[nout], p);
    for (int j = 0; j < NO; j++) begin
      checks++;
      if (int'(out_data[j]) != p[j]) begin
        failures++;
        $display("event %0d class %0d: got %0d exp %0d", nout, j, out_data[j], p[j]);
      end
    end
    checks++;
    if (cyc - last_cycle[nout] != LAT) begin
      failures++;
      $display("latency %0d, expected %0d", cyc - last_cycle[nout], LAT);
    end
    nout++;
  end

  initial begin
    for (int j = 0; j < NH1; j++) begin b1[j] = rnd(-512, 512); for (int i = 0; i < NI; i++) w1[j][i] = rnd(-300, 300); end
    for (int j = 0; j < NH2; j++) begin b2[j] = rnd(-512, 512); for (int i = 0; i < NH1; i++) w2[j][i] = rnd(-200, 200); end
    for (int j = 0; j < NO; j++)  begin b3[j] = rnd(-512, 512); for (int i = 0; i < NH2; i++) w3[j][i] = rnd(-200, 200); end
    for (int e = 0; e < NEV; e++) for (int i = 0; i < NI; i++) x[e][i] = rnd(-2048, 2048);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < NH1; j++) for (int i = 0; i < NI; i++) cfg(j*NI + i, w1[j][i]);
    for (int j = 0; j < NH1; j++) cfg(512 + j, b1[j]);
    for (int j = 0; j < NH2; j++) for (int i = 0; i < NH1; i++) cfg(544 + j*NH1 + i, w2[j][i]);
    for (int j = 0; j < NH2; j++) cfg(1568 + j, b2[j]);
    for (int j = 0; j < NO; j++) for (int i = 0; i < NH2; i++) cfg(1600 + j*NH2 + i, w3[j][i]);
    for (int j = 0; j < NO; j++) cfg(1760 + j, b3[j]);
    @(negedge clk) cfg_we = 0;
    for (int e = 0; e < NEV; e++) begin
      for (int i = 0; i < NI; i++) begin
        @(negedge clk);
        in_valid = 1; in_data = word_t'(x[e][i]); in_last = (i == NI-1);
        if (in_last) last_cycle[e] = cyc;
      end
      if (e % 3 == 2) begin @(negedge clk) in_valid = 0; in_last = 0; end
    end
    @(negedge clk) in_valid = 0; in_last = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (nout != NEV) begin failures++; $display("%0d results for %0d events", nout, NEV); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
