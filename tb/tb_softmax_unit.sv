// tb_softmax_unit: feeds random Q6.10 logit vectors back to back, checks
// every output bit-exactly against a reference of the documented
// approximation (2**-y with the chord on the fractional part), checks it
// against the true softmax within 0.06 absolute, checks that the outputs
// are produced exactly 4 cycles after the inputs, and that the largest logit
// gets the largest probability.
module tb_softmax_unit;
  import gep_pkg::*;
  localparam int unsigned N = 5, NVEC = 300, LAT = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  sword_t logit [N];
  word_t  prob  [N];
  int checks = 0, failures = 0;
  sword_t vecs [NVEC][N];
  int in_cycle [NVEC];
  int cyc = 0, nout = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  softmax_unit #(.N(N)) dut (.*);

  function automatic int ref_exp(int d);
    longint y; int n, f, mant;
    y = (longint'(d) * 23637) >>> 14;
    n = int'(y >>> 10);
    f = int'(y & 1023);
    mant = 16384 - f * 8;
    return (n >= 15) ? 0 : (mant >>> n);
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(negedge clk) if (rst_n && out_valid) begin
    int m, e [N], sum, imax, pmax;
    real rs, rp;
    m = -100000; imax = 0;
    for (int i = 0; i < N; i++) if (int'(vecs[nout][i]) > m) begin m = vecs[nout][i]; imax = i; end
    sum = 0;
    for (int i = 0; i < N; i++) begin e[i] = ref_exp(m - int'(vecs[nout][i])); sum += e[i]; end
    rs = 0.0;
    for (int i = 0; i < N; i++) rs += $exp((real'(vecs[nout][i]) - real'(m)) / 1024.0);
    pmax = 0;
    for (int i = 0; i < N; i++) begin
      int expv;
      expv = (e[i] * 16384) / sum;
      checks++;
      if (int'(prob[i]) != expv) begin
        failures++;
        $display("vec %0d class %0d: got %0d exp %0d", nout, i, prob[i], expv);
      end
      rp = $exp((real'(vecs[nout][i]) - real'(m)) / 1024.0) / rs;
      checks++;
      if ((real'(prob[i]) / 16384.0 - rp) > 0.06 || (rp - real'(prob[i]) / 16384.0) > 0.06) begin
        failures++;
        $display("vec %0d class %0d: %f far from softmax %f", nout, i, real'(prob[i]) / 16384.0, rp);
      end
      if (int'(prob[i]) > pmax) pmax = prob[i];
    end
    checks++;
    if (int'(prob[imax]) != pmax) begin failures++; $display("argmax not preserved"); end
    checks++;
    if (cyc - in_cycle[nout] != LAT) begin
      failures++;
      $display("latency %0d, expected %0d", cyc - in_cycle[nout], LAT);
    end
    nout++;
  end

  initial begin
    for (int i = 0; i < N; i++) logit[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NVEC; v++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        // spread from a few hundredths up to +-8.0
        vecs[v][i] = sword_t'(int'($urandom_range(0, 16383)) - 8192) >>> (v % 4);
        logit[i]   = vecs[v][i];
      end
      in_valid = 1;
      in_cycle[v] = cyc;
      if (v % 7 == 6) begin @(negedge clk) in_valid = 0; end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (nout != NVEC) begin failures++; $display("%0d outputs for %0d inputs", nout, NVEC); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
