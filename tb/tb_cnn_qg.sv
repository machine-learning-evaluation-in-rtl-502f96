// tb_cnn_qg: loads random convolution and dense weights, streams random
// 15x15 images (one pixel per cycle, images back to back and with gaps), and
// compares both class probabilities bit-exactly with a reference that
// computes the whole image at once: 2x2 convolution over p/256, ReLU, 2x2
// max-pooling, dense layer, softmax approximation. Checks the 233-cycle
// latency from the cycle in which the first pixel is presented.
module tb_cnn_qg;
  import gep_pkg::*;
  localparam int IMG = 15, NF = 4, NO = 2, NIMG = 8, LAT = 233;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, out_valid;
  word_t in_data = '0;
  word_t out_data [NO];
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  word_t cfg_data = '0;
  int checks = 0, failures = 0, cyc = 0, nout = 0;
  int cw [NF][4], cb [NF], dw [NO][196], db [NO];
  int img [NIMG][IMG][IMG];
  int first_cycle [NIMG];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  cnn_qg dut (.*);

  function automatic int sat(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction
  function automatic int ref_exp(int d);
    longint y; int n, f;
    y = (longint'(d) * 23637) >>> 14;
    n = int'(y >>> 10); f = int'(y & 1023);
    return (n >= 15) ? 0 : ((16384 - f * 8) >>> n);
  endfunction

  task automatic reference(input int k, output int p [NO]);
    int conv [14][14][NF], pool [7][7][NF], z [NO], e [NO], m, sum;
    longint acc;
    for (int i = 0; i < 14; i++) for (int j = 0; j < 14; j++) for (int f = 0; f < NF; f++) begin
      acc = longint'(img[k][i][j]) * cw[f][0] + longint'(img[k][i][j+1]) * cw[f][1]
          + longint'(img[k][i+1][j]) * cw[f][2] + longint'(img[k][i+1][j+1]) * cw[f][3];
      conv[i][j][f] = sat((acc >>> 8) + cb[f]);
      if (conv[i][j][f] < 0) conv[i][j][f] = 0;
    end
    for (int i = 0; i < 7; i++) for (int j = 0; j < 7; j++) for (int f = 0; f < NF; f++) begin
      m = conv[2*i][2*j][f];
      if (conv[2*i][2*j+1][f] > m) m = conv[2*i][2*j+1][f];
      if (conv[2*i+1][2*j][f] > m) m = conv[2*i+1][2*j][f];
      if (conv[2*i+1][2*j+1][f] > m) m = conv[2*i+1][2*j+1][f];
      pool[i][j][f] = m;
    end
    m = -100000;
    for (int o = 0; o < NO; o++) begin
      acc = 0;
      for (int i = 0; i < 7; i++) for (int j = 0; j < 7; j++) for (int f = 0; f < NF; f++)
        acc += longint'(pool[i][j][f]) * dw[o][(i*7+j)*NF + f];
      z[o] = sat((acc >>> 10) + db[o]);
      if (z[o] > m) m = z[o];
    end
    sum = 0;
    for (int o = 0; o < NO; o++) begin e[o] = ref_exp(m - z[o]); sum += e[o]; end
    for (int o = 0; o < NO; o++) p[o] = (e[o] * 16384) / sum;
  endtask

  task automatic cfg(int a, int v);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_data = word_t'(v);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int p [NO];
    reference(nout, p);
    for (int o = 0; o < NO; o++) begin
      checks++;
      if (int'(out_data[o]) != p[o]) begin
        failures++;
        $display("image %0d class %0d: got %0d exp %0d", nout, o, out_data[o], p[o]);
      end
    end
    checks++;
    if (cyc - first_cycle[nout] != LAT) begin
      failures++;
      $display("latency %0d, expected %0d", cyc - first_cycle[nout], LAT);
    end
    nout++;
  end

  initial begin
    for (int f = 0; f < NF; f++) begin
      cb[f] = int'($urandom_range(0, 1024)) - 512;
      for (int t = 0; t < 4; t++) cw[f][t] = int'($urandom_range(0, 4096)) - 2048;
    end
    for (int o = 0; o < NO; o++) begin
      db[o] = int'($urandom_range(0, 1024)) - 512;
      for (int i = 0; i < 196; i++) dw[o][i] = int'($urandom_range(0, 400)) - 200;
    end
    for (int k = 0; k < NIMG; k++)
      for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++)
        img[k][r][c] = (r == 7 && c == 7) ? 255 : $urandom_range(0, 255) >> ($urandom_range(0, 3));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) for (int t = 0; t < 4; t++) cfg(f*4 + t, cw[f][t]);
    for (int f = 0; f < NF; f++) cfg(16 + f, cb[f]);
    for (int o = 0; o < NO; o++) for (int i = 0; i < 196; i++) cfg(20 + o*196 + i, dw[o][i]);
    for (int o = 0; o < NO; o++) cfg(412 + o, db[o]);
    @(negedge clk) cfg_we = 0;
    for (int k = 0; k < NIMG; k++) begin
      for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++) begin
        @(negedge clk);
        in_valid = 1; in_data = word_t'(img[k][r][c]); in_last = (r == IMG-1 && c == IMG-1);
        if (r == 0 && c == 0) first_cycle[k] = cyc;
      end
      if (k % 2 == 1) begin @(negedge clk) in_valid = 0; in_last = 0; end
    end
    @(negedge clk) in_valid = 0; in_last = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (nout != NIMG) begin failures++; $display("%0d results for %0d images", nout, NIMG); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
