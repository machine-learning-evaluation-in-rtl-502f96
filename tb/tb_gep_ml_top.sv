// tb_gep_ml_top: end-to-end run of the whole ML processor at its default
// sizes. Five producers on their own clocks send events into the four APPs
// (the B-tagging DNN gets 8 features from each of sources 0 and 1, source 1
// lagging by a random skew; the VBF BDT 5 features; the MET BDT 8 features;
// the q/g CNN a 15x15 image). Random weights and trees are loaded first. A
// consumer on a fourth clock reads every result event from the output banks,
// sometimes pausing so the banks fill, and compares it with a reference
// computation of the same model. Counted mechanisms, each of which must occur:
// the skew stall of the two-source APP, a downstream-full stall, an input
// bank reporting full, and completed events of every APP.
module tb_gep_ml_top;
  import gep_pkg::*;
  localparam int N_UP = 5, N_APP = 4, AW = 8;
  localparam int NEV [N_APP] = '{10, 10, 10, 5};
  localparam int NOUT [N_APP] = '{5, 1, 1, 2};

  logic [N_UP-1:0] up_clk = '0, up_rst_n = '0, up_wr_en = '0, up_commit = '0, up_full;
  logic [AW-1:0] up_wr_addr [N_UP];
  word_t up_wr_data [N_UP];
  logic clk_nn = 0, rst_nn_n = 0, clk_bdt = 0, rst_bdt_n = 0, out_clk = 0, out_rst_n = 0;
  logic [N_APP-1:0] cfg_we = '0;
  logic [CFG_AW-1:0] cfg_addr [N_APP];
  word_t cfg_data [N_APP];
  logic [N_APP-1:0] out_ready, out_release = '0;
  logic [AW-1:0] out_rd_addr [N_APP];
  word_t out_rd_data [N_APP];
  logic [N_APP-1:0] event_done, stall_skew, stall_full;

  int checks = 0, failures = 0;
  int n_skew = 0, n_full = 0, n_upfull = 0;
  int nres [N_APP] = '{0, 0, 0, 0};
  int cfg_done = 0;

  always #2.1 up_clk[0] = ~up_clk[0];
  always #2.9 up_clk[1] = ~up_clk[1];
  always #1.9 up_clk[2] = ~up_clk[2];
  always #2.3 up_clk[3] = ~up_clk[3];
  always #1.3 up_clk[4] = ~up_clk[4];
  always #2.5 clk_nn = ~clk_nn;          // 200 MHz
  always #1.5625 clk_bdt = ~clk_bdt;     // 320 MHz
  always #2.0 out_clk = ~out_clk;

  gep_ml_top dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  // ---------------- models and reference computations ----------------
  function automatic int sat(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction
  function automatic int ref_exp(int d);
    longint y; int n, f;
    y = (longint'(d) * 23637) >>> 14;
    n = int'(y >>> 10); f = int'(y & 1023);
    return (n >= 15) ? 0 : ((16384 - f * 8) >>> n);
  endfunction
  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  // DNN 16-32-32-5
  int w1 [32][16], b1 [32], w2 [32][32], b2 [32], w3 [5][32], b3 [5];
  int xd [10][16];
  task automatic ref_dnn(input int e, output int p [5]);
    int h1 [32], h2 [32], z [5], ex [5], m, sum;
    longint acc;
    for (int j = 0; j < 32; j++) begin
      acc = longint'(b1[j]) * 1024;
      for (int i = 0; i < 16; i++) acc += longint'(xd[e][i]) * w1[j][i];
      h1[j] = sat(acc >>> 10); if (h1[j] < 0) h1[j] = 0;
    end
    for (int j = 0; j < 32; j++) begin
      acc = longint'(b2[j]) * 1024;
      for (int i = 0; i < 32; i++) acc += longint'(h1[i]) * w2[j][i];
      h2[j] = sat(acc >>> 10); if (h2[j] < 0) h2[j] = 0;
    end
    m = -100000;
    for (int j = 0; j < 5; j++) begin
      acc = longint'(b3[j]) * 1024;
      for (int i = 0; i < 32; i++) acc += longint'(h2[i]) * w3[j][i];
      z[j] = sat(acc >>> 10); if (z[j] > m) m = z[j];
    end
    sum = 0;
    for (int j = 0; j < 5; j++) begin ex[j] = ref_exp(m - z[j]); sum += ex[j]; end
    for (int j = 0; j < 5; j++) p[j] = (ex[j] * 16384) / sum;
  endtask

  // BDTs: index 0 = VBF (10 trees, depth 4, 5 features), 1 = MET (40, 6, 8)
  int feat [2][40][64], thr [2][40][64], leafv [2][40][64];
  int xb [2][10][8];
  function automatic int ref_bdt(int m, int e);
    int nt, depth, nn, s;
    nt = (m == 0) ? 10 : 40; depth = (m == 0) ? 4 : 6; nn = 1 << depth;
    s = 0;
    for (int t = 0; t < nt; t++) begin
      int k;
      k = 1;
      for (int d = 0; d < depth; d++) k = 2*k + ((xb[m][e][feat[m][t][k]] > thr[m][t][k]) ? 1 : 0);
      s += leafv[m][t][k - nn];
    end
    return sat(s);
  endfunction

  // CNN
  int cw [4][4], cb [4], dw [2][196], db [2];
  int img [5][15][15];
  task automatic ref_cnn(input int k, output int p [2]);
    int conv [14][14][4], pool [7][7][4], z [2], ex [2], m, sum;
    longint acc;
    for (int i = 0; i < 14; i++) for (int j = 0; j < 14; j++) for (int f = 0; f < 4; f++) begin
      acc = longint'(img[k][i][j]) * cw[f][0] + longint'(img[k][i][j+1]) * cw[f][1]
          + longint'(img[k][i+1][j]) * cw[f][2] + longint'(img[k][i+1][j+1]) * cw[f][3];
      conv[i][j][f] = sat((acc >>> 8) + cb[f]);
      if (conv[i][j][f] < 0) conv[i][j][f] = 0;
    end
    for (int i = 0; i < 7; i++) for (int j = 0; j < 7; j++) for (int f = 0; f < 4; f++) begin
      m = conv[2*i][2*j][f];
      if (conv[2*i][2*j+1][f] > m) m = conv[2*i][2*j+1][f];
      if (conv[2*i+1][2*j][f] > m) m = conv[2*i+1][2*j][f];
      if (conv[2*i+1][2*j+1][f] > m) m = conv[2*i+1][2*j+1][f];
      pool[i][j][f] = m;
    end
    m = -100000;
    for (int o = 0; o < 2; o++) begin
      acc = 0;
      for (int i = 0; i < 7; i++) for (int j = 0; j < 7; j++) for (int f = 0; f < 4; f++)
        acc += longint'(pool[i][j][f]) * dw[o][(i*7+j)*4 + f];
      z[o] = sat((acc >>> 10) + db[o]); if (z[o] > m) m = z[o];
    end
    sum = 0;
    for (int o = 0; o < 2; o++) begin ex[o] = ref_exp(m - z[o]); sum += ex[o]; end
    for (int o = 0; o < 2; o++) p[o] = (ex[o] * 16384) / sum;
  endtask

  // expected result words of event e of APP a
  task automatic expected(input int a, input int e, output int r [5]);
    int p5 [5], p2 [2];
    r = '{0, 0, 0, 0, 0};
    case (a)
      0: begin ref_dnn(e, p5); r = p5; end
      1: r[0] = ref_bdt(0, e);
      2: r[0] = ref_bdt(1, e);
      default: begin ref_cnn(e, p2); r[0] = p2[0]; r[1] = p2[1]; end
    endcase
  endtask

  // payload word i (1-based) of event e from source s
  function automatic int payload(int s, int e, int i);
    case (s)
      0: return xd[e][i-1];
      1: return xd[e][8 + i-1];
      2: return xb[0][e][i-1];
      3: return xb[1][e][i-1];
      default: return img[e][(i-1) / 15][(i-1) % 15];
    endcase
  endfunction

  // ---------------- stimulus ----------------
  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < 32; j++) begin b1[j] = rnd(-512, 512); for (int i = 0; i < 16; i++) w1[j][i] = rnd(-300, 300); end
    for (int j = 0; j < 32; j++) begin b2[j] = rnd(-512, 512); for (int i = 0; i < 32; i++) w2[j][i] = rnd(-200, 200); end
    for (int j = 0; j < 5; j++)  begin b3[j] = rnd(-512, 512); for (int i = 0; i < 32; i++) w3[j][i] = rnd(-200, 200); end
    for (int e = 0; e < 10; e++) for (int i = 0; i < 16; i++) xd[e][i] = rnd(-2048, 2048);
    for (int m = 0; m < 2; m++) for (int t = 0; t < 40; t++) for (int k = 0; k < 64; k++) begin
      feat[m][t][k] = $urandom_range(0, (m == 0) ? 4 : 7);
      thr[m][t][k] = $urandom_range(0, 4095);
      leafv[m][t][k] = rnd(-500, 500);
    end
    for (int m = 0; m < 2; m++) for (int e = 0; e < 10; e++) for (int f = 0; f < 8; f++)
      xb[m][e][f] = (m == 0 && f == 4) ? $urandom_range(0, 127) : $urandom_range(0, 4095);
    for (int f = 0; f < 4; f++) begin cb[f] = rnd(-512, 512); for (int t = 0; t < 4; t++) cw[f][t] = rnd(-2048, 2048); end
    for (int o = 0; o < 2; o++) begin db[o] = rnd(-512, 512); for (int i = 0; i < 196; i++) dw[o][i] = rnd(-200, 200); end
    for (int k = 0; k < 5; k++) for (int r = 0; r < 15; r++) for (int c = 0; c < 15; c++)
      img[k][r][c] = (r == 7 && c == 7) ? 255 : $urandom_range(0, 255) >> $urandom_range(0, 3);
  end

  // weight loading, one process per APP on its clock
  task automatic cfg_word(int a, int addr, int v);
    if (a == 1 || a == 2) @(negedge clk_bdt); else @(negedge clk_nn);
    cfg_we[a] = 1; cfg_addr[a] = CFG_AW'(addr); cfg_data[a] = word_t'(v);
  endtask
  task automatic cfg_end(int a);
    if (a == 1 || a == 2) @(negedge clk_bdt); else @(negedge clk_nn);
    cfg_we[a] = 0;
    cfg_done++;
  endtask

  initial begin
    for (int a = 0; a < N_APP; a++) begin cfg_addr[a] = '0; cfg_data[a] = '0; end
    #1;
    repeat (4) @(negedge clk_nn);
    rst_nn_n = 1; rst_bdt_n = 1; out_rst_n = 1; up_rst_n = '1;
    fork
      begin
        for (int j = 0; j < 32; j++) for (int i = 0; i < 16; i++) cfg_word(0, j*16 + i, w1[j][i]);
        for (int j = 0; j < 32; j++) cfg_word(0, 512 + j, b1[j]);
        for (int j = 0; j < 32; j++) for (int i = 0; i < 32; i++) cfg_word(0, 544 + j*32 + i, w2[j][i]);
        for (int j = 0; j < 32; j++) cfg_word(0, 1568 + j, b2[j]);
        for (int j = 0; j < 5; j++) for (int i = 0; i < 32; i++) cfg_word(0, 1600 + j*32 + i, w3[j][i]);
        for (int j = 0; j < 5; j++) cfg_word(0, 1760 + j, b3[j]);
        cfg_end(0);
      end
      begin
        for (int t = 0; t < 10; t++) for (int k = 1; k < 32; k++)
          cfg_word(1, t*32 + k, (k < 16) ? ((feat[0][t][k] << 12) | thr[0][t][k]) : leafv[0][t][k-16]);
        cfg_end(1);
      end
      begin
        for (int t = 0; t < 40; t++) for (int k = 1; k < 128; k++)
          cfg_word(2, t*128 + k, (k < 64) ? ((feat[1][t][k] << 12) | thr[1][t][k]) : leafv[1][t][k-64]);
        cfg_end(2);
      end
      begin
        for (int f = 0; f < 4; f++) for (int t = 0; t < 4; t++) cfg_word(3, f*4 + t, cw[f][t]);
        for (int f = 0; f < 4; f++) cfg_word(3, 16 + f, cb[f]);
        for (int o = 0; o < 2; o++) for (int i = 0; i < 196; i++) cfg_word(3, 20 + o*196 + i, dw[o][i]);
        for (int o = 0; o < 2; o++) cfg_word(3, 412 + o, db[o]);
        cfg_end(3);
      end
    join
  end

  // producers
  for (genvar s = 0; s < N_UP; s++) begin : g_prod
    initial begin
      int n, ne;
      n  = (s <= 1) ? 8 : (s == 2) ? 5 : (s == 3) ? 8 : 225;
      ne = (s <= 1) ? NEV[0] : NEV[s-1];
      up_wr_addr[s] = '0; up_wr_data[s] = '0;
      wait (cfg_done == N_APP);
      for (int e = 0; e < ne; e++) begin
        if (s == 1) repeat ($urandom_range(5, 40)) @(negedge up_clk[s]);   // skew
        @(negedge up_clk[s]);
        while (up_full[s]) begin n_upfull++; @(negedge up_clk[s]); end
        for (int i = 1; i <= n; i++) begin
          up_wr_en[s] = 1; up_wr_addr[s] = AW'(i); up_wr_data[s] = word_t'(payload(s, e, i));
          @(negedge up_clk[s]);
        end
        up_wr_addr[s] = '0; up_wr_data[s] = word_t'(n); up_commit[s] = 1;
        @(negedge up_clk[s]);
        up_wr_en[s] = 0; up_commit[s] = 0;
      end
    end
  end

  always @(posedge clk_nn) begin
    if (stall_skew[0]) n_skew++;
    if (stall_full[0] || stall_full[3]) n_full++;
  end
  always @(posedge clk_bdt) if (stall_full[1] || stall_full[2]) n_full++;

  // shortest spacing between event_done pulses of each APP, in its own clock
  int gap [N_APP] = '{default: 0};
  int min_gap [N_APP] = '{default: 1 << 30};
  for (genvar a = 0; a < N_APP; a++) begin : g_gap
    logic app_clk;
    if (a == 1 || a == 2) begin : g_b
      assign app_clk = clk_bdt;
    end else begin : g_n
      assign app_clk = clk_nn;
    end
    always @(posedge app_clk) begin
      if (event_done[a]) begin
        if (gap[a] > 0 && gap[a] < min_gap[a]) min_gap[a] = gap[a];
        gap[a] = 1;
      end else if (gap[a] > 0) begin
        gap[a]++;
      end
    end
  end

  // consumers, one per result bank
  for (genvar a = 0; a < N_APP; a++) begin : g_cons
    initial begin
      out_rd_addr[a] = '0;
      wait (cfg_done == N_APP);
      // hold off at first so the result banks fill up
      repeat (3000) @(negedge out_clk);
      for (int e = 0; e < NEV[a]; e++) begin
        int exp_r [5], hdr;
        @(negedge out_clk);
        while (!out_ready[a]) @(negedge out_clk);
        expected(a, e, exp_r);
        out_rd_addr[a] = 0;
        @(negedge out_clk);
        hdr = out_rd_data[a];
        check(hdr == NOUT[a], $sformatf("APP %0d event %0d: header %0d", a, e, hdr));
        for (int i = 1; i <= NOUT[a]; i++) begin
          out_rd_addr[a] = AW'(i);
          @(negedge out_clk);
          check(int'(signed'(out_rd_data[a])) == exp_r[i-1],
                $sformatf("APP %0d event %0d word %0d: got %0d exp %0d", a, e, i,
                          signed'(out_rd_data[a]), exp_r[i-1]));
        end
        out_release[a] = 1;
        @(negedge out_clk) out_release[a] = 0;
        nres[a]++;
        repeat ($urandom_range(0, 30)) @(negedge out_clk);
      end
    end
  end

  initial begin
    wait (nres[0] == NEV[0] && nres[1] == NEV[1] && nres[2] == NEV[2] && nres[3] == NEV[3]);
    repeat (100) @(negedge out_clk);
    check(out_ready == '0, "no extra results");
    check(n_skew > 0, "skew stall occurred");
    check(n_full > 0, "downstream-full stall occurred");
    check(n_upfull > 0, "input bank full occurred");
    for (int a = 0; a < N_APP; a++) check(nres[a] == NEV[a], $sformatf("APP %0d completed events", a));
    // back-to-back events: read headers + payload + core latency + write-back
    check(min_gap[0] == 43,  $sformatf("DNN APP event period %0d", min_gap[0]));
    check(min_gap[1] == 21,  $sformatf("VBF APP event period %0d", min_gap[1]));
    check(min_gap[2] == 28,  $sformatf("MET APP event period %0d", min_gap[2]));
    check(min_gap[3] == 244, $sformatf("CNN APP event period %0d", min_gap[3]));
    $display("events: DNN %0d VBF %0d MET %0d CNN %0d; skew stall cycles %0d, full stall cycles %0d, input-full cycles %0d",
             nres[0], nres[1], nres[2], nres[3], n_skew, n_full, n_upfull);
    $display("shortest event period in cycles: DNN %0d VBF %0d MET %0d CNN %0d",
             min_gap[0], min_gap[1], min_gap[2], min_gap[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
