// tb_app: an APP with two upstream sources on their own clocks feeding an
// APU that runs the VBF BDT on a third clock. Source 0 delivers three
// features per event and source 1 two, source 1 lagging by a random skew.
// The producers fill the banks until they report full, the downstream side
// sometimes reports full. Checks: every event's score (reference tree walk
// over the five features in source order) arrives in event order with the
// header word, none is lost or duplicated, and the skew stall, the
// downstream-full stall and the input-bank-full condition each occur.
module tb_app;
  import gep_pkg::*;
  localparam int NT = 10, DEPTH = 4, NF = 5, NN = 16, NEV = 40, NSLOT = 4, BDEPTH = 16;
  localparam int AW = $clog2(BDEPTH), SW = $clog2(NSLOT);
  logic [1:0] up_clk = '0, up_rst_n = '0, up_wr_en = '0, up_commit = '0, up_full;
  logic [AW-1:0] up_wr_addr [2];
  word_t up_wr_data [2];
  logic [SW-1:0] up_slot [2];
  logic clk = 0, rst_n = 0;
  logic dn_wr_en, dn_commit, dn_full = 0, cfg_we = 0;
  logic [AW-1:0] dn_wr_addr;
  word_t dn_wr_data;
  logic [CFG_AW-1:0] cfg_addr = '0;
  word_t cfg_data = '0;
  logic busy, event_done, stall_skew, stall_full;

  int feat [NT][NN], thr [NT][NN], leafv [NT][NN];
  int x [NEV][NF];
  int checks = 0, failures = 0;
  int nres = 0, n_skew = 0, n_full = 0, n_upfull = 0;
  bit cfg_done = 0;
  word_t dn_mem [BDEPTH];

  always #2.5 up_clk[0] = ~up_clk[0];
  always #3.7 up_clk[1] = ~up_clk[1];
  always #1.6 clk = ~clk;

  app #(.MODEL(MODEL_BDT_VBF), .N_SRC(2), .NSLOT(NSLOT), .DEPTH(BDEPTH)) dut (.*);

  function automatic int score(int e);
    int s;
    s = 0;
    for (int t = 0; t < NT; t++) begin
      int k;
      k = 1;
      for (int d = 0; d < DEPTH; d++) k = 2*k + ((x[e][feat[t][k]] > thr[t][k]) ? 1 : 0);
      s += leafv[t][k - NN];
    end
    return s;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producers: source s sends features [base, base+n) of each event
  for (genvar s = 0; s < 2; s++) begin : g_prod
    initial begin
      int base, n;
      base = (s == 0) ? 0 : 3;
      n    = (s == 0) ? 3 : 2;
      up_wr_addr[s] = '0; up_wr_data[s] = '0;
      repeat (4) @(posedge up_clk[s]);
      up_rst_n[s] = 1;
      wait (cfg_done);
      for (int e = 0; e < NEV; e++) begin
        if (s == 1) repeat ($urandom_range(0, 20)) @(negedge up_clk[s]);   // skew
        @(negedge up_clk[s]);
        while (up_full[s]) begin n_upfull++; @(negedge up_clk[s]); end
        for (int i = 1; i <= n; i++) begin
          up_wr_en[s] = 1; up_wr_addr[s] = AW'(i); up_wr_data[s] = word_t'(x[e][base + i - 1]);
          @(negedge up_clk[s]);
        end
        up_wr_addr[s] = '0; up_wr_data[s] = word_t'(n); up_commit[s] = 1;
        @(negedge up_clk[s]);
        up_wr_en[s] = 0; up_commit[s] = 0;
      end
    end
  end

  // downstream: capture each committed event, sometimes report full
  always @(posedge clk) begin
    if (stall_skew) n_skew++;
    if (stall_full) n_full++;
    if (dn_wr_en) dn_mem[dn_wr_addr] = dn_wr_data;
    if (dn_commit) begin
      check(dn_mem[0] == 1, "result header is 1");
      check(int'(signed'(dn_mem[1])) == score(nres),
            $sformatf("event %0d: score %0d, expected %0d", nres, signed'(dn_mem[1]), score(nres)));
      nres++;
    end
  end
  initial forever begin
    @(negedge clk);
    dn_full = ($urandom_range(0, 9) == 0) ? ~dn_full : dn_full;
  end

  initial begin
    for (int t = 0; t < NT; t++) for (int k = 0; k < NN; k++) begin
      feat[t][k] = $urandom_range(0, NF-1);
      thr[t][k] = $urandom_range(0, 4095);
      leafv[t][k] = int'($urandom_range(0, 2000)) - 1000;
    end
    for (int e = 0; e < NEV; e++) for (int f = 0; f < NF; f++) x[e][f] = $urandom_range(0, 4095);
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) for (int k = 1; k < 2*NN; k++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = CFG_AW'(t*2*NN + k);
      cfg_data = (k < NN) ? word_t'((feat[t][k] << 12) | thr[t][k]) : word_t'(leafv[t][k-NN]);
    end
    @(negedge clk) cfg_we = 0;
    cfg_done = 1;
    wait (nres == NEV);
    repeat (50) @(negedge clk);
    check(nres == NEV, "no extra results");
    check(n_skew > 0, "skew stall occurred");
    check(n_full > 0, "downstream-full stall occurred");
    check(n_upfull > 0, "input bank full occurred");
    $display("results %0d, skew stall cycles %0d, full stall cycles %0d, upstream full cycles %0d",
             nres, n_skew, n_full, n_upfull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
