// tb_apu: an APU carrying the VBF BDT, between a modelled input BRAM and a
// modelled downstream port. After loading random trees it runs events of
// five features and checks the written result against a reference tree walk,
// the layout of the output event (score at address 1, header 1 at address 0
// with commit), and the cycle count from event_ready to event_done:
// 4 cycles to the first word, 5 words, the model's 7-cycle latency, then one
// result write and the header write (4 + 5 + 7 + 1 + 1 = 18).
module tb_apu;
  import gep_pkg::*;
  localparam int NT = 10, DEPTH = 4, NF = 5, NN = 16, AW = 8, NEV = 25;
  localparam int EXP_CYCLES = 4 + NF + 7 + 1 + 1;
  logic clk = 0, rst_n = 0, event_ready = 0, event_done;
  logic [0:0] rd_src;
  logic [AW-1:0] rd_addr, dn_wr_addr;
  word_t rd_data, dn_wr_data;
  logic dn_wr_en, dn_commit, cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  word_t cfg_data = '0;
  word_t mem [2**AW];
  int feat [NT][NN], thr [NT][NN], leafv [NT][NN];
  int x [NF];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always_ff @(posedge clk) rd_data <= mem[rd_addr];

  apu #(.MODEL(MODEL_BDT_VBF), .N_SRC(1), .AW(AW)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  function automatic int score();
    int s;
    s = 0;
    for (int t = 0; t < NT; t++) begin
      int k;
      k = 1;
      for (int d = 0; d < DEPTH; d++) k = 2*k + ((x[feat[t][k]] > thr[t][k]) ? 1 : 0);
      s += leafv[t][k - NN];
    end
    return s;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < NT; t++) for (int k = 0; k < NN; k++) begin
      feat[t][k] = $urandom_range(0, NF-1);
      thr[t][k] = $urandom_range(0, 4095);
      leafv[t][k] = int'($urandom_range(0, 2000)) - 1000;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) for (int k = 1; k < 2*NN; k++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = CFG_AW'(t*2*NN + k);
      cfg_data = (k < NN) ? word_t'((feat[t][k] << 12) | thr[t][k]) : word_t'(leafv[t][k-NN]);
    end
    @(negedge clk) cfg_we = 0;
    for (int ev = 0; ev < NEV; ev++) begin
      int cyc, nwr, res;
      mem[0] = NF;
      for (int f = 0; f < NF; f++) begin x[f] = $urandom_range(0, 4095); mem[f+1] = word_t'(x[f]); end
      @(negedge clk) event_ready = 1;
      cyc = 0; nwr = 0; res = 0;
      while (1) begin
        @(posedge clk); #1;
        cyc++;
        if (dn_wr_en) begin
          if (nwr == 0) begin
            check(dn_wr_addr == 1 && !dn_commit, "score written to address 1");
            res = int'(signed'(dn_wr_data));
          end else begin
            check(dn_wr_addr == 0 && dn_wr_data == 1 && dn_commit, "header 1 at address 0 with commit");
          end
          nwr++;
        end
        if (event_done || cyc > 100) break;
      end
      @(negedge clk) event_ready = 0;
      check(nwr == 2, "two downstream writes");
      check(res == score(), $sformatf("score %0d, expected %0d", res, score()));
      check(cyc == EXP_CYCLES, $sformatf("event took %0d cycles, expected %0d", cyc, EXP_CYCLES));
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
