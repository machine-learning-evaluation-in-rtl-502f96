// tb_ml_asm: the ASM between two modelled input BRAMs (one-cycle read
// latency) and a modelled ML core. For random events it checks that the
// words at addresses 1..header of source 0 and then of source 1 reach the
// core in order, without gaps inside a source, with in_last on the final
// word; that the core's N_OUT results are written to addresses 1..N_OUT of
// the downstream port in order, followed by the header N_OUT at address 0
// together with commit and event_done; and that nothing is read or written
// outside an event.
module tb_ml_asm;
  localparam int unsigned N_SRC = 2, N_OUT = 3, AW = 6, W = 16, NN_LAT = 4;
  logic clk = 0, rst_n = 0;
  logic event_ready = 0, event_done;
  logic [0:0] rd_src;
  logic [AW-1:0] rd_addr;
  logic [W-1:0]  rd_data;
  logic nn_in_valid, nn_in_last, nn_out_valid = 0;
  logic [W-1:0] nn_in_data;
  logic [W-1:0] nn_out_data [N_OUT];
  logic dn_wr_en, dn_commit;
  logic [AW-1:0] dn_wr_addr;
  logic [W-1:0]  dn_wr_data;

  logic [W-1:0] mem [N_SRC][2**AW];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ml_asm #(.N_SRC(N_SRC), .N_OUT(N_OUT), .AW(AW), .W(W)) dut (.*);

  // input banks: registered read
  always_ff @(posedge clk) rd_data <= mem[rd_src][rd_addr];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // modelled ML core: result k = sum of inputs + k, NN_LAT cycles after in_last
  logic [W-1:0] got [$];
  logic [W-1:0] acc;
  initial begin
    acc = '0;
    forever begin
      @(posedge clk);
      nn_out_valid <= 1'b0;
      if (nn_in_valid) begin
        got.push_back(nn_in_data);
        acc = acc + nn_in_data;
        if (nn_in_last) begin
          logic [W-1:0] a;
          a = acc; acc = '0;
          fork begin
            repeat (NN_LAT - 1) @(posedge clk);
            for (int k = 0; k < N_OUT; k++) nn_out_data[k] <= a + W'(k);
            nn_out_valid <= 1'b1;
          end join_none
        end
      end
    end
  end

  initial begin
    for (int k = 0; k < N_OUT; k++) nn_out_data[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 30; ev++) begin
      int cnt [N_SRC];
      logic [W-1:0] expect_q [$];
      logic [W-1:0] sum;
      int writes, gaps, last_seen, in_cnt, prev_valid_cycle, cyc;
      sum = '0;
      expect_q.delete();
      for (int s = 0; s < N_SRC; s++) begin
        cnt[s] = (ev == 3 && s == 1) ? 0 : (ev == 5 && s == 0) ? 0 : $urandom_range(1, 20);
        mem[s][0] = W'(cnt[s]);
        for (int a = 1; a <= cnt[s]; a++) begin
          mem[s][a] = W'($urandom);
          expect_q.push_back(mem[s][a]);
          sum += mem[s][a];
        end
        mem[s][cnt[s] + 1] = 16'hdead;   // must not be read
      end
      got.delete();
      @(negedge clk) event_ready = 1;
      writes = 0; last_seen = 0; in_cnt = 0; cyc = 0; gaps = 0; prev_valid_cycle = -10;
      while (1) begin
        @(posedge clk); #1;
        cyc++;
        if (nn_in_valid) begin
          if (in_cnt != 0 && in_cnt != cnt[0] && prev_valid_cycle != cyc - 1) gaps++;
          prev_valid_cycle = cyc;
          in_cnt++;
        end
        if (nn_in_last) last_seen++;
        if (dn_wr_en) begin
          if (writes < N_OUT) begin
            check(dn_wr_addr == AW'(writes + 1), "write address order");
            check(dn_wr_data == sum + W'(writes), "written result");
            check(!dn_commit && !event_done, "commit before the header");
          end else begin
            check(dn_wr_addr == 0 && dn_wr_data == W'(N_OUT), "header word N_OUT at address 0");
            check(dn_commit && event_done, "commit and event_done with the header");
          end
          writes++;
        end
        if (event_done) break;
        check(cyc < 200, "event finishes");
        if (cyc >= 200) break;
      end
      @(negedge clk) event_ready = 0;
      check(writes == N_OUT + 1, "number of downstream writes");
      check(last_seen == 1, "exactly one in_last");
      check(gaps == 0, "no gap inside a source");
      check(got.size() == expect_q.size(), $sformatf("stream length %0d exp %0d", got.size(), expect_q.size()));
      foreach (expect_q[i]) if (i < got.size()) check(got[i] == expect_q[i], "streamed word");
      // a gapless stream: header (3 cycles) per source, then one word per cycle
      repeat (5) begin
        @(negedge clk);
        check(!nn_in_valid && !dn_wr_en, "idle after the event");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
