// tb_sync_controller: drives the ready flags of three sources with skew, the
// downstream full flag and the APU's event_done, and checks that the APU is
// started only when every source is ready and the downstream bank has room,
// that the skew and full stalls are reported, and that the input BRAMs are
// released exactly once, one cycle after event_done.
module tb_sync_controller;
  localparam int unsigned N_SRC = 3;
  logic clk = 0, rst_n = 0;
  logic [N_SRC-1:0] src_ready = '0;
  logic dn_full = 0, event_done = 0;
  logic event_ready, src_release, stall_skew, stall_full;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sync_controller #(.N_SRC(N_SRC)) dut (.*);

  task automatic expect_bit(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %0t: %s = %b, expected %b", $time, what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 20; ev++) begin
      // sources become ready one after another (skew)
      for (int s = 0; s < N_SRC; s++) begin
        @(negedge clk) src_ready[s] = 1;
        if (s < N_SRC-1) begin
          @(negedge clk);
          expect_bit(event_ready, 0, "event_ready with missing source");
          expect_bit(stall_skew, 1, "stall_skew");
        end
      end
      // on odd events the downstream bank is full for a while
      if (ev % 2 == 1) begin
        dn_full = 1;
        repeat (3) begin
          @(negedge clk);
          expect_bit(event_ready, 0, "event_ready while downstream full");
          expect_bit(stall_full, 1, "stall_full");
        end
        dn_full = 0;
      end
      @(negedge clk);
      expect_bit(event_ready, 1, "event_ready when all ready");
      expect_bit(stall_skew, 0, "stall_skew while running");
      // APU works a few cycles
      repeat ($urandom_range(1, 8)) begin
        @(negedge clk);
        expect_bit(event_ready, 1, "event_ready held while running");
        expect_bit(src_release, 0, "src_release before done");
      end
      event_done = 1;
      @(negedge clk) event_done = 0;
      expect_bit(src_release, 1, "src_release after done");
      expect_bit(event_ready, 0, "event_ready dropped after done");
      src_ready = '0;            // the SRs see the release
      @(negedge clk);
      expect_bit(src_release, 0, "src_release is one pulse");
      expect_bit(event_ready, 0, "no restart without ready sources");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
