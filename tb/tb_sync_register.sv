// tb_sync_register: a producer on one clock commits numbered events into the
// slots the synchronization register names, a consumer on an unrelated clock
// releases them at random pace. Checks: the consumer sees the events in order
// in the slot where they were written, no slot is overwritten before release,
// the register reports full after NSLOT unreleased events, readiness appears
// within a few cycles of a commit, and it drops after the last release.
module tb_sync_register;
  localparam int unsigned NSLOT = 4, SW = $clog2(NSLOT), NEV = 200;
  logic wr_clk = 0, rd_clk = 0, wr_rst_n = 0, rd_rst_n = 0;
  logic wr_commit = 0, rd_release = 0;
  logic [SW-1:0] wr_slot, rd_slot;
  logic wr_full, rd_ready;
  int slot_event [NSLOT];
  bit slot_busy  [NSLOT];
  int checks = 0, failures = 0, full_seen = 0;

  always #2 wr_clk = ~wr_clk;
  always #3.1 rd_clk = ~rd_clk;

  sync_register #(.NSLOT(NSLOT)) dut (.*);

  task automatic fail(string msg);
    failures++;
    $display("FAIL %0t: %s", $time, msg);
  endtask

  initial begin
    #400000;
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    repeat (3) @(posedge wr_clk);
    wr_rst_n = 1;
    // phase 1: fill without any release and expect full
    for (int e = 0; e < NEV; e++) begin
      @(negedge wr_clk);
      while (wr_full) begin full_seen++; @(negedge wr_clk); end
      checks++;
      if (slot_busy[wr_slot]) fail("writer given a slot that was not released");
      slot_event[wr_slot] = e;
      slot_busy[wr_slot]  = 1;
      wr_commit = 1;
      @(negedge wr_clk) wr_commit = 0;
      repeat ($urandom_range(0, 6)) @(negedge wr_clk);
    end
  end

  // consumer
  initial begin
    int expect_e = 0;
    repeat (3) @(posedge rd_clk);
    rd_rst_n = 1;
    // let the producer run into full before reading anything
    wait (full_seen > 0);
    checks++;
    if (!rd_ready) fail("full but not ready");
    while (expect_e < NEV) begin
      @(negedge rd_clk);
      if (rd_ready) begin
        checks++;
        if (slot_event[rd_slot] != expect_e || !slot_busy[rd_slot])
          fail($sformatf("slot %0d holds event %0d, expected %0d", rd_slot, slot_event[rd_slot], expect_e));
        repeat ($urandom_range(0, 5)) @(negedge rd_clk);
        slot_busy[rd_slot] = 0;
        rd_release = 1;
        @(negedge rd_clk) rd_release = 0;
        expect_e++;
      end
    end
    repeat (8) @(negedge rd_clk);
    checks++;
    if (rd_ready) fail("still ready after every event was released");
    checks++;
    if (full_seen == 0) fail("full never reported");
    $display("full seen for %0d producer cycles", full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
