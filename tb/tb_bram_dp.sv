// tb_bram_dp: writes random words to random addresses of a dual-clock BRAM
// on one clock and reads them back on an unrelated clock, comparing with a
// reference array; also checks the one-cycle registered read latency.
module tb_bram_dp;
  localparam int unsigned DEPTH = 64, W = 16, AW = $clog2(DEPTH);
  logic          wr_clk = 0, rd_clk = 0, wr_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0]  wr_data = '0, rd_data;
  logic [W-1:0]  ref_mem [DEPTH];
  int checks = 0, failures = 0;

  always #2 wr_clk = ~wr_clk;
  always #3 rd_clk = ~rd_clk;

  bram_dp #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every address once, then overwrite some at random
    for (int i = 0; i < DEPTH + 100; i++) begin
      @(negedge wr_clk);
      wr_en   = 1;
      wr_addr = (i < DEPTH) ? AW'(i) : AW'($urandom);
      wr_data = W'($urandom);
      ref_mem[wr_addr] = wr_data;
    end
    @(negedge wr_clk) wr_en = 0;
    repeat (3) @(posedge rd_clk);
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge rd_clk) rd_addr = AW'(i);
      @(posedge rd_clk); #1;
      checks++;
      if (rd_data !== ref_mem[i]) begin
        failures++;
        $display("addr %0d: got %h exp %h", i, rd_data, ref_mem[i]);
      end
    end
    // latency: data must not change before the read clock edge
    @(negedge rd_clk) rd_addr = 0;
    @(posedge rd_clk); #1;
    @(negedge rd_clk) rd_addr = 1;
    #1 checks++;
    if (rd_data !== ref_mem[0]) begin failures++; $display("read not registered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
