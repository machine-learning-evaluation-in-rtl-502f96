// tb_bram_bank: fills every slot of a 4-slot bank with a distinct pattern on
// the write clock and reads every slot back on the read clock, checking that
// slots are independent and that the slot select is aligned with the
// one-cycle read latency (slot changed together with address).
module tb_bram_bank;
  localparam int unsigned NSLOT = 4, DEPTH = 32, W = 16;
  localparam int unsigned AW = $clog2(DEPTH), SW = $clog2(NSLOT);
  logic          wr_clk = 0, rd_clk = 0, wr_en = 0;
  logic [SW-1:0] wr_slot = '0, rd_slot = '0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0]  wr_data = '0, rd_data;
  int checks = 0, failures = 0;

  always #2 wr_clk = ~wr_clk;
  always #3 rd_clk = ~rd_clk;

  bram_bank #(.NSLOT(NSLOT), .DEPTH(DEPTH), .W(W)) dut (.*);

  function automatic logic [W-1:0] pat(int s, int a);
    return W'(s * 16'h1111 ^ (a * 37 + 5));
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NSLOT; s++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge wr_clk);
        wr_en = 1; wr_slot = SW'(s); wr_addr = AW'(a); wr_data = pat(s, a);
      end
    @(negedge wr_clk) wr_en = 0;
    repeat (3) @(posedge rd_clk);
    // interleave slots every cycle so slot and address change together
    // back-to-back reads: the data of the previous read is checked right
    // after the next slot/address has been applied
    begin
      int ps, pa;
      ps = -1; pa = 0;
      for (int a = 0; a < DEPTH; a++)
        for (int s = 0; s < NSLOT; s++) begin
          @(negedge rd_clk) begin rd_slot = SW'(s); rd_addr = AW'(a); end
          #0.5;
          if (ps >= 0) begin
            checks++;
            if (rd_data !== pat(ps, pa)) begin
              failures++;
              $display("slot %0d addr %0d: got %h exp %h", ps, pa, rd_data, pat(ps, pa));
            end
          end
          ps = s; pa = a;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
