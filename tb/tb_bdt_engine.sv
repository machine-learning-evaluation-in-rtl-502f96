// tb_bdt_engine: checks both BDT configurations of the design, the VBF
// classifier (10 trees, depth 4, 5 features, 7 cycles) and the MET regression
// (40 trees, depth 6, 8 features, 11 cycles). Random trees are loaded through
// the configuration port, random feature vectors are streamed back to back,
// and each score is compared with a reference tree walk in the testbench,
// together with the latency from the cycle in which in_last is presented.
module tb_bdt_engine;
  import gep_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit done0 = 0, done1 = 0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (done0 && done1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bdt_check #(.NT(10), .DEPTH(4), .NF(5), .LATENCY(7))  u_vbf (.clk, .rst_n, .cyc, .checks, .failures, .done(done0));
  bdt_check #(.NT(40), .DEPTH(6), .NF(8), .LATENCY(11)) u_met (.clk, .rst_n, .cyc, .checks, .failures, .done(done1));
endmodule
