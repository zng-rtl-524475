// tb_thrash_checker: self-checking test of the flash-register thrashing detector.
// Windows of 8 write acknowledgements with k evictions: thrash must be set after a window
// with more than 50 % evictions and cleared after one with at most 50 %.
module tb_thrash_checker;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic wack_valid, wack_evicted, thrash; logic [31:0] episodes;
  thrash_checker #(.WINDOW(8)) dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int ep = 0; bit prev = 0;
  task automatic window(input int k);
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); wack_valid = 1; wack_evicted = (i < k);
      if (i < 7) begin @(negedge clk); wack_valid = 0; end
    end
    @(negedge clk); wack_valid = 0;
    check(thrash == (k * 100 > 50 * 8), $sformatf("verdict for %0d/8", k));
    if (thrash && !prev) ep++;
    prev = thrash;
    check(int'(episodes) == ep, "episode count");
  endtask
  initial begin
    wack_valid = 0; wack_evicted = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    window(0); window(4); window(5); window(8); window(3); window(6); window(1); window(7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
