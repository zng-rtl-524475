// tb_l2_access_monitor: self-checking test of the prefetch-size controller.
// Windows of 10 evictions with a chosen number of unused prefetched lines are applied.
// Expected: waste ratio > 0.3 halves the size (4096 -> 2048 -> ...), < 0.05 adds 1 KB,
// in between nothing changes; size stays within 128 B .. 4 KB; counters restart per window.
module tb_l2_access_monitor;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic evict_valid, evict_pref, evict_used;
  logic [12:0] gran_bytes; logic [5:0] gran_lines; logic [15:0] evict_count, unused_count;
  logic [31:0] shrinks, grows;
  l2_access_monitor #(.WINDOW(10)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int g;
  task automatic window(input int unused, input int pref_used);
    for (int i = 0; i < 10; i++) begin
      @(negedge clk);
      evict_valid = 1;
      evict_pref = (i < unused) || (i >= 10 - pref_used);
      evict_used = !(i < unused);
    end
    @(negedge clk); evict_valid = 0;
    if (unused * 100 > 30 * 10) g = (g / 2 < 128) ? 128 : g / 2;
    else if (unused * 100 < 5 * 10) g = (g + 1024 > 4096) ? 4096 : g + 1024;
    check(int'(gran_bytes) == g, $sformatf("size %0d expected %0d", gran_bytes, g));
    check(int'(gran_lines) == g / 128, "size in lines");
    check(evict_count == 0 && unused_count == 0, "counters restart");
  endtask

  initial begin
    evict_valid = 0; evict_pref = 0; evict_used = 0; g = 4096;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    check(gran_bytes == 13'd4096, "initial 4 KB");
    window(4, 2); window(5, 0); window(2, 3); window(3, 3);
    window(8, 0); window(8, 0); window(8, 0); window(8, 0); window(8, 0);
    window(0, 5); window(0, 5); window(1, 5);   // 1/10 = 0.1: between thresholds
    window(0, 0); window(0, 0); window(0, 0); window(0, 0); window(0, 0);
    check(shrinks > 0 && grows > 0, "both directions used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
