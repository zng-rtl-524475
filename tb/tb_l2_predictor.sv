// tb_l2_predictor: self-checking test of the PC-indexed locality predictor.
// A reference model in the testbench keeps the same table (5 sampled warps 0,16,..,64 per PC,
// one saturating 4-bit counter).  Random reads from sampled and unsampled warps, with a mix of
// repeated and new pages over a few PCs, are applied to both; after every update the counter
// and the cutoff decision (counter > 12) of a random PC are compared.
module tb_l2_predictor;
  import zng_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic upd_valid, q_prefetch; logic [PC_W-1:0] upd_pc, q_pc; logic [WARP_W-1:0] upd_warp;
  logic [28:0] upd_page; logic [3:0] q_count;
  l2_predictor dut (.*);

  int cnt[512]; longint pg[512][5]; bit pv[512][5];
  int npf = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    upd_valid = 0; upd_pc = '0; upd_warp = '0; upd_page = '0; q_pc = '0;
    for (int i = 0; i < 512; i++) begin cnt[i] = 0; for (int s = 0; s < 5; s++) pv[i][s] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      automatic int pcsel = $urandom_range(0, 5);
      automatic int w = (k % 3 == 0) ? $urandom_range(0, 79) : 16 * $urandom_range(0, 4);
      automatic int idx;
      automatic logic [31:0] pc = 32'h1000 + 32'(pcsel * 8) + ((pcsel == 5) ? 32'h1000 : 0);
      // PCs 0..3 stream through pages (locality), PC 4 jumps randomly
      automatic longint page = (pcsel == 4) ? $urandom : (k / 400 + pcsel);
      @(negedge clk);
      upd_valid = 1; upd_pc = pc; upd_warp = 7'(w); upd_page = 29'(page);
      idx = int'(pc[11:3]);
      if (w % 16 == 0 && w / 16 < 5) begin
        automatic int s = w / 16;
        if (pv[idx][s] && pg[idx][s] == page) begin if (cnt[idx] < 15) cnt[idx]++; end
        else begin if (cnt[idx] > 0) cnt[idx]--; pg[idx][s] = page; pv[idx][s] = 1; end
      end
      @(negedge clk);
      upd_valid = 0;
      q_pc = 32'h1000 + 32'($urandom_range(0, 5) * 8);
      #1;
      check(int'(q_count) == cnt[int'(q_pc[11:3])], "counter matches reference");
      check(q_prefetch == (cnt[int'(q_pc[11:3])] > 12), "cutoff test");
      if (q_prefetch) npf++;
    end
    check(npf > 0, "some PC passed the cutoff test");
    check(cnt[(32'h1000 + 32) >> 3 & 511] < 13, "random-page PC does not prefetch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
