// tb_zng_mmu: self-checking test of the MMU's DBMT walker.
// Programs entries through the update port, then looks them up from two TLB ports.  Checks
// the returned entry, the fault bit for invalid or out-of-range VBNs, the walk latency
// (answer WALK_CYCLES + 1 cycles after the request is accepted), the shootdown broadcast and
// that two simultaneous misses are both served.
module tb_zng_mmu;
  import zng_pkg::*;
  localparam int NR = 2, NE = 64, WC = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic req_valid[NR], req_ready[NR], rsp_valid[NR];
  logic [VBN_W-1:0] req_vbn[NR];
  dbmt_entry_t rsp_entry, upd_entry;
  logic rsp_fault, upd_valid, sd_valid;
  logic [VBN_W-1:0] upd_vbn, sd_vbn;

  zng_mmu #(.NUM_REQ(NR), .ENTRIES(NE), .WALK_CYCLES(WC)) dut (.*);

  dbmt_entry_t ref_t[NE];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic dbmt_entry_t mk(int v);
    dbmt_entry_t e;
    e.valid = (v % 5) != 3;
    e.lbn = 20'(v * 13 + 1);
    e.pdbn = pdbn_t'(20'(v * 977 + 5));
    e.plbn = 10'(1023 - v);
    return e;
  endfunction

  task automatic lookup(input int port, input int vbn, input bit exp_fault, input dbmt_entry_t exp);
    int t0, t1;
    @(negedge clk);
    req_valid[port] = 1; req_vbn[port] = VBN_W'(vbn);
    @(posedge clk);
    while (!req_ready[port]) @(posedge clk);
    t0 = $time;
    @(negedge clk); req_valid[port] = 0;
    while (!rsp_valid[port]) @(negedge clk);
    t1 = $time;
    check(rsp_fault == exp_fault, $sformatf("fault bit vbn %0d", vbn));
    if (!exp_fault) check(rsp_entry == exp, $sformatf("entry vbn %0d", vbn));
    check((t1 - t0 + 5) / 10 == WC + 1, $sformatf("walk latency %0d", (t1 - t0 + 5) / 10));
  endtask

  initial begin
    for (int p = 0; p < NR; p++) begin req_valid[p] = 0; req_vbn[p] = '0; end
    upd_valid = 0; upd_vbn = '0; upd_entry = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // program the table
    for (int v = 0; v < NE; v++) begin
      @(negedge clk); upd_valid = 1; upd_vbn = VBN_W'(v); upd_entry = mk(v); ref_t[v] = mk(v);
      @(posedge clk); #1;
      check(sd_valid && sd_vbn == VBN_W'(v), "shootdown follows update");
    end
    @(negedge clk); upd_valid = 0;
    for (int k = 0; k < 40; k++) begin
      automatic int v = $urandom_range(0, NE - 1);
      lookup(k % NR, v, !ref_t[v].valid, ref_t[v]);
    end
    lookup(0, NE + 3, 1'b1, '0);
    // two ports at once: both answered
    @(negedge clk);
    req_valid[0] = 1; req_vbn[0] = 14'd1; req_valid[1] = 1; req_vbn[1] = 14'd2;
    begin
      automatic bit got0 = 0, got1 = 0;
      automatic dbmt_entry_t e0, e1;
      for (int c = 0; c < 20; c++) begin
        @(posedge clk);
        if (req_ready[0]) req_valid[0] <= 0;
        if (req_ready[1]) req_valid[1] <= 0;
        #1;
        if (rsp_valid[0]) begin got0 = 1; e0 = rsp_entry; end
        if (rsp_valid[1]) begin got1 = 1; e1 = rsp_entry; end
      end
      check(got0 && got1, "both concurrent misses answered");
      check(e0 == ref_t[1] && e1 == ref_t[2], "concurrent entries");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
