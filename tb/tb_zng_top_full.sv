// tb_zng_top_full: the ZnG memory system at the paper's full size (no parameter overrides:
// 16 SMs, 6 x 4 MB STT-MRAM L2 banks, 8 flash controllers, 16 Z-NAND packages of 64 planes,
// 1024 blocks of 384 pages, 3600-cycle reads and 120000-cycle programs at 1.2 GHz).
// One virtual block is mapped through the DBMT port; SM 5 then loads a line (TLB miss,
// L2 miss, flash read of tR), loads it again (L2 hit, a few cycles through TLB, network
// and bank), stores a new value (merged into a flash register of the package, no program
// needed), and loads it back through the flash register.  Each load is checked against the
// expected data, and the latency of the first load must include the 3600-cycle array read.
module tb_zng_top_full;
  import zng_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic        sm_req_valid [NUM_SM], sm_req_ready [NUM_SM], sm_resp_valid [NUM_SM], sm_resp_ready [NUM_SM];
  logic        sm_fault [NUM_SM];
  sm_req_t     sm_req [NUM_SM];
  l2_resp_t    sm_resp [NUM_SM];
  logic        dbmt_upd_valid, gc_req_valid, gc_req_ready, gc_resp_valid, gc_resp_ready, redirect;
  logic [VBN_W-1:0] dbmt_upd_vbn;
  dbmt_entry_t dbmt_upd_entry;
  fc_req_t     gc_req;
  fc_resp_t    gc_resp;
  logic        gc_alert [NUM_CH];
  logic [31:0] st_tlb_miss [NUM_SM];
  logic [31:0] st_l2 [NUM_L2_BANKS][9];
  logic [31:0] st_pkg [NUM_CH][9];
  logic [31:0] st_thrash [8];

  zng_top dut (.*);

  localparam int S = 5;
  int t0, lat;
  task automatic access(input bit wr, input line_t d, output line_t got);
    sm_req_t q;
    q = '0; q.pc = 32'h1000; q.warp = 7'd3; q.wr = wr; q.addr.vbn = 14'd77; q.addr.page = 9'd200;
    q.addr.line = 5'd9; q.wdata = d;
    @(negedge clk); sm_req_valid[S] = 1; sm_req[S] = q;
    while (!sm_req_ready[S]) @(negedge clk);
    t0 = $time;
    @(negedge clk); sm_req_valid[S] = 0; sm_resp_ready[S] = 1;
    while (!sm_resp_valid[S]) @(negedge clk);
    lat = ($time - t0) / 10;
    got = sm_resp[S].data;
    check(sm_resp[S].wr == wr && sm_resp[S].sm == 4'(S), "response routing");
    @(negedge clk); sm_resp_ready[S] = 0;
  endtask

  line_t got, d;
  initial begin
    for (int s = 0; s < NUM_SM; s++) begin sm_req_valid[s] = 0; sm_req[s] = '0; sm_resp_ready[s] = 0; end
    dbmt_upd_valid = 0; dbmt_upd_vbn = '0; dbmt_upd_entry = '0; gc_req_valid = 0; gc_req = '0; gc_resp_ready = 0;
    for (int i = 0; i < 32; i++) d[i*32 +: 32] = 32'h600d0000 + 32'(i);
    repeat (3) @(posedge clk); @(negedge clk); rst_n = 1;
    @(negedge clk);
    dbmt_upd_valid = 1; dbmt_upd_vbn = 14'd77;
    dbmt_upd_entry = '{valid: 1'b1, lbn: 20'd77, pdbn: '{ch: 4'd11, die: 3'd5, plane: 3'd2, blk: 10'd300}, plbn: 10'd1020};
    @(negedge clk); dbmt_upd_valid = 0;
    repeat (3) @(negedge clk);
    access(0, '0, got);
    check(got == '1, "first load reads the erased flash page");
    check(lat > 3600 && lat < 6000, $sformatf("first load latency %0d cycles includes tR", lat));
    check(st_tlb_miss[S] == 1, "TLB miss on first use");
    access(0, '0, got);
    check(got == '1 && lat < 10, $sformatf("second load hits in L2 (%0d cycles)", lat));
    access(1, d, got);
    check(st_pkg[11][2] == 1 && st_pkg[11][6] == 0, "store absorbed by a flash register");
    access(0, '0, got);
    check(got == d, "load returns the stored line");
    check(st_pkg[11][1] == 1, "served by the flash register");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
