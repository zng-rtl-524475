// tb_zng_tlb: self-checking test of the per-SM TLB.
// A small table in the testbench plays the MMU (answers 3 cycles after a miss is taken).
// Checks: the translated request keeps page, line, PC, warp and data, replaces the VBN by
// the PDBN and carries the PLBN; a repeated VBN hits (no MMU request, answer 2 cycles after
// acceptance); an invalid entry raises `fault` and produces no request; a shootdown forces a
// new walk; the miss counter matches the reference count.
module tb_zng_tlb;
  import zng_pkg::*;
  localparam int NE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic in_valid, in_ready, out_valid, out_ready, fault, mmu_valid, mmu_ready, mmu_rsp_valid, mmu_rsp_fault, sd_valid;
  sm_req_t in_req; l2_req_t out_req; dbmt_entry_t mmu_rsp_entry;
  logic [VBN_W-1:0] mmu_vbn, sd_vbn; logic [31:0] hits, misses;
  zng_tlb #(.ENTRIES(NE), .SM_ID(3)) dut (.*);

  function automatic dbmt_entry_t ent(int v);
    dbmt_entry_t e;
    e.valid = (v != 7); e.lbn = 20'(v); e.pdbn = pdbn_t'(20'(v * 31 + 7)); e.plbn = 10'(v + 1000);
    return e;
  endfunction

  // MMU model
  int walks = 0;
  assign mmu_ready = 1'b1;
  initial begin
    mmu_rsp_valid = 0; mmu_rsp_entry = '0; mmu_rsp_fault = 0;
    forever begin
      @(posedge clk);
      if (mmu_valid) begin
        automatic int v = int'(mmu_vbn);
        walks++;
        repeat (2) @(posedge clk);
        @(negedge clk); mmu_rsp_valid = 1; mmu_rsp_entry = ent(v); mmu_rsp_fault = !ent(v).valid;
        @(negedge clk); mmu_rsp_valid = 0;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int ref_miss = 0;
  int resident[$];
  task automatic access(input int v, input bit exp_hit);
    sm_req_t r; int t0, w0; bit got;
    r.pc = $urandom; r.warp = 7'($urandom_range(0, 79)); r.wr = $urandom_range(0, 1);
    r.addr.vbn = VBN_W'(v); r.addr.page = 9'($urandom_range(0, 383)); r.addr.line = 5'($urandom);
    r.wdata = {32{$urandom}};
    w0 = walks;
    @(negedge clk); in_valid = 1; in_req = r;
    @(posedge clk); while (!in_ready) @(posedge clk);
    t0 = $time;
    @(negedge clk); in_valid = 0;
    got = 0;
    for (int c = 0; c < 30 && !got && !fault; c++) begin
      if (out_valid) got = 1; else @(negedge clk);
    end
    if (!ent(v).valid) begin
      check(fault && !got, "fault for invalid entry");
    end else begin
      check(got, "request translated");
      check(out_req.addr.pdbn == ent(v).pdbn && out_req.plbn == ent(v).plbn, "PDBN/PLBN");
      check(out_req.addr.page == r.addr.page && out_req.addr.line == r.addr.line, "page/line kept");
      check(out_req.pc == r.pc && out_req.warp == r.warp && out_req.wr == r.wr && out_req.wdata == r.wdata, "fields kept");
      check(out_req.sm == 4'd3, "SM id");
      if (exp_hit) check(walks == w0 && ($time - t0 + 5) / 10 == 2, "hit: no walk, 2 cycles");
      else check(walks == w0 + 1, "miss: one walk");
    end
    @(negedge clk);
  endtask

  initial begin
    in_valid = 0; in_req = '0; out_ready = 1; sd_valid = 0; sd_vbn = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    access(1, 0); access(1, 1); access(2, 0); access(2, 1); access(7, 0);
    access(3, 0); access(4, 0); access(5, 0);   // 1 evicted by round robin (4 entries)
    access(1, 0); access(5, 1);
    @(negedge clk); sd_valid = 1; sd_vbn = 14'd5; @(negedge clk); sd_valid = 0;
    access(5, 0);
    check(misses == 8, $sformatf("miss counter %0d", misses));
    check(hits == 3, $sformatf("hit counter %0d", hits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
