// tb_flash_ctrl: self-checking test of the flash controller against a package model placed
// directly on its flash-network port (8-entry thrashing window).
// The model checks every request packet: header addressed to node 8 + channel from the
// controller's node, command, block, page, line, line count and log block; a write carries
// exactly 16 data flits that must equal the line written.  It answers a read with one data
// packet of nlines x 16 flits and a write with an acknowledgement whose error and "register
// evicted" bits are chosen by the test; it stalls both directions at random.
// The testbench checks every response: one per line read with the right address, data and
// last flag, one per write with the error bit.  A run of writes that mostly evict must raise
// `thrash` and count one thrashing episode; a run without evictions must clear it.
module tb_flash_ctrl;
  import zng_pkg::*;
  localparam int NODE = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic req_valid, req_ready, resp_valid, resp_ready, tx_valid, tx_ready, rx_valid, rx_ready, thrash;
  fc_req_t req; fc_resp_t resp; flit_t tx_flit, rx_flit;
  logic [31:0] st_thrash_episodes, st_requests;
  flash_ctrl #(.NODE_ID(NODE), .TC_WINDOW(8)) dut (.*);

  function automatic logic [63:0] word(fline_t a, int i);
    return {32'(a), 32'(i)} ^ 64'h0123_4567_89ab_cdef;
  endfunction

  // the request the model expects next, and the answer bits for writes
  fc_req_t exp_q[$];
  bit      ev_bit, err_bit;

  task automatic rx_flit_get(output flit_t f);
    tx_ready = ($urandom_range(0, 3) != 0);
    while (!(tx_valid && tx_ready)) begin
      @(negedge clk); tx_ready = ($urandom_range(0, 3) != 0);
    end
    f = tx_flit;
    @(negedge clk); tx_ready = 0;
  endtask
  task automatic tx_flit_put(input flit_t f);
    rx_valid = 1; rx_flit = f;
    while (!rx_ready) @(negedge clk);
    @(negedge clk); rx_valid = 0;
    repeat ($urandom_range(0, 1)) @(negedge clk);
  endtask

  // package model
  initial begin
    tx_ready = 0; rx_valid = 0; rx_flit = '0;
    forever begin
      flit_t f;
      nhdr_t h, a;
      fc_req_t q;
      @(negedge clk);
      if (tx_valid) begin
        rx_flit_get(f);
        h = nhdr_t'(f.data);
        q = exp_q.pop_front();
        check(f.head && int'(h.dst) == PKG_NODE0 + int'(q.addr.pdbn.ch) && int'(h.src) == NODE, "header routing");
        check(h.pdbn == q.addr.pdbn && h.page == q.addr.page && h.line == q.addr.line && h.plbn == q.plbn, "header address");
        a = '0; a.dst = 5'(NODE); a.src = h.dst; a.pdbn = h.pdbn; a.page = h.page; a.line = h.line;
        if (q.cmd == FC_READ) begin
          check(h.cmd == NC_READ && h.nlines == q.nlines && f.tail, "read header");
          a.cmd = NC_RDATA; a.nlines = h.nlines;
          repeat ($urandom_range(0, 20)) @(negedge clk);
          tx_flit_put('{head: 1'b1, tail: 1'b0, data: a});
          for (int l = 0; l < int'(h.nlines); l++) begin
            automatic fline_t la = q.addr;
            la.line = q.addr.line + 5'(l);
            for (int i = 0; i < FLITS_PER_LINE; i++)
              tx_flit_put('{head: 1'b0, tail: (l == int'(h.nlines) - 1 && i == FLITS_PER_LINE - 1), data: word(la, i)});
          end
        end else begin
          check(h.cmd == (q.cmd == FC_WRITE ? NC_WRITE : NC_ERASE) && (q.cmd == FC_WRITE) != f.tail, "write/erase header");
          if (q.cmd == FC_WRITE)
            for (int i = 0; i < FLITS_PER_LINE; i++) begin
              rx_flit_get(f);
              check(!f.head && f.tail == (i == FLITS_PER_LINE - 1) && f.data == q.wdata[i*64 +: 64], "write data flit");
            end
          a.cmd = (q.cmd == FC_WRITE) ? NC_WACK : NC_EACK; a.nlines = {5'd0, err_bit}; a.flag = ev_bit;
          repeat ($urandom_range(0, 20)) @(negedge clk);
          tx_flit_put('{head: 1'b1, tail: 1'b1, data: a});
        end
      end
    end
  end

  task automatic do_req(input fc_cmd_e c, input fline_t a, input int n, input bit ev, input bit er);
    fc_req_t q;
    q = '{cmd: c, src: 3'($urandom_range(0, 6)), addr: a, plbn: 10'($urandom), nlines: 6'(n), wdata: '0};
    for (int i = 0; i < 32; i++) q.wdata[i*32 +: 32] = $urandom;
    ev_bit = ev; err_bit = er;
    exp_q.push_back(q);
    @(negedge clk); req_valid = 1; req = q;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    for (int l = 0; l < ((c == FC_READ) ? n : 1); l++) begin
      while (!resp_valid) begin resp_ready = 0; @(negedge clk); end
      resp_ready = 1;
      check(resp.dst == q.src && resp.cmd == c, "response routing");
      if (c == FC_READ) begin
        automatic fline_t la = a;
        la.line = a.line + 5'(l);
        check(resp.addr == la && resp.last == (l == n - 1), $sformatf("read response line %0d", l));
        for (int i = 0; i < FLITS_PER_LINE; i++) check(resp.data[i*64 +: 64] == word(la, i), "read data");
      end else check(resp.err == er && resp.last, "acknowledgement");
      @(negedge clk); resp_ready = 0;
    end
  endtask

  function automatic fline_t rnd_addr();
    fline_t a;
    a = fline_t'({$urandom, $urandom});
    return a;
  endfunction

  initial begin
    req_valid = 0; req = '0; resp_ready = 0; ev_bit = 0; err_bit = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      automatic fline_t a = rnd_addr();
      automatic int o = $urandom_range(0, 9);
      if (o < 5) begin
        automatic int n = $urandom_range(1, 32 - int'(a.line));
        do_req(FC_READ, a, n, 0, 0);
      end else if (o < 9) do_req(FC_WRITE, a, 1, $urandom_range(0, 3) == 0, $urandom_range(0, 7) == 0);
      else do_req(FC_ERASE, a, 1, 0, 0);
    end
    check(st_requests == 60, "requests counted");
    // thrashing: writes that mostly evict a register
    for (int k = 0; k < 8; k++) do_req(FC_WRITE, rnd_addr(), 1, k != 3, 0);
    @(negedge clk);
    check(thrash && st_thrash_episodes >= 1, "thrashing detected");
    begin
      automatic int ep = st_thrash_episodes;
      for (int k = 0; k < 8; k++) do_req(FC_WRITE, rnd_addr(), 1, 0, 0);
      @(negedge clk);
      check(!thrash && st_thrash_episodes == ep, "thrashing over");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
