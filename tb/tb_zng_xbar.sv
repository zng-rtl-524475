// tb_zng_xbar: self-checking test of the round-robin crossbar (GPU network).
// Three sources send numbered items to two outputs under random back-pressure.  Checks: every
// item arrives once, at the output it named, in the order its source sent it; with all three
// sources saturating one output, grants rotate so no source waits more than two transfers.
module tb_zng_xbar;
  localparam int NI = 3, NO = 2, NITEMS = 200;
  typedef logic [15:0] T;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic in_valid[NI], in_ready[NI], out_valid[NO], out_ready[NO];
  T in_data[NI], out_data[NO];
  logic [0:0] in_dest[NI];

  zng_xbar #(.T(T), .N_IN(NI), .N_OUT(NO)) dut (.*);

  int sent[NI], got[NI][NO], nrecv;
  int exp_dest[NI][NITEMS];
  bit saturate = 0;
  int streak[NI];

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // item = {source, sequence}; the destination is a function of both
  function automatic int dest_of(int s, int k); return saturate ? 0 : ((s * 7 + k * 3) / 2) % NO; endfunction

  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int s = 0; s < NI; s++)
        if (in_valid[s] && in_ready[s]) begin
          sent[s]++;
        end
      for (int o = 0; o < NO; o++) begin
        out_ready[o] <= saturate ? 1'b1 : ($urandom_range(0, 3) != 0);
        if (out_valid[o] && out_ready[o]) begin
          automatic int s = int'(out_data[o][15:12]);
          automatic int k = int'(out_data[o][11:0]);
          check(s < NI, "source field");
          check(int'(exp_dest[s][k]) == o, "arrived at named output");
          check(k == got[s][o], "in order per source and output");
          // next expected sequence number for (s,o): skip items of s that went elsewhere
          got[s][o] = k + 1;
          while (got[s][o] < NITEMS && exp_dest[s][got[s][o]] != o) got[s][o]++;
          nrecv++;
          if (saturate) begin
            for (int t = 0; t < NI; t++) streak[t] = (t == s) ? 0 : streak[t] + 1;
            for (int t = 0; t < NI; t++) check(streak[t] <= NI - 1, "round-robin fairness");
          end
        end
      end
    end
  end

  always_comb
    for (int s = 0; s < NI; s++) begin
      in_valid[s] = rst_n && sent[s] < NITEMS;
      in_data[s]  = {4'(s), 12'(sent[s])};
      in_dest[s]  = 1'(dest_of(s, sent[s]));
    end

  initial begin
    for (int s = 0; s < NI; s++) begin
      sent[s] = 0;
      for (int k = 0; k < NITEMS; k++) exp_dest[s][k] = dest_of(s, k);
      for (int o = 0; o < NO; o++) begin
        got[s][o] = 0;
        while (got[s][o] < NITEMS && exp_dest[s][got[s][o]] != o) got[s][o]++;
      end
    end
    nrecv = 0;
    for (int o = 0; o < NO; o++) out_ready[o] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nrecv == NI * NITEMS);
    check(1, "all delivered");
    // phase 2: saturation of output 0, fairness check
    @(negedge clk);
    saturate = 1;
    for (int s = 0; s < NI; s++) begin
      sent[s] = 0; streak[s] = 0;
      for (int k = 0; k < NITEMS; k++) exp_dest[s][k] = 0;
      got[s][0] = 0; got[s][1] = NITEMS;
    end
    nrecv = 0;
    wait (nrecv == NI * NITEMS);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
