// tb_flash_mesh: self-checking test of the flash network on a 4 x 3 mesh with 2-flit input
// FIFOs.  Every node injects random packets (1 to 6 flits, head flit addressed to a random
// other node) and every ejection port applies random back-pressure.  All handshakes are
// decided at the falling edge: sinks first draw a new ready, then after the combinational
// logic has settled both sides note which transfers the next rising edge will make.
// Checks: every packet arrives at the node it was addressed to, intact, with its flits
// back to back at the ejection port (wormhole switching never interleaves packets), and in
// order for each source/destination pair (XY routing keeps one path per pair); nothing is
// left in flight when the sources stop.
module tb_flash_mesh;
  import zng_pkg::*;
  localparam int NX = 4, NY = 3, N = NX * NY, PKTS = 120;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic  inj_valid [N], inj_ready [N], ej_valid [N], ej_ready [N];
  flit_t inj_flit [N], ej_flit [N];
  flash_mesh #(.NX(NX), .NY(NY), .FIFO_DEPTH(2)) dut (.*);

  function automatic flit_t mkflit(int dst, int src, int seq, int idx, int len);
    flit_t f;
    f.head = (idx == 0); f.tail = (idx == len - 1);
    f.data = {5'(dst), 5'(src), 16'(seq), 6'(idx), 4'(len), 28'(dst * 31 + src * 7 + seq * 3 + idx)};
    return f;
  endfunction

  int len_q [N][$], dst_q [N][$];                // packets still to send per source
  int sent_seq [N], idx_s [N];                   // per source: packet number, flit index
  bit fired [N];
  int next_seq [N][N];                           // expected next seq per (src, dst)
  int seq_of [N][N];                             // seq counter per (src, dst) at the source
  int cur_seq [N];
  bit in_pkt [N]; int pk_src [N], pk_seq [N], pk_idx [N], pk_len [N];
  int delivered = 0, total = 0;
  bit running = 1;

  task automatic load(int s);
    if (len_q[s].size() == 0) begin inj_valid[s] = 0; return; end
    inj_valid[s] = 1;
    inj_flit[s] = mkflit(dst_q[s][0], s, cur_seq[s], idx_s[s], len_q[s][0]);
  endtask

  bit started = 0;
  always @(negedge clk) if (rst_n) begin
    if (!started) begin started = 1; for (int s = 0; s < N; s++) load(s); end
    for (int s = 0; s < N; s++) if (fired[s]) begin
      fired[s] = 0;
      if (idx_s[s] == len_q[s][0] - 1) begin
        void'(len_q[s].pop_front()); void'(dst_q[s].pop_front()); idx_s[s] = 0;
        if (dst_q[s].size() > 0) begin cur_seq[s] = seq_of[s][dst_q[s][0]]; seq_of[s][dst_q[s][0]]++; end
      end else idx_s[s]++;
      load(s);
    end
    for (int d = 0; d < N; d++) ej_ready[d] = ($urandom_range(0, 3) != 0);
    #1;
    for (int s = 0; s < N; s++) if (inj_valid[s] && inj_ready[s]) fired[s] = 1;
    for (int d = 0; d < N; d++) if (ej_valid[d] && ej_ready[d]) begin
      automatic flit_t f = ej_flit[d];
      automatic int fd = int'(f.data[63:59]), fs = int'(f.data[58:54]), fq = int'(f.data[53:38]);
      automatic int fi = int'(f.data[37:32]), fl = int'(f.data[31:28]);
      check(f.data[27:0] == 28'(fd * 31 + fs * 7 + fq * 3 + fi) && fd == d, $sformatf("flit intact at node %0d", d));
      if (!in_pkt[d]) begin
        check(f.head && fi == 0, "packet starts with its head");
        check(fq == next_seq[fs][d], $sformatf("order %0d->%0d: seq %0d want %0d", fs, d, fq, next_seq[fs][d]));
        next_seq[fs][d] = fq + 1;
        in_pkt[d] = 1; pk_src[d] = fs; pk_seq[d] = fq; pk_idx[d] = 0; pk_len[d] = fl;
      end else begin
        pk_idx[d]++;
        check(fs == pk_src[d] && fq == pk_seq[d] && fi == pk_idx[d] && !f.head, $sformatf("flits back to back at node %0d", d));
      end
      check(f.tail == (pk_idx[d] == pk_len[d] - 1), "tail flag");
      if (f.tail) begin in_pkt[d] = 0; delivered++; end
    end
  end

  initial begin
    for (int s = 0; s < N; s++) begin
      inj_valid[s] = 0; inj_flit[s] = '0; ej_ready[s] = 0; idx_s[s] = 0; fired[s] = 0; in_pkt[s] = 0;
      for (int d = 0; d < N; d++) begin next_seq[s][d] = 0; seq_of[s][d] = 0; end
      for (int k = 0; k < PKTS; k++) begin
        automatic int d = $urandom_range(0, N - 2);
        if (d >= s) d++;
        dst_q[s].push_back(d); len_q[s].push_back($urandom_range(1, 6)); total++;
      end
      cur_seq[s] = 0; seq_of[s][dst_q[s][0]] = 1;
    end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    while (delivered < total) @(posedge clk);
    repeat (20) @(posedge clk);
    check(delivered == total, "all packets delivered");
    for (int d = 0; d < N; d++) check(!ej_valid[d] && !in_pkt[d], "network drained");
    $display("delivered %0d packets", delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
