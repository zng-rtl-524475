// l2_predictor: PC-indexed spatial-locality predictor of the L2 cache (dynamic read prefetch).
//
// Loads issued by the same instruction (PC) tend to repeat one access pattern, so the table
// has one entry per PC index (ENTRIES = 512, as in the paper).  Each entry remembers, for five
// sampled warps, the logical page number each warp touched last, and keeps one 4-bit
// saturating counter.  A read from a sampled warp that hits the page its field recorded
// increments the counter, otherwise the counter decrements and the new page is stored.
// On an L2 miss the cutoff test reads the counter of the missing request's PC: above
// THRESHOLD (12) the L2 prefetches.  Warps are sampled as warp 0, k, 2k, 3k and 4k with
// k = WARP_STRIDE; the paper's figure labels the sampled fields Warp0, Warpk .. Warp4k without
// giving k, and 16 (80 warps / 5) is this design's choice.  The PC index is pc[11:3]
// (8-byte instructions, assumed).  Update is registered; the cutoff test is combinational
// and sees the table as it was before an update in the same cycle.
module l2_predictor
  import zng_pkg::*;
#(
  parameter int unsigned ENTRIES     = 512,
  parameter int unsigned SAMPLES     = 5,
  parameter int unsigned WARP_STRIDE = 16,
  parameter int unsigned THRESHOLD   = 12,
  parameter int unsigned PAGE_W      = 29   // logical page number = line address / 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // access history: every read request seen by the L2 bank
  input  logic              upd_valid,
  input  logic [PC_W-1:0]   upd_pc,
  input  logic [WARP_W-1:0] upd_warp,
  input  logic [PAGE_W-1:0] upd_page,
  // cutoff test for a missing read
  input  logic [PC_W-1:0]   q_pc,
  output logic              q_prefetch,
  output logic [3:0]        q_count
);
  localparam int unsigned IW = $clog2(ENTRIES);

  logic [PAGE_W-1:0] page_q [ENTRIES][SAMPLES];
  logic              pv_q   [ENTRIES][SAMPLES];
  logic [3:0]        cnt_q  [ENTRIES];

  logic [IW-1:0] ui, qi;
  logic          sampled;
  int unsigned   slot;
  assign ui = upd_pc[IW+2:3];
  assign qi = q_pc[IW+2:3];

  always_comb begin
    sampled = (int'(upd_warp) % WARP_STRIDE == 0) && (int'(upd_warp) / WARP_STRIDE < SAMPLES);
    slot    = int'(upd_warp) / WARP_STRIDE;
    if (slot >= SAMPLES) slot = 0;
    q_count    = cnt_q[qi];
    q_prefetch = (int'(cnt_q[qi]) > THRESHOLD);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        cnt_q[i] <= '0;
        for (int s = 0; s < SAMPLES; s++) begin pv_q[i][s] <= 1'b0; page_q[i][s] <= '0; end
      end
    end else if (upd_valid && sampled) begin
      if (pv_q[ui][slot] && page_q[ui][slot] == upd_page) begin
        if (cnt_q[ui] != 4'hf) cnt_q[ui] <= cnt_q[ui] + 4'd1;
      end else begin
        if (cnt_q[ui] != 4'h0) cnt_q[ui] <= cnt_q[ui] - 4'd1;
        page_q[ui][slot] <= upd_page;
        pv_q[ui][slot]   <= 1'b1;
      end
    end
  end
endmodule
