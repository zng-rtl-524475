// l2_access_monitor: adjusts the read-prefetch granularity from the fate of evicted lines.
//
// Every L2 eviction reports the line's prefetch bit and accessed (used) bit.  The monitor
// counts evictions and "unused" evictions (filled by a prefetch, never read).  Once WINDOW
// evictions have been seen it forms the waste ratio unused / evicted: above the high
// threshold (0.3) the prefetch size is halved, below the low threshold (0.05) it grows by
// 1 KB; then both counters restart.  Ratios are compared without division:
// unused * 100 > HI_PCT * evicted.  The paper gives the two thresholds, the halving and the
// 1 KB step; the window length (64 evictions), the start size (4 KB, one flash page), the
// bounds (128 B .. 4 KB) are this design's choices.  The size is given in bytes and in
// 128 B lines; it changes in the cycle after the window's last eviction.  shrinks/grows
// count actual size changes (a decision at a bound is not counted).
module l2_access_monitor #(
  parameter int unsigned WINDOW   = 64,
  parameter int unsigned HI_PCT   = 30,
  parameter int unsigned LO_PCT   = 5,
  parameter int unsigned STEP     = 1024,
  parameter int unsigned MIN_GRAN = 128,
  parameter int unsigned MAX_GRAN = 4096,
  parameter int unsigned INIT_GRAN = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        evict_valid,
  input  logic        evict_pref,
  input  logic        evict_used,
  output logic [12:0] gran_bytes,
  output logic [5:0]  gran_lines,
  output logic [15:0] evict_count,
  output logic [15:0] unused_count,
  output logic [31:0] shrinks,
  output logic [31:0] grows
);
  logic [15:0] ev_n, un_n;
  always_comb begin
    ev_n = evict_count + 16'(evict_valid);
    un_n = unused_count + 16'(evict_valid && evict_pref && !evict_used);
    gran_lines = 6'(gran_bytes / 13'd128);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gran_bytes <= 13'(INIT_GRAN); evict_count <= '0; unused_count <= '0; shrinks <= '0; grows <= '0;
    end else if (evict_valid) begin
      if (int'(ev_n) >= WINDOW) begin
        if (32'(un_n) * 100 > 32'(HI_PCT) * 32'(ev_n)) begin
          gran_bytes <= (int'(gran_bytes) / 2 < MIN_GRAN) ? 13'(MIN_GRAN) : gran_bytes / 13'd2;
          if (int'(gran_bytes) > MIN_GRAN) shrinks <= shrinks + 1;
        end else if (32'(un_n) * 100 < 32'(LO_PCT) * 32'(ev_n)) begin
          gran_bytes <= (int'(gran_bytes) + STEP > MAX_GRAN) ? 13'(MAX_GRAN) : gran_bytes + 13'(STEP);
          if (int'(gran_bytes) < MAX_GRAN) grows <= grows + 1;
        end
        evict_count <= '0; unused_count <= '0;
      end else begin
        evict_count <= ev_n; unused_count <= un_n;
      end
    end
  end
endmodule
