// zng_mmu: the GPU MMU holding ZnG's data block mapping table (DBMT).
//
// ZnG moves the read side of the flash translation layer into the MMU: its page table is a
// block-granular table whose entry for a virtual block number (VBN) holds the logical block
// number (LBN), the physical data block number (PDBN) and the physical log block number
// (PLBN).  Block granularity keeps the table at 80 KB (10240 entries of 8 B), small enough
// for an MMU-internal buffer.  TLB misses from NUM_REQ TLBs arrive on one port each; a
// round-robin arbiter takes one miss at a time, the walk takes WALK_CYCLES cycles (one
// table read per page-table level; a two-level table as in the paper gives 2), and the entry
// is returned to the requester together with a fault bit when the entry is not valid.  The
// GC helper thread rewrites entries through the update port; every update is broadcast as a
// shootdown so that the TLBs drop stale copies.  Reset clears every entry's valid bit.
// Timing: a miss accepted in cycle t is answered in cycle t + WALK_CYCLES + 1.
module zng_mmu
  import zng_pkg::*;
#(
  parameter int unsigned NUM_REQ     = 16,
  parameter int unsigned ENTRIES     = 10240,
  parameter int unsigned WALK_CYCLES = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // TLB miss ports
  input  logic              req_valid [NUM_REQ],
  input  logic [VBN_W-1:0]  req_vbn   [NUM_REQ],
  output logic              req_ready [NUM_REQ],
  output logic              rsp_valid [NUM_REQ],
  output dbmt_entry_t       rsp_entry,
  output logic              rsp_fault,
  // table update from the GC helper thread
  input  logic              upd_valid,
  input  logic [VBN_W-1:0]  upd_vbn,
  input  dbmt_entry_t       upd_entry,
  // TLB shootdown
  output logic              sd_valid,
  output logic [VBN_W-1:0]  sd_vbn
);
  localparam int unsigned RW = (NUM_REQ > 1) ? $clog2(NUM_REQ) : 1;

  dbmt_entry_t      table_q [ENTRIES];
  logic             busy;
  logic [RW-1:0]    cur, last;
  logic [VBN_W-1:0] cur_vbn;
  logic [7:0]       cnt;
  logic             pick_v;
  logic [RW-1:0]    pick;

  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    for (int k = 1; k <= NUM_REQ; k++) begin
      automatic int unsigned s = (int'(last) + k) % NUM_REQ;
      if (!pick_v && req_valid[s]) begin
        pick_v = 1'b1;
        pick   = RW'(s);
      end
    end
    for (int s = 0; s < NUM_REQ; s++) req_ready[s] = !busy && pick_v && (int'(pick) == s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cur <= '0; last <= RW'(NUM_REQ - 1); cur_vbn <= '0; cnt <= '0;
      for (int s = 0; s < NUM_REQ; s++) rsp_valid[s] <= 1'b0;
      rsp_entry <= '0; rsp_fault <= 1'b0; sd_valid <= 1'b0; sd_vbn <= '0;
      for (int i = 0; i < ENTRIES; i++) table_q[i].valid <= 1'b0;
    end else begin
      for (int s = 0; s < NUM_REQ; s++) rsp_valid[s] <= 1'b0;
      sd_valid <= upd_valid;
      sd_vbn   <= upd_vbn;
      if (upd_valid && int'(upd_vbn) < ENTRIES) table_q[upd_vbn] <= upd_entry;
      if (!busy) begin
        if (pick_v) begin
          busy <= 1'b1; cur <= pick; last <= pick; cur_vbn <= req_vbn[pick]; cnt <= '0;
        end
      end else if (int'(cnt) + 1 < WALK_CYCLES) begin
        cnt <= cnt + 8'd1;
      end else begin
        busy           <= 1'b0;
        rsp_valid[cur] <= 1'b1;
        if (int'(cur_vbn) < ENTRIES) begin
          rsp_entry <= table_q[cur_vbn];
          rsp_fault <= !table_q[cur_vbn].valid;
        end else begin
          rsp_entry <= '0;
          rsp_fault <= 1'b1;
        end
      end
    end
  end
endmodule
