// zng_tlb: per-SM TLB that caches DBMT entries and turns virtual into flash physical addresses.
//
// A request from the SM carries a virtual line address {VBN, page, line}.  ZnG maps whole
// blocks, so translation only replaces the VBN with the PDBN of the cached DBMT entry; page
// and line are kept, and the PLBN travels along so that the flash row decoder can find the
// log block that may hold a newer copy of the page.  The TLB is fully associative with
// ENTRIES entries and round-robin replacement.  A hit leaves as a translated request in the
// next cycle; a miss asks the MMU and waits for the walk.  An invalid DBMT entry is a page
// fault: the request is dropped and `fault` pulses for one cycle (the SM's page-fault path is
// outside this design).  A shootdown from the MMU invalidates the entry of that VBN.
// The paper names the TLB but not its size or policy: 32 entries and round-robin are assumed.
module zng_tlb
  import zng_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned SM_ID   = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  // from the SM
  input  logic             in_valid,
  input  sm_req_t          in_req,
  output logic             in_ready,
  // translated request towards the L2 cache
  output logic             out_valid,
  output l2_req_t          out_req,
  input  logic             out_ready,
  output logic             fault,
  // MMU port
  output logic             mmu_valid,
  output logic [VBN_W-1:0] mmu_vbn,
  input  logic             mmu_ready,
  input  logic             mmu_rsp_valid,
  input  dbmt_entry_t      mmu_rsp_entry,
  input  logic             mmu_rsp_fault,
  input  logic             sd_valid,
  input  logic [VBN_W-1:0] sd_vbn,
  // statistics
  output logic [31:0]      hits,
  output logic [31:0]      misses
);
  localparam int unsigned EW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef enum logic [1:0] {T_IDLE, T_MISS, T_WAIT, T_OUT} state_e;
  state_e state;

  logic             v    [ENTRIES];
  logic [VBN_W-1:0] vbn  [ENTRIES];
  dbmt_entry_t      ent  [ENTRIES];
  logic [EW-1:0]    repl;
  sm_req_t          hold;

  logic          hit;
  dbmt_entry_t   hit_ent;
  always_comb begin
    hit = 1'b0;
    hit_ent = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (v[i] && vbn[i] == hold.addr.vbn) begin
        hit = 1'b1;
        hit_ent = ent[i];
      end
  end

  assign in_ready  = (state == T_IDLE) && !out_valid;
  assign mmu_valid = (state == T_MISS);
  assign mmu_vbn   = hold.addr.vbn;

  function automatic l2_req_t xlate(sm_req_t r, dbmt_entry_t e);
    l2_req_t o;
    o.pc        = r.pc;
    o.warp      = r.warp;
    o.sm        = SM_W'(SM_ID);
    o.wr        = r.wr;
    o.addr.pdbn = e.pdbn;
    o.addr.page = r.addr.page;
    o.addr.line = r.addr.line;
    o.plbn      = e.plbn;
    o.wdata     = r.wdata;
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; repl <= '0; hold <= '0; out_valid <= 1'b0; out_req <= '0; fault <= 1'b0;
      hits <= '0; misses <= '0;
      for (int i = 0; i < ENTRIES; i++) begin v[i] <= 1'b0; vbn[i] <= '0; ent[i] <= '0; end
    end else begin
      fault <= 1'b0;
      if (sd_valid)
        for (int i = 0; i < ENTRIES; i++) if (vbn[i] == sd_vbn) v[i] <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        T_IDLE: if (in_valid && in_ready) begin hold <= in_req; state <= T_OUT; end
        T_OUT: begin
          // lookup of the held request
          if (hit && !(sd_valid && sd_vbn == hold.addr.vbn)) begin
            out_valid <= 1'b1; out_req <= xlate(hold, hit_ent); state <= T_IDLE; hits <= hits + 1;
          end else begin
            state <= T_MISS; misses <= misses + 1;
          end
        end
        T_MISS: if (mmu_ready) state <= T_WAIT;
        T_WAIT: if (mmu_rsp_valid) begin
          if (mmu_rsp_fault) begin
            fault <= 1'b1;
          end else begin
            v[repl] <= 1'b1; vbn[repl] <= hold.addr.vbn; ent[repl] <= mmu_rsp_entry;
            repl <= (int'(repl) == ENTRIES - 1) ? '0 : repl + EW'(1);
            out_valid <= 1'b1; out_req <= xlate(hold, mmu_rsp_entry);
          end
          state <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule
