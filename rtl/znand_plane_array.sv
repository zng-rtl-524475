// znand_plane_array: behavioural model of the flash cell array of one Z-NAND plane.
//
// This is a model, not synthesizable logic: the array is Z-NAND's SLC 3-D flash and its
// sense/program circuits are analog.  Pages are kept in an associative array so that a
// plane of BLOCKS x PAGES 4 KB pages costs memory only for pages actually programmed.
// Behaviour follows the flash rules: an erased page reads as all ones; a page may be
// programmed only once between erases (checked by an assertion); erase works on a whole
// block.  Latencies are the paper's Z-NAND figures, read 3 us and program 100 us, counted in
// cycles of a 1.2 GHz clock (3600 and 120000); the block erase time is not given and
// TBERS_CYCLES assumes 1 ms.  One command at a time: `busy` is high from the cycle after a
// command until it completes; a read returns the page on rd_data with a one-cycle rd_valid.
// Ports: cmd_op 0 = read, 1 = program, 2 = erase; cmd_blk / cmd_page address the page; a
// program takes the whole page on cmd_wdata when the command is accepted.
module znand_plane_array
  import zng_pkg::*;
#(
  parameter int unsigned TR_CYCLES    = 3600,
  parameter int unsigned TPROG_CYCLES = 120000,
  parameter int unsigned TBERS_CYCLES = 1200000,
  parameter int unsigned NPAGES       = PAGES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  logic [1:0]       cmd_op,
  input  logic [BLK_W-1:0] cmd_blk,
  input  logic [PG_W-1:0]  cmd_page,
  input  page_t            cmd_wdata,
  output logic             busy,
  output logic             rd_valid,
  output page_t            rd_data
);
  page_t       mem [int];
  int unsigned timer;
  logic [1:0]  op;
  int          addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; rd_valid <= 1'b0; rd_data <= '0; timer <= 0; op <= '0; addr <= 0;
    end else begin
      rd_valid <= 1'b0;
      if (!busy && cmd_valid) begin
        addr <= int'(cmd_blk) * NPAGES + int'(cmd_page);
        op   <= cmd_op;
        busy <= 1'b1;
        case (cmd_op)
          2'd0: timer <= TR_CYCLES;
          2'd1: begin
            timer <= TPROG_CYCLES;
            assert (!mem.exists(int'(cmd_blk) * NPAGES + int'(cmd_page)))
              else $error("program of a page that is not erased");
            mem[int'(cmd_blk) * NPAGES + int'(cmd_page)] = cmd_wdata;   // dynamic storage needs a blocking write
          end
          default: begin
            timer <= TBERS_CYCLES;
            for (int p = 0; p < NPAGES; p++)
              if (mem.exists(int'(cmd_blk) * NPAGES + p)) mem.delete(int'(cmd_blk) * NPAGES + p);
          end
        endcase
      end else if (busy) begin
        if (timer <= 1) begin
          busy <= 1'b0;
          if (op == 2'd0) begin
            rd_valid <= 1'b1;
            rd_data  <= mem.exists(addr) ? mem[addr] : '1;
          end
        end else begin
          timer <= timer - 1;
        end
      end
    end
  end
endmodule
