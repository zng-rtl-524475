// thrash_checker: watches the flash registers for thrashing and asks L2 to take writes.
//
// Every write acknowledged by a Z-NAND package tells whether a flash register had to be
// evicted to make room.  Over a window of WINDOW writes the checker counts evictions; if more
// than THRESH_PCT percent of the window's writes evicted a register, the registers are
// thrashing and `thrash` is raised for the next window, during which the L2 banks place
// writes in their pinned space instead of sending them to flash.  The paper names the
// thrashing checker and its effect (redirect to pinned L2 space) but not its rule; the
// window of 32 writes and the 50 % threshold are this design's choices.
// Timing: `thrash` changes in the cycle after the window's last write.
module thrash_checker #(
  parameter int unsigned WINDOW     = 32,
  parameter int unsigned THRESH_PCT = 50
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wack_valid,
  input  logic        wack_evicted,
  output logic        thrash,
  output logic [31:0] episodes
);
  logic [15:0] nw, ne;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nw <= '0; ne <= '0; thrash <= 1'b0; episodes <= '0;
    end else if (wack_valid) begin
      if (int'(nw) + 1 >= WINDOW) begin
        automatic int unsigned e = int'(ne) + int'(wack_evicted);
        thrash <= (e * 100 > THRESH_PCT * WINDOW);
        if (e * 100 > THRESH_PCT * WINDOW && !thrash) episodes <= episodes + 1;
        nw <= '0; ne <= '0;
      end else begin
        nw <= nw + 16'd1;
        ne <= ne + 16'(wack_evicted);
      end
    end
  end
endmodule
