// mesh_router: one router of ZnG's flash network, a 2-D mesh with 8 B links.
//
// ZnG replaces the flash channel buses with a mesh so that link width and clock can grow
// with the bandwidth of the Z-NAND packages.  The router has five ports (0 = local node,
// 1 = north (y-1), 2 = east (x+1), 3 = south (y+1), 4 = west (x-1)), each with a FIFO_DEPTH
// input FIFO.  Packets are wormhole-switched: a head flit carries the destination node in its
// top NODE_W bits (node = y * MESH_X + x), is routed X first then Y (deadlock-free), and the
// output stays locked to that input until the tail flit has passed.  Each output arbitrates
// round-robin among inputs.  Links use valid/ready; a flit moves from an input FIFO to the
// next router in one cycle, so the per-hop latency is one cycle plus any queueing.
// The mesh topology and the 8 B width are the paper's; routing, switching and buffer depth
// are this design's choices.
module mesh_router
  import zng_pkg::*;
#(
  parameter int unsigned X          = 0,
  parameter int unsigned Y          = 0,
  parameter int unsigned NX         = MESH_X,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid  [5],
  input  flit_t in_flit   [5],
  output logic  in_ready  [5],
  output logic  out_valid [5],
  output flit_t out_flit  [5],
  input  logic  out_ready [5]
);
  localparam int unsigned AW = $clog2(FIFO_DEPTH);

  flit_t          fifo  [5][FIFO_DEPTH];
  logic [AW-1:0]  rd_p  [5];
  logic [AW-1:0]  wr_p  [5];
  logic [AW:0]    cnt   [5];
  logic [2:0]     route [5];    // output chosen by the packet now at the FIFO head
  logic           lock_v[5];    // output o is owned by input lock_i[o]
  logic [2:0]     lock_i[5];
  logic [2:0]     rr    [5];
  logic           gnt_v [5];
  logic [2:0]     gnt_i [5];
  logic           pop   [5];

  function automatic logic [2:0] xy_route(flit_t f);
    int unsigned d, dx, dy;
    d  = int'(f.data[FLIT_BITS-1 -: NODE_W]);
    dx = d % NX;
    dy = d / NX;
    if (dx > X) return 3'd2;
    if (dx + 1 <= X) return 3'd4;
    if (dy > Y) return 3'd3;
    if (dy + 1 <= Y) return 3'd1;
    return 3'd0;
  endfunction

  // the route of a packet is taken from its head flit and held until its tail leaves
  logic [2:0] cur_route [5];
  always_comb
    for (int i = 0; i < 5; i++) begin
      route[i] = (fifo[i][rd_p[i]].head) ? xy_route(fifo[i][rd_p[i]]) : cur_route[i];
      in_ready[i] = (int'(cnt[i]) < FIFO_DEPTH);
    end

  always_comb begin
    for (int o = 0; o < 5; o++) begin
      gnt_v[o] = 1'b0;
      gnt_i[o] = '0;
      if (lock_v[o]) begin
        if (cnt[lock_i[o]] != 0 && route[lock_i[o]] == 3'(o)) begin
          gnt_v[o] = 1'b1; gnt_i[o] = lock_i[o];
        end
      end else begin
        for (int k = 1; k <= 5; k++) begin
          automatic int unsigned i = (int'(rr[o]) + k) % 5;
          if (!gnt_v[o] && cnt[i] != 0 && fifo[i][rd_p[i]].head && route[i] == 3'(o)) begin
            gnt_v[o] = 1'b1; gnt_i[o] = 3'(i);
          end
        end
      end
      out_valid[o] = gnt_v[o];
      out_flit[o]  = fifo[gnt_i[o]][rd_p[gnt_i[o]]];
    end
    for (int i = 0; i < 5; i++) begin
      pop[i] = 1'b0;
      for (int o = 0; o < 5; o++)
        if (gnt_v[o] && int'(gnt_i[o]) == i && out_ready[o]) pop[i] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        rd_p[i] <= '0; wr_p[i] <= '0; cnt[i] <= '0; lock_v[i] <= 1'b0; lock_i[i] <= '0;
        rr[i] <= 3'd4; cur_route[i] <= '0;
        for (int k = 0; k < FIFO_DEPTH; k++) fifo[i][k] <= '0;
      end
    end else begin
      for (int i = 0; i < 5; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          fifo[i][wr_p[i]] <= in_flit[i];
          wr_p[i] <= (int'(wr_p[i]) == FIFO_DEPTH - 1) ? '0 : wr_p[i] + AW'(1);
        end
        if (pop[i]) begin
          rd_p[i] <= (int'(rd_p[i]) == FIFO_DEPTH - 1) ? '0 : rd_p[i] + AW'(1);
          if (fifo[i][rd_p[i]].head) cur_route[i] <= route[i];
        end
        cnt[i] <= cnt[i] + (AW+1)'(in_valid[i] && in_ready[i]) - (AW+1)'(pop[i]);
      end
      for (int o = 0; o < 5; o++)
        if (gnt_v[o] && out_ready[o]) begin
          automatic flit_t f = fifo[gnt_i[o]][rd_p[gnt_i[o]]];
          rr[o] <= gnt_i[o];
          lock_v[o] <= !f.tail;
          lock_i[o] <= gnt_i[o];
        end
      // a locked output only ever carries body flits of the locking packet
      for (int o = 0; o < 5; o++)
        if (lock_v[o] && gnt_v[o]) assert (!out_flit[o].head) else $error("head flit inside a locked worm");
    end
  end
endmodule
