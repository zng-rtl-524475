// flash_mesh: ZnG's flash network, an NX x NY mesh of mesh_router with one node per router.
//
// Node n = y * NX + x.  With the defaults (8 x 3) row 0 holds the eight flash controllers
// and rows 1 and 2 the sixteen Z-NAND packages, so every controller reaches every package.
// Links between neighbours are registered in the receiving router's input FIFO; edge ports
// are tied off.  Each node sees one valid/ready flit port in each direction.
module flash_mesh
  import zng_pkg::*;
#(
  parameter int unsigned NX = MESH_X,
  parameter int unsigned NY = MESH_Y,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned N = NX * NY
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  inj_valid [N],
  input  flit_t inj_flit  [N],
  output logic  inj_ready [N],
  output logic  ej_valid  [N],
  output flit_t ej_flit   [N],
  input  logic  ej_ready  [N]
);
  logic  iv [N][5];
  flit_t ifl[N][5];
  logic  ir [N][5];
  logic  ov [N][5];
  flit_t ofl[N][5];
  logic  orr[N][5];

  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      localparam int unsigned n = y * NX + x;
      mesh_router #(.X(x), .Y(y), .NX(NX), .FIFO_DEPTH(FIFO_DEPTH)) u_r (
        .clk, .rst_n,
        .in_valid(iv[n]), .in_flit(ifl[n]), .in_ready(ir[n]),
        .out_valid(ov[n]), .out_flit(ofl[n]), .out_ready(orr[n]));
    end
  end

  // port p of node n receives from the neighbour's opposite port
  function automatic int nb(int n, int p);
    int x = n % NX, y = n / NX;
    case (p)
      1: return (y > 0)      ? n - NX : -1;
      2: return (x < NX - 1) ? n + 1  : -1;
      3: return (y < NY - 1) ? n + NX : -1;
      4: return (x > 0)      ? n - 1  : -1;
      default: return -1;
    endcase
  endfunction
  function automatic int opp(int p);
    return (p == 1) ? 3 : (p == 3) ? 1 : (p == 2) ? 4 : 2;
  endfunction

  for (genvar n = 0; n < N; n++) begin : g_link
    assign iv[n][0]     = inj_valid[n];
    assign ifl[n][0]    = inj_flit[n];
    assign inj_ready[n] = ir[n][0];
    assign ej_valid[n]  = ov[n][0];
    assign ej_flit[n]   = ofl[n][0];
    assign orr[n][0]    = ej_ready[n];
    for (genvar p = 1; p < 5; p++) begin : g_p
      localparam int m = nb(n, p);
      localparam int q = opp(p);
      if (m >= 0) begin : g_nb
        assign iv[n][p]  = ov[m][q];
        assign ifl[n][p] = ofl[m][q];
        assign orr[n][p] = ir[m][q];
      end else begin : g_edge
        assign iv[n][p]  = 1'b0;
        assign ifl[n][p] = '0;
        assign orr[n][p] = 1'b1;
      end
    end
  end
endmodule
