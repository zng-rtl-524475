// flash_ctrl: ZnG flash controller, with its request dispatcher and thrashing checker.
//
// ZnG drops the SSD controller and attaches several flash controllers directly to the GPU
// network; L2 misses are spread over them by address.  A controller takes one request at a
// time from the L2 banks (or from the GC helper thread's port), decodes the flash physical
// address to find the package (channel), die and plane, and turns the request into a
// flash-network packet: a header flit (zng_pkg::nhdr_t) naming the command, the data block,
// page, line(s) and the physical log block, followed for writes by the 16 flits of the 128 B
// line.  The package's answer is turned back into GPU-network responses: one fc_resp_t per
// line read (the last one marked), or one acknowledgement for a write or erase.  Write
// acknowledgements feed the thrashing checker, whose verdict (`thrash`) goes to the L2
// banks.  The paper gives the controller's role; the packet format, the single outstanding
// request and the one-flit-per-cycle transfer are this design's choices.
// Timing: header flit one cycle after acceptance, then one flit per cycle as the mesh allows.
module flash_ctrl
  import zng_pkg::*;
#(
  parameter int unsigned NODE_ID   = 0,
  parameter int unsigned TC_WINDOW = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  input  fc_req_t     req,
  output logic        req_ready,
  output logic        resp_valid,
  output fc_resp_t    resp,
  input  logic        resp_ready,
  output logic        tx_valid,
  output flit_t       tx_flit,
  input  logic        tx_ready,
  input  logic        rx_valid,
  input  flit_t       rx_flit,
  output logic        rx_ready,
  output logic        thrash,
  output logic [31:0] st_thrash_episodes,
  output logic [31:0] st_requests
);
  typedef enum logic [2:0] {C_IDLE, C_HDR, C_DATA, C_WAIT, C_RDATA, C_RESP} state_e;
  state_e state;

  fc_req_t    r;
  logic [3:0] fcnt;
  logic [5:0] lcnt, nl;
  nhdr_t      rx_hdr;
  logic       wack_v, wack_e;

  assign rx_hdr    = nhdr_t'(rx_flit.data);
  assign req_ready = (state == C_IDLE);
  assign rx_ready  = (state == C_WAIT) || (state == C_RDATA);

  thrash_checker #(.WINDOW(TC_WINDOW)) u_tc (
    .clk, .rst_n, .wack_valid(wack_v), .wack_evicted(wack_e), .thrash, .episodes(st_thrash_episodes));

  function automatic flit_t mk_hdr(fc_req_t q);
    nhdr_t h;
    h.dst    = NODE_W'(PKG_NODE0 + int'(q.addr.pdbn.ch));
    h.src    = NODE_W'(NODE_ID);
    h.cmd    = (q.cmd == FC_READ) ? NC_READ : (q.cmd == FC_WRITE) ? NC_WRITE : NC_ERASE;
    h.plbn   = q.plbn;
    h.pdbn   = q.addr.pdbn;
    h.page   = q.addr.page;
    h.line   = q.addr.line;
    h.nlines = (q.cmd == FC_READ) ? q.nlines : 6'd1;
    h.flag   = 1'b0;
    return '{head: 1'b1, tail: (q.cmd != FC_WRITE), data: h};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; r <= '0; fcnt <= '0; lcnt <= '0; nl <= '0; tx_valid <= 1'b0; tx_flit <= '0;
      resp_valid <= 1'b0; resp <= '0; wack_v <= 1'b0; wack_e <= 1'b0; st_requests <= '0;
    end else begin
      wack_v <= 1'b0;
      case (state)
        C_IDLE: if (req_valid) begin
          r <= req; st_requests <= st_requests + 1;
          tx_valid <= 1'b1; tx_flit <= mk_hdr(req); fcnt <= '0; state <= C_HDR;
        end
        C_HDR: if (tx_ready) begin
          if (r.cmd == FC_WRITE) begin
            tx_flit <= '{head: 1'b0, tail: 1'b0, data: r.wdata[0 +: FLIT_BITS]};
            fcnt <= 4'd1; state <= C_DATA;
          end else begin
            tx_valid <= 1'b0; state <= C_WAIT;
          end
        end
        C_DATA: if (tx_ready) begin
          if (tx_flit.tail) begin
            tx_valid <= 1'b0; state <= C_WAIT;
          end else begin
            tx_flit <= '{head: 1'b0, tail: (int'(fcnt) == FLITS_PER_LINE - 1),
                         data: r.wdata[int'(fcnt)*FLIT_BITS +: FLIT_BITS]};
            fcnt <= fcnt + 4'd1;
          end
        end
        C_WAIT: if (rx_valid && rx_flit.head) begin
          resp.dst <= r.src; resp.cmd <= r.cmd; resp.addr <= r.addr; resp.err <= 1'b0; resp.data <= '0;
          if (rx_hdr.cmd == NC_RDATA) begin
            nl <= rx_hdr.nlines; lcnt <= '0; fcnt <= '0; state <= C_RDATA;
          end else begin
            resp.err <= rx_hdr.nlines[0]; resp.last <= 1'b1; resp_valid <= 1'b1;
            wack_v <= (rx_hdr.cmd == NC_WACK) && !rx_hdr.nlines[0]; wack_e <= rx_hdr.flag;
            state <= C_RESP;
          end
        end
        C_RDATA: if (rx_valid) begin
          resp.data[int'(fcnt)*FLIT_BITS +: FLIT_BITS] <= rx_flit.data;
          fcnt <= fcnt + 4'd1;
          if (int'(fcnt) == FLITS_PER_LINE - 1) begin
            resp.addr <= '{pdbn: r.addr.pdbn, page: r.addr.page, line: r.addr.line + LN_W'(lcnt)};
            resp.last <= (lcnt + 6'd1 == nl);
            resp_valid <= 1'b1; state <= C_RESP;
          end
        end
        C_RESP: if (resp_ready) begin
          resp_valid <= 1'b0;
          if (resp.cmd == FC_READ && !resp.last) begin
            lcnt <= lcnt + 6'd1; fcnt <= '0; state <= C_RDATA;
          end else state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
