// zng_xbar: the GPU interconnect network, a valid/ready crossbar with round-robin arbitration.
//
// Each of N_IN sources presents a payload of type T together with the index of the output
// it wants.  Every output picks one requesting source per cycle with a rotating priority that
// starts just after the source it served last, and the payload passes through without a
// register (zero-cycle latency, one transfer per output per cycle).  A source is held until
// its output accepts.  ZnG uses four such networks: SM -> L2 bank, L2 bank -> SM,
// L2 bank -> flash controller and flash controller -> L2 bank.  The paper only names the
// "GPU network"; the crossbar form and round-robin policy are this design's choice.
module zng_xbar #(
  parameter type         T     = logic [7:0],
  parameter int unsigned N_IN  = 4,
  parameter int unsigned N_OUT = 4,
  localparam int unsigned DW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid [N_IN],
  input  T                in_data  [N_IN],
  input  logic [DW-1:0]   in_dest  [N_IN],
  output logic            in_ready [N_IN],
  output logic            out_valid[N_OUT],
  output T                out_data [N_OUT],
  input  logic            out_ready[N_OUT]
);
  localparam int unsigned SW = (N_IN > 1) ? $clog2(N_IN) : 1;

  logic [SW-1:0] last   [N_OUT];   // last source served by each output
  logic [SW-1:0] grant  [N_OUT];
  logic          gvalid [N_OUT];

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      gvalid[o] = 1'b0;
      grant[o]  = '0;
      for (int k = 1; k <= N_IN; k++) begin
        automatic int s = (int'(last[o]) + k) % N_IN;
        if (!gvalid[o] && in_valid[s] && int'(in_dest[s]) == o) begin
          gvalid[o] = 1'b1;
          grant[o]  = SW'(s);
        end
      end
      out_valid[o] = gvalid[o];
      out_data[o]  = in_data[grant[o]];
    end
    for (int s = 0; s < N_IN; s++) begin
      in_ready[s] = 1'b0;
      for (int o = 0; o < N_OUT; o++)
        if (gvalid[o] && int'(grant[o]) == s && out_ready[o]) in_ready[s] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N_OUT; o++) last[o] <= SW'(N_IN - 1);
    end else begin
      for (int o = 0; o < N_OUT; o++)
        if (gvalid[o] && out_ready[o]) last[o] <= grant[o];
      // a source never targets an output that does not exist
      for (int s = 0; s < N_IN; s++)
        if (in_valid[s]) assert (int'(in_dest[s]) < N_OUT) else $error("bad dest");
    end
  end
endmodule
