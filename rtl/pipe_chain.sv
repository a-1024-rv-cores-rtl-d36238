// pipe_chain: a chain of Depth pipe_cut stages (Depth may be 0, then the
// chain is a wire). Used for the inter-group links, whose number of cuts sets
// the remote-group access latency of the cluster (7, 9 or 11 cycles).
module pipe_chain #(
  parameter type         payload_t = logic [31:0],
  parameter int unsigned Depth     = 1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     in_valid_i,
  output logic     in_ready_o,
  input  payload_t in_data_i,
  output logic     out_valid_o,
  input  logic     out_ready_i,
  output payload_t out_data_o
);
  logic     v [Depth+1];
  logic     r [Depth+1];
  payload_t d [Depth+1];

  assign v[0]        = in_valid_i;
  assign in_ready_o  = r[0];
  assign d[0]        = in_data_i;
  assign out_valid_o = v[Depth];
  assign r[Depth]    = out_ready_i;
  assign out_data_o  = d[Depth];

  for (genvar i = 0; i < Depth; i++) begin : g_stage
    pipe_cut #(.payload_t(payload_t)) i_cut (
      .clk_i, .rst_ni,
      .in_valid_i (v[i]),   .in_ready_o (r[i]),   .in_data_i (d[i]),
      .out_valid_o(v[i+1]), .out_ready_i(r[i+1]), .out_data_o(d[i+1])
    );
  end
endmodule
