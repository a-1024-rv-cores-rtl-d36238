// fc_xbar: fully-connected (FC) crossbar, the building block of all three
// levels of the TeraPool-SDR L1 interconnect (tile, subgroup, group).
//
// NumIn valid/ready inputs, each carrying a payload and the index of the
// output it wants, reach NumOut outputs. Every output has its own
// round-robin arbiter, so inputs heading for different outputs pass in the
// same cycle and a conflict costs the loser one cycle per competing
// winner. The crossbar is purely combinational (zero latency): the cycle
// counts of the cluster come from the banks and the pipeline cuts around it.
// That the crossbars are fully connected is the paper's; the round-robin
// policy and the valid/ready handshake are this design's choices.
module fc_xbar #(
  parameter int unsigned NumIn     = 4,
  parameter int unsigned NumOut    = 4,
  parameter type         payload_t = logic [31:0],
  localparam int unsigned SelW     = (NumOut > 1) ? $clog2(NumOut) : 1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [NumIn-1:0]  in_valid_i,
  output logic [NumIn-1:0]  in_ready_o,
  input  logic [SelW-1:0]   in_sel_i  [NumIn],
  input  payload_t          in_data_i [NumIn],
  output logic [NumOut-1:0] out_valid_o,
  input  logic [NumOut-1:0] out_ready_i,
  output payload_t          out_data_o [NumOut]
);
  localparam int unsigned InW = (NumIn > 1) ? $clog2(NumIn) : 1;

  logic [NumIn-1:0] gnt [NumOut];

  for (genvar o = 0; o < NumOut; o++) begin : g_out
    logic [NumIn-1:0] req;
    logic [InW-1:0]   idx;
    for (genvar i = 0; i < NumIn; i++) begin : g_req
      assign req[i] = in_valid_i[i] && (int'(in_sel_i[i]) == o);
    end
    rr_arb #(.NumReq(NumIn)) i_arb (
      .clk_i, .rst_ni,
      .req_i  (req),
      .ack_i  (out_ready_i[o]),
      .valid_o(out_valid_o[o]),
      .idx_o  (idx),
      .gnt_o  (gnt[o])
    );
    assign out_data_o[o] = in_data_i[idx];
  end

  always_comb begin
    in_ready_o = '0;
    for (int unsigned o = 0; o < NumOut; o++) begin
      in_ready_o |= gnt[o] & {NumIn{out_ready_i[o]}};
    end
  end
endmodule
