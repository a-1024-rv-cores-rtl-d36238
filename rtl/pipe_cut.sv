// pipe_cut: one-stage valid/ready pipeline register, the "pipeline cut" the
// interconnect inserts on tile master ports and on the links between
// subgroups and groups for timing closure.
//
// A beat accepted in cycle t is presented at the output from cycle t+1, so
// each cut adds exactly one cycle of latency. The stage accepts a new beat
// whenever it is empty or its current beat leaves in the same cycle, which
// sustains one beat per cycle. in_ready_o therefore depends combinationally
// on out_ready_i; out_valid_o never depends on in_valid_i.
// Reset empties the stage. The one-register form is this design's choice;
// the paper only shows that such cuts exist.
module pipe_cut #(
  parameter type payload_t = logic [31:0]
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
  logic     full_q;
  payload_t data_q;

  assign in_ready_o  = !full_q || out_ready_i;
  assign out_valid_o = full_q;
  assign out_data_o  = data_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      full_q <= 1'b0;
    end else if (in_ready_o) begin
      full_q <= in_valid_i;
    end
  end

  always_ff @(posedge clk_i) begin
    if (in_valid_i && in_ready_o) data_q <= in_data_i;
  end

  // A beat that is offered and not taken must stay offered.
  a_hold : assert property (@(posedge clk_i) disable iff (!rst_ni)
                            out_valid_o && !out_ready_i |=> out_valid_o);
endmodule
