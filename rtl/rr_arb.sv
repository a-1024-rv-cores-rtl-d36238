// rr_arb: round-robin arbiter. Grants the first requester at or after the
// priority pointer; after a granted request is accepted (ack_i) the pointer
// moves to the position after the winner, so every requester is served
// within NumReq grants. Combinational grant, pointer updated on the clock.
module rr_arb #(
  parameter int unsigned NumReq = 4,
  localparam int unsigned IdxW  = (NumReq > 1) ? $clog2(NumReq) : 1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [NumReq-1:0] req_i,
  input  logic              ack_i,
  output logic              valid_o,
  output logic [IdxW-1:0]   idx_o,
  output logic [NumReq-1:0] gnt_o
);
  logic [IdxW-1:0] ptr_q;

  always_comb begin
    logic found;
    found = 1'b0;
    idx_o = '0;
    for (int unsigned k = 0; k < NumReq; k++) begin
      int unsigned j;
      j = (int'(ptr_q) + k) % NumReq;
      if (!found && req_i[j]) begin
        found = 1'b1;
        idx_o = IdxW'(j);
      end
    end
    valid_o = found;
    gnt_o   = '0;
    if (found) gnt_o[idx_o] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0;
    end else if (valid_o && ack_i) begin
      ptr_q <= (int'(idx_o) == NumReq - 1) ? '0 : idx_o + 1'b1;
    end
  end
endmodule
