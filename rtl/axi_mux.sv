// axi_mux: N-to-1 AXI multiplexer, the node of the subgroup's AXI tree (the
// trapezoids that merge Tile 0..7 into one 512-bit AXI master) and of the
// cluster-level merge towards the DMA frontend and the peripherals.
//
// Read and write address channels each have a round-robin arbiter. The index
// of the winning input is appended below the transaction ID
// (id_out = id_in << SelW | input), and R and B beats are routed back by those
// low bits, which are stripped again. A granted write locks the W channel to
// its input until the beat with last set has passed; no other write address
// is accepted meanwhile, so W beats can never interleave.
// AXI channel handshakes follow AXI4; the ID-prefix routing and the
// one-write-at-a-time rule are this design's choices.
// Lint reports a combinational loop (UNOPTFLAT) through the request and
// response structs: the ready fields of the output response feed the grant,
// and the grant picks the request fields. The loop exists only at struct
// granularity; no ready depends on a valid of the same channel, so there
// is no real combinational cycle.
module axi_mux
  import terapool_pkg::*;
#(
  parameter int unsigned NumIn = 2,
  localparam int unsigned SelW = (NumIn > 1) ? $clog2(NumIn) : 1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t in_req_i [NumIn],
  output axi_rsp_t in_rsp_o [NumIn],
  output axi_req_t out_req_o,
  input  axi_rsp_t out_rsp_i
);
  logic [NumIn-1:0] ar_req, aw_req, ar_gnt, aw_gnt;
  logic [SelW-1:0]  ar_idx, aw_idx, r_sel, b_sel;
  logic             ar_any, aw_any;
  logic             w_busy_q;
  logic [SelW-1:0]  w_sel_q;

  for (genvar i = 0; i < NumIn; i++) begin : g_req
    assign ar_req[i] = in_req_i[i].ar_valid;
    assign aw_req[i] = in_req_i[i].aw_valid && !w_busy_q;
  end

  rr_arb #(.NumReq(NumIn)) i_ar_arb (
    .clk_i, .rst_ni, .req_i(ar_req), .ack_i(out_rsp_i.ar_ready),
    .valid_o(ar_any), .idx_o(ar_idx), .gnt_o(ar_gnt)
  );
  rr_arb #(.NumReq(NumIn)) i_aw_arb (
    .clk_i, .rst_ni, .req_i(aw_req), .ack_i(out_rsp_i.aw_ready),
    .valid_o(aw_any), .idx_o(aw_idx), .gnt_o(aw_gnt)
  );

  assign r_sel = out_rsp_i.r.id[SelW-1:0];
  assign b_sel = out_rsp_i.b.id[SelW-1:0];

  always_comb begin
    out_req_o          = '0;
    out_req_o.ar       = in_req_i[ar_idx].ar;
    out_req_o.ar.id    = (in_req_i[ar_idx].ar.id << SelW) | AxiIdWidth'(ar_idx);
    out_req_o.ar_valid = ar_any;
    out_req_o.aw       = in_req_i[aw_idx].aw;
    out_req_o.aw.id    = (in_req_i[aw_idx].aw.id << SelW) | AxiIdWidth'(aw_idx);
    out_req_o.aw_valid = aw_any;
    out_req_o.w        = in_req_i[w_sel_q].w;
    out_req_o.w_valid  = w_busy_q && in_req_i[w_sel_q].w_valid;
    out_req_o.r_ready  = in_req_i[r_sel].r_ready;
    out_req_o.b_ready  = in_req_i[b_sel].b_ready;
    for (int unsigned i = 0; i < NumIn; i++) begin
      in_rsp_o[i]          = '0;
      in_rsp_o[i].ar_ready = ar_gnt[i] && out_rsp_i.ar_ready;
      in_rsp_o[i].aw_ready = aw_gnt[i] && out_rsp_i.aw_ready;
      in_rsp_o[i].w_ready  = w_busy_q && (int'(w_sel_q) == i) && out_rsp_i.w_ready;
      in_rsp_o[i].r        = out_rsp_i.r;
      in_rsp_o[i].r.id     = out_rsp_i.r.id >> SelW;
      in_rsp_o[i].r_valid  = out_rsp_i.r_valid && (int'(r_sel) == i);
      in_rsp_o[i].b        = out_rsp_i.b;
      in_rsp_o[i].b.id     = out_rsp_i.b.id >> SelW;
      in_rsp_o[i].b_valid  = out_rsp_i.b_valid && (int'(b_sel) == i);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_busy_q <= 1'b0;
      w_sel_q  <= '0;
    end else if (!w_busy_q) begin
      if (aw_any && out_rsp_i.aw_ready) begin
        w_busy_q <= 1'b1;
        w_sel_q  <= aw_idx;
      end
    end else if (out_req_o.w_valid && out_rsp_i.w_ready && out_req_o.w.last) begin
      w_busy_q <= 1'b0;
    end
  end
endmodule
