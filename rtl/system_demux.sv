// system_demux: the "System Demux" behind each of the 16 cluster AXI masters.
// It routes every transaction by address to one of three targets:
//   0 = L2 (the HBM2E link), 1 = DMA frontend configuration, 2 = CSR /
//   peripherals.
// Addresses at or above L2Base go to L2, the 4 KiB at DmaBase to the DMA
// frontend, everything else to the peripherals (the address map is this
// design's; the paper names the three targets only).
// To keep AXI's response order without reorder buffers, reads may be
// outstanding towards one target at a time, and so may writes: a read (write)
// to another target waits until the earlier ones have completed. R and B
// beats are taken from the target of the outstanding reads (writes). A W
// beat is forwarded only after its write address was accepted.
// Lint reports a combinational loop (UNOPTFLAT) through the request and
// response structs (target select -> output request -> target response
// -> input response). The select depends on the address and the counters
// only, never on a ready, so the loop exists only at struct granularity.
module system_demux
  import terapool_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t in_req_i,
  output axi_rsp_t in_rsp_o,
  output axi_req_t out_req_o [3],
  input  axi_rsp_t out_rsp_i [3]
);
  function automatic logic [1:0] decode(logic [AxiAddrWidth-1:0] a);
    if (a >= L2Base) return 2'd0;
    if (a >= DmaBase && a < DmaBase + 48'h1000) return 2'd1;
    return 2'd2;
  endfunction

  logic [1:0] ar_tgt, aw_tgt, rd_tgt_q, wr_tgt_q;
  logic [3:0] rd_cnt_q, wr_cnt_q, w_pend_q;
  logic       ar_ok, aw_ok, ar_fire, aw_fire, r_done, b_done, w_last_fire;

  assign ar_tgt = decode(in_req_i.ar.addr);
  assign aw_tgt = decode(in_req_i.aw.addr);
  assign ar_ok  = ((rd_cnt_q == 0) || (ar_tgt == rd_tgt_q)) && (rd_cnt_q != 4'hf);
  assign aw_ok  = ((wr_cnt_q == 0) || (aw_tgt == wr_tgt_q)) && (wr_cnt_q != 4'hf);

  always_comb begin
    in_rsp_o = '0;
    for (int unsigned t = 0; t < 3; t++) begin
      out_req_o[t]          = '0;
      out_req_o[t].ar       = in_req_i.ar;
      out_req_o[t].ar_valid = in_req_i.ar_valid && ar_ok && (ar_tgt == 2'(t));
      out_req_o[t].aw       = in_req_i.aw;
      out_req_o[t].aw_valid = in_req_i.aw_valid && aw_ok && (aw_tgt == 2'(t));
      out_req_o[t].w        = in_req_i.w;
      out_req_o[t].w_valid  = in_req_i.w_valid && (w_pend_q != 0) && (wr_tgt_q == 2'(t));
      out_req_o[t].r_ready  = in_req_i.r_ready && (rd_tgt_q == 2'(t));
      out_req_o[t].b_ready  = in_req_i.b_ready && (wr_tgt_q == 2'(t));
    end
    in_rsp_o.ar_ready = ar_ok && out_rsp_i[ar_tgt].ar_ready;
    in_rsp_o.aw_ready = aw_ok && out_rsp_i[aw_tgt].aw_ready;
    in_rsp_o.w_ready  = (w_pend_q != 0) && out_rsp_i[wr_tgt_q].w_ready;
    in_rsp_o.r        = out_rsp_i[rd_tgt_q].r;
    in_rsp_o.r_valid  = out_rsp_i[rd_tgt_q].r_valid;
    in_rsp_o.b        = out_rsp_i[wr_tgt_q].b;
    in_rsp_o.b_valid  = out_rsp_i[wr_tgt_q].b_valid;
  end

  assign ar_fire     = in_req_i.ar_valid && in_rsp_o.ar_ready;
  assign aw_fire     = in_req_i.aw_valid && in_rsp_o.aw_ready;
  assign r_done      = in_rsp_o.r_valid && in_req_i.r_ready && in_rsp_o.r.last;
  assign b_done      = in_rsp_o.b_valid && in_req_i.b_ready;
  assign w_last_fire = in_req_i.w_valid && in_rsp_o.w_ready && in_req_i.w.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_tgt_q <= '0;
      wr_tgt_q <= '0;
      rd_cnt_q <= '0;
      wr_cnt_q <= '0;
      w_pend_q <= '0;
    end else begin
      if (ar_fire) rd_tgt_q <= ar_tgt;
      if (aw_fire) wr_tgt_q <= aw_tgt;
      rd_cnt_q <= rd_cnt_q + 4'(ar_fire) - 4'(r_done);
      wr_cnt_q <= wr_cnt_q + 4'(aw_fire) - 4'(b_done);
      w_pend_q <= w_pend_q + 4'(aw_fire) - 4'(w_last_fire);
    end
  end
endmodule
