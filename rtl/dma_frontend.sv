// dma_frontend: configuration front end of the modular DMA engine.
//
// Cores program a transfer through memory-mapped registers, reached over the
// cluster AXI masters and the system demultiplexer. Register map (64-bit
// registers, offsets from DmaBase, value in the matching 64-bit lane of the
// 512-bit bus):
//   0x00 L2 address        0x08 L1 address       0x10 length in bytes
//   0x18 direction (bit 0: 1 = L1 to L2, 0 = L2 to L1)
//   0x20 write: start the programmed transfer / read: busy
//   0x28 read: number of completed transfers
// A start while a transfer is in flight is ignored. A started job is handed
// to the midend (valid/ready); busy stays high until the midend reports the
// job done. Reads and writes are single beat (len = 0); each access is
// answered one cycle after its data arrived.
// The split into a configuration frontend is the paper's; the register map is
// this design's (the paper does not give one).
module dma_frontend
  import terapool_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t cfg_req_i,
  output axi_rsp_t cfg_rsp_o,
  output logic     job_valid_o,
  input  logic     job_ready_i,
  output dma_job_t job_o,
  input  logic     job_done_i
);
  logic [63:0] l2_q, l1_q, len_q, dir_q, done_cnt_q;
  logic        pend_q, busy_q;

  logic                  rd_q, aw_q, b_q;
  logic [AxiIdWidth-1:0] rid_q, wid_q;
  logic [2:0]            ridx_q, widx_q;
  logic [63:0]           rval;

  assign job_valid_o   = pend_q;
  assign job_o.l2_addr = l2_q[AxiAddrWidth-1:0];
  assign job_o.l1_addr = l1_q[31:0];
  assign job_o.num_bytes = len_q[31:0];
  assign job_o.to_l2   = dir_q[0];

  always_comb begin
    unique case (ridx_q)
      3'd0:    rval = l2_q;
      3'd1:    rval = l1_q;
      3'd2:    rval = len_q;
      3'd3:    rval = dir_q;
      3'd4:    rval = 64'(busy_q);
      3'd5:    rval = done_cnt_q;
      default: rval = '0;
    endcase
    cfg_rsp_o          = '0;
    cfg_rsp_o.ar_ready = !rd_q;
    cfg_rsp_o.r_valid  = rd_q;
    cfg_rsp_o.r.id     = rid_q;
    cfg_rsp_o.r.last   = 1'b1;
    cfg_rsp_o.r.data   = AxiDataWidth'(rval) << (64 * ridx_q);
    cfg_rsp_o.aw_ready = !aw_q && !b_q;
    cfg_rsp_o.w_ready  = aw_q;
    cfg_rsp_o.b_valid  = b_q;
    cfg_rsp_o.b.id     = wid_q;
  end

  logic [63:0] wval;
  logic        wfire;
  assign wval  = cfg_req_i.w.data[64*widx_q +: 64];
  assign wfire = aw_q && cfg_req_i.w_valid;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      l2_q <= '0; l1_q <= '0; len_q <= '0; dir_q <= '0; done_cnt_q <= '0;
      pend_q <= 1'b0; busy_q <= 1'b0;
      rd_q <= 1'b0; aw_q <= 1'b0; b_q <= 1'b0;
      rid_q <= '0; wid_q <= '0; ridx_q <= '0; widx_q <= '0;
    end else begin
      // read channel
      if (!rd_q && cfg_req_i.ar_valid) begin
        rd_q   <= 1'b1;
        rid_q  <= cfg_req_i.ar.id;
        ridx_q <= cfg_req_i.ar.addr[5:3];
      end else if (rd_q && cfg_req_i.r_ready) begin
        rd_q <= 1'b0;
      end
      // write channel
      if (!aw_q && !b_q && cfg_req_i.aw_valid) begin
        aw_q   <= 1'b1;
        wid_q  <= cfg_req_i.aw.id;
        widx_q <= cfg_req_i.aw.addr[5:3];
      end
      if (wfire) begin
        aw_q <= 1'b0;
        b_q  <= 1'b1;
        unique case (widx_q)
          3'd0: l2_q  <= wval;
          3'd1: l1_q  <= wval;
          3'd2: len_q <= wval;
          3'd3: dir_q <= wval;
          3'd4: if (!busy_q) begin pend_q <= 1'b1; busy_q <= 1'b1; end
          default: ;
        endcase
      end
      if (b_q && cfg_req_i.b_ready) b_q <= 1'b0;
      // job hand-off and completion
      if (pend_q && job_ready_i) pend_q <= 1'b0;
      if (job_done_i) begin
        busy_q     <= 1'b0;
        done_cnt_q <= done_cnt_q + 1;
      end
    end
  end
endmodule
