// tcdm_bank: one bank of the shared L1 scratchpad (TCDM). The cluster has
// 4096 of them, 32 per tile, of 256 x 32-bit words (1 KiB) each, which gives
// the 4 MiB of L1 memory.
//
// The bank has two request ports: one from the tile's local request crossbar
// (cores of the cluster) and one from the tile's DMA port. A round-robin
// choice picks one of them per cycle. The access happens at the clock edge
// that accepts the request; its response (read data, or an acknowledgement
// for a write) sits in an output register from the next cycle, so a bank
// access costs one cycle, the "1" of the 1-3-5-X latency. Each response goes
// out on the port that issued the request. The bank stalls new requests
// only while a response it holds is not taken.
// Depth and word width follow the paper (4 MiB / 4096 banks); the DMA port,
// the write acknowledgement and the arbitration are this design's choices.
module tcdm_bank
  import terapool_pkg::*;
#(
  parameter int unsigned NumWords = 256,
  localparam int unsigned RowW    = (NumWords > 1) ? $clog2(NumWords) : 1
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // interconnect port
  input  logic                 req_valid_i,
  output logic                 req_ready_o,
  input  tcdm_req_t            req_i,
  input  logic [RowW-1:0]      req_row_i,
  output logic                 rsp_valid_o,
  input  logic                 rsp_ready_i,
  output tcdm_rsp_t            rsp_o,
  // DMA port
  input  logic                 dma_valid_i,
  output logic                 dma_ready_o,
  input  logic                 dma_we_i,
  input  logic [RowW-1:0]      dma_row_i,
  input  logic [DataWidth-1:0] dma_wdata_i,
  output logic                 dma_rsp_valid_o,
  input  logic                 dma_rsp_ready_i,
  output logic [DataWidth-1:0] dma_rsp_rdata_o
);
  logic [DataWidth-1:0] mem [NumWords];

  logic      full_q, owner_q, prio_q;
  tcdm_rsp_t rsp_q;
  logic      free, pick_dma, fire;

  assign free = !full_q || (owner_q ? dma_rsp_ready_i : rsp_ready_i);
  // Round robin between the two ports: prio_q = 1 favours the DMA port.
  assign pick_dma    = dma_valid_i && (!req_valid_i || prio_q);
  assign req_ready_o = free && !pick_dma;
  assign dma_ready_o = free && pick_dma;
  assign fire        = free && (req_valid_i || dma_valid_i);

  assign rsp_valid_o     = full_q && !owner_q;
  assign dma_rsp_valid_o = full_q && owner_q;
  assign rsp_o           = rsp_q;
  assign dma_rsp_rdata_o = rsp_q.rdata;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      full_q  <= 1'b0;
      owner_q <= 1'b0;
      prio_q  <= 1'b0;
    end else if (free) begin
      full_q <= req_valid_i || dma_valid_i;
      if (fire) begin
        owner_q <= pick_dma;
        if (req_valid_i && dma_valid_i) prio_q <= !pick_dma;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (fire) begin
      if (pick_dma) begin
        if (dma_we_i) mem[dma_row_i] <= dma_wdata_i;
        rsp_q       <= '0;
        rsp_q.rdata <= mem[dma_row_i];
        rsp_q.we    <= dma_we_i;
      end else begin
        for (int unsigned b = 0; b < 4; b++) begin
          if (req_i.we && req_i.be[b]) mem[req_row_i][8*b +: 8] <= req_i.wdata[8*b +: 8];
        end
        rsp_q.rdata     <= mem[req_row_i];
        rsp_q.we        <= req_i.we;
        rsp_q.tag       <= req_i.tag;
        rsp_q.src_group <= req_i.src_group;
        rsp_q.src_sg    <= req_i.src_sg;
        rsp_q.src_tile  <= req_i.src_tile;
        rsp_q.src_core  <= req_i.src_core;
      end
    end
  end
endmodule
