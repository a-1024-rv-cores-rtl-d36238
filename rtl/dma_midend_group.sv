// dma_midend_group: the DMA midend inside each group. It registers the chunks
// the cluster midend sends to this group (one pipeline stage) and distributes
// each to the backend of the subgroup that owns the chunk's L1 region,
// selected by the subgroup bits of the L1 address. Valid/ready on both sides.
// Its place in the group is the paper's (Fig. 3); the routing rule follows
// this design's L1 address map.
module dma_midend_group
  import terapool_pkg::*;
#(
  parameter int unsigned NumTilesSg = 8,
  parameter int unsigned NumBanks   = 32
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       chunk_valid_i,
  output logic       chunk_ready_o,
  input  dma_job_t   chunk_i,
  output logic [3:0] sg_valid_o,
  input  logic [3:0] sg_ready_i,
  output dma_job_t   sg_chunk_o
);
  localparam int unsigned SgLsb = $clog2(NumTilesSg * NumBanks * 4);

  logic     v;
  dma_job_t c;
  logic [1:0] sg;

  pipe_cut #(.payload_t(dma_job_t)) i_cut (
    .clk_i, .rst_ni,
    .in_valid_i (chunk_valid_i), .in_ready_o(chunk_ready_o), .in_data_i(chunk_i),
    .out_valid_o(v), .out_ready_i(sg_ready_i[sg]), .out_data_o(c)
  );

  assign sg         = c.l1_addr[SgLsb +: 2];
  assign sg_chunk_o = c;
  always_comb begin
    sg_valid_o     = '0;
    sg_valid_o[sg] = v;
  end
endmodule
