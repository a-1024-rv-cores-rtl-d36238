// terapool_cluster: top level of the TeraPool-SDR cluster: 4 groups of 4
// subgroups of 8 tiles of 8 cores (1024 core ports) sharing 4096 L1 banks
// (4 MiB), with the inter-group links, the system AXI demultiplexers, the
// DMA frontend and cluster midend, and the HBM2E address scramblers.
//
// L1 latency. Without contention a core sees its response 1 cycle after its
// request is accepted for its own tile, 3 cycles for another tile of its
// subgroup, 5 cycles for another subgroup of its group and RemoteLatency
// cycles (7, 9 or 11; default 9, the energy-optimal "1-3-5-9" configuration)
// for another group. The inter-group links carry (RemoteLatency-3)/2 pipeline
// cuts per direction; with the tile's own cut and the bank that adds up to
// RemoteLatency. Group g's link j (j = 1..3) goes to group (g+j) mod 4.
//
// AXI and DMA. Each subgroup has one 512-bit AXI master (16 in all). Each
// passes a system demultiplexer that sends L2 addresses through an address
// scrambler to its own L2 port (towards one HBM2E port), DMA-register
// addresses to the DMA frontend and the rest to the peripherals; the 16
// DMA-register and peripheral streams are merged by 16:1 AXI multiplexers.
// The DMA frontend hands jobs to the midend, which splits them per subgroup
// and distributes them through the group midends to the 16 backends.
//
// Outside this RTL, and therefore ports of this module: the 1024 cores'
// L1 request/response ports, the 128 tiles' instruction-refill AXI masters,
// the 16 L2 AXI ports (to HBM2E) and the peripheral AXI port.
// Index of core c of tile t of subgroup s of group g:
//   ((g*4+s)*NumTilesSg+t)*NumCores+c. Tile AXI index: (g*4+s)*NumTilesSg+t.
module terapool_cluster
  import terapool_pkg::*;
#(
  parameter int unsigned NumCores      = 8,
  parameter int unsigned NumBanks      = 32,
  parameter int unsigned BankWords     = 256,
  parameter int unsigned NumTilesSg    = 8,
  parameter int unsigned RemoteLatency = 9,
  localparam int unsigned NCG = 4 * NumTilesSg * NumCores,   // cores per group
  localparam int unsigned NC  = 4 * NCG,
  localparam int unsigned NTG = 4 * NumTilesSg,              // tiles per group
  localparam int unsigned NT  = 4 * NTG
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // cores
  input  logic [NC-1:0] core_req_valid_i,
  output logic [NC-1:0] core_req_ready_o,
  input  tcdm_req_t     core_req_i [NC],
  output logic [NC-1:0] core_rsp_valid_o,
  input  logic [NC-1:0] core_rsp_ready_i,
  output tcdm_rsp_t     core_rsp_o [NC],
  // tiles' instruction-refill AXI masters
  input  axi_req_t      tile_axi_req_i [NT],
  output axi_rsp_t      tile_axi_rsp_o [NT],
  // L2 / HBM2E ports
  output axi_req_t      l2_req_o [16],
  input  axi_rsp_t      l2_rsp_i [16],
  // CSR / peripherals
  output axi_req_t      periph_req_o,
  input  axi_rsp_t      periph_rsp_i
);
  localparam int unsigned LinkCuts = (RemoteLatency - 3) / 2;
  localparam int unsigned NL = 3 * NTG;

  // ---------------- groups ----------------
  logic [4*NL-1:0] q_v, q_r, p_v, p_r, sq_v, sq_r, sp_v, sp_r;
  tcdm_req_t       q  [4*NL];
  tcdm_rsp_t       p  [4*NL];
  tcdm_req_t       sq [4*NL];
  tcdm_rsp_t       sp [4*NL];

  axi_req_t   sg_axi_req [16];
  axi_rsp_t   sg_axi_rsp [16];
  logic [3:0] chunk_v, chunk_r;
  dma_job_t   chunk;
  logic [15:0] chunk_done;

  for (genvar g = 0; g < 4; g++) begin : g_group
    tcdm_req_t creq [NCG];
    tcdm_rsp_t crsp [NCG];
    tcdm_req_t a_q [NL];  tcdm_rsp_t a_p [NL];  tcdm_req_t a_sq [NL];  tcdm_rsp_t a_sp [NL];
    axi_req_t  taxi_req [NTG];
    axi_rsp_t  taxi_rsp [NTG];
    axi_req_t  gaxi_req [4];
    axi_rsp_t  gaxi_rsp [4];
    for (genvar c = 0; c < NCG; c++) begin : g_c
      assign creq[c] = core_req_i[g*NCG+c];
      assign core_rsp_o[g*NCG+c] = crsp[c];
    end
    for (genvar l = 0; l < NL; l++) begin : g_l
      assign q[g*NL+l]  = a_q[l];
      assign a_p[l]     = p[g*NL+l];
      assign a_sq[l]    = sq[g*NL+l];
      assign sp[g*NL+l] = a_sp[l];
    end
    for (genvar t = 0; t < NTG; t++) begin : g_t
      assign taxi_req[t] = tile_axi_req_i[g*NTG+t];
      assign tile_axi_rsp_o[g*NTG+t] = taxi_rsp[t];
    end
    for (genvar s = 0; s < 4; s++) begin : g_s
      assign sg_axi_req[g*4+s] = gaxi_req[s];
      assign gaxi_rsp[s]       = sg_axi_rsp[g*4+s];
    end
    terapool_group #(
      .NumCores(NumCores), .NumBanks(NumBanks), .BankWords(BankWords), .NumTilesSg(NumTilesSg)
    ) i_group (
      .clk_i, .rst_ni, .group_id_i(2'(g)),
      .core_req_valid_i(core_req_valid_i[g*NCG +: NCG]),
      .core_req_ready_o(core_req_ready_o[g*NCG +: NCG]),
      .core_req_i(creq),
      .core_rsp_valid_o(core_rsp_valid_o[g*NCG +: NCG]),
      .core_rsp_ready_i(core_rsp_ready_i[g*NCG +: NCG]),
      .core_rsp_o(crsp),
      .rg_req_valid_o(q_v[g*NL +: NL]), .rg_req_ready_i(q_r[g*NL +: NL]), .rg_req_o(a_q),
      .rg_rsp_valid_i(p_v[g*NL +: NL]), .rg_rsp_ready_o(p_r[g*NL +: NL]), .rg_rsp_i(a_p),
      .rg_slv_req_valid_i(sq_v[g*NL +: NL]), .rg_slv_req_ready_o(sq_r[g*NL +: NL]), .rg_slv_req_i(a_sq),
      .rg_slv_rsp_valid_o(sp_v[g*NL +: NL]), .rg_slv_rsp_ready_i(sp_r[g*NL +: NL]), .rg_slv_rsp_o(a_sp),
      .tile_axi_req_i(taxi_req), .tile_axi_rsp_o(taxi_rsp),
      .axi_req_o(gaxi_req), .axi_rsp_i(gaxi_rsp),
      .chunk_valid_i(chunk_v[g]), .chunk_ready_o(chunk_r[g]), .chunk_i(chunk),
      .chunk_done_o(chunk_done[g*4 +: 4])
    );
  end

  // ---------------- inter-group links ----------------
  for (genvar g = 0; g < 4; g++) begin : g_link
    for (genvar j = 1; j < 4; j++) begin : g_j
      for (genvar l = 0; l < NTG; l++) begin : g_l
        localparam int unsigned Src = g*NL + (j-1)*NTG + l;
        localparam int unsigned Dst = ((g+j)%4)*NL + (j-1)*NTG + l;
        pipe_chain #(.payload_t(tcdm_req_t), .Depth(LinkCuts)) i_req (
          .clk_i, .rst_ni,
          .in_valid_i (q_v[Src]),  .in_ready_o(q_r[Src]),   .in_data_i(q[Src]),
          .out_valid_o(sq_v[Dst]), .out_ready_i(sq_r[Dst]), .out_data_o(sq[Dst])
        );
        pipe_chain #(.payload_t(tcdm_rsp_t), .Depth(LinkCuts)) i_rsp (
          .clk_i, .rst_ni,
          .in_valid_i (sp_v[Dst]), .in_ready_o(sp_r[Dst]), .in_data_i(sp[Dst]),
          .out_valid_o(p_v[Src]),  .out_ready_i(p_r[Src]), .out_data_o(p[Src])
        );
      end
    end
  end

  // ---------------- system demux, scramblers, DMA ----------------
  axi_req_t dma_in_req [16];
  axi_rsp_t dma_in_rsp [16];
  axi_req_t per_in_req [16];
  axi_rsp_t per_in_rsp [16];

  for (genvar m = 0; m < 16; m++) begin : g_master
    axi_req_t dq [3];
    axi_rsp_t dp [3];
    system_demux i_demux (
      .clk_i, .rst_ni,
      .in_req_i(sg_axi_req[m]), .in_rsp_o(sg_axi_rsp[m]),
      .out_req_o(dq), .out_rsp_i(dp)
    );
    hbm_addr_scrambler i_scrambler (
      .in_req_i(dq[0]), .in_rsp_o(dp[0]), .out_req_o(l2_req_o[m]), .out_rsp_i(l2_rsp_i[m])
    );
    assign dma_in_req[m] = dq[1];
    assign dp[1]         = dma_in_rsp[m];
    assign per_in_req[m] = dq[2];
    assign dp[2]         = per_in_rsp[m];
  end

  axi_req_t cfg_req;
  axi_rsp_t cfg_rsp;

  axi_mux #(.NumIn(16)) i_cfg_mux (
    .clk_i, .rst_ni, .in_req_i(dma_in_req), .in_rsp_o(dma_in_rsp),
    .out_req_o(cfg_req), .out_rsp_i(cfg_rsp)
  );
  axi_mux #(.NumIn(16)) i_periph_mux (
    .clk_i, .rst_ni, .in_req_i(per_in_req), .in_rsp_o(per_in_rsp),
    .out_req_o(periph_req_o), .out_rsp_i(periph_rsp_i)
  );

  logic     job_v, job_r, job_done;
  dma_job_t job;

  dma_frontend i_dma_frontend (
    .clk_i, .rst_ni,
    .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .job_valid_o(job_v), .job_ready_i(job_r), .job_o(job), .job_done_i(job_done)
  );

  dma_midend #(.NumTilesSg(NumTilesSg), .NumBanks(NumBanks), .NumBackends(16)) i_dma_midend (
    .clk_i, .rst_ni,
    .job_valid_i(job_v), .job_ready_o(job_r), .job_i(job), .job_done_o(job_done),
    .chunk_valid_o(chunk_v), .chunk_ready_i(chunk_r), .chunk_o(chunk),
    .chunk_done_i(chunk_done)
  );
endmodule
