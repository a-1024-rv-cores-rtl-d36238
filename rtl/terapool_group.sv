// terapool_group: one TeraPool-SDR group, the third level of the L1
// hierarchy: four subgroups, the links between them, the R-Group FC
// crossbars, the group DMA midend and the group's four AXI masters.
//
// Subgroup links. Subgroup s sends requests for subgroup (s+k) mod 4 on its
// link k (k = 1..3, lane = target tile); each link has one pipeline cut per
// direction, so an access to another subgroup of the group costs 5 cycles
// (tile cut, link cut, bank, link cut, tile cut).
//
// R-Group crossbars. For each remote group at offset j = 1..3 there is one FC
// request crossbar from the 4 x NumTilesSg tiles of this group (their port
// 3+j) to the 4 x NumTilesSg target tiles of that group, routed by the
// subgroup and tile fields of the address, and one response crossbar back,
// routed by the requester's subgroup and tile. Lanes are numbered
// sg*NumTilesSg+tile. The cuts of the inter-group links are placed by the
// cluster. Requests that arrive from a remote group enter the tile's slave
// port 3+j directly.
// That the group has an R-Group FC crossbar is the paper's; the lane layout is
// this design's.
module terapool_group
  import terapool_pkg::*;
#(
  parameter int unsigned NumCores   = 8,
  parameter int unsigned NumBanks   = 32,
  parameter int unsigned BankWords  = 256,
  parameter int unsigned NumTilesSg = 8,
  localparam int unsigned NC = 4 * NumTilesSg * NumCores,
  localparam int unsigned NG = 4 * NumTilesSg,          // lanes per remote-group link
  localparam int unsigned NL = 3 * NG
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [1:0]    group_id_i,
  // cores, index (sg*NumTilesSg+tile)*NumCores+core
  input  logic [NC-1:0] core_req_valid_i,
  output logic [NC-1:0] core_req_ready_o,
  input  tcdm_req_t     core_req_i [NC],
  output logic [NC-1:0] core_rsp_valid_o,
  input  logic [NC-1:0] core_rsp_ready_i,
  output tcdm_rsp_t     core_rsp_o [NC],
  // remote-group links (index (j-1)*NG+lane): outgoing requests, returning responses
  output logic [NL-1:0] rg_req_valid_o,
  input  logic [NL-1:0] rg_req_ready_i,
  output tcdm_req_t     rg_req_o [NL],
  input  logic [NL-1:0] rg_rsp_valid_i,
  output logic [NL-1:0] rg_rsp_ready_o,
  input  tcdm_rsp_t     rg_rsp_i [NL],
  // remote-group links: incoming requests, leaving responses
  input  logic [NL-1:0] rg_slv_req_valid_i,
  output logic [NL-1:0] rg_slv_req_ready_o,
  input  tcdm_req_t     rg_slv_req_i [NL],
  output logic [NL-1:0] rg_slv_rsp_valid_o,
  input  logic [NL-1:0] rg_slv_rsp_ready_i,
  output tcdm_rsp_t     rg_slv_rsp_o [NL],
  // AXI: tiles' refill ports (index sg*NumTilesSg+tile) and the 4 group masters
  input  axi_req_t      tile_axi_req_i [NG],
  output axi_rsp_t      tile_axi_rsp_o [NG],
  output axi_req_t      axi_req_o [4],
  input  axi_rsp_t      axi_rsp_i [4],
  // DMA
  input  logic          chunk_valid_i,
  output logic          chunk_ready_o,
  input  dma_job_t      chunk_i,
  output logic [3:0]    chunk_done_o
);
  localparam int unsigned NT  = NumTilesSg;
  localparam int unsigned SL  = 3 * NT;                 // lanes per subgroup link bundle
  localparam int unsigned NCS = NT * NumCores;
  localparam int unsigned TileW   = $clog2(NT);
  localparam int unsigned TileLsb = 2 + $clog2(NumBanks);
  localparam int unsigned SgLsb   = TileLsb + TileW;
  localparam int unsigned LaneW   = $clog2(NG);

  // per-subgroup link bundles, index s*SL + (k-1)*NT + t
  logic [4*SL-1:0] sq_v, sq_r, sp_v, sp_r, ssq_v, ssq_r, ssp_v, ssp_r;
  tcdm_req_t       sq  [4*SL];
  tcdm_rsp_t       sp  [4*SL];
  tcdm_req_t       ssq [4*SL];
  tcdm_rsp_t       ssp [4*SL];
  // remote-group ports of the subgroups, index s*SL + (j-1)*NT + t
  logic [4*SL-1:0] gq_v, gq_r, gp_v, gp_r, gsq_v, gsq_r, gsp_v, gsp_r;
  tcdm_req_t       gq  [4*SL];
  tcdm_rsp_t       gp  [4*SL];
  tcdm_req_t       gsq [4*SL];
  tcdm_rsp_t       gsp [4*SL];

  logic [3:0] mid_v, mid_r;
  dma_job_t   mid_chunk;

  dma_midend_group #(.NumTilesSg(NumTilesSg), .NumBanks(NumBanks)) i_midend (
    .clk_i, .rst_ni,
    .chunk_valid_i, .chunk_ready_o, .chunk_i,
    .sg_valid_o(mid_v), .sg_ready_i(mid_r), .sg_chunk_o(mid_chunk)
  );

  for (genvar s = 0; s < 4; s++) begin : g_sg
    tcdm_req_t creq [NCS];
    tcdm_rsp_t crsp [NCS];
    tcdm_req_t a_q [SL];  tcdm_rsp_t a_p [SL];  tcdm_req_t a_sq [SL];  tcdm_rsp_t a_sp [SL];
    tcdm_req_t b_q [SL];  tcdm_rsp_t b_p [SL];  tcdm_req_t b_sq [SL];  tcdm_rsp_t b_sp [SL];
    axi_req_t  taxi_req [NT];
    axi_rsp_t  taxi_rsp [NT];
    for (genvar c = 0; c < NCS; c++) begin : g_c
      assign creq[c] = core_req_i[s*NCS+c];
      assign core_rsp_o[s*NCS+c] = crsp[c];
    end
    for (genvar l = 0; l < SL; l++) begin : g_l
      assign sq[s*SL+l]  = a_q[l];
      assign a_p[l]      = sp[s*SL+l];
      assign a_sq[l]     = ssq[s*SL+l];
      assign ssp[s*SL+l] = a_sp[l];
      assign gq[s*SL+l]  = b_q[l];
      assign b_p[l]      = gp[s*SL+l];
      assign b_sq[l]     = gsq[s*SL+l];
      assign gsp[s*SL+l] = b_sp[l];
    end
    for (genvar t = 0; t < NT; t++) begin : g_t
      assign taxi_req[t] = tile_axi_req_i[s*NT+t];
      assign tile_axi_rsp_o[s*NT+t] = taxi_rsp[t];
    end
    terapool_subgroup #(
      .NumCores(NumCores), .NumBanks(NumBanks), .BankWords(BankWords), .NumTilesSg(NumTilesSg)
    ) i_subgroup (
      .clk_i, .rst_ni, .group_id_i, .sg_id_i(2'(s)),
      .core_req_valid_i(core_req_valid_i[s*NCS +: NCS]),
      .core_req_ready_o(core_req_ready_o[s*NCS +: NCS]),
      .core_req_i(creq),
      .core_rsp_valid_o(core_rsp_valid_o[s*NCS +: NCS]),
      .core_rsp_ready_i(core_rsp_ready_i[s*NCS +: NCS]),
      .core_rsp_o(crsp),
      .rsg_req_valid_o(sq_v[s*SL +: SL]), .rsg_req_ready_i(sq_r[s*SL +: SL]), .rsg_req_o(a_q),
      .rsg_rsp_valid_i(sp_v[s*SL +: SL]), .rsg_rsp_ready_o(sp_r[s*SL +: SL]), .rsg_rsp_i(a_p),
      .rsg_slv_req_valid_i(ssq_v[s*SL +: SL]), .rsg_slv_req_ready_o(ssq_r[s*SL +: SL]), .rsg_slv_req_i(a_sq),
      .rsg_slv_rsp_valid_o(ssp_v[s*SL +: SL]), .rsg_slv_rsp_ready_i(ssp_r[s*SL +: SL]), .rsg_slv_rsp_o(a_sp),
      .rg_req_valid_o(gq_v[s*SL +: SL]), .rg_req_ready_i(gq_r[s*SL +: SL]), .rg_req_o(b_q),
      .rg_rsp_valid_i(gp_v[s*SL +: SL]), .rg_rsp_ready_o(gp_r[s*SL +: SL]), .rg_rsp_i(b_p),
      .rg_slv_req_valid_i(gsq_v[s*SL +: SL]), .rg_slv_req_ready_o(gsq_r[s*SL +: SL]), .rg_slv_req_i(b_sq),
      .rg_slv_rsp_valid_o(gsp_v[s*SL +: SL]), .rg_slv_rsp_ready_i(gsp_r[s*SL +: SL]), .rg_slv_rsp_o(b_sp),
      .tile_axi_req_i(taxi_req), .tile_axi_rsp_o(taxi_rsp),
      .axi_req_o(axi_req_o[s]), .axi_rsp_i(axi_rsp_i[s]),
      .chunk_valid_i(mid_v[s]), .chunk_ready_o(mid_r[s]), .chunk_i(mid_chunk),
      .chunk_done_o(chunk_done_o[s])
    );
  end

  // ---------------- subgroup-to-subgroup links, one cut per direction ----------------
  for (genvar s = 0; s < 4; s++) begin : g_link
    for (genvar k = 1; k < 4; k++) begin : g_k
      for (genvar t = 0; t < NT; t++) begin : g_t
        // request: subgroup s, link k -> subgroup (s+k)%4, slave link k
        localparam int unsigned Src = s*SL + (k-1)*NT + t;
        localparam int unsigned Dst = ((s+k)%4)*SL + (k-1)*NT + t;
        pipe_cut #(.payload_t(tcdm_req_t)) i_req_cut (
          .clk_i, .rst_ni,
          .in_valid_i (sq_v[Src]),  .in_ready_o(sq_r[Src]),   .in_data_i(sq[Src]),
          .out_valid_o(ssq_v[Dst]), .out_ready_i(ssq_r[Dst]), .out_data_o(ssq[Dst])
        );
        // response: subgroup (s+k)%4, slave link k -> subgroup s, link k
        pipe_cut #(.payload_t(tcdm_rsp_t)) i_rsp_cut (
          .clk_i, .rst_ni,
          .in_valid_i (ssp_v[Dst]), .in_ready_o(ssp_r[Dst]),  .in_data_i(ssp[Dst]),
          .out_valid_o(sp_v[Src]),  .out_ready_i(sp_r[Src]),  .out_data_o(sp[Src])
        );
      end
    end
  end

  // ---------------- R-Group FC Xbars ----------------
  for (genvar j = 0; j < 3; j++) begin : g_rgx
    logic [NG-1:0]    qi_v, qi_r, qo_v, qo_r, pi_v, pi_r, po_v, po_r;
    logic [LaneW-1:0] qi_sel [NG];
    logic [LaneW-1:0] pi_sel [NG];
    tcdm_req_t qi [NG];
    tcdm_req_t qo [NG];
    tcdm_rsp_t pi [NG];
    tcdm_rsp_t po [NG];
    for (genvar s = 0; s < 4; s++) begin : g_s
      for (genvar t = 0; t < NT; t++) begin : g_t
        localparam int unsigned L = s*NT + t;        // lane in the group
        localparam int unsigned P = s*SL + j*NT + t; // port in the bundle
        assign qi_v[L]  = gq_v[P];
        assign gq_r[P]  = qi_r[L];
        assign qi[L]    = gq[P];
        assign qi_sel[L] = {gq[P].addr[SgLsb +: 2], gq[P].addr[TileLsb +: TileW]};
        assign gp_v[P]  = po_v[L];
        assign po_r[L]  = gp_r[P];
        assign gp[P]    = po[L];
        // incoming requests from the remote group go straight to the tiles
        assign gsq_v[P] = rg_slv_req_valid_i[j*NG+L];
        assign rg_slv_req_ready_o[j*NG+L] = gsq_r[P];
        assign gsq[P]   = rg_slv_req_i[j*NG+L];
        assign rg_slv_rsp_valid_o[j*NG+L] = gsp_v[P];
        assign gsp_r[P] = rg_slv_rsp_ready_i[j*NG+L];
        assign rg_slv_rsp_o[j*NG+L] = gsp[P];
      end
    end
    for (genvar l = 0; l < NG; l++) begin : g_l
      assign rg_req_valid_o[j*NG+l] = qo_v[l];
      assign qo_r[l]                = rg_req_ready_i[j*NG+l];
      assign rg_req_o[j*NG+l]       = qo[l];
      assign pi_v[l]                = rg_rsp_valid_i[j*NG+l];
      assign rg_rsp_ready_o[j*NG+l] = pi_r[l];
      assign pi[l]                  = rg_rsp_i[j*NG+l];
      assign pi_sel[l]              = {pi[l].src_sg, TileW'(pi[l].src_tile)};
    end
    fc_xbar #(.NumIn(NG), .NumOut(NG), .payload_t(tcdm_req_t)) i_req_xbar (
      .clk_i, .rst_ni,
      .in_valid_i(qi_v), .in_ready_o(qi_r), .in_sel_i(qi_sel), .in_data_i(qi),
      .out_valid_o(qo_v), .out_ready_i(qo_r), .out_data_o(qo)
    );
    fc_xbar #(.NumIn(NG), .NumOut(NG), .payload_t(tcdm_rsp_t)) i_rsp_xbar (
      .clk_i, .rst_ni,
      .in_valid_i(pi_v), .in_ready_o(pi_r), .in_sel_i(pi_sel), .in_data_i(pi),
      .out_valid_o(po_v), .out_ready_i(po_r), .out_data_o(po)
    );
  end
endmodule
