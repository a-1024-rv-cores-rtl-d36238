// terapool_subgroup: one TeraPool-SDR subgroup, the second level of the L1
// hierarchy, plus its AXI tree and DMA backend.
//
// L1 part. NumTilesSg tiles (8) share
//  * the L-SG FC crossbar: tile master port 0 -> tile slave port 0 of the
//    target tile in this subgroup (requests, routed by the address's tile
//    field) and back (responses, routed by the requester's tile index);
//  * the R-SG FC crossbars, one per remote subgroup of the group (offset
//    k = 1..3): tile master port k -> lane "target tile" of link k
//    (requests) and link-k response lanes -> tile master port k (responses).
// Requests arriving over remote-subgroup link k enter tile t's slave port k
// directly (lane t); responses leave the same way. Remote-group ports (tile
// ports 4..6) pass through to the group level, where the R-Group crossbar
// sits. All crossbars are zero-latency; the links' pipeline cuts are placed
// by the group, so this module adds no latency of its own.
//
// AXI part. The tiles' AXI ports (instruction-cache refill masters, outside
// this RTL) merge through a binary tree of 2:1 AXI multiplexers, as in the
// paper's figure; the DMA backend joins at a final 2:1 multiplexer, giving
// the subgroup's single 512-bit AXI master. The heap-ordered tree and the
// DMA's place in it are this design's reading of the figure.
//
// Flattened arrays: core c of tile t is index t*NumCores+c; lane t of link k
// (k = 0..2 for offsets 1..3) is index k*NumTilesSg+t.
module terapool_subgroup
  import terapool_pkg::*;
#(
  parameter int unsigned NumCores   = 8,
  parameter int unsigned NumBanks   = 32,
  parameter int unsigned BankWords  = 256,
  parameter int unsigned NumTilesSg = 8,
  localparam int unsigned NC = NumTilesSg * NumCores,
  localparam int unsigned NL = 3 * NumTilesSg
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [1:0]    group_id_i,
  input  logic [1:0]    sg_id_i,
  // cores
  input  logic [NC-1:0] core_req_valid_i,
  output logic [NC-1:0] core_req_ready_o,
  input  tcdm_req_t     core_req_i [NC],
  output logic [NC-1:0] core_rsp_valid_o,
  input  logic [NC-1:0] core_rsp_ready_i,
  output tcdm_rsp_t     core_rsp_o [NC],
  // remote-subgroup links, outgoing requests / returning responses
  output logic [NL-1:0] rsg_req_valid_o,
  input  logic [NL-1:0] rsg_req_ready_i,
  output tcdm_req_t     rsg_req_o [NL],
  input  logic [NL-1:0] rsg_rsp_valid_i,
  output logic [NL-1:0] rsg_rsp_ready_o,
  input  tcdm_rsp_t     rsg_rsp_i [NL],
  // remote-subgroup links, incoming requests / leaving responses
  input  logic [NL-1:0] rsg_slv_req_valid_i,
  output logic [NL-1:0] rsg_slv_req_ready_o,
  input  tcdm_req_t     rsg_slv_req_i [NL],
  output logic [NL-1:0] rsg_slv_rsp_valid_o,
  input  logic [NL-1:0] rsg_slv_rsp_ready_i,
  output tcdm_rsp_t     rsg_slv_rsp_o [NL],
  // remote-group ports of the tiles (master side), lane k*NumTilesSg+t
  output logic [NL-1:0] rg_req_valid_o,
  input  logic [NL-1:0] rg_req_ready_i,
  output tcdm_req_t     rg_req_o [NL],
  input  logic [NL-1:0] rg_rsp_valid_i,
  output logic [NL-1:0] rg_rsp_ready_o,
  input  tcdm_rsp_t     rg_rsp_i [NL],
  // remote-group ports of the tiles (slave side)
  input  logic [NL-1:0] rg_slv_req_valid_i,
  output logic [NL-1:0] rg_slv_req_ready_o,
  input  tcdm_req_t     rg_slv_req_i [NL],
  output logic [NL-1:0] rg_slv_rsp_valid_o,
  input  logic [NL-1:0] rg_slv_rsp_ready_i,
  output tcdm_rsp_t     rg_slv_rsp_o [NL],
  // AXI
  input  axi_req_t      tile_axi_req_i [NumTilesSg],
  output axi_rsp_t      tile_axi_rsp_o [NumTilesSg],
  output axi_req_t      axi_req_o,
  input  axi_rsp_t      axi_rsp_i,
  // DMA chunks from the group midend
  input  logic          chunk_valid_i,
  output logic          chunk_ready_o,
  input  dma_job_t      chunk_i,
  output logic          chunk_done_o
);
  localparam int unsigned NT    = NumTilesSg;
  localparam int unsigned TileW = $clog2(NT);
  localparam int unsigned TileLsb = 2 + $clog2(NumBanks);

  // Tile master/slave ports, index t*7+p.
  logic [7*NT-1:0] m_req_v, m_req_r, m_rsp_v, m_rsp_r, s_req_v, s_req_r, s_rsp_v, s_rsp_r;
  tcdm_req_t       m_req [7*NT];
  tcdm_rsp_t       m_rsp [7*NT];
  tcdm_req_t       s_req [7*NT];
  tcdm_rsp_t       s_rsp [7*NT];

  // DMA wide ports
  logic [NT-1:0] d_req_v, d_req_r, d_rsp_v, d_rsp_r;
  l1_wide_req_t  d_req;
  l1_wide_rsp_t  d_rsp [NT];

  for (genvar t = 0; t < NT; t++) begin : g_tile
    logic [6:0] mrv, mrr, mpv, mpr, srv, srr, spv, spr;
    tcdm_req_t  mr [7];
    tcdm_rsp_t  mp [7];
    tcdm_req_t  sr [7];
    tcdm_rsp_t  sp [7];
    tcdm_req_t  creq [NumCores];
    tcdm_rsp_t  crsp [NumCores];
    for (genvar c = 0; c < NumCores; c++) begin : g_c
      assign creq[c] = core_req_i[t*NumCores+c];
      assign core_rsp_o[t*NumCores+c] = crsp[c];
    end
    for (genvar p = 0; p < 7; p++) begin : g_p
      assign m_req_v[t*7+p] = mrv[p];
      assign mrr[p]         = m_req_r[t*7+p];
      assign m_req[t*7+p]   = mr[p];
      assign mpv[p]         = m_rsp_v[t*7+p];
      assign m_rsp_r[t*7+p] = mpr[p];
      assign mp[p]          = m_rsp[t*7+p];
      assign srv[p]         = s_req_v[t*7+p];
      assign s_req_r[t*7+p] = srr[p];
      assign sr[p]          = s_req[t*7+p];
      assign s_rsp_v[t*7+p] = spv[p];
      assign spr[p]         = s_rsp_r[t*7+p];
      assign s_rsp[t*7+p]   = sp[p];
    end
    terapool_tile #(
      .NumCores(NumCores), .NumBanks(NumBanks), .BankWords(BankWords), .NumTilesSg(NumTilesSg)
    ) i_tile (
      .clk_i, .rst_ni,
      .group_id_i, .sg_id_i, .tile_id_i(3'(t)),
      .core_req_valid_i(core_req_valid_i[t*NumCores +: NumCores]),
      .core_req_ready_o(core_req_ready_o[t*NumCores +: NumCores]),
      .core_req_i      (creq),
      .core_rsp_valid_o(core_rsp_valid_o[t*NumCores +: NumCores]),
      .core_rsp_ready_i(core_rsp_ready_i[t*NumCores +: NumCores]),
      .core_rsp_o      (crsp),
      .mst_req_valid_o(mrv), .mst_req_ready_i(mrr), .mst_req_o(mr),
      .mst_rsp_valid_i(mpv), .mst_rsp_ready_o(mpr), .mst_rsp_i(mp),
      .slv_req_valid_i(srv), .slv_req_ready_o(srr), .slv_req_i(sr),
      .slv_rsp_valid_o(spv), .slv_rsp_ready_i(spr), .slv_rsp_o(sp),
      .dma_req_valid_i(d_req_v[t]), .dma_req_ready_o(d_req_r[t]), .dma_req_i(d_req),
      .dma_rsp_valid_o(d_rsp_v[t]), .dma_rsp_ready_i(d_rsp_r[t]), .dma_rsp_o(d_rsp[t])
    );
  end

  // ---------------- L-SG FC Xbar (port 0) and R-SG FC Xbars (ports 1..3) ----------------
  for (genvar p = 0; p < 4; p++) begin : g_sgx
    logic [NT-1:0]    qi_v, qi_r, qo_v, qo_r, pi_v, pi_r, po_v, po_r;
    logic [TileW-1:0] qi_sel [NT];
    logic [TileW-1:0] pi_sel [NT];
    tcdm_req_t        qi [NT];
    tcdm_req_t        qo [NT];
    tcdm_rsp_t        pi [NT];
    tcdm_rsp_t        po [NT];
    for (genvar t = 0; t < NT; t++) begin : g_t
      assign qi_v[t]          = m_req_v[t*7+p];
      assign m_req_r[t*7+p]   = qi_r[t];
      assign qi[t]            = m_req[t*7+p];
      assign qi_sel[t]        = m_req[t*7+p].addr[TileLsb +: TileW];
      assign m_rsp_v[t*7+p]   = po_v[t];
      assign po_r[t]          = m_rsp_r[t*7+p];
      assign m_rsp[t*7+p]     = po[t];
      assign pi_sel[t]        = TileW'(pi[t].src_tile);
      if (p == 0) begin : g_lsg
        assign s_req_v[t*7]   = qo_v[t];
        assign qo_r[t]        = s_req_r[t*7];
        assign s_req[t*7]     = qo[t];
        assign pi_v[t]        = s_rsp_v[t*7];
        assign s_rsp_r[t*7]   = pi_r[t];
        assign pi[t]          = s_rsp[t*7];
      end else begin : g_rsg
        assign rsg_req_valid_o[(p-1)*NT+t] = qo_v[t];
        assign qo_r[t]                     = rsg_req_ready_i[(p-1)*NT+t];
        assign rsg_req_o[(p-1)*NT+t]       = qo[t];
        assign pi_v[t]                     = rsg_rsp_valid_i[(p-1)*NT+t];
        assign rsg_rsp_ready_o[(p-1)*NT+t] = pi_r[t];
        assign pi[t]                       = rsg_rsp_i[(p-1)*NT+t];
        // incoming requests of link p enter the tiles' slave port p directly
        assign s_req_v[t*7+p]                  = rsg_slv_req_valid_i[(p-1)*NT+t];
        assign rsg_slv_req_ready_o[(p-1)*NT+t] = s_req_r[t*7+p];
        assign s_req[t*7+p]                    = rsg_slv_req_i[(p-1)*NT+t];
        assign rsg_slv_rsp_valid_o[(p-1)*NT+t] = s_rsp_v[t*7+p];
        assign s_rsp_r[t*7+p]                  = rsg_slv_rsp_ready_i[(p-1)*NT+t];
        assign rsg_slv_rsp_o[(p-1)*NT+t]       = s_rsp[t*7+p];
      end
    end
    fc_xbar #(.NumIn(NT), .NumOut(NT), .payload_t(tcdm_req_t)) i_req_xbar (
      .clk_i, .rst_ni,
      .in_valid_i(qi_v), .in_ready_o(qi_r), .in_sel_i(qi_sel), .in_data_i(qi),
      .out_valid_o(qo_v), .out_ready_i(qo_r), .out_data_o(qo)
    );
    fc_xbar #(.NumIn(NT), .NumOut(NT), .payload_t(tcdm_rsp_t)) i_rsp_xbar (
      .clk_i, .rst_ni,
      .in_valid_i(pi_v), .in_ready_o(pi_r), .in_sel_i(pi_sel), .in_data_i(pi),
      .out_valid_o(po_v), .out_ready_i(po_r), .out_data_o(po)
    );
  end

  // ---------------- remote-group ports pass through ----------------
  for (genvar k = 0; k < 3; k++) begin : g_rg
    for (genvar t = 0; t < NT; t++) begin : g_t
      localparam int unsigned P = PortGroupBase + k;
      assign rg_req_valid_o[k*NT+t]    = m_req_v[t*7+P];
      assign m_req_r[t*7+P]            = rg_req_ready_i[k*NT+t];
      assign rg_req_o[k*NT+t]          = m_req[t*7+P];
      assign m_rsp_v[t*7+P]            = rg_rsp_valid_i[k*NT+t];
      assign rg_rsp_ready_o[k*NT+t]    = m_rsp_r[t*7+P];
      assign m_rsp[t*7+P]              = rg_rsp_i[k*NT+t];
      assign s_req_v[t*7+P]            = rg_slv_req_valid_i[k*NT+t];
      assign rg_slv_req_ready_o[k*NT+t] = s_req_r[t*7+P];
      assign s_req[t*7+P]              = rg_slv_req_i[k*NT+t];
      assign rg_slv_rsp_valid_o[k*NT+t] = s_rsp_v[t*7+P];
      assign s_rsp_r[t*7+P]            = rg_slv_rsp_ready_i[k*NT+t];
      assign rg_slv_rsp_o[k*NT+t]      = s_rsp[t*7+P];
    end
  end

  // ---------------- DMA backend ----------------
  axi_req_t dma_axi_req;
  axi_rsp_t dma_axi_rsp;

  dma_backend #(.NumTilesSg(NumTilesSg), .NumBanks(NumBanks)) i_dma_backend (
    .clk_i, .rst_ni,
    .chunk_valid_i, .chunk_ready_o, .chunk_i, .done_o(chunk_done_o),
    .axi_req_o(dma_axi_req), .axi_rsp_i(dma_axi_rsp),
    .tile_req_valid_o(d_req_v), .tile_req_ready_i(d_req_r), .tile_req_o(d_req),
    .tile_rsp_valid_i(d_rsp_v), .tile_rsp_ready_o(d_rsp_r), .tile_rsp_i(d_rsp)
  );

  // ---------------- AXI tree: heap of 2:1 muxes, leaves NT..2NT-1, root 1 ----------------
  axi_req_t node_req [2*NT];
  axi_rsp_t node_rsp [2*NT];

  for (genvar t = 0; t < NT; t++) begin : g_leaf
    assign node_req[NT+t]    = tile_axi_req_i[t];
    assign tile_axi_rsp_o[t] = node_rsp[NT+t];
  end
  assign node_req[0] = '0;
  for (genvar n = 1; n < NT; n++) begin : g_node
    axi_req_t ir [2];
    axi_rsp_t ip [2];
    assign ir[0] = node_req[2*n];
    assign ir[1] = node_req[2*n+1];
    assign node_rsp[2*n]   = ip[0];
    assign node_rsp[2*n+1] = ip[1];
    axi_mux #(.NumIn(2)) i_mux (
      .clk_i, .rst_ni, .in_req_i(ir), .in_rsp_o(ip), .out_req_o(node_req[n]), .out_rsp_i(node_rsp[n])
    );
  end
  assign node_rsp[0] = '0;

  axi_req_t top_ir [2];
  axi_rsp_t top_ip [2];
  assign top_ir[0]   = node_req[1];
  assign top_ir[1]   = dma_axi_req;
  assign node_rsp[1] = top_ip[0];
  assign dma_axi_rsp = top_ip[1];
  axi_mux #(.NumIn(2)) i_dma_mux (
    .clk_i, .rst_ni, .in_req_i(top_ir), .in_rsp_o(top_ip), .out_req_o(axi_req_o), .out_rsp_i(axi_rsp_i)
  );
endmodule
