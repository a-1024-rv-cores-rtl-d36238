// terapool_tile: one TeraPool-SDR tile, the first level of the L1 hierarchy.
//
// A tile holds the request/response ports of NumCores cores, NumBanks L1 banks
// and four fully-connected crossbars, as drawn in the paper's tile diagram:
//  * Local Request FC Xbar   : cores + 7 slave request ports -> banks
//  * Local Response FC Xbar  : banks -> cores + 7 slave response ports
//  * Remote Request FC Xbar  : cores -> 7 master request ports
//  * Remote Response FC Xbar : 7 master response ports -> cores
// A per-core demultiplexer sends a request to the local crossbar when its
// address falls in this tile's banks and to the remote one otherwise; a
// per-core 2:1 arbiter merges the local and remote responses.
//
// L1 addresses are word-interleaved over the whole cluster (this design's
// choice, the paper gives no address map): byte address
//   [1:0] byte | bank | tile | subgroup(2b) | group(2b) | row
// The 7 remote ports are: 0 = other tiles of the same subgroup (L-SG xbar),
// 1..3 = subgroup (own+k) mod 4 of the same group, 4..6 = group (own+k-3)
// mod 4. Master request outputs and master response inputs pass a pipeline
// cut (the register symbols on the "7 ports" of the paper's figure), so an
// access to another tile of the subgroup costs 3 cycles: cut, bank, cut.
// The tile stamps its coordinates into every core request; responses are
// routed back by those coordinates.
//
// A wide DMA port reads or writes one 512-bit beat (16 consecutive words,
// 16 adjacent banks of one row). It fans the beat out into one request per
// bank, gathers the 16 answers and returns one wide response; it serves one
// beat at a time. That port is this design's way to let the subgroup DMA
// backend reach L1; the paper does not show how the backend writes the banks.
// The tile's coordinates are input pins, so every tile is the same module.
module terapool_tile
  import terapool_pkg::*;
#(
  parameter int unsigned NumCores    = 8,
  parameter int unsigned NumBanks    = 32,
  parameter int unsigned BankWords   = 256,
  parameter int unsigned NumTilesSg  = 8,
  localparam int unsigned NumRp      = NumRemotePorts
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [1:0]          group_id_i,
  input  logic [1:0]          sg_id_i,
  input  logic [2:0]          tile_id_i,
  // cores
  input  logic [NumCores-1:0] core_req_valid_i,
  output logic [NumCores-1:0] core_req_ready_o,
  input  tcdm_req_t           core_req_i [NumCores],
  output logic [NumCores-1:0] core_rsp_valid_o,
  input  logic [NumCores-1:0] core_rsp_ready_i,
  output tcdm_rsp_t           core_rsp_o [NumCores],
  // master ports (requests leaving the tile)
  output logic [NumRp-1:0]    mst_req_valid_o,
  input  logic [NumRp-1:0]    mst_req_ready_i,
  output tcdm_req_t           mst_req_o [NumRp],
  input  logic [NumRp-1:0]    mst_rsp_valid_i,
  output logic [NumRp-1:0]    mst_rsp_ready_o,
  input  tcdm_rsp_t           mst_rsp_i [NumRp],
  // slave ports (requests entering the tile)
  input  logic [NumRp-1:0]    slv_req_valid_i,
  output logic [NumRp-1:0]    slv_req_ready_o,
  input  tcdm_req_t           slv_req_i [NumRp],
  output logic [NumRp-1:0]    slv_rsp_valid_o,
  input  logic [NumRp-1:0]    slv_rsp_ready_i,
  output tcdm_rsp_t           slv_rsp_o [NumRp],
  // wide DMA port
  input  logic                dma_req_valid_i,
  output logic                dma_req_ready_o,
  input  l1_wide_req_t        dma_req_i,
  output logic                dma_rsp_valid_o,
  input  logic                dma_rsp_ready_i,
  output l1_wide_rsp_t        dma_rsp_o
);
  localparam int unsigned BankW  = $clog2(NumBanks);
  localparam int unsigned TileW  = $clog2(NumTilesSg);
  localparam int unsigned RowW   = $clog2(BankWords);
  localparam int unsigned TileLsb  = 2 + BankW;
  localparam int unsigned SgLsb    = TileLsb + TileW;
  localparam int unsigned GroupLsb = SgLsb + 2;
  localparam int unsigned RowLsb   = GroupLsb + 2;
  localparam int unsigned NumLIn   = NumCores + NumRp;
  localparam int unsigned LInW     = $clog2(NumLIn);
  localparam int unsigned CoreW    = (NumCores > 1) ? $clog2(NumCores) : 1;
  localparam int unsigned Lanes    = WordsPerBeat;

  // ---------------- core request demultiplexers ----------------
  logic [NumLIn-1:0]   lreq_valid, lreq_ready;
  logic [BankW-1:0]    lreq_sel  [NumLIn];
  tcdm_req_t           lreq_data [NumLIn];

  logic [NumCores-1:0] rreq_valid, rreq_ready;
  logic [2:0]          rreq_sel  [NumCores];
  tcdm_req_t           rreq_data [NumCores];

  for (genvar c = 0; c < NumCores; c++) begin : g_core_demux
    tcdm_req_t  stamped;
    logic [1:0] dst_group, dst_sg;
    logic [2:0] dst_tile;
    logic       is_local;
    always_comb begin
      stamped           = core_req_i[c];
      stamped.src_group = group_id_i;
      stamped.src_sg    = sg_id_i;
      stamped.src_tile  = tile_id_i;
      stamped.src_core  = 3'(c);
      dst_group = core_req_i[c].addr[GroupLsb +: 2];
      dst_sg    = core_req_i[c].addr[SgLsb +: 2];
      dst_tile  = 3'(core_req_i[c].addr[TileLsb +: TileW]);
      is_local  = (dst_group == group_id_i) && (dst_sg == sg_id_i) && (dst_tile == tile_id_i);
      if (dst_group != group_id_i)
        rreq_sel[c] = 3'(PortGroupBase - 1) + 3'(2'(dst_group - group_id_i));
      else if (dst_sg != sg_id_i)
        rreq_sel[c] = 3'(PortSgBase - 1) + 3'(2'(dst_sg - sg_id_i));
      else
        rreq_sel[c] = 3'(PortLocalSg);
    end
    assign lreq_valid[c]       = core_req_valid_i[c] && is_local;
    assign rreq_valid[c]       = core_req_valid_i[c] && !is_local;
    assign lreq_data[c]        = stamped;
    assign rreq_data[c]        = stamped;
    assign lreq_sel[c]         = core_req_i[c].addr[2 +: BankW];
    assign core_req_ready_o[c] = is_local ? lreq_ready[c] : rreq_ready[c];
  end

  for (genvar p = 0; p < NumRp; p++) begin : g_slv_in
    assign lreq_valid[NumCores+p] = slv_req_valid_i[p];
    assign lreq_data[NumCores+p]  = slv_req_i[p];
    assign lreq_sel[NumCores+p]   = slv_req_i[p].addr[2 +: BankW];
    assign slv_req_ready_o[p]     = lreq_ready[NumCores+p];
  end

  // ---------------- Local Request FC Xbar ----------------
  logic [NumBanks-1:0] bank_req_valid, bank_req_ready;
  tcdm_req_t           bank_req [NumBanks];

  fc_xbar #(.NumIn(NumLIn), .NumOut(NumBanks), .payload_t(tcdm_req_t)) i_local_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i (lreq_valid), .in_ready_o(lreq_ready),
    .in_sel_i   (lreq_sel),   .in_data_i (lreq_data),
    .out_valid_o(bank_req_valid), .out_ready_i(bank_req_ready), .out_data_o(bank_req)
  );

  // ---------------- banks ----------------
  logic [NumBanks-1:0] bank_rsp_valid, bank_rsp_ready;
  tcdm_rsp_t           bank_rsp [NumBanks];
  logic [NumBanks-1:0] bdma_valid, bdma_ready, bdma_rsp_valid, bdma_rsp_ready;
  logic [DataWidth-1:0] bdma_rdata [NumBanks];
  logic [DataWidth-1:0] bdma_wdata [NumBanks];
  logic [RowW-1:0]     dma_row;
  logic                dma_we;

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    tcdm_bank #(.NumWords(BankWords)) i_bank (
      .clk_i, .rst_ni,
      .req_valid_i    (bank_req_valid[b]),
      .req_ready_o    (bank_req_ready[b]),
      .req_i          (bank_req[b]),
      .req_row_i      (bank_req[b].addr[RowLsb +: RowW]),
      .rsp_valid_o    (bank_rsp_valid[b]),
      .rsp_ready_i    (bank_rsp_ready[b]),
      .rsp_o          (bank_rsp[b]),
      .dma_valid_i    (bdma_valid[b]),
      .dma_ready_o    (bdma_ready[b]),
      .dma_we_i       (dma_we),
      .dma_row_i      (dma_row),
      .dma_wdata_i    (bdma_wdata[b]),
      .dma_rsp_valid_o(bdma_rsp_valid[b]),
      .dma_rsp_ready_i(bdma_rsp_ready[b]),
      .dma_rsp_rdata_o(bdma_rdata[b])
    );
  end

  // ---------------- Local Response FC Xbar ----------------
  logic [LInW-1:0]   brsp_sel [NumBanks];
  logic [NumLIn-1:0] lrsp_valid, lrsp_ready;
  tcdm_rsp_t         lrsp [NumLIn];

  for (genvar b = 0; b < NumBanks; b++) begin : g_rsp_route
    always_comb begin
      tcdm_rsp_t r;
      r = bank_rsp[b];
      if (r.src_group != group_id_i)
        brsp_sel[b] = LInW'(NumCores + PortGroupBase - 1) + LInW'(2'(group_id_i - r.src_group));
      else if (r.src_sg != sg_id_i)
        brsp_sel[b] = LInW'(NumCores + PortSgBase - 1) + LInW'(2'(sg_id_i - r.src_sg));
      else if (r.src_tile != tile_id_i)
        brsp_sel[b] = LInW'(NumCores + PortLocalSg);
      else
        brsp_sel[b] = LInW'(r.src_core);
    end
  end

  fc_xbar #(.NumIn(NumBanks), .NumOut(NumLIn), .payload_t(tcdm_rsp_t)) i_local_rsp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i (bank_rsp_valid), .in_ready_o(bank_rsp_ready),
    .in_sel_i   (brsp_sel),       .in_data_i (bank_rsp),
    .out_valid_o(lrsp_valid), .out_ready_i(lrsp_ready), .out_data_o(lrsp)
  );

  for (genvar p = 0; p < NumRp; p++) begin : g_slv_out
    assign slv_rsp_valid_o[p]      = lrsp_valid[NumCores+p];
    assign slv_rsp_o[p]            = lrsp[NumCores+p];
    assign lrsp_ready[NumCores+p]  = slv_rsp_ready_i[p];
  end

  // ---------------- Remote Request FC Xbar + master request cuts ----------------
  logic [NumRp-1:0] mreq_valid, mreq_ready;
  tcdm_req_t        mreq [NumRp];

  fc_xbar #(.NumIn(NumCores), .NumOut(NumRp), .payload_t(tcdm_req_t)) i_remote_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i (rreq_valid), .in_ready_o(rreq_ready),
    .in_sel_i   (rreq_sel),   .in_data_i (rreq_data),
    .out_valid_o(mreq_valid), .out_ready_i(mreq_ready), .out_data_o(mreq)
  );

  // ---------------- master response cuts + Remote Response FC Xbar ----------------
  logic [NumRp-1:0]    mrsp_valid, mrsp_ready;
  tcdm_rsp_t           mrsp [NumRp];
  logic [CoreW-1:0]    mrsp_sel [NumRp];
  logic [NumCores-1:0] rrsp_valid, rrsp_ready;
  tcdm_rsp_t           rrsp [NumCores];

  for (genvar p = 0; p < NumRp; p++) begin : g_mst_cut
    pipe_cut #(.payload_t(tcdm_req_t)) i_req_cut (
      .clk_i, .rst_ni,
      .in_valid_i (mreq_valid[p]), .in_ready_o(mreq_ready[p]), .in_data_i(mreq[p]),
      .out_valid_o(mst_req_valid_o[p]), .out_ready_i(mst_req_ready_i[p]), .out_data_o(mst_req_o[p])
    );
    pipe_cut #(.payload_t(tcdm_rsp_t)) i_rsp_cut (
      .clk_i, .rst_ni,
      .in_valid_i (mst_rsp_valid_i[p]), .in_ready_o(mst_rsp_ready_o[p]), .in_data_i(mst_rsp_i[p]),
      .out_valid_o(mrsp_valid[p]), .out_ready_i(mrsp_ready[p]), .out_data_o(mrsp[p])
    );
    assign mrsp_sel[p] = CoreW'(mrsp[p].src_core);
  end

  fc_xbar #(.NumIn(NumRp), .NumOut(NumCores), .payload_t(tcdm_rsp_t)) i_remote_rsp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i (mrsp_valid), .in_ready_o(mrsp_ready),
    .in_sel_i   (mrsp_sel),   .in_data_i (mrsp),
    .out_valid_o(rrsp_valid), .out_ready_i(rrsp_ready), .out_data_o(rrsp)
  );

  // ---------------- per-core response merge ----------------
  for (genvar c = 0; c < NumCores; c++) begin : g_core_rsp
    logic [1:0]      m_valid, m_ready;
    logic [0:0]      m_sel [2];
    tcdm_rsp_t       m_data [2];
    logic [0:0]      o_valid;
    tcdm_rsp_t       o_data [1];
    assign m_valid   = {rrsp_valid[c], lrsp_valid[c]};
    assign m_data[0] = lrsp[c];
    assign m_data[1] = rrsp[c];
    assign m_sel[0]  = 1'b0;
    assign m_sel[1]  = 1'b0;
    assign lrsp_ready[c] = m_ready[0];
    assign rrsp_ready[c] = m_ready[1];
    fc_xbar #(.NumIn(2), .NumOut(1), .payload_t(tcdm_rsp_t)) i_rsp_merge (
      .clk_i, .rst_ni,
      .in_valid_i (m_valid), .in_ready_o(m_ready),
      .in_sel_i   (m_sel),   .in_data_i (m_data),
      .out_valid_o(o_valid), .out_ready_i(core_rsp_ready_i[c]), .out_data_o(o_data)
    );
    assign core_rsp_valid_o[c] = o_valid[0];
    assign core_rsp_o[c]       = o_data[0];
  end

  // ---------------- wide DMA port ----------------
  logic                 dbusy_q, dwe_q;
  logic [31:0]          daddr_q;
  logic [Lanes-1:0]     dsent_q, ddone_q;
  logic [DataWidth-1:0] drdata_q [Lanes];
  logic [AxiDataWidth-1:0] dwdata_q;
  logic [BankW-1:0]     dbase;

  assign dma_we  = dwe_q;
  assign dma_row = daddr_q[RowLsb +: RowW];
  assign dbase   = BankW'(daddr_q[2 +: BankW] & ~BankW'(Lanes - 1));
  assign dma_req_ready_o = !dbusy_q;
  assign dma_rsp_valid_o = dbusy_q && (&ddone_q);

  always_comb begin
    bdma_valid     = '0;
    bdma_rsp_ready = '0;
    for (int unsigned b = 0; b < NumBanks; b++) bdma_wdata[b] = '0;
    for (int unsigned l = 0; l < Lanes; l++) begin
      bdma_valid[int'(dbase) + l]     = dbusy_q && !dsent_q[l];
      bdma_rsp_ready[int'(dbase) + l] = dbusy_q && !ddone_q[l];
      bdma_wdata[int'(dbase) + l]     = dwdata_q[DataWidth*l +: DataWidth];
    end
    for (int unsigned l = 0; l < Lanes; l++) dma_rsp_o.rdata[DataWidth*l +: DataWidth] = drdata_q[l];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dbusy_q <= 1'b0;
      dsent_q <= '0;
      ddone_q <= '0;
    end else if (!dbusy_q) begin
      if (dma_req_valid_i) begin
        dbusy_q <= 1'b1;
        dsent_q <= '0;
        ddone_q <= '0;
      end
    end else if (&ddone_q) begin
      if (dma_rsp_ready_i) dbusy_q <= 1'b0;
    end else begin
      for (int unsigned l = 0; l < Lanes; l++) begin
        if (bdma_ready[int'(dbase) + l])     dsent_q[l] <= 1'b1;
        if (bdma_rsp_valid[int'(dbase) + l]) ddone_q[l] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (!dbusy_q && dma_req_valid_i) begin
      daddr_q  <= dma_req_i.addr;
      dwe_q    <= dma_req_i.we;
      dwdata_q <= dma_req_i.wdata;
    end
    for (int unsigned l = 0; l < Lanes; l++) begin
      if (dbusy_q && bdma_rsp_valid[int'(dbase) + l] && !ddone_q[l]) drdata_q[l] <= bdma_rdata[int'(dbase) + l];
    end
  end

  // Requests must hold until accepted.
  for (genvar c = 0; c < NumCores; c++) begin : g_assert
    a_req_hold : assert property (@(posedge clk_i) disable iff (!rst_ni)
      core_req_valid_i[c] && !core_req_ready_o[c] |=> core_req_valid_i[c]);
  end
endmodule
