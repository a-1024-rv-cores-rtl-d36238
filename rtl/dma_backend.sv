// dma_backend: the data mover of the modular DMA engine, one per subgroup.
//
// It executes chunks handed down by the group midend. A chunk lies inside
// this subgroup's L1 region, so it touches only this subgroup's tiles, and
// is at most one 16-beat AXI burst (1 KiB). Each 512-bit beat maps to 16
// consecutive words, i.e. 16 adjacent banks of one tile; the backend reaches
// them through the tile's wide DMA port.
//   L2 -> L1: one AR burst; each R beat is written into its tile as it
//             arrives, the next beat is taken when the tile is free again.
//   L1 -> L2: one AW burst; per beat the tile is read, then the W beat is
//             sent; the chunk ends with the B response.
// A one-cycle done pulse marks the end of every chunk. One chunk at a time;
// the next chunk is accepted in the cycle after the done pulse.
// The backend's role and its per-subgroup placement are the paper's; the
// chunk format, the tile port and the state machine are this design's.
module dma_backend
  import terapool_pkg::*;
#(
  parameter int unsigned NumTilesSg = 8,
  parameter int unsigned NumBanks   = 32
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  chunk_valid_i,
  output logic                  chunk_ready_o,
  input  dma_job_t              chunk_i,
  output logic                  done_o,
  // AXI master towards L2
  output axi_req_t              axi_req_o,
  input  axi_rsp_t              axi_rsp_i,
  // wide ports into the subgroup's tiles
  output logic [NumTilesSg-1:0] tile_req_valid_o,
  input  logic [NumTilesSg-1:0] tile_req_ready_i,
  output l1_wide_req_t          tile_req_o,
  input  logic [NumTilesSg-1:0] tile_rsp_valid_i,
  output logic [NumTilesSg-1:0] tile_rsp_ready_o,
  input  l1_wide_rsp_t          tile_rsp_i [NumTilesSg]
);
  localparam int unsigned TileLsb = 2 + $clog2(NumBanks);
  localparam int unsigned TileW   = $clog2(NumTilesSg);

  typedef enum logic [2:0] {Idle, RdAddr, RdData, WrAddr, WrRead, WrWait, WrData, WrResp} state_e;
  state_e state_q;

  logic [31:0]             l1_q;
  logic [AxiAddrWidth-1:0] l2_q;
  logic [7:0]              beats_q;   // beats still to move
  logic                    wait_q;    // L1 write of the last R beat not yet acknowledged
  logic                    last_q;
  logic [AxiDataWidth-1:0] wbuf_q;
  logic [TileW-1:0]        tsel;

  assign tsel = l1_q[TileLsb +: TileW];

  always_comb begin
    axi_req_o           = '0;
    axi_req_o.ar.addr   = l2_q;
    axi_req_o.ar.len    = beats_q - 8'd1;
    axi_req_o.ar_valid  = (state_q == RdAddr);
    axi_req_o.aw.addr   = l2_q;
    axi_req_o.aw.len    = beats_q - 8'd1;
    axi_req_o.aw_valid  = (state_q == WrAddr);
    axi_req_o.w.data    = wbuf_q;
    axi_req_o.w.strb    = '1;
    axi_req_o.w.last    = (beats_q == 8'd1);
    axi_req_o.w_valid   = (state_q == WrData);
    axi_req_o.b_ready   = (state_q == WrResp);
    axi_req_o.r_ready   = (state_q == RdData) && !wait_q && tile_req_ready_i[tsel];

    tile_req_valid_o       = '0;
    tile_req_o.addr        = l1_q;
    tile_req_o.we          = (state_q == RdData);
    tile_req_o.wdata       = axi_rsp_i.r.data;
    tile_req_valid_o[tsel] = ((state_q == RdData) && !wait_q && axi_rsp_i.r_valid) ||
                             (state_q == WrRead);
    tile_rsp_ready_o       = '1;
  end

  assign chunk_ready_o = (state_q == Idle);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= Idle;
      l1_q    <= '0;
      l2_q    <= '0;
      beats_q <= '0;
      wait_q  <= 1'b0;
      last_q  <= 1'b0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        Idle: if (chunk_valid_i) begin
          l1_q    <= chunk_i.l1_addr;
          l2_q    <= chunk_i.l2_addr;
          beats_q <= 8'(chunk_i.num_bytes >> 6);
          state_q <= chunk_i.to_l2 ? WrAddr : RdAddr;
        end
        RdAddr: if (axi_rsp_i.ar_ready) state_q <= RdData;
        RdData: begin
          if (!wait_q && axi_rsp_i.r_valid && tile_req_ready_i[tsel]) begin
            wait_q <= 1'b1;
            last_q <= axi_rsp_i.r.last;
          end else if (wait_q && tile_rsp_valid_i[tsel]) begin
            wait_q <= 1'b0;
            l1_q   <= l1_q + 32'd64;
            if (last_q) begin
              state_q <= Idle;
              done_o  <= 1'b1;
            end
          end
        end
        WrAddr: if (axi_rsp_i.aw_ready) state_q <= WrRead;
        WrRead: if (tile_req_ready_i[tsel]) state_q <= WrWait;
        WrWait: if (tile_rsp_valid_i[tsel]) state_q <= WrData;
        WrData: if (axi_rsp_i.w_ready) begin
          l1_q    <= l1_q + 32'd64;
          beats_q <= beats_q - 8'd1;
          state_q <= (beats_q == 8'd1) ? WrResp : WrRead;
        end
        WrResp: if (axi_rsp_i.b_valid) begin
          state_q <= Idle;
          done_o  <= 1'b1;
        end
        default: state_q <= Idle;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (state_q == WrWait && tile_rsp_valid_i[tsel]) wbuf_q <= tile_rsp_i[tsel].rdata;
  end
endmodule
