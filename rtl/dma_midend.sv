// dma_midend: cluster-level DMA midend, made of a splitter and a distributer.
//
// L1 is word-interleaved over the cluster, so a contiguous L1 buffer is cut
// into regions of RegionBytes (= tiles per subgroup x banks per tile x 4 B,
// 1 KiB) that each belong to one subgroup. The splitter walks a job from the
// frontend and emits one chunk per cycle, never crossing a region boundary;
// the L2 address advances with the L1 address. The distributer sends each
// chunk to the group that owns its region (valid/ready per group); the group
// midend forwards it to the subgroup backend. Every backend pulses a done bit
// per finished chunk; the midend counts chunks in flight and reports the job
// done once it is fully split and no chunk is left. One job at a time.
// Addresses and lengths must be multiples of 64 B (one 512-bit beat); that
// restriction is this design's.
// The splitter/distributer structure is the paper's (Fig. 3); how a job is
// cut is this design's choice, derived from its L1 address map.
module dma_midend
  import terapool_pkg::*;
#(
  parameter int unsigned NumTilesSg = 8,
  parameter int unsigned NumBanks   = 32,
  parameter int unsigned NumBackends = 16
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   job_valid_i,
  output logic                   job_ready_o,
  input  dma_job_t               job_i,
  output logic                   job_done_o,
  output logic [3:0]             chunk_valid_o,
  input  logic [3:0]             chunk_ready_i,
  output dma_job_t               chunk_o,
  input  logic [NumBackends-1:0] chunk_done_i
);
  localparam int unsigned RegionBytes = NumTilesSg * NumBanks * 4;
  localparam int unsigned RegionLog2  = $clog2(RegionBytes);
  localparam int unsigned GroupLsb    = RegionLog2 + 2;

  logic     running_q, splitting_q;
  dma_job_t cur_q;
  logic [15:0] inflight_q;
  logic [31:0] room, clen;
  logic [1:0]  grp;
  logic        fire;

  assign room = 32'(RegionBytes) - (cur_q.l1_addr & 32'(RegionBytes - 1));
  assign clen = (cur_q.num_bytes < room) ? cur_q.num_bytes : room;
  assign grp  = cur_q.l1_addr[GroupLsb +: 2];

  always_comb begin
    chunk_o           = cur_q;
    chunk_o.num_bytes = clen;
    chunk_valid_o     = '0;
    chunk_valid_o[grp] = splitting_q;
  end
  assign fire        = splitting_q && chunk_ready_i[grp];
  assign job_ready_o = !running_q;

  logic [15:0] ndone;
  always_comb begin
    ndone = '0;
    for (int unsigned i = 0; i < NumBackends; i++) ndone += 16'(chunk_done_i[i]);
  end

  assign job_done_o = running_q && !splitting_q && (inflight_q == 0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      running_q   <= 1'b0;
      splitting_q <= 1'b0;
      cur_q       <= '0;
      inflight_q  <= '0;
    end else begin
      inflight_q <= inflight_q + 16'(fire) - ndone;
      if (!running_q && job_valid_i) begin
        running_q   <= 1'b1;
        splitting_q <= (job_i.num_bytes != 0);
        cur_q       <= job_i;
      end else if (fire) begin
        cur_q.l1_addr   <= cur_q.l1_addr + clen;
        cur_q.l2_addr   <= cur_q.l2_addr + AxiAddrWidth'(clen);
        cur_q.num_bytes <= cur_q.num_bytes - clen;
        if (cur_q.num_bytes == clen) splitting_q <= 1'b0;
      end else if (job_done_o) begin
        running_q <= 1'b0;
      end
    end
  end
endmodule
