// hbm_addr_scrambler: the address scrambler on each L2 (HBM2E) AXI port.
//
// The HBM2E memory map places the channel index high in the address, so a
// linear buffer would sit in one channel and every cluster master streaming
// it would collide there. The scrambler swaps the ChannelBits bits just
// above one burst (BurstLog2: 16 beats x 64 B = 1 KiB) with the channel
// field of the HBM map (ChannelLsb), so consecutive bursts land in
// consecutive channels: data is interleaved across channels at burst
// granularity. The swap is its own inverse and maps the L2 range onto
// itself. Only addresses at or above L2Base are changed. Combinational, on
// AR and AW; all other fields pass unchanged.
// That a scrambler aligns channel interleaving to the burst length is the
// paper's; the bit swap and the field positions (2 x 16 GiB stacks,
// 16 channels of 2 GiB) are this design's.
module hbm_addr_scrambler
  import terapool_pkg::*;
#(
  parameter int unsigned BurstLog2   = 10,
  parameter int unsigned ChannelBits = 4,
  parameter int unsigned ChannelLsb  = 31
) (
  input  axi_req_t in_req_i,
  output axi_rsp_t in_rsp_o,
  output axi_req_t out_req_o,
  input  axi_rsp_t out_rsp_i
);
  function automatic logic [AxiAddrWidth-1:0] scramble(logic [AxiAddrWidth-1:0] a);
    logic [AxiAddrWidth-1:0] orig, off;
    if (a < L2Base) return a;
    orig = a - L2Base;
    off  = orig;
    off[BurstLog2  +: ChannelBits] = orig[ChannelLsb +: ChannelBits];
    off[ChannelLsb +: ChannelBits] = orig[BurstLog2  +: ChannelBits];
    return off + L2Base;
  endfunction

  always_comb begin
    out_req_o         = in_req_i;
    out_req_o.ar.addr = scramble(in_req_i.ar.addr);
    out_req_o.aw.addr = scramble(in_req_i.aw.addr);
    in_rsp_o          = out_rsp_i;
  end
endmodule
