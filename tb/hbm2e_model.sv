// hbm2e_model: behavioural model of the HBM2E main memory behind the
// cluster's L2 ports (two 16 GiB stacks, 16 channels). Not synthesizable;
// it stands in for the DRAM and its controller in testbenches.
//
// NumPorts AXI slave ports share one sparse memory of 512-bit beats. Every
// read or write burst is answered Latency cycles after its address was
// accepted (a fixed latency stands in for a cycle-accurate DRAM simulator);
// read beats then stream at one per cycle. Up to 8 bursts queue per port and
// direction. A location never written reads as pattern(a) = a[31:0] ^
// 32'h5A5A5A5A for each 32-bit word at byte address a, so a testbench can
// predict any read. The channel of an access is address bits
// [ChannelLsb +: 4] above L2Base; ch_hits counts bursts per channel.
module hbm2e_model
  import terapool_pkg::*;
#(
  parameter int unsigned NumPorts   = 16,
  parameter int unsigned Latency    = 130,
  parameter int unsigned ChannelLsb = 31
) (
  input  logic     clk_i,
  input  axi_req_t req_i [NumPorts],
  output axi_rsp_t rsp_o [NumPorts]
);
  typedef struct {
    logic [AxiAddrWidth-1:0] addr;
    int                      len;
    logic [AxiIdWidth-1:0]   id;
    longint                  t;
  } burst_t;

  logic [AxiDataWidth-1:0] mem [logic [AxiAddrWidth-1:0]];
  burst_t ar_q [NumPorts][$];
  burst_t aw_q [NumPorts][$];
  burst_t b_q  [NumPorts][$];
  int     rbeat [NumPorts];
  int     wbeat [NumPorts];
  longint cycle = 0;
  int     ch_hits [16];
  int     n_rd = 0, n_wr = 0;

  function automatic logic [31:0] pattern(logic [AxiAddrWidth-1:0] a);
    return a[31:0] ^ 32'h5A5A_5A5A;
  endfunction

  function automatic logic [AxiDataWidth-1:0] read_beat(logic [AxiAddrWidth-1:0] a);
    logic [AxiAddrWidth-1:0] k;
    logic [AxiDataWidth-1:0] d;
    k = a >> 6;
    if (mem.exists(k)) return mem[k];
    for (int w = 0; w < 16; w++) d[32*w +: 32] = pattern({k, 6'd0} + AxiAddrWidth'(4 * w));
    return d;
  endfunction

  function automatic int channel(logic [AxiAddrWidth-1:0] a);
    logic [AxiAddrWidth-1:0] off;
    off = a - L2Base;
    return int'(off[ChannelLsb +: 4]);
  endfunction

  initial begin
    for (int c = 0; c < 16; c++) ch_hits[c] = 0;
    for (int p = 0; p < NumPorts; p++) begin
      rsp_o[p] = '0; rbeat[p] = 0; wbeat[p] = 0;
    end
  end

  always @(posedge clk_i) begin
    cycle <= cycle + 1;
    for (int p = 0; p < NumPorts; p++) begin
      // read address
      if (req_i[p].ar_valid && rsp_o[p].ar_ready) begin
        ar_q[p].push_back('{addr: req_i[p].ar.addr, len: int'(req_i[p].ar.len), id: req_i[p].ar.id, t: cycle + Latency});
        ch_hits[channel(req_i[p].ar.addr)]++;
        n_rd++;
      end
      // read data
      if (rsp_o[p].r_valid && req_i[p].r_ready) begin
        if (rbeat[p] == ar_q[p][0].len) begin
          void'(ar_q[p].pop_front());
          rbeat[p] = 0;
        end else begin
          rbeat[p]++;
        end
      end
      // write address
      if (req_i[p].aw_valid && rsp_o[p].aw_ready) begin
        aw_q[p].push_back('{addr: req_i[p].aw.addr, len: int'(req_i[p].aw.len), id: req_i[p].aw.id, t: 0});
        ch_hits[channel(req_i[p].aw.addr)]++;
        n_wr++;
      end
      // write data
      if (req_i[p].w_valid && rsp_o[p].w_ready) begin
        logic [AxiAddrWidth-1:0] a;
        logic [AxiDataWidth-1:0] d;
        a = aw_q[p][0].addr + AxiAddrWidth'(64 * wbeat[p]);
        d = read_beat(a);
        for (int b = 0; b < 64; b++) if (req_i[p].w.strb[b]) d[8*b +: 8] = req_i[p].w.data[8*b +: 8];
        mem[a >> 6] = d;
        if (wbeat[p] == aw_q[p][0].len) begin
          b_q[p].push_back('{addr: a, len: 0, id: aw_q[p][0].id, t: cycle + Latency});
          void'(aw_q[p].pop_front());
          wbeat[p] = 0;
        end else begin
          wbeat[p]++;
        end
      end
      // write response
      if (rsp_o[p].b_valid && req_i[p].b_ready) void'(b_q[p].pop_front());

      rsp_o[p].ar_ready <= (ar_q[p].size() < 8);
      rsp_o[p].aw_ready <= (aw_q[p].size() < 8);
      rsp_o[p].w_ready  <= (aw_q[p].size() > 0);
      if (ar_q[p].size() > 0 && cycle + 1 >= ar_q[p][0].t) begin
        rsp_o[p].r_valid <= 1'b1;
        rsp_o[p].r.id    <= ar_q[p][0].id;
        rsp_o[p].r.data  <= read_beat(ar_q[p][0].addr + AxiAddrWidth'(64 * rbeat[p]));
        rsp_o[p].r.last  <= (rbeat[p] == ar_q[p][0].len);
      end else begin
        rsp_o[p].r_valid <= 1'b0;
      end
      if (b_q[p].size() > 0 && cycle + 1 >= b_q[p][0].t) begin
        rsp_o[p].b_valid <= 1'b1;
        rsp_o[p].b.id    <= b_q[p][0].id;
      end else begin
        rsp_o[p].b_valid <= 1'b0;
      end
    end
  end
endmodule
