// tb_terapool_group: self-checking test of one group (group 1) at reduced
// size: 4 subgroups of 2 tiles of 2 cores, 16 banks of 16 words per tile.
// The bench is the far end of the group's three outgoing inter-group links
// (it answers from its own memory one cycle after a request) and drives
// requests into the three incoming links as remote groups would.
//   1. Every core writes and reads back its own tile, another tile of its
//      subgroup, another subgroup (1, 3 and 5 cycles) and another group; a
//      remote-group request must leave on the lane of the link to its group
//      and of its destination subgroup and tile (3 cycles with the bench's
//      1-cycle far end).
//   2. Random owned-word reads and writes from all 16 cores against a
//      reference model.
//   3. One write and read through every incoming lane; the response must
//      return on the same lane, 1 cycle after the request was accepted.
//   4. DMA chunks L2 -> L1 and L1 -> L2 through the group midend into
//      subgroup 2, and an L2 read through a tile's AXI port, against the
//      behavioural HBM model on the group's 4 AXI masters.
module tb_terapool_group;
  import terapool_pkg::*;
  localparam int NCD = 4 * 2 * 2;           // cores in the group
  localparam int NOut = 3 * 4 * 2, NIn = 3 * 4 * 2;
  localparam bit SgTargets = 1;
  localparam int DmaSg = 2;
  function automatic int core_s(int c); return c / 4; endfunction
  function automatic int core_t(int c); return (c / 2) % 2; endfunction

  localparam int NCo = 2, NB = 16, BW = 16, NTS = 2;
  localparam int TileLsb = 2 + $clog2(NB), SgLsb = TileLsb + $clog2(NTS);
  localparam int GroupLsb = SgLsb + 2, RowLsb = GroupLsb + 2;
  localparam int NWords = 4 * 4 * NTS * NB * BW;
  localparam int WBits = $clog2(NWords);
  localparam int CB = $clog2(NCD);
  localparam int G = 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [NCD-1:0] creq_v, creq_r, crsp_v;
  tcdm_req_t creq [NCD];
  tcdm_rsp_t crsp [NCD];
  // outgoing link lanes (requests leave, responses return)
  logic [NOut-1:0] oq_v, oq_r, op_v, op_r;
  tcdm_req_t oq [NOut];
  tcdm_rsp_t op [NOut];
  // incoming link lanes (requests enter, responses leave)
  logic [NIn-1:0] iq_v, iq_r, ip_v, ip_r;
  tcdm_req_t iq [NIn];
  tcdm_rsp_t ip [NIn];
  logic chunk_v, chunk_r;
  dma_job_t chunk;
  axi_req_t bfm_req;

  function automatic logic [31:0] mk_addr(int g, int s, int t, int b, int r);
    return 32'(r << RowLsb) | 32'(g << GroupLsb) | 32'(s << SgLsb) | 32'(t << TileLsb) | 32'(b << 2);
  endfunction
  function automatic int dist_of(int c, logic [31:0] a);
    if (int'(a[GroupLsb +: 2]) != G) return 3;
    if (int'(a[SgLsb +: 2]) != core_s(c)) return 2;
    if (int'(a[TileLsb +: $clog2(NTS)]) != core_t(c)) return 1;
    return 0;
  endfunction

  // reference model of all L1 words; the far side of the outgoing lanes
  logic [31:0] shadow [NWords];
  bit          known  [NWords];
  logic [31:0] far_mem [NWords];

  // ---------------- far side of the outgoing lanes ----------------
  // Always ready; answers from far_mem one cycle after the request, like a
  // bank one hop away, so latency checks see the unit's own cycles only.
  tcdm_rsp_t far_q [NOut][$];
  int        far_due [NOut][$];
  int        n_out_lane = 0, n_lane_err = 0;
  int        last_out_cyc;
  assign oq_r = '1;
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NOut; l++) begin
      if (op_v[l] && op_r[l]) begin void'(far_q[l].pop_front()); void'(far_due[l].pop_front()); end
      if (oq_v[l]) begin
        tcdm_rsp_t r; int w, s, t, c;
        w = int'(oq[l].addr[2 +: WBits]);
        n_out_lane++; last_out_cyc = cycle;
        s = int'(oq[l].src_sg); t = int'(oq[l].src_tile); c = int'(oq[l].src_core);
        checks++;
        if (l != exp_lane(oq[l]) || oq[l].src_group != 2'(G)) begin
          failures++; n_lane_err++; $display("request for %h on lane %0d, expected %0d", oq[l].addr, l, exp_lane(oq[l]));
        end
        if (oq[l].we) begin
          for (int k = 0; k < 4; k++) if (oq[l].be[k]) far_mem[w][8*k +: 8] = oq[l].wdata[8*k +: 8];
        end
        r = '0; r.rdata = far_mem[w]; r.we = oq[l].we; r.tag = oq[l].tag;
        r.src_group = oq[l].src_group; r.src_sg = oq[l].src_sg; r.src_tile = oq[l].src_tile; r.src_core = oq[l].src_core;
        far_q[l].push_back(r); far_due[l].push_back(cycle + 1);
      end
    end
  end
  always @(negedge clk) for (int l = 0; l < NOut; l++) begin
    op_v[l] = (far_q[l].size() != 0) && (far_due[l][0] <= cycle);
    op[l]   = (far_q[l].size() != 0) ? far_q[l][0] : '0;
  end

  // ---------------- core engine ----------------
  int  n_dist [4];
  int  n_stall = 0, n_rsp = 0;
  bit  random_on = 0, acc [NCD], outst [NCD], got [NCD];
  int  acc_cyc [NCD], rsp_cyc [NCD];
  logic [31:0] rsp_dat [NCD];
  tcdm_req_t last_req [NCD];
  logic [NCD-1:0] rnd_v, dir_v;
  tcdm_req_t rnd_req [NCD];
  tcdm_req_t dir_req [NCD];
  always_comb for (int c = 0; c < NCD; c++) begin
    creq_v[c] = rnd_v[c] | dir_v[c];
    creq[c]   = dir_v[c] ? dir_req[c] : rnd_req[c];
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCD; c++) begin
      if (creq_v[c] && !creq_r[c]) n_stall++;
      if (creq_v[c] && creq_r[c]) begin
        int w;
        acc[c] = 1; outst[c] = 1; last_req[c] = creq[c]; acc_cyc[c] = cycle;
        n_dist[dist_of(c, creq[c].addr)]++;
        w = int'(creq[c].addr[2 +: WBits]);
        if (creq[c].we) begin
          for (int k = 0; k < 4; k++) if (creq[c].be[k]) shadow[w][8*k +: 8] = creq[c].wdata[8*k +: 8];
          if (creq[c].be == 4'hf) known[w] = 1;
        end
      end
      if (crsp_v[c]) begin
        int w;
        w = int'(last_req[c].addr[2 +: WBits]);
        checks++;
        if (!outst[c] || crsp[c].tag !== last_req[c].tag || crsp[c].we !== last_req[c].we ||
            (!last_req[c].we && known[w] && crsp[c].rdata !== shadow[w])) begin
          failures++;
          $display("core %0d addr %h rsp %h expected %h (outst %0d)", c, last_req[c].addr, crsp[c].rdata, shadow[w], outst[c]);
        end
        outst[c] = 0; n_rsp++;
        got[c] = 1; rsp_cyc[c] = cycle; rsp_dat[c] = crsp[c].rdata;
      end
    end
  end

  always @(negedge clk) begin
    for (int c = 0; c < NCD; c++) begin
      if (rnd_v[c] && acc[c]) rnd_v[c] <= 1'b0;
      else if (!rnd_v[c] && !outst[c] && random_on && $urandom_range(0, 3) != 0) begin
        logic [WBits-1:0] w;
        w = WBits'($urandom);
        if ($urandom_range(0, 1) == 0) w[GroupLsb - 2 +: 2] = 2'(G);     // half of it inside the own group
        w[CB-1:0] = CB'(c - int'(w[2*CB-1:CB]));                           // word owned by core c
        rnd_req[c].addr  <= {w, 2'b00};
        rnd_req[c].we    <= $urandom_range(0, 1);
        rnd_req[c].be    <= ($urandom_range(0, 3) == 0) ? 4'($urandom) : 4'hf;
        rnd_req[c].wdata <= $urandom;
        rnd_req[c].tag   <= 4'($urandom);
        rnd_v[c] <= 1'b1;
      end
      if (!dir_v[c]) acc[c] = 0;
    end
  end

  task automatic core_access(int c, logic [31:0] a, logic we, logic [31:0] wd, output logic [31:0] rd, output int lat);
    @(negedge clk);
    got[c] = 0; acc[c] = 0;
    dir_v[c] = 1'b1; dir_req[c] = '0; dir_req[c].addr = a; dir_req[c].we = we; dir_req[c].be = 4'hf;
    dir_req[c].wdata = wd; dir_req[c].tag = 4'd3;
    while (!acc[c]) @(negedge clk);
    dir_v[c] = 1'b0;
    while (!got[c]) @(negedge clk);
    rd = rsp_dat[c]; lat = rsp_cyc[c] - acc_cyc[c];
  endtask

  // ---------------- incoming lanes: one directed access ----------------
  int n_in = 0;
  task automatic in_access(int l, logic [31:0] a, logic we, logic [31:0] wd, output logic [31:0] rd, output int lat);
    int t0; bit seen;
    @(negedge clk);
    iq_v[l] = 1'b1; iq[l] = in_src(l); iq[l].addr = a; iq[l].we = we; iq[l].be = 4'hf; iq[l].wdata = wd;
    iq[l].tag = 4'd7;
    @(posedge clk); while (!iq_r[l]) @(posedge clk);
    t0 = cycle;
    @(negedge clk); iq_v[l] = 1'b0;
    seen = 0;
    while (!seen) begin
      @(posedge clk);
      if (ip_v[l]) begin
        seen = 1; lat = cycle - t0; rd = ip[l].rdata;
        checks++;
        if (ip[l].tag != 4'd7 || ip[l].src_sg != iq[l].src_sg || ip[l].src_tile != iq[l].src_tile || ip[l].src_group != iq[l].src_group) begin
          failures++; $display("incoming lane %0d: response fields wrong", l);
        end
      end
      for (int k = 0; k < NIn; k++) if (k != l && ip_v[k]) begin failures++; $display("response on lane %0d, expected %0d", k, l); end
    end
    n_in++;
  endtask

  // outgoing lane: (link-1) * 8 + sg * 2 + tile of the destination (the
  // R-Group crossbar routes on the sending side)
  function automatic int exp_lane(tcdm_req_t r);
    int j;
    j = (int'(r.addr[GroupLsb +: 2]) - G + 4) % 4;
    return (j - 1) * 8 + int'(r.addr[SgLsb +: 2]) * NTS + int'(r.addr[TileLsb +: $clog2(NTS)]);
  endfunction
  // incoming lane l = (link-1) * 8 + sg * 2 + tile carries requests of
  // group G - link for that tile of this group
  function automatic tcdm_req_t in_src(int l);
    tcdm_req_t r;
    r = '0;
    r.src_group = 2'(G - (l / 8 + 1));
    r.src_sg    = 2'(l % 4);
    r.src_tile  = 3'((l / 4) % NTS);
    r.src_core  = 3'(l % 2);
    return r;
  endfunction
  function automatic logic [31:0] in_addr(int l);
    return mk_addr(G, (l % 8) / NTS, l % NTS, l % NB, 15);
  endfunction

  axi_req_t taxi_req [4 * NTS];
  axi_rsp_t taxi_rsp [4 * NTS];
  axi_req_t areq [4];
  axi_rsp_t arsp [4];
  logic [3:0] cdone;
  always_comb begin
    for (int t = 0; t < 4 * NTS; t++) taxi_req[t] = '0;
    taxi_req[5] = bfm_req;
  end
  terapool_group #(.NumCores(NCo), .NumBanks(NB), .BankWords(BW), .NumTilesSg(NTS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .group_id_i(2'(G)),
    .core_req_valid_i(creq_v), .core_req_ready_o(creq_r), .core_req_i(creq),
    .core_rsp_valid_o(crsp_v), .core_rsp_ready_i({NCD{1'b1}}), .core_rsp_o(crsp),
    .rg_req_valid_o(oq_v), .rg_req_ready_i(oq_r), .rg_req_o(oq),
    .rg_rsp_valid_i(op_v), .rg_rsp_ready_o(op_r), .rg_rsp_i(op),
    .rg_slv_req_valid_i(iq_v), .rg_slv_req_ready_o(iq_r), .rg_slv_req_i(iq),
    .rg_slv_rsp_valid_o(ip_v), .rg_slv_rsp_ready_i({NIn{1'b1}}), .rg_slv_rsp_o(ip),
    .tile_axi_req_i(taxi_req), .tile_axi_rsp_o(taxi_rsp),
    .axi_req_o(areq), .axi_rsp_i(arsp),
    .chunk_valid_i(chunk_v), .chunk_ready_o(chunk_r), .chunk_i(chunk), .chunk_done_o(cdone)
  );
  hbm2e_model #(.NumPorts(4), .Latency(20)) i_hbm (.clk_i(clk), .req_i(areq), .rsp_o(arsp));
  axi_master_bfm bfm (.clk_i(clk), .req_o(bfm_req), .rsp_i(taxi_rsp[5]));

  int n_done = 0;
  always @(posedge clk) if (rst_n && cdone[DmaSg]) n_done++;
  task automatic send_chunk(logic [31:0] l1, logic [47:0] l2, int bytes, logic to_l2);
    int d0;
    d0 = n_done;
    @(negedge clk);
    chunk_v = 1'b1; chunk.l1_addr = l1; chunk.l2_addr = l2; chunk.num_bytes = 32'(bytes); chunk.to_l2 = to_l2;
    @(posedge clk); while (!chunk_r) @(posedge clk);
    @(negedge clk); chunk_v = 1'b0;
    while (n_done == d0) @(posedge clk);
  endtask
  task automatic dma_and_axi();
    logic [31:0] base, rd; int lat;
    logic [AxiDataWidth-1:0] d [];
    logic [AxiIdWidth-1:0] id; logic ok;
    base = mk_addr(G, DmaSg, 0, 0, 3);
    send_chunk(base, 48'h8000_2000, NTS * NB * 4, 1'b0);
    for (int k = 0; k < NTS * NB; k++) begin
      logic [AxiDataWidth-1:0] b;
      b = i_hbm.read_beat(48'h8000_2000 + 48'(4 * k));
      shadow[int'(base[2 +: WBits]) + k] = b[32 * (k % 16) +: 32];
    end
    for (int k = 0; k < NTS * NB; k++) begin
      logic [AxiDataWidth-1:0] b;
      b = i_hbm.read_beat(48'h8000_2000 + 48'(4 * k));
      core_access(k % NCD, base + 32'(4 * k), 1'b0, 32'h0, rd, lat);
      checks++;
      if (rd !== b[32 * (k % 16) +: 32]) begin failures++; $display("DMA word %0d = %h, expected %h", k, rd, b[32 * (k % 16) +: 32]); end
    end
    for (int k = 0; k < NTS * NB; k++) core_access(k % NCD, base + 32'(4 * k), 1'b1, 32'h7700_0000 + 32'(k), rd, lat);
    send_chunk(base, 48'h8003_0000, NTS * NB * 4, 1'b1);
    for (int k = 0; k < NTS * NB; k++) begin
      logic [AxiDataWidth-1:0] b;
      b = i_hbm.read_beat(48'h8003_0000 + 48'(4 * k));
      checks++;
      if (b[32 * (k % 16) +: 32] !== 32'h7700_0000 + 32'(k)) begin failures++; $display("L2 word %0d wrong", k); end
    end
    bfm.read(48'h8000_5000, 2, 12'h1, d, id, ok);
    checks++;
    if (!ok || d[1] !== i_hbm.read_beat(48'h8000_5040)) begin failures++; $display("tile AXI read wrong"); end
    checks++;
    if (n_done != 2) begin failures++; $display("done pulses %0d", n_done); end
  endtask

  initial begin
    logic [31:0] rd; int lat;
    int exp_lat [4] = '{1, 3, 5, 3};
    for (int w = 0; w < NWords; w++) begin shadow[w] = '0; known[w] = 0; far_mem[w] = '0; end
    for (int c = 0; c < NCD; c++) begin
      acc[c] = 0; outst[c] = 0; got[c] = 0; acc_cyc[c] = 0; rsp_cyc[c] = 0; rsp_dat[c] = '0;
      rnd_req[c] = '0; dir_req[c] = '0; last_req[c] = '0;
    end
    for (int k = 0; k < 4; k++) n_dist[k] = 0;
    for (int l = 0; l < NIn; l++) iq[l] = '0;
    rnd_v = '0; dir_v = '0; iq_v = '0; op_v = '0; chunk_v = 1'b0; chunk = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // 1. latency from every core to every kind of target
    for (int c = 0; c < NCD; c++) begin
      int s, t;
      s = core_s(c); t = core_t(c);
      for (int d = 0; d < 4; d++) begin
        logic [31:0] a, v;
        case (d)
          0: a = mk_addr(G, s, t, c % NB, 14);
          1: a = mk_addr(G, s, (t + 1) % NTS, c % NB, 14);
          2: a = mk_addr(G, (s + 1 + c % 3) % 4, t, c % NB, 14);
          default: a = mk_addr((G + 1 + c % 3) % 4, s, t, c % NB, 14);
        endcase
        if (d == 2 && !SgTargets) continue;
        v = $urandom;
        core_access(c, a, 1'b1, v, rd, lat);
        core_access(c, a, 1'b0, 32'h0, rd, lat);
        checks++;
        if (rd !== v || lat != exp_lat[d]) begin
          failures++; $display("core %0d kind %0d: read %h latency %0d, expected %h in %0d", c, d, rd, lat, v, exp_lat[d]);
        end
        shadow[int'(a[2 +: WBits])] = v; known[int'(a[2 +: WBits])] = 1;
      end
    end

    // 2. random owned-word traffic
    random_on = 1;
    repeat (2000) @(posedge clk);
    random_on = 0;
    while (rnd_v != '0 || outst.sum() with (int'(item)) != 0) @(posedge clk);

    // 3. requests entering through every incoming lane
    for (int l = 0; l < NIn; l++) begin
      logic [31:0] a, v;
      a = in_addr(l);
      v = $urandom;
      in_access(l, a, 1'b1, v, rd, lat);
      in_access(l, a, 1'b0, 32'h0, rd, lat);
      checks++;
      if (rd !== v || lat != 1) begin failures++; $display("incoming lane %0d: read %h latency %0d", l, rd, lat); end
      shadow[int'(a[2 +: WBits])] = v; known[int'(a[2 +: WBits])] = 1;
    end

    // 4. DMA chunks both ways and an L2 read through a tile's AXI port
    dma_and_axi();

    $display("accesses local %0d subgroup %0d group %0d remote %0d, stalls %0d, outgoing lane requests %0d, incoming %0d",
             n_dist[0], n_dist[1], n_dist[2], n_dist[3], n_stall, n_out_lane, n_in);
    begin
      int cov [6];
      cov = '{n_dist[0], n_dist[1], SgTargets ? n_dist[2] : 1, n_dist[3], n_stall, n_in};
      foreach (cov[k]) begin
        checks++;
        if (cov[k] == 0) begin failures++; $display("mechanism %0d never happened", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
