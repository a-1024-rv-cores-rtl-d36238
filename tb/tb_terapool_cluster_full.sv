// tb_terapool_cluster_full: the end-to-end cluster test at full size, with
// every parameter of the cluster at its default: 1024 cores, 128 tiles,
// 4096 banks of 256 words (4 MiB of L1), latencies 1-3-5-9. It runs the
// same sequence as tb_terapool_cluster (latency probes from all four
// groups, a 16 KiB DMA job from L2 into L1, random owned-word traffic from
// all 1024 cores, the same 16 KiB back to L2, a refill-port L2 read and a
// peripheral read) with a shorter random phase, and counts the same
// mechanisms.
module tb_terapool_cluster_full;
  import terapool_pkg::*;
  localparam int NCo = 8, NB = 32, BW = 256, NTS = 8;
  localparam int NC = 4 * 4 * NTS * NCo, NT = 4 * 4 * NTS;
  localparam int TileLsb = 2 + $clog2(NB), SgLsb = TileLsb + $clog2(NTS);
  localparam int GroupLsb = SgLsb + 2, RowLsb = GroupLsb + 2;
  localparam int NWords = NT * NB * BW;            // 16384 words
  localparam int WBits = $clog2(NWords);
  localparam int CB = $clog2(NC);                  // core-index bits
  localparam int RandCycles = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [NC-1:0] creq_v, creq_r, crsp_v;
  tcdm_req_t creq [NC];
  tcdm_rsp_t crsp [NC];
  axi_req_t  treq [NT];
  axi_rsp_t  trsp [NT];
  axi_req_t  l2q [16];
  axi_rsp_t  l2p [16];
  axi_req_t  pq [1];
  axi_rsp_t  pp [1];
  axi_req_t  bfm_req;

  terapool_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(creq_v), .core_req_ready_o(creq_r), .core_req_i(creq),
    .core_rsp_valid_o(crsp_v), .core_rsp_ready_i({NC{1'b1}}), .core_rsp_o(crsp),
    .tile_axi_req_i(treq), .tile_axi_rsp_o(trsp),
    .l2_req_o(l2q), .l2_rsp_i(l2p), .periph_req_o(pq[0]), .periph_rsp_i(pp[0])
  );
  hbm2e_model #(.NumPorts(16), .Latency(30)) i_hbm (.clk_i(clk), .req_i(l2q), .rsp_o(l2p));
  hbm2e_model #(.NumPorts(1), .Latency(5)) i_periph (.clk_i(clk), .req_i(pq), .rsp_o(pp));
  axi_master_bfm bfm (.clk_i(clk), .req_o(bfm_req), .rsp_i(trsp[0]));
  always_comb begin
    for (int t = 0; t < NT; t++) treq[t] = '0;
    treq[0] = bfm_req;
  end

  // ---------------- reference model and helpers ----------------
  logic [31:0] shadow [NWords];
  bit          known  [NWords];

  function automatic logic [31:0] mk_addr(int g, int s, int t, int b, int r);
    return 32'(r << RowLsb) | 32'(g << GroupLsb) | 32'(s << SgLsb) | 32'(t << TileLsb) | 32'(b << 2);
  endfunction
  function automatic int core_g(int c); return c / (4 * NTS * NCo); endfunction
  function automatic int core_s(int c); return (c / (NTS * NCo)) % 4; endfunction
  function automatic int core_t(int c); return (c / NCo) % NTS; endfunction
  // L2 offset with the 1 KiB-burst field [13:10] and channel field [34:31] swapped
  function automatic logic [47:0] scr(logic [47:0] a);
    logic [47:0] o;
    o = a - L2Base;
    {o[13:10], o[34:31]} = {o[34:31], o[13:10]};
    return o + L2Base;
  endfunction
  function automatic logic [31:0] l2_word(logic [47:0] a);   // HBM content never written
    logic [AxiDataWidth-1:0] d;
    d = i_hbm.read_beat(scr(a));
    return d[32 * int'(a[5:2]) +: 32];
  endfunction

  // ---------------- core engine ----------------
  int  n_dist [4];          // local, subgroup, group, remote
  int  n_stall = 0, n_rsp = 0;
  bit  random_on = 0, acc [NC], outst [NC], got [NC];
  int  acc_cyc [NC], rsp_cyc [NC];
  logic [31:0] rsp_dat [NC];
  tcdm_req_t last_req [NC];
  logic [NC-1:0] rnd_v;
  tcdm_req_t     rnd_req [NC];
  logic [NC-1:0] dir_v;
  tcdm_req_t     dir_req [NC];
  always_comb for (int c = 0; c < NC; c++) begin
    creq_v[c] = rnd_v[c] | dir_v[c];
    creq[c]   = dir_v[c] ? dir_req[c] : rnd_req[c];
  end

  function automatic int dist_of(int c, logic [31:0] a);
    if (int'(a[GroupLsb +: 2]) != core_g(c)) return 3;
    if (int'(a[SgLsb +: 2]) != core_s(c)) return 2;
    if (int'(a[TileLsb +: $clog2(NTS)]) != core_t(c)) return 1;
    return 0;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (creq_v[c] && !creq_r[c]) n_stall++;
      if (creq_v[c] && creq_r[c]) begin
        int w;
        acc[c] = 1; outst[c] = 1; last_req[c] = creq[c]; acc_cyc[c] = cycle;
        n_dist[dist_of(c, creq[c].addr)]++;
        w = int'(creq[c].addr[2 +: WBits]);
        if (creq[c].we) begin
          for (int k = 0; k < 4; k++) if (creq[c].be[k]) shadow[w][8*k +: 8] = creq[c].wdata[8*k +: 8];
          if (creq[c].be != 4'hf && !known[w]) known[w] = 0; else known[w] = 1;
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
    for (int c = 0; c < NC; c++) begin
      if (rnd_v[c] && acc[c]) rnd_v[c] <= 1'b0;
      else if (!rnd_v[c] && !outst[c] && random_on && $urandom_range(0, 3) != 0) begin
        logic [WBits-1:0] w;
        w = WBits'($urandom);
        if ($urandom_range(0, 3) != 0) w[WBits-1 -: 2] = 2'b00;       // mostly the lowest quarter of L1
        w[CB-1:0] = CB'(c - int'(w[2*CB-1:CB]));                       // word owned by core c
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

  // one directed access from core c; returns data and round-trip cycles
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

  // ---------------- DMA programming over AXI ----------------
  task automatic reg_wr(int idx, logic [63:0] v);
    logic [AxiDataWidth-1:0] d []; logic [AxiIdWidth-1:0] id;
    d = new[1]; d[0] = AxiDataWidth'(v) << (64 * idx);
    bfm.write(DmaBase + 48'(8 * idx), 1, d, 12'h1, id);
  endtask
  task automatic reg_rd(int idx, output logic [63:0] v);
    logic [AxiDataWidth-1:0] d []; logic [AxiIdWidth-1:0] id; logic ok;
    bfm.read(DmaBase + 48'(8 * idx), 1, 12'h2, d, id, ok);
    v = d[0][64*idx +: 64];
  endtask
  int n_jobs = 0, n_dma_in = 0, n_dma_out = 0, n_chunks = 0;
  always @(posedge clk) if (rst_n) for (int g = 0; g < 4; g++)
    if (dut.chunk_v[g] && dut.chunk_r[g]) n_chunks++;
  task automatic dma(logic [47:0] l2, logic [31:0] l1, int bytes, logic to_l2);
    logic [63:0] v; int guard;
    reg_wr(0, 64'(l2)); reg_wr(1, 64'(l1)); reg_wr(2, 64'(bytes)); reg_wr(3, 64'(to_l2));
    reg_wr(4, 64'd1);
    n_jobs++;
    guard = 0;
    do begin reg_rd(4, v); guard++; end while (v[0] && guard < 2000);
    reg_rd(5, v);
    checks++;
    if (int'(v) != n_jobs) begin failures++; $display("DMA done count %0d, expected %0d", v, n_jobs); end
    if (to_l2) n_dma_out++; else n_dma_in++;
  endtask

  initial begin
    logic [31:0] rd; int lat;
    int exp_lat [4] = '{1, 3, 5, 9};
    int srcs [4] = '{0, NC / 4 + 3, NC / 2 + 2 * NCo * NTS + 1, NC - 1};
    for (int w = 0; w < NWords; w++) begin shadow[w] = '0; known[w] = 0; end
    for (int c = 0; c < NC; c++) begin
      acc[c] = 0; outst[c] = 0; got[c] = 0; acc_cyc[c] = 0; rsp_cyc[c] = 0; rsp_dat[c] = '0; rnd_req[c] = '0; dir_req[c] = '0; last_req[c] = '0;
    end
    for (int k = 0; k < 4; k++) n_dist[k] = 0;
    rnd_v = '0; dir_v = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // 1. latencies
    foreach (srcs[i]) begin
      int c, g, s, t;
      c = srcs[i]; g = core_g(c); s = core_s(c); t = core_t(c);
      for (int d = 0; d < 4; d++) begin
        logic [31:0] a; logic [31:0] v;
        case (d)
          0: a = mk_addr(g, s, t, 5, 15);
          1: a = mk_addr(g, s, (t + 1) % NTS, 6, 15);
          2: a = mk_addr(g, (s + 1 + i % 3) % 4, t, 7, 15);
          default: a = mk_addr((g + 1 + i % 3) % 4, s, t, 8, 15);
        endcase
        v = 32'hC0DE_0000 + 32'(16 * i + d);
        core_access(c, a, 1'b1, v, rd, lat);
        checks++;
        if (lat != exp_lat[d]) begin failures++; $display("core %0d dist %0d write latency %0d", c, d, lat); end
        core_access(c, a, 1'b0, 32'h0, rd, lat);
        checks++;
        if (rd !== v || lat != exp_lat[d]) begin
          failures++; $display("core %0d dist %0d read %h latency %0d (expected %0d)", c, d, rd, lat, exp_lat[d]);
        end
      end
    end

    // 2. DMA L2 -> L1, 16 KiB
    dma(48'h8000_0000, 32'h0, 16384, 1'b0);
    for (int k = 0; k < 4096; k++) begin
      shadow[k] = l2_word(48'h8000_0000 + 48'(4 * k)); known[k] = 1;
    end
    for (int k = 0; k < 64; k++) begin
      int w;
      w = $urandom_range(0, 4095);
      core_access($urandom_range(0, NC - 1), 32'(4 * w), 1'b0, 32'h0, rd, lat);
      checks++;
      if (rd !== shadow[w]) begin failures++; $display("DMA L1 word %0d = %h, expected %h", w, rd, shadow[w]); end
    end
    checks++;
    for (int ch = 0; ch < 16; ch++) if (i_hbm.ch_hits[ch] == 0) begin
      failures++; $display("HBM channel %0d never used", ch); break;
    end

    // 3. random traffic
    random_on = 1;
    repeat (RandCycles) @(posedge clk);
    random_on = 0;
    while (rnd_v != '0 || outst.sum() with (int'(item)) != 0) @(posedge clk);
    repeat (5) @(posedge clk);

    // 4. DMA L1 -> L2
    dma(48'h8100_0000, 32'h0, 16384, 1'b1);
    begin
      int bad;
      bad = 0;
      for (int k = 0; k < 4096; k++) begin
        logic [AxiDataWidth-1:0] d; logic [47:0] a;
        a = 48'h8100_0000 + 48'(4 * k);
        d = i_hbm.read_beat(scr(a));
        if (d[32 * (k % 16) +: 32] !== shadow[k]) bad++;
      end
      checks++;
      if (bad != 0) begin failures++; $display("%0d L2 words differ after L1 -> L2", bad); end
    end

    // 5. refill-port L2 read and peripheral read
    begin
      logic [AxiDataWidth-1:0] d []; logic [AxiIdWidth-1:0] id; logic ok;
      bfm.read(48'h8200_0040, 2, 12'h3, d, id, ok);
      checks++;
      if (!ok || d[1] !== i_hbm.read_beat(scr(48'h8200_0080))) begin failures++; $display("refill read wrong"); end
      bfm.read(PeriphBase + 48'h100, 1, 12'h4, d, id, ok);
      checks++;
      if (!ok || d[0] !== i_periph.read_beat(PeriphBase + 48'h100)) begin failures++; $display("peripheral read wrong"); end
    end

    // mechanism coverage
    $display("accesses local %0d subgroup %0d group %0d remote %0d, stalls %0d, responses %0d",
             n_dist[0], n_dist[1], n_dist[2], n_dist[3], n_stall, n_rsp);
    $display("DMA in %0d out %0d, chunks %0d, L2 reads %0d writes %0d, peripheral reads %0d",
             n_dma_in, n_dma_out, n_chunks, i_hbm.n_rd, i_hbm.n_wr, i_periph.n_rd);
    begin
      int cov [9];
      cov = '{n_dist[0], n_dist[1], n_dist[2], n_dist[3], n_stall, n_dma_in, n_dma_out,
              (n_chunks > n_jobs) ? 1 : 0, i_periph.n_rd};
      foreach (cov[k]) begin
        checks++;
        if (cov[k] == 0) begin failures++; $display("mechanism %0d never happened", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
