// tb_terapool_tile: self-checking test of one tile (8 cores, 32 banks of 16
// words), placed as tile 3 of subgroup 2 of group 1.
//  1. Random traffic: all cores read and write random words of their own tile
//     with random byte enables, while requests from other tiles arrive on the
//     7 slave ports. A reference memory updated at the accepting clock edge
//     predicts every read; responses are matched by core and tag, slave-port
//     responses must leave on the port the request came in.
//  2. Latency: an uncontended access to the own tile answers after 1 cycle.
//  3. Routing: a request for each of the 7 remote destinations (the other
//     tiles of the subgroup, 3 other subgroups, 3 other groups) must leave on
//     the right master port one cycle after it was accepted (pipeline cut),
//     stamped with the tile's coordinates; the answer given on that port
//     returns to the right core one cycle later, 3 cycles in all when the
//     remote side answers at once.
//  4. DMA port: a 512-bit write lands in 16 banks, cores read it back; core
//     writes are read back as one 512-bit beat.
module tb_terapool_tile;
  import terapool_pkg::*;
  localparam int NCo = 8, NB = 32, BW = 16, NT = 8;
  localparam int TileLsb = 7, SgLsb = 10, GroupLsb = 12, RowLsb = 14;
  localparam logic [1:0] MyG = 2'd1, MySg = 2'd2;
  localparam logic [2:0] MyT = 3'd3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [NCo-1:0] creq_v, creq_r, crsp_v, crsp_r;
  tcdm_req_t creq [NCo];
  tcdm_rsp_t crsp [NCo];
  logic [6:0] mq_v, mq_r, mp_v, mp_r, sq_v, sq_r, sp_v, sp_r;
  tcdm_req_t mq [7]; tcdm_rsp_t mp [7]; tcdm_req_t sq [7]; tcdm_rsp_t sp [7];
  logic dq_v, dq_r, dp_v, dp_r;
  l1_wide_req_t dq; l1_wide_rsp_t dp;

  terapool_tile #(.NumCores(NCo), .NumBanks(NB), .BankWords(BW), .NumTilesSg(NT)) dut (
    .clk_i(clk), .rst_ni(rst_n), .group_id_i(MyG), .sg_id_i(MySg), .tile_id_i(MyT),
    .core_req_valid_i(creq_v), .core_req_ready_o(creq_r), .core_req_i(creq),
    .core_rsp_valid_o(crsp_v), .core_rsp_ready_i(crsp_r), .core_rsp_o(crsp),
    .mst_req_valid_o(mq_v), .mst_req_ready_i(mq_r), .mst_req_o(mq),
    .mst_rsp_valid_i(mp_v), .mst_rsp_ready_o(mp_r), .mst_rsp_i(mp),
    .slv_req_valid_i(sq_v), .slv_req_ready_o(sq_r), .slv_req_i(sq),
    .slv_rsp_valid_o(sp_v), .slv_rsp_ready_i(sp_r), .slv_rsp_o(sp),
    .dma_req_valid_i(dq_v), .dma_req_ready_o(dq_r), .dma_req_i(dq),
    .dma_rsp_valid_o(dp_v), .dma_rsp_ready_i(dp_r), .dma_rsp_o(dp)
  );

  function automatic logic [31:0] mk_addr(logic [1:0] g, logic [1:0] s, logic [2:0] t, int bank, int row);
    return (32'(row) << RowLsb) | (32'(g) << GroupLsb) | (32'(s) << SgLsb) | (32'(t) << TileLsb) | (32'(bank) << 2);
  endfunction

  logic [31:0] ref_mem [NB][BW];
  logic [31:0] exp_core [NCo][16];
  logic        pend_core [NCo][16];
  logic [31:0] exp_slv [7][128];
  logic        pend_slv [7][128];
  logic [6:0]  sid_n [7];
  logic [3:0]  tag_n [NCo];
  int mode = 0;  // 0 idle, 1 random local + slave traffic
  int n_core_rsp = 0, n_slv_rsp = 0;

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] be);
    for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = nw[8*b +: 8];
    return old;
  endfunction

  // origin of a request that enters on slave port p (consistent with routing)
  function automatic void origin(int p, output logic [1:0] g, output logic [1:0] s, output logic [2:0] t);
    g = MyG; s = MySg; t = 3'd6;
    if (p >= 4) g = MyG - 2'(p - 3);
    else if (p >= 1) s = MySg - 2'(p);
  endfunction

  // handshakes seen at the last rising edge (the drivers run on the falling edge)
  logic [NCo-1:0] c_acc;
  logic [6:0]     s_acc;
  always @(posedge clk) begin
    c_acc <= creq_v & creq_r;
    s_acc <= sq_v & sq_r;
  end

  // scoreboard at the accepting edge
  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < NCo; c++) begin
        if (creq_v[c] && creq_r[c] && (mode == 1 || mode == 2)) begin
          int b, r;
          b = creq[c].addr[6:2]; r = creq[c].addr[RowLsb +: 4];
          exp_core[c][creq[c].tag]  = ref_mem[b][r];
          pend_core[c][creq[c].tag] = 1'b1;
          if (creq[c].we) ref_mem[b][r] = merge(ref_mem[b][r], creq[c].wdata, creq[c].be);
        end
        if (crsp_v[c] && crsp_r[c] && (mode == 1 || mode == 2)) begin
          checks++;
          if (!pend_core[c][crsp[c].tag] || crsp[c].rdata !== exp_core[c][crsp[c].tag] ||
              crsp[c].src_core !== 3'(c)) begin
            failures++; $display("core %0d rsp tag %0d data %h exp %h pend %b src %0d", c, crsp[c].tag, crsp[c].rdata, exp_core[c][crsp[c].tag], pend_core[c][crsp[c].tag], crsp[c].src_core);
          end
          pend_core[c][crsp[c].tag] = 1'b0;
          n_core_rsp++;
        end
      end
      for (int p = 0; p < 7; p++) begin
        if (sq_v[p] && sq_r[p]) begin
          int b, r;
          b = sq[p].addr[6:2]; r = sq[p].addr[RowLsb +: 4];
          exp_slv[p][{sq[p].src_core, sq[p].tag}]  = ref_mem[b][r];
          pend_slv[p][{sq[p].src_core, sq[p].tag}] = 1'b1;
          if (sq[p].we) ref_mem[b][r] = merge(ref_mem[b][r], sq[p].wdata, sq[p].be);
        end
        if (sp_v[p] && sp_r[p]) begin
          logic [1:0] g, s; logic [2:0] t;
          checks++;
          origin(p, g, s, t);
          if (!pend_slv[p][{sp[p].src_core, sp[p].tag}] || sp[p].rdata !== exp_slv[p][{sp[p].src_core, sp[p].tag}] ||
              sp[p].src_group !== g || sp[p].src_sg !== s || sp[p].src_tile !== t) begin
            failures++; $display("slave port %0d rsp %h exp %h", p, sp[p].rdata, exp_slv[p][{sp[p].src_core, sp[p].tag}]);
          end
          pend_slv[p][{sp[p].src_core, sp[p].tag}] = 1'b0;
          n_slv_rsp++;
        end
      end
    end
  end

  // random drivers
  always @(negedge clk) begin
    if (mode == 1) begin
      for (int c = 0; c < NCo; c++) begin
        if (!creq_v[c] || c_acc[c]) begin
          logic go; go = ($urandom_range(0, 2) == 0) && !pend_core[c][tag_n[c]];
          creq_v[c]      <= go;
          creq[c]        <= '0;
          creq[c].addr   <= mk_addr(MyG, MySg, MyT, $urandom_range(0, NB-1), $urandom_range(0, BW-1));
          creq[c].we     <= $urandom_range(0, 1);
          creq[c].be     <= 4'($urandom);
          creq[c].wdata  <= $urandom;
          creq[c].tag    <= tag_n[c];
          if (go) tag_n[c] <= tag_n[c] + 1;
        end
      end
      for (int p = 0; p < 7; p++) begin
        if (!sq_v[p] || s_acc[p]) begin
          logic [1:0] g, s; logic [2:0] t; logic go;
          origin(p, g, s, t);
          go = ($urandom_range(0, 3) == 0) && !pend_slv[p][sid_n[p]];
          sq_v[p]          <= go;
          if (go) sid_n[p] <= sid_n[p] + 1;
          sq[p]            <= '0;
          sq[p].addr       <= mk_addr(MyG, MySg, MyT, $urandom_range(0, NB-1), $urandom_range(0, BW-1));
          sq[p].we         <= $urandom_range(0, 1);
          sq[p].be         <= 4'($urandom);
          sq[p].wdata      <= $urandom;
          sq[p].src_group  <= g; sq[p].src_sg <= s; sq[p].src_tile <= t;
          sq[p].src_core   <= sid_n[p][6:4];
          sq[p].tag        <= sid_n[p][3:0];
        end
      end
      sp_r <= 7'($urandom);
    end else if (mode == 2) begin
      for (int c = 0; c < NCo; c++) if (c_acc[c]) creq_v[c] <= 1'b0;
      for (int p = 0; p < 7; p++) if (s_acc[p]) sq_v[p] <= 1'b0;
      sp_r <= '1;
    end
  end

  task automatic idle_inputs();
    creq_v = '0; sq_v = '0; mp_v = '0; dq_v = 1'b0;
  endtask

  // one directed access from core c, returns latency in cycles
  task automatic core_access(int c, logic [31:0] a, logic we, logic [31:0] wd, output logic [31:0] rd, output int lat);
    int t0;
    @(negedge clk);
    creq_v[c] = 1'b1; creq[c] = '0; creq[c].addr = a; creq[c].we = we; creq[c].be = 4'hf;
    creq[c].wdata = wd; creq[c].tag = 4'd9;
    @(posedge clk);
    while (!creq_r[c]) @(posedge clk);
    t0 = cycle;
    @(negedge clk); creq_v[c] = 1'b0;
    while (!crsp_v[c]) @(posedge clk);
    #1 ;
    rd = crsp[c].rdata; lat = cycle - t0;
    @(posedge clk);
  endtask

  task automatic dma_beat(l1_wide_req_t w);
    @(negedge clk);
    dq_v = 1'b1; dq = w;
    @(posedge clk); while (!dq_r) @(posedge clk);
    @(negedge clk); dq_v = 1'b0;
    while (!dp_v) @(posedge clk);
    @(posedge clk);
  endtask

  initial begin
    logic [31:0] rd; int lat;
    for (int c = 0; c < NCo; c++) begin
      tag_n[c] = 0; for (int k = 0; k < 16; k++) pend_core[c][k] = 1'b0;
    end
    for (int p = 0; p < 7; p++) begin sid_n[p] = 0; for (int k = 0; k < 128; k++) pend_slv[p][k] = 1'b0; end
    for (int b = 0; b < NB; b++) for (int r = 0; r < BW; r++) ref_mem[b][r] = $urandom;
    idle_inputs(); crsp_r = '1; mq_r = '1; sp_r = '1; dp_r = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // fill the tile through the DMA port
    for (int r = 0; r < BW; r++) for (int h = 0; h < NB / 16; h++) begin
      l1_wide_req_t w;
      w.addr = mk_addr(MyG, MySg, MyT, 16 * h, r); w.we = 1'b1;
      for (int l = 0; l < 16; l++) w.wdata[32*l +: 32] = ref_mem[16*h+l][r];
      dma_beat(w);
    end
    // 1. random traffic
    mode = 1;
    repeat (1500) @(posedge clk);
    @(negedge clk); mode = 2;
    repeat (20) @(posedge clk);
    @(negedge clk); mode = 3;
    checks++;
    if (n_core_rsp < 1000 || n_slv_rsp < 500) begin failures++; $display("too few responses %0d %0d", n_core_rsp, n_slv_rsp); end
    for (int p = 0; p < 7; p++) for (int k = 0; k < 128; k++) if (pend_slv[p][k]) begin failures++; $display("slave rsp missing"); end
    for (int c = 0; c < NCo; c++) for (int k = 0; k < 16; k++) if (pend_core[c][k]) begin failures++; $display("core rsp missing"); end
    // 2. local latency
    core_access(2, mk_addr(MyG, MySg, MyT, 7, 3), 1'b1, 32'h1234_5678, rd, lat);
    core_access(2, mk_addr(MyG, MySg, MyT, 7, 3), 1'b0, 32'h0, rd, lat);
    checks++;
    if (rd !== 32'h1234_5678 || lat != 1) begin failures++; $display("local read %h latency %0d", rd, lat); end
    // 3. routing to the 7 master ports
    for (int p = 0; p < 7; p++) begin
      logic [1:0] g, s; logic [2:0] t; logic [31:0] a; int t0, c;
      g = MyG; s = MySg; t = 3'd1;
      if (p >= 4) g = MyG + 2'(p - 3); else if (p >= 1) s = MySg + 2'(p);
      a = mk_addr(g, s, t, 4, 2); c = (p + 1) % NCo;
      @(negedge clk);
      creq_v[c] = 1'b1; creq[c] = '0; creq[c].addr = a; creq[c].tag = 4'(p);
      @(posedge clk); while (!creq_r[c]) @(posedge clk);
      t0 = cycle;
      @(negedge clk); creq_v[c] = 1'b0;
      @(posedge clk);
      checks++;
      if (!mq_v[p] || mq[p].addr !== a || mq[p].src_group !== MyG || mq[p].src_sg !== MySg ||
          mq[p].src_tile !== MyT || mq[p].src_core !== 3'(c) || (mq_v & ~(7'(1) << p)) != 0 || cycle - t0 != 1) begin
        failures++; $display("port %0d: valid %b addr %h", p, mq_v, mq[p].addr);
      end
      // answer immediately on the same port
      @(negedge clk);
      mp_v = '0; mp_v[p] = 1'b1; mp[p] = '0; mp[p].rdata = 32'hABC0_0000 + 32'(p);
      mp[p].tag = 4'(p); mp[p].src_core = 3'(c);
      mp[p].src_group = MyG; mp[p].src_sg = MySg; mp[p].src_tile = MyT;
      @(posedge clk); @(negedge clk); mp_v = '0;
      while (!crsp_v[c]) @(posedge clk);
      checks++;
      if (crsp[c].rdata !== 32'hABC0_0000 + 32'(p) || crsp[c].tag !== 4'(p) || cycle - t0 != 3) begin
        failures++; $display("remote rsp port %0d: %h after %0d", p, crsp[c].rdata, cycle - t0);
      end
      @(posedge clk);
    end
    // 4. DMA port: write one beat into banks 16..31 of row 5
    @(negedge clk);
    dq_v = 1'b1; dq.addr = mk_addr(MyG, MySg, MyT, 16, 5); dq.we = 1'b1;
    for (int l = 0; l < 16; l++) dq.wdata[32*l +: 32] = 32'hD0D0_0000 + 32'(l);
    @(posedge clk); while (!dq_r) @(posedge clk);
    @(negedge clk); dq_v = 1'b0;
    while (!dp_v) @(posedge clk);
    @(posedge clk);
    for (int l = 0; l < 16; l += 5) begin
      core_access(l % NCo, mk_addr(MyG, MySg, MyT, 16 + l, 5), 1'b0, 32'h0, rd, lat);
      checks++;
      if (rd !== 32'hD0D0_0000 + 32'(l)) begin failures++; $display("dma write lane %0d read %h", l, rd); end
    end
    for (int l = 0; l < 16; l++) core_access(l % NCo, mk_addr(MyG, MySg, MyT, l, 9), 1'b1, 32'hBEEF_0000 + 32'(l), rd, lat);
    @(negedge clk);
    dq_v = 1'b1; dq.addr = mk_addr(MyG, MySg, MyT, 0, 9); dq.we = 1'b0;
    @(posedge clk); while (!dq_r) @(posedge clk);
    @(negedge clk); dq_v = 1'b0;
    while (!dp_v) @(posedge clk);
    for (int l = 0; l < 16; l++) begin
      checks++;
      if (dp.rdata[32*l +: 32] !== 32'hBEEF_0000 + 32'(l)) begin failures++; $display("dma read lane %0d %h", l, dp.rdata[32*l +: 32]); end
    end
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
