// tb_dma_backend: self-checking test of the per-subgroup DMA backend.
// The subgroup is cut to two tiles; each tile's wide DMA port is modelled
// here as a sparse store of 512-bit beats with random request stalls that
// answers every access (read data or write acknowledgement) a cycle later, and the L2 side is the behavioural HBM2E
// model (one port, latency 20). The bench moves chunks both ways:
//   L2 -> L1: the tile stores must end up holding the HBM model's pattern;
//   L1 -> L2: random tile contents must end up in the HBM model's memory.
// It also checks that each beat goes to the tile its address names, that a
// 1 KiB chunk is one 16-beat burst, that done pulses once per chunk, and that
// the backend accepts no new chunk while one is running.
module tb_dma_backend;
  import terapool_pkg::*;
  localparam int NT = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic cv, cr, done;
  dma_job_t chunk;
  axi_req_t areq [1]; axi_rsp_t arsp [1];
  logic [NT-1:0] tv, tr, rv, rr;
  l1_wide_req_t treq;
  l1_wide_rsp_t trsp [NT];

  dma_backend #(.NumTilesSg(NT), .NumBanks(32)) dut (
    .clk_i(clk), .rst_ni(rst_n), .chunk_valid_i(cv), .chunk_ready_o(cr), .chunk_i(chunk), .done_o(done),
    .axi_req_o(areq[0]), .axi_rsp_i(arsp[0]),
    .tile_req_valid_o(tv), .tile_req_ready_i(tr), .tile_req_o(treq),
    .tile_rsp_valid_i(rv), .tile_rsp_ready_o(rr), .tile_rsp_i(trsp)
  );
  hbm2e_model #(.NumPorts(1), .Latency(20)) i_hbm (.clk_i(clk), .req_i(areq), .rsp_o(arsp));

  // tile models
  logic [AxiDataWidth-1:0] tmem [logic [31:0]];
  logic [NT-1:0] pend;
  int n_done = 0, n_busy_refused = 0, n_ar = 0, ar_len = -1;
  always @(negedge clk) begin
    tr <= rst_n ? NT'($urandom) : '0;
  end
  always @(posedge clk) begin
    if (!rst_n) begin pend <= '0; rv <= '0; end
    else begin
      for (int t = 0; t < NT; t++) begin
        if (rv[t] && rr[t]) rv[t] <= 1'b0;
        if (tv[t] && tr[t]) begin
          checks++;
          if (int'(treq.addr[7]) != t || tv != NT'(1 << t)) begin failures++; $display("beat to wrong tile"); end
          // a write is acknowledged, a read returns the beat
          if (treq.we) tmem[treq.addr >> 6] = treq.wdata;
          else trsp[t].rdata <= tmem.exists(treq.addr >> 6) ? tmem[treq.addr >> 6] : '0;
          rv[t] <= 1'b1;
        end
      end
      if (done) n_done++;
      if (cv && !cr) n_busy_refused++;
      if (areq[0].ar_valid && arsp[0].ar_ready) begin n_ar++; ar_len = int'(areq[0].ar.len); end
      if (areq[0].aw_valid && arsp[0].aw_ready) ar_len = int'(areq[0].aw.len);
    end
  end

  task automatic send(logic [31:0] l1, logic [47:0] l2, int bytes, logic dir);
    int d0;
    d0 = n_done;
    @(negedge clk);
    cv = 1'b1; chunk.l1_addr = l1; chunk.l2_addr = l2; chunk.num_bytes = 32'(bytes); chunk.to_l2 = dir;
    @(posedge clk); while (!cr) @(posedge clk);
    @(negedge clk); cv = 1'b1; chunk.l1_addr = 32'hdead_0000;   // a second chunk waits
    repeat (3) @(negedge clk);
    cv = 1'b0;
    wait (n_done == d0 + 1);
    repeat (3) @(posedge clk);
    checks++;
    if (n_done != d0 + 1) begin failures++; $display("done pulses"); end
    checks++;
    if (ar_len != bytes / 64 - 1) begin failures++; $display("burst len %0d", ar_len); end
  endtask

  initial begin
    cv = 1'b0; chunk = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // L2 -> L1: 1 KiB from L2 0x8000_0400 into tiles 0/1 (region 0..255 of both)
    send(32'h0000_0000, 48'h8000_0400, 1024, 1'b0);
    for (int b = 0; b < 16; b++) begin
      logic [31:0] l1; logic [47:0] l2;
      l1 = 32'(64 * b); l2 = 48'h8000_0400 + 48'(64 * b);
      checks++;
      if (!tmem.exists(l1 >> 6) || tmem[l1 >> 6] !== i_hbm.read_beat(l2)) begin failures++; $display("L1 beat %0d wrong", b); end
    end
    // L1 -> L2: 256 B from tile 1 to L2 0x8010_0000
    for (int b = 0; b < 4; b++) begin
      logic [AxiDataWidth-1:0] d;
      for (int w = 0; w < 16; w++) d[32*w +: 32] = $urandom;
      tmem[(32'h0000_0180 + 32'(64 * b)) >> 6] = d;
    end
    send(32'h0000_0180, 48'h8010_0000, 256, 1'b1);
    for (int b = 0; b < 4; b++) begin
      checks++;
      if (i_hbm.read_beat(48'h8010_0000 + 48'(64 * b)) !== tmem[(32'h0000_0180 + 32'(64 * b)) >> 6]) begin
        failures++; $display("L2 beat %0d wrong", b);
      end
    end
    checks++;
    if (n_busy_refused < 2) begin failures++; $display("busy chunk not held"); end
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
