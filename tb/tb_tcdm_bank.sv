// tb_tcdm_bank: self-checking test of one L1 bank (64 words here). Random
// reads and writes, with random byte enables, arrive on the interconnect port
// and on the DMA port, sometimes in the same cycle; the response side is
// throttled at random. A reference array predicts every read. The bench
// checks read data, that each response returns on the port that asked and
// carries the request's tag and origin, that an uncontended access answers
// in the next cycle, and that both ports are served when they compete.
module tb_tcdm_bank;
  import terapool_pkg::*;
  localparam int W = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, rsp_valid, rsp_ready;
  tcdm_req_t req; tcdm_rsp_t rsp;
  logic [5:0] req_row, dma_row;
  logic dma_valid, dma_ready, dma_we, dma_rsp_valid, dma_rsp_ready;
  logic [31:0] dma_wdata, dma_rdata;

  tcdm_bank #(.NumWords(W)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req), .req_row_i(req_row),
    .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_o(rsp),
    .dma_valid_i(dma_valid), .dma_ready_o(dma_ready), .dma_we_i(dma_we), .dma_row_i(dma_row),
    .dma_wdata_i(dma_wdata), .dma_rsp_valid_o(dma_rsp_valid), .dma_rsp_ready_i(dma_rsp_ready),
    .dma_rsp_rdata_o(dma_rdata)
  );

  logic [31:0] ref_mem [W];
  logic [31:0] exp_q [$];   // expected interconnect read data (or tag for writes)
  logic [31:0] exp_d [$];
  logic [3:0]  exp_tag [$];
  int n_core = 0, n_dma = 0, both = 0, cycle = 0;
  int quiet = 0;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] be);
    for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = nw[8*b +: 8];
    return old;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      if (req_valid && dma_valid) both++;
      if (req_valid && req_ready) begin
        exp_q.push_back(ref_mem[req_row]);
        exp_tag.push_back(req.tag);
        if (req.we) ref_mem[req_row] = merge(ref_mem[req_row], req.wdata, req.be);
        n_core++;
      end
      if (dma_valid && dma_ready) begin
        exp_d.push_back(ref_mem[dma_row]);
        if (dma_we) ref_mem[dma_row] = dma_wdata;
        n_dma++;
      end
      if (rsp_valid && rsp_ready) begin
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("spurious response"); end
        else begin
          logic [31:0] e; logic [3:0] tg;
          e = exp_q.pop_front(); tg = exp_tag.pop_front();
          if (rsp.rdata !== e || rsp.tag !== tg || rsp.src_core !== 3'(tg) || rsp.src_tile !== 3'd5) begin
            failures++; $display("core rsp %h/%h tag %0d/%0d", rsp.rdata, e, rsp.tag, tg);
          end
        end
      end
      if (dma_rsp_valid && dma_rsp_ready) begin
        checks++;
        if (exp_d.size() == 0) begin failures++; $display("spurious dma response"); end
        else begin
          logic [31:0] e; e = exp_d.pop_front();
          if (dma_rdata !== e) begin failures++; $display("dma rsp %h/%h", dma_rdata, e); end
        end
      end
    end
  end

  logic [3:0] tg_n;
  always @(negedge clk) begin
    if (quiet == 2) begin
      // directed phase: the initial block drives the ports
    end else if (!rst_n || quiet != 0) begin
      if (quiet == 0 || !(req_valid && !req_ready)) req_valid <= 1'b0;
      if (quiet == 0 || !(dma_valid && !dma_ready)) dma_valid <= 1'b0;
      rsp_ready <= 1'b1; dma_rsp_ready <= 1'b1;
    end else begin
      if (!(req_valid && !req_ready)) begin
        req_valid <= $urandom_range(0, 2) != 0;
        req       <= '0;
        req.we    <= $urandom_range(0, 1);
        req.be    <= 4'($urandom);
        req.wdata <= $urandom;
        tg_n       = 4'($urandom_range(0, 7));
        req.tag   <= tg_n;
        req.src_core <= 3'(tg_n);
        req.src_tile <= 3'd5;
        req_row   <= 6'($urandom);
      end
      if (!(dma_valid && !dma_ready)) begin
        dma_valid <= $urandom_range(0, 2) == 0;
        dma_we    <= $urandom_range(0, 1);
        dma_wdata <= $urandom;
        dma_row   <= 6'($urandom);
      end
      rsp_ready     <= $urandom_range(0, 3) != 0;
      dma_rsp_ready <= $urandom_range(0, 3) != 0;
    end
  end

  initial begin
    for (int i = 0; i < W; i++) ref_mem[i] = 32'(i) * 32'h0101_0101;
    for (int i = 0; i < W; i++) dut.mem[i] = 32'(i) * 32'h0101_0101;
    req_valid = 0; dma_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3000) @(posedge clk);
    quiet = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || exp_d.size() != 0) begin failures++; $display("responses missing"); end
    checks++;
    if (n_core < 500 || n_dma < 300 || both < 100) begin failures++; $display("coverage %0d %0d %0d", n_core, n_dma, both); end
    // single uncontended read: response exactly one cycle later
    @(negedge clk);
    quiet = 2;
    req_valid = 1'b1; req = '0; req.tag = 4'd3; req.src_core = 3'd3; req.src_tile = 3'd5; req_row = 6'd9;
    @(posedge clk); #1;
    req_valid = 1'b0;
    checks++;
    if (!rsp_valid || rsp.rdata !== ref_mem[9]) begin failures++; $display("latency-1 read failed"); end
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
