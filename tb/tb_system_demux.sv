// tb_system_demux: self-checking test of the system AXI demultiplexer.
// One master drives it; its three targets are memory models with different
// latencies (L2: 25 cycles, DMA registers: 3, peripherals: 8). The bench
// writes and reads bursts at random in all three address ranges and checks
// that each burst reached the right target (per-target burst counters), that
// read data matches what was written, and that a slow read followed at once
// by a fast read to another target still returns in issue order (the second
// is held back until the first is complete).
module tb_system_demux;
  import terapool_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t m_req; axi_rsp_t m_rsp;
  axi_req_t t_req [3]; axi_rsp_t t_rsp [3];
  axi_req_t q0 [1], q1 [1], q2 [1];
  axi_rsp_t p0 [1], p1 [1], p2 [1];

  axi_req_t bfm_req;
  logic     m_req_ovr = 1'b0;   // hand-driven port for the ordering test
  axi_req_t ovr_req;
  axi_master_bfm bfm (.clk_i(clk), .req_o(bfm_req), .rsp_i(m_rsp));
  assign m_req = m_req_ovr ? ovr_req : bfm_req;
  system_demux dut (.clk_i(clk), .rst_ni(rst_n), .in_req_i(m_req), .in_rsp_o(m_rsp), .out_req_o(t_req), .out_rsp_i(t_rsp));
  assign q0[0] = t_req[0]; assign t_rsp[0] = p0[0];
  assign q1[0] = t_req[1]; assign t_rsp[1] = p1[0];
  assign q2[0] = t_req[2]; assign t_rsp[2] = p2[0];
  hbm2e_model #(.NumPorts(1), .Latency(25)) m_l2  (.clk_i(clk), .req_i(q0), .rsp_o(p0));
  hbm2e_model #(.NumPorts(1), .Latency(3))  m_dma (.clk_i(clk), .req_i(q1), .rsp_o(p1));
  hbm2e_model #(.NumPorts(1), .Latency(8))  m_per (.clk_i(clk), .req_i(q2), .rsp_o(p2));

  function automatic logic [47:0] pick(int tgt, int k);
    case (tgt)
      0: return 48'h8000_0000 + 48'(k) * 48'h400;
      1: return 48'h4001_0000 + 48'(k % 8) * 48'h200;
      default: return 48'h4000_0000 + 48'(k) * 48'h100;
    endcase
  endfunction

  int exp_rd [3], exp_wr [3];
  int blocked = 0;
  always @(posedge clk) if (m_req.ar_valid && !m_rsp.ar_ready && dut.rd_cnt_q != 0) blocked++;

  initial begin
    logic [AxiDataWidth-1:0] wd [];
    logic [AxiDataWidth-1:0] rd [];
    logic [AxiIdWidth-1:0] id;
    logic ok;
    for (int t = 0; t < 3; t++) begin exp_rd[t] = 0; exp_wr[t] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 60; k++) begin
      int t, n; logic [47:0] a;
      t = $urandom_range(0, 2); n = $urandom_range(1, 3);
      a = pick(t, k);
      wd = new[n];
      for (int b = 0; b < n; b++) wd[b] = {16{$urandom}};
      bfm.write(a, n, wd, 12'(k), id);
      exp_wr[t]++;
      checks++;
      if (id !== 12'(k)) begin failures++; $display("B id %h", id); end
      bfm.read(a, n, 12'(k), rd, id, ok);
      exp_rd[t]++;
      for (int b = 0; b < n; b++) begin
        checks++;
        if (rd[b] !== wd[b] || !ok) begin failures++; $display("target %0d read mismatch", t); end
      end
    end
    checks++;
    if (m_l2.n_rd != exp_rd[0] || m_dma.n_rd != exp_rd[1] || m_per.n_rd != exp_rd[2] ||
        m_l2.n_wr != exp_wr[0] || m_dma.n_wr != exp_wr[1] || m_per.n_wr != exp_wr[2]) begin
      failures++; $display("routing counts differ");
    end
    checks++;
    if (blocked != 0) begin failures++; $display("a read was held back with one target only"); end
    // now issue two reads back to back by hand
    @(negedge clk);
    m_req_ovr = 1'b1;
    ovr_req = '0; ovr_req.ar.addr = pick(0, 2000); ovr_req.ar_valid = 1'b1; ovr_req.ar.id = 12'h1;
    @(posedge clk); while (!m_rsp.ar_ready) @(posedge clk);
    @(negedge clk);
    ovr_req.ar.addr = pick(2, 2000); ovr_req.ar.id = 12'h2; ovr_req.r_ready = 1'b1;
    begin
      int first_id; first_id = -1;
      @(posedge clk);
      while (!(m_rsp.r_valid)) @(posedge clk);
      first_id = int'(m_rsp.r.id);
      checks++;
      if (first_id != 1) begin failures++; $display("out of order: first response id %0d", first_id); end
    end
    checks++;
    if (blocked == 0) begin failures++; $display("second read was never held back"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
