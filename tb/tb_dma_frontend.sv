// tb_dma_frontend: self-checking test of the DMA configuration frontend.
// Over AXI the bench writes the L2 address, L1 address, length and direction
// registers, reads them back, starts a job and checks the job handed to the
// midend, that busy reads 1 while the job runs, that a second start while
// busy is ignored, and that the done pulse clears busy and counts one
// completed job. Register values live in the 64-bit lane of their offset.
module tb_dma_frontend;
  import terapool_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t req; axi_rsp_t rsp;
  logic job_valid, job_ready, job_done;
  dma_job_t job;
  int jobs_seen = 0;

  axi_master_bfm bfm (.clk_i(clk), .req_o(req), .rsp_i(rsp));
  dma_frontend dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(req), .cfg_rsp_o(rsp),
                    .job_valid_o(job_valid), .job_ready_i(job_ready), .job_o(job), .job_done_i(job_done));

  dma_job_t last_job;
  always @(posedge clk) if (job_valid && job_ready) begin jobs_seen++; last_job = job; end

  task automatic wr(int idx, logic [63:0] v);
    logic [AxiDataWidth-1:0] d [];
    logic [AxiIdWidth-1:0] id;
    d = new[1]; d[0] = AxiDataWidth'(v) << (64 * idx);
    bfm.write(DmaBase + 48'(8 * idx), 1, d, 12'h5, id);
    checks++;
    if (id !== 12'h5) begin failures++; $display("B id"); end
  endtask
  task automatic rd(int idx, output logic [63:0] v);
    logic [AxiDataWidth-1:0] d [];
    logic [AxiIdWidth-1:0] id; logic ok;
    bfm.read(DmaBase + 48'(8 * idx), 1, 12'h6, d, id, ok);
    v = d[0][64*idx +: 64];
    checks++;
    if (id !== 12'h6 || !ok) begin failures++; $display("R id"); end
  endtask

  initial begin
    logic [63:0] v;
    job_ready = 1'b0; job_done = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wr(0, 64'h8000_1000); wr(1, 64'h0000_0400); wr(2, 64'd4096); wr(3, 64'd1);
    rd(0, v); checks++; if (v !== 64'h8000_1000) begin failures++; $display("reg0 %h", v); end
    rd(1, v); checks++; if (v !== 64'h400) failures++;
    rd(2, v); checks++; if (v !== 64'd4096) failures++;
    rd(3, v); checks++; if (v !== 64'd1) failures++;
    rd(4, v); checks++; if (v !== 64'd0) begin failures++; $display("busy before start"); end
    wr(4, 64'd1);
    @(posedge clk);
    checks++;
    if (!job_valid || job.l2_addr !== 48'h8000_1000 || job.l1_addr !== 32'h400 || job.num_bytes !== 32'd4096 || job.to_l2 !== 1'b1) begin
      failures++; $display("job fields wrong");
    end
    @(negedge clk); job_ready = 1'b1;
    @(negedge clk); job_ready = 1'b0;
    rd(4, v); checks++; if (v !== 64'd1) begin failures++; $display("not busy"); end
    wr(2, 64'd64);
    wr(4, 64'd1);       // ignored: busy
    @(negedge clk); job_ready = 1'b1;
    repeat (3) @(negedge clk);
    job_ready = 1'b0;
    checks++;
    if (jobs_seen != 1) begin failures++; $display("start while busy was not ignored"); end
    @(negedge clk); job_done = 1'b1;
    @(negedge clk); job_done = 1'b0;
    rd(4, v); checks++; if (v !== 64'd0) begin failures++; $display("busy after done"); end
    rd(5, v); checks++; if (v !== 64'd1) begin failures++; $display("done count %0d", v); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
