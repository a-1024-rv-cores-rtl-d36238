// tb_dma_midend: self-checking test of the cluster DMA midend (splitter and
// distributer) with the full-size region of 1 KiB (8 tiles x 32 banks x 4 B).
// For jobs that start inside a region and span several, the bench predicts
// every chunk (L1 and L2 address, length, target group) and checks the chunk
// stream: one chunk per cycle when the groups accept, no chunk crossing a
// region boundary, lengths summing to the job. Group ready signals toggle at
// random and the 16 backends answer each chunk after a random delay; the
// job-done pulse must come exactly once and only after the last chunk is
// done.
module tb_dma_midend;
  import terapool_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic job_valid, job_ready, job_done;
  dma_job_t job;
  logic [3:0] cv, cr;
  dma_job_t chunk;
  logic [15:0] cdone;

  dma_midend #(.NumTilesSg(8), .NumBanks(32), .NumBackends(16)) dut (
    .clk_i(clk), .rst_ni(rst_n), .job_valid_i(job_valid), .job_ready_o(job_ready), .job_i(job),
    .job_done_o(job_done), .chunk_valid_o(cv), .chunk_ready_i(cr), .chunk_o(chunk), .chunk_done_i(cdone)
  );

  dma_job_t exp_q [$];
  int pending_done [$];   // cycle at which a chunk's done pulse is due
  int n_done_pulses = 0, outstanding = 0, burst_cycles = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      for (int g = 0; g < 4; g++) if (cv[g] && cr[g]) begin
        dma_job_t e;
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("extra chunk"); end
        else begin
          e = exp_q.pop_front();
          if (chunk !== e || g != int'(chunk.l1_addr[13:12])) begin
            failures++; $display("chunk l1 %h len %0d g %0d, expected l1 %h len %0d", chunk.l1_addr, chunk.num_bytes, g, e.l1_addr, e.num_bytes);
          end
        end
        pending_done.push_back(cycle + $urandom_range(2, 40));
        outstanding++;
      end
      if (job_done) begin
        n_done_pulses++;
        checks++;
        if (outstanding != 0 || exp_q.size() != 0) begin failures++; $display("done too early"); end
      end
    end
  end

  always @(negedge clk) begin
    cdone <= '0;
    for (int i = 0; i < pending_done.size(); i++) begin
      if (pending_done[i] <= cycle) begin
        cdone[$urandom_range(0, 15)] <= 1'b1;
        pending_done.delete(i);
        outstanding--;
        break;
      end
    end
    cr <= 4'($urandom) | {4{rst_n && mode_fast}};
  end
  logic mode_fast = 1'b0;

  task automatic run_job(logic [31:0] l1, logic [47:0] l2, int len, logic dir);
    int rem; logic [31:0] a; logic [47:0] b;
    rem = len; a = l1; b = l2;
    while (rem > 0) begin
      dma_job_t e; int room, cl;
      room = 1024 - int'(a % 1024);
      cl = (rem < room) ? rem : room;
      e.l1_addr = a; e.l2_addr = b; e.num_bytes = 32'(cl); e.to_l2 = dir;
      exp_q.push_back(e);
      a += 32'(cl); b += 48'(cl); rem -= cl;
    end
    n_done_pulses = 0;
    @(negedge clk);
    job_valid = 1'b1; job.l1_addr = l1; job.l2_addr = l2; job.num_bytes = 32'(len); job.to_l2 = dir;
    @(posedge clk); while (!job_ready) @(posedge clk);
    @(negedge clk); job_valid = 1'b0;
    wait (n_done_pulses == 1);
    repeat (5) @(posedge clk);
    checks++;
    if (n_done_pulses != 1 || exp_q.size() != 0) begin failures++; $display("done pulses %0d", n_done_pulses); end
  endtask

  initial begin
    int t0, t1;
    job_valid = 1'b0; job = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_job(32'h0000_0340, 48'h8000_0000, 5 * 1024, 1'b0);
    run_job(32'h0000_3C00, 48'h8123_4000, 64, 1'b1);
    run_job(32'h0003_FF00, 48'h9000_0000, 16 * 1024 + 512, 1'b1);
    // rate: with all groups ready, one chunk per cycle
    mode_fast = 1'b1;
    t0 = cycle;
    run_job(32'h0, 48'h8000_0000, 32 * 1024, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (mode_fast && rst_n && dut.splitting_q) begin
    burst_cycles++;
    checks++;
    if (!(|(cv & cr))) begin failures++; $display("no chunk in a ready cycle"); end
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
