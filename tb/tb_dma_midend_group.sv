// tb_dma_midend_group: self-checking test of the group DMA midend. Chunks
// with random L1 addresses enter at random; the bench checks that each one
// leaves, unchanged and in order, towards the subgroup named by L1 address
// bits [11:10] (1 KiB regions of 8 tiles x 32 banks), one cycle after it
// was accepted when that subgroup is ready, and that a subgroup that is not
// ready holds the chunk.
module tb_dma_midend_group;
  import terapool_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic cv, cr; dma_job_t c;
  logic [3:0] sv, sr; dma_job_t so;
  dma_midend_group #(.NumTilesSg(8), .NumBanks(32)) dut (
    .clk_i(clk), .rst_ni(rst_n), .chunk_valid_i(cv), .chunk_ready_o(cr), .chunk_i(c),
    .sg_valid_o(sv), .sg_ready_i(sr), .sg_chunk_o(so)
  );

  dma_job_t q [$];
  int acc_cycle [$];
  int n_out = 0, n_held = 0;
  logic acc_q;
  always @(posedge clk) acc_q <= cv && cr;

  always @(posedge clk) begin
    if (rst_n) begin
      if (cv && cr) begin q.push_back(c); acc_cycle.push_back(cycle); end
      if (|sv) begin
        int s; s = int'(so.l1_addr[11:10]);
        checks++;
        if (sv != 4'(1 << s)) begin failures++; $display("valid %b for sg %0d", sv, s); end
        if (!sr[s]) n_held++;
        if (sr[s]) begin
          dma_job_t e; int t;
          e = q.pop_front(); t = acc_cycle.pop_front();
          checks++;
          if (so !== e || cycle - t < 1) begin failures++; $display("chunk mismatch"); end
          n_out++;
        end
      end
    end
  end

  always @(negedge clk) begin
    if (!rst_n) cv <= 1'b0;
    else if (!cv || acc_q) begin
      cv <= $urandom_range(0, 1);
      c.l1_addr <= $urandom & 32'h003f_ffc0; c.l2_addr <= 48'h8000_0000 + 48'($urandom);
      c.num_bytes <= 32'($urandom_range(1, 16) * 64); c.to_l2 <= $urandom_range(0, 1);
    end
    sr <= 4'($urandom);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2000) @(posedge clk);
    checks++;
    if (n_out < 300 || n_held < 50) begin failures++; $display("coverage out %0d held %0d", n_out, n_held); end
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
