// tb_fc_xbar: self-checking test of the fully-connected crossbar (5 inputs,
// 3 outputs). Every input sends numbered beats to random outputs while the
// outputs take beats at random. The bench checks that each beat reaches the
// output it named, unchanged, that beats of one input to one output keep
// their order, that nothing is lost, that two inputs heading for different
// outputs pass in the same cycle, and that with all inputs competing for one
// output the round-robin arbiter serves every input once per 5 grants.
module tb_fc_xbar;
  localparam int NI = 5, NO = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NI-1:0] in_valid, in_ready;
  logic [1:0]    in_sel [NI];
  logic [31:0]   in_data [NI];
  logic [NO-1:0] out_valid, out_ready;
  logic [31:0]   out_data [NO];

  fc_xbar #(.NumIn(NI), .NumOut(NO), .payload_t(logic [31:0])) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_sel_i(in_sel), .in_data_i(in_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data)
  );

  // payload = {src[7:0], dst[7:0], seq[15:0]}
  int seq [NI];
  int last_seq [NI][NO];
  int nsent = 0, nrcvd = 0;
  int mode = 0;   // 0 random, 1 all to output 0, 2 disjoint outputs
  int gnt_hist [$];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < NI; i++) if (in_valid[i] && in_ready[i]) begin
        seq[i] = seq[i] + 1; nsent++;
      end
      for (int o = 0; o < NO; o++) if (out_valid[o] && out_ready[o]) begin
        int s, d, q;
        s = out_data[o][31:24]; d = out_data[o][23:16]; q = out_data[o][15:0];
        checks++;
        if (d != o) begin failures++; $display("beat for %0d left on %0d", d, o); end
        checks++;
        if (q <= last_seq[s][o]) begin failures++; $display("order error src %0d", s); end
        last_seq[s][o] = q;
        nrcvd++;
        if (mode == 1 && o == 0) gnt_hist.push_back(s);
      end
    end
  end

  always @(negedge clk) begin
    for (int i = 0; i < NI; i++) begin
      if (!rst_n) begin in_valid[i] <= 0; in_sel[i] <= 0; end
      else if (mode == 2) begin
        in_valid[i] <= (i < NO); in_sel[i] <= 2'(i % NO);
      end else if (mode == 3) begin
        in_valid[i] <= 1'b0;
      end else if (!(in_valid[i] && !in_ready[i])) begin
        if (mode == 0) begin
          in_valid[i] <= ($urandom_range(0, 1) == 1);
          in_sel[i]   <= 2'($urandom_range(0, NO - 1));
        end else if (mode == 1) begin
          in_valid[i] <= 1'b1; in_sel[i] <= 2'd0;
        end
      end
    end
    out_ready <= (mode == 0) ? NO'($urandom) : '1;
  end
  always_comb for (int i = 0; i < NI; i++) in_data[i] = {8'(i), 6'd0, in_sel[i], 16'(seq[i] + 1)};

  int n_before;
  initial begin
    for (int i = 0; i < NI; i++) begin seq[i] = 0; for (int o = 0; o < NO; o++) last_seq[i][o] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2000) @(posedge clk);
    @(negedge clk); mode = 3; // drain
    repeat (20) @(posedge clk);
    checks++;
    if (nsent != nrcvd) begin failures++; $display("sent %0d received %0d", nsent, nrcvd); end
    // fairness
    @(negedge clk); mode = 1;
    repeat (2) @(posedge clk);
    gnt_hist.delete();
    repeat (50) @(posedge clk);
    for (int k = 0; k + NI <= gnt_hist.size(); k += NI) begin
      logic [NI-1:0] seen; seen = '0;
      for (int m = 0; m < NI; m++) seen[gnt_hist[k+m]] = 1'b1;
      checks++;
      if (seen != '1) begin failures++; $display("round robin window %0d saw %b", k, seen); end
    end
    // parallel outputs: 3 inputs to 3 different outputs, 3 beats per cycle
    @(negedge clk); mode = 2;
    repeat (3) @(posedge clk);
    n_before = nrcvd;
    repeat (20) @(posedge clk);
    checks++;
    if (nrcvd - n_before != 60) begin failures++; $display("parallel throughput %0d", nrcvd - n_before); end
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
