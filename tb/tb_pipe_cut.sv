// tb_pipe_cut: self-checking test of the one-stage valid/ready pipeline cut.
// A random source and a random sink exchange 500 numbered beats. The bench
// checks that beats leave in order and unchanged, that a beat accepted into an
// empty stage is offered on the next cycle (1-cycle latency), and that the
// stage sustains one beat per cycle when the sink is always ready.
module tb_pipe_cut;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;

  pipe_cut #(.payload_t(logic [31:0])) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data)
  );

  int sent = 0, rcvd = 0, phase = 0;
  int accept_cycle = -10, cycle = 0;
  logic was_empty;
  always @(posedge clk) cycle <= cycle + 1;

  // source
  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) begin
        if (!out_valid) begin accept_cycle <= cycle; end
        sent <= sent + 1;
      end
    end
  end
  always_comb in_data = 32'hC0DE_0000 + 32'(sent);
  always @(negedge clk) begin
    if (!rst_n) begin in_valid <= 0; out_ready <= 0; end
    else if (phase == 0) begin
      if (!(in_valid && !in_ready)) in_valid <= (sent < 500) && ($urandom_range(0, 2) != 0);
      out_ready <= ($urandom_range(0, 3) != 0);
    end else begin
      in_valid  <= (sent < 700);
      out_ready <= 1'b1;
    end
  end
  // sink
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_data !== 32'hC0DE_0000 + 32'(rcvd)) begin
        failures++; $display("order/data error: got %h expected %h", out_data, 32'hC0DE_0000 + rcvd);
      end
      rcvd <= rcvd + 1;
    end
  end
  // latency: a beat accepted into an empty stage must be valid next cycle
  always @(posedge clk) begin
    if (rst_n && accept_cycle == cycle - 1) begin
      checks++;
      if (!out_valid) begin failures++; $display("latency error at cycle %0d", cycle); end
    end
  end

  int t0, n0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (rcvd == 500 && sent == 500);
    @(negedge clk); phase = 1;
    repeat (2) @(posedge clk);
    t0 = cycle; n0 = rcvd;
    repeat (100) @(posedge clk);
    checks++;
    if (rcvd - n0 < 99) begin failures++; $display("throughput %0d beats in 100 cycles", rcvd - n0); end
    wait (rcvd == 700);
    checks++;
    if (sent != 700) failures++;
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
