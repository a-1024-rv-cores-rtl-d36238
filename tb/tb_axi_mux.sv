// tb_axi_mux: self-checking test of the N-to-1 AXI multiplexer (3 inputs)
// in front of a memory model. Three masters run at the same time, each
// writing bursts of 1 to 4 random beats into its own region and reading them
// back, and reading never-written memory whose content is known. The bench
// checks read data, that read and write responses return to the master that
// asked with its own ID, that the ID seen downstream carries the input index
// in its low bits, and that bursts from different masters were interleaved
// (the masters really competed).
module tb_axi_mux;
  import terapool_pkg::*;
  localparam int NI = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t m_req [NI];
  axi_rsp_t m_rsp [NI];
  axi_req_t s_req [1];
  axi_rsp_t s_rsp [1];

  for (genvar i = 0; i < NI; i++) begin : g_m
    axi_master_bfm bfm (.clk_i(clk), .req_o(m_req[i]), .rsp_i(m_rsp[i]));
  end
  axi_mux #(.NumIn(NI)) dut (.clk_i(clk), .rst_ni(rst_n), .in_req_i(m_req), .in_rsp_o(m_rsp),
                             .out_req_o(s_req[0]), .out_rsp_i(s_rsp[0]));
  hbm2e_model #(.NumPorts(1), .Latency(6)) mem (.clk_i(clk), .req_i(s_req), .rsp_o(s_rsp));

  int switches = 0, last_src = -1;
  always @(posedge clk) begin
    if (s_req[0].ar_valid && s_rsp[0].ar_ready) begin
      checks++;
      if (s_req[0].ar.id[1:0] >= NI || (s_req[0].ar.id >> 2) != 12'(s_req[0].ar.addr[20 +: 2]) + 12'h10 || int'(s_req[0].ar.id[1:0]) != int'(s_req[0].ar.addr[20 +: 2])) begin
        failures++; $display("downstream id %h for addr %h", s_req[0].ar.id, s_req[0].ar.addr);
      end
      if (int'(s_req[0].ar.id[1:0]) != last_src) switches++;
      last_src = int'(s_req[0].ar.id[1:0]);
    end
  end


  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      run(0); run(1); run(2);
    join
    checks++;
    if (switches < 10) begin failures++; $display("masters never competed (%0d switches)", switches); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int i);
    logic [AxiDataWidth-1:0] wd [];
    logic [AxiDataWidth-1:0] rd [];
    logic [AxiIdWidth-1:0]   id;
    logic ok;
    for (int k = 0; k < 30; k++) begin
      int n; logic [47:0] a;
      n = $urandom_range(1, 4);
      a = 48'h8000_0000 + 48'(i) * 48'h10_0000 + 48'(k) * 48'h400;
      wd = new[n];
      for (int b = 0; b < n; b++) wd[b] = {16{$urandom}};
      case (i)
        0: g_m[0].bfm.write(a, n, wd, 12'h10 + 12'(i), id);
        1: g_m[1].bfm.write(a, n, wd, 12'h10 + 12'(i), id);
        default: g_m[2].bfm.write(a, n, wd, 12'h10 + 12'(i), id);
      endcase
      checks++;
      if (id !== 12'h10 + 12'(i)) begin failures++; $display("master %0d B id %h", i, id); end
      case (i)
        0: g_m[0].bfm.read(a, n, 12'h10 + 12'(i), rd, id, ok);
        1: g_m[1].bfm.read(a, n, 12'h10 + 12'(i), rd, id, ok);
        default: g_m[2].bfm.read(a, n, 12'h10 + 12'(i), rd, id, ok);
      endcase
      checks++;
      if (id !== 12'h10 + 12'(i) || !ok) begin failures++; $display("master %0d R id %h", i, id); end
      for (int b = 0; b < n; b++) begin
        checks++;
        if (rd[b] !== wd[b]) begin failures++; $display("master %0d beat %0d mismatch", i, b); end
      end
      // untouched memory reads as the known pattern
      case (i)
        0: g_m[0].bfm.read(a + 48'h200, 1, 12'h10 + 12'(i), rd, id, ok);
        1: g_m[1].bfm.read(a + 48'h200, 1, 12'h10 + 12'(i), rd, id, ok);
        default: g_m[2].bfm.read(a + 48'h200, 1, 12'h10 + 12'(i), rd, id, ok);
      endcase
      checks++;
      if (rd[0][31:0] !== (32'(a + 48'h200) ^ 32'h5A5A_5A5A)) begin failures++; $display("pattern mismatch"); end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
