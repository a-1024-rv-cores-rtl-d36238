// tb_hbm_addr_scrambler: self-checking test of the HBM2E address scrambler.
// For random L2 addresses the bench computes the expected address itself
// (the four bits above the 1 KiB burst exchanged with the four channel bits
// at bit 31 of the L2 offset) and compares; it checks that addresses below
// the L2 base pass unchanged, that scrambling twice gives the original
// address, that 16 consecutive 1 KiB bursts land in 16 different channels,
// and that all other request fields and the whole response pass unchanged.
module tb_hbm_addr_scrambler;
  import terapool_pkg::*;
  int checks = 0, failures = 0;

  axi_req_t in_req, out_req, out_req2;
  axi_rsp_t in_rsp, out_rsp, in_rsp2;

  hbm_addr_scrambler dut (.in_req_i(in_req), .in_rsp_o(in_rsp), .out_req_o(out_req), .out_rsp_i(out_rsp));
  hbm_addr_scrambler dut2 (.in_req_i(out_req), .in_rsp_o(), .out_req_o(out_req2), .out_rsp_i(out_rsp));

  function automatic logic [47:0] expect_addr(logic [47:0] a);
    logic [47:0] o;
    logic [3:0]  lo, hi;
    if (a < 48'h8000_0000) return a;
    o  = a - 48'h8000_0000;
    lo = o[13:10];
    hi = o[34:31];
    o[13:10] = hi;
    o[34:31] = lo;
    return o + 48'h8000_0000;
  endfunction

  initial begin
    logic [15:0] seen;
    for (int i = 0; i < 2000; i++) begin
      logic [47:0] a, b;
      a = (i % 4 == 0) ? 48'({$urandom} & 32'h7fff_ffff) : 48'h8000_0000 + {13'd0, 35'({$urandom, $urandom})};
      b = 48'h8000_0000 + {13'd0, 35'({$urandom, $urandom})};
      in_req = '0;
      in_req.ar.addr = a; in_req.aw.addr = b;
      in_req.ar.id = 12'($urandom); in_req.ar.len = 8'($urandom); in_req.ar_valid = 1'b1;
      in_req.w.data = {16{$urandom}}; in_req.w_valid = 1'b1; in_req.r_ready = 1'b1;
      out_rsp = '0; out_rsp.r.data = {16{$urandom}}; out_rsp.r_valid = 1'b1; out_rsp.b.id = 12'($urandom);
      #1;
      checks++;
      if (out_req.ar.addr !== expect_addr(a) || out_req.aw.addr !== expect_addr(b)) begin
        failures++; $display("addr %h -> %h expected %h", a, out_req.ar.addr, expect_addr(a));
      end
      checks++;
      if (out_req2.ar.addr !== a || out_req2.aw.addr !== b) begin failures++; $display("not an involution"); end
      checks++;
      if (out_req.ar.id !== in_req.ar.id || out_req.ar.len !== in_req.ar.len || out_req.w !== in_req.w ||
          out_req.ar_valid !== 1'b1 || out_req.r_ready !== 1'b1 || in_rsp !== out_rsp) begin
        failures++; $display("fields changed");
      end
    end
    seen = '0;
    for (int k = 0; k < 16; k++) begin
      in_req = '0; in_req.ar.addr = 48'h8000_0000 + 48'h4_0000 + 48'(k * 1024);
      #1;
      seen[(out_req.ar.addr - 48'h8000_0000) >> 31] = 1'b1;
    end
    checks++;
    if (seen != 16'hffff) begin failures++; $display("channels hit %b", seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
