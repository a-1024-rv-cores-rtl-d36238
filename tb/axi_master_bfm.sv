// axi_master_bfm: testbench AXI master used to drive the reduced AXI bus of
// the cluster (burst reads and writes, 512-bit beats). Signals change on the
// falling clock edge and are sampled on the rising edge. write() sends the
// address, then the beats, then waits for the write response; read() sends
// the address and collects beats until the last one. Both return the
// response ID so the caller can check it. A read and a write may run in
// parallel from two processes.
module axi_master_bfm
  import terapool_pkg::*;
(
  input  logic     clk_i,
  output axi_req_t req_o,
  input  axi_rsp_t rsp_i
);
  initial req_o = '0;

  task automatic write(input logic [AxiAddrWidth-1:0] addr, input int nbeats,
                       input logic [AxiDataWidth-1:0] data [], input logic [AxiIdWidth-1:0] id,
                       output logic [AxiIdWidth-1:0] bid);
    @(negedge clk_i);
    req_o.aw.addr = addr; req_o.aw.len = 8'(nbeats - 1); req_o.aw.id = id; req_o.aw_valid = 1'b1;
    @(posedge clk_i); while (!rsp_i.aw_ready) @(posedge clk_i);
    @(negedge clk_i); req_o.aw_valid = 1'b0;
    for (int b = 0; b < nbeats; b++) begin
      req_o.w.data = data[b]; req_o.w.strb = '1; req_o.w.last = (b == nbeats - 1); req_o.w_valid = 1'b1;
      @(posedge clk_i); while (!rsp_i.w_ready) @(posedge clk_i);
      @(negedge clk_i); req_o.w_valid = 1'b0;
    end
    req_o.b_ready = 1'b1;
    @(posedge clk_i); while (!rsp_i.b_valid) @(posedge clk_i);
    bid = rsp_i.b.id;
    @(negedge clk_i); req_o.b_ready = 1'b0;
  endtask

  task automatic read(input logic [AxiAddrWidth-1:0] addr, input int nbeats,
                      input logic [AxiIdWidth-1:0] id,
                      output logic [AxiDataWidth-1:0] data [], output logic [AxiIdWidth-1:0] rid,
                      output logic last_ok);
    data = new[nbeats];
    last_ok = 1'b1;
    @(negedge clk_i);
    req_o.ar.addr = addr; req_o.ar.len = 8'(nbeats - 1); req_o.ar.id = id; req_o.ar_valid = 1'b1;
    @(posedge clk_i); while (!rsp_i.ar_ready) @(posedge clk_i);
    @(negedge clk_i); req_o.ar_valid = 1'b0; req_o.r_ready = 1'b1;
    for (int b = 0; b < nbeats; b++) begin
      @(posedge clk_i); while (!rsp_i.r_valid) @(posedge clk_i);
      data[b] = rsp_i.r.data;
      rid     = rsp_i.r.id;
      if (rsp_i.r.last != (b == nbeats - 1)) last_ok = 1'b0;
    end
    @(negedge clk_i); req_o.r_ready = 1'b0;
  endtask
endmodule
