// terapool_pkg: types and constants shared by the TeraPool-SDR cluster RTL.
//
// The L1 request/response structs carry a 32-bit byte address, a byte enable,
// a write flag, a per-core transaction tag and the coordinates of the issuing
// core (group, subgroup, tile, core). Responses are routed back through the
// hierarchy using those coordinates, so no crossbar has to remember where a
// request came from. Field widths are fixed at the largest sizes the cluster
// supports (8 cores per tile, 8 tiles per subgroup, 4 subgroups, 4 groups);
// module parameters pick how much of that range is populated.
//
// The AXI types are a reduced AXI4: address channels with id/addr/len, a W
// channel with data/strb/last, an R channel with id/data/last and a B channel
// with id. Size, burst type, cache and protection fields are left out because
// every master in the cluster issues full-width incrementing bursts.
// The 512-bit data width and the 16 cluster AXI masters are the paper's; the
// field selection and ID width are this design's.
package terapool_pkg;

  // ---------------- L1 (TCDM) interconnect ----------------
  localparam int unsigned DataWidth = 32;
  localparam int unsigned TagWidth  = 4;

  typedef struct packed {
    logic [31:0]          addr;
    logic                 we;
    logic [3:0]           be;
    logic [DataWidth-1:0] wdata;
    logic [TagWidth-1:0]  tag;
    logic [1:0]           src_group;
    logic [1:0]           src_sg;
    logic [2:0]           src_tile;
    logic [2:0]           src_core;
  } tcdm_req_t;

  typedef struct packed {
    logic [DataWidth-1:0] rdata;
    logic                 we;
    logic [TagWidth-1:0]  tag;
    logic [1:0]           src_group;
    logic [1:0]           src_sg;
    logic [2:0]           src_tile;
    logic [2:0]           src_core;
  } tcdm_rsp_t;

  // Number of master/slave remote ports of a tile: 1 local-subgroup port,
  // 3 remote-subgroup ports, 3 remote-group ports (Fig. 1: "7 ports").
  localparam int unsigned NumRemotePorts = 7;
  localparam int unsigned PortLocalSg    = 0;
  localparam int unsigned PortSgBase     = 1;  // ports 1..3: subgroup offset 1..3
  localparam int unsigned PortGroupBase  = 4;  // ports 4..6: group offset 1..3

  // ---------------- DMA <-> tile wide L1 port ----------------
  localparam int unsigned AxiDataWidth = 512;
  localparam int unsigned WordsPerBeat = AxiDataWidth / DataWidth;  // 16

  typedef struct packed {
    logic [31:0]             addr;   // L1 byte address, 64-byte aligned
    logic                    we;
    logic [AxiDataWidth-1:0] wdata;
  } l1_wide_req_t;

  typedef struct packed {
    logic [AxiDataWidth-1:0] rdata;
  } l1_wide_rsp_t;

  // ---------------- AXI (reduced) ----------------
  localparam int unsigned AxiIdWidth   = 12;
  localparam int unsigned AxiAddrWidth = 48;

  typedef struct packed {
    logic [AxiIdWidth-1:0]   id;
    logic [AxiAddrWidth-1:0] addr;
    logic [7:0]              len;
  } axi_ax_t;

  typedef struct packed {
    logic [AxiDataWidth-1:0]   data;
    logic [AxiDataWidth/8-1:0] strb;
    logic                      last;
  } axi_w_t;

  typedef struct packed {
    logic [AxiIdWidth-1:0]   id;
    logic [AxiDataWidth-1:0] data;
    logic                    last;
  } axi_r_t;

  typedef struct packed {
    logic [AxiIdWidth-1:0] id;
  } axi_b_t;

  typedef struct packed {
    axi_ax_t aw;  logic aw_valid;
    axi_w_t  w;   logic w_valid;
    logic    b_ready;
    axi_ax_t ar;  logic ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    w_ready;
    axi_b_t  b;   logic b_valid;
    logic    ar_ready;
    axi_r_t  r;   logic r_valid;
  } axi_rsp_t;

  // ---------------- DMA ----------------
  // One DMA job as programmed in the frontend, and one chunk after the
  // midend split it. A chunk never leaves the L1 region of one subgroup.
  typedef struct packed {
    logic [AxiAddrWidth-1:0] l2_addr;
    logic [31:0]             l1_addr;
    logic [31:0]             num_bytes;
    logic                    to_l2;     // 1: L1 -> L2, 0: L2 -> L1
  } dma_job_t;

  // System address map (this design's choice).
  localparam logic [AxiAddrWidth-1:0] L1Base     = 48'h0000_0000_0000;
  localparam logic [AxiAddrWidth-1:0] PeriphBase = 48'h0000_4000_0000;
  localparam logic [AxiAddrWidth-1:0] DmaBase    = 48'h0000_4001_0000;
  localparam logic [AxiAddrWidth-1:0] L2Base     = 48'h0000_8000_0000;

endpackage
