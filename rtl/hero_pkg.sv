// hero_pkg: types and constants shared by the PMCA (programmable manycore
// accelerator) RTL.
//
// Every data path in this design speaks one request/response protocol:
//   request  channel: valid/ready handshake carrying bus_req_t
//   response channel: valid/ready handshake carrying bus_rsp_t
// A request is accepted in the cycle in which valid and ready are both high.
// Each request produces exactly one response carrying the same transaction
// ID. Buses widen the ID by the index of the master that issued the request
// and strip it again on the way back, so responses can be routed without
// state. Every ID has at most one transaction in flight (PEs block on loads,
// the DMA engine issues one access at a time), so responses for the same ID
// never overtake each other. The platform this follows uses AXI between
// clusters and towards the host; a single simplified protocol is this
// design's own choice.
//
// The address map is this design's own choice as well; what follows the
// source is the principle that every address outside the PMCA's own map is
// a shared-virtual-memory address and goes through the RAB to the host.
package hero_pkg;

  localparam int unsigned AW  = 32;  // address width (32-bit PEs)
  localparam int unsigned DW  = 32;  // data width
  localparam int unsigned IDW = 16;  // transaction ID width after all bus levels

  typedef logic [AW-1:0]  addr_t;
  typedef logic [DW-1:0]  data_t;
  typedef logic [IDW-1:0] id_t;

  typedef struct packed {
    addr_t            addr;
    logic             we;
    logic [DW/8-1:0]  be;
    data_t            wdata;
    id_t              id;
  } bus_req_t;

  typedef struct packed {
    data_t rdata;
    logic  err;   // set for a slave error and for a RAB translation miss
    id_t   id;
  } bus_rsp_t;

  // ------------------------------------------------------------------
  // Address map
  // ------------------------------------------------------------------
  localparam addr_t CLUSTER_BASE   = 32'h1000_0000;
  localparam addr_t CLUSTER_STRIDE = 32'h0040_0000;  // 4 MiB per cluster
  localparam addr_t CL_PERIPH_OFS  = 32'h0020_0000;  // peripherals inside a cluster
  localparam addr_t EU_OFS         = 32'h0000_0000;  // event unit
  localparam addr_t TIMER_OFS      = 32'h0000_0400;
  localparam addr_t DMA_OFS        = 32'h0000_0800;
  localparam addr_t PERIPH_SIZE    = 32'h0000_0400;  // each cluster peripheral
  localparam addr_t RAB_CFG_BASE   = 32'h1A10_0000;
  localparam addr_t RAB_CFG_SIZE   = 32'h0001_0000;
  localparam addr_t MBOX_BASE      = 32'h1A12_0000;
  localparam addr_t MBOX_SIZE      = 32'h0000_1000;
  localparam addr_t L2_BASE        = 32'h1C00_0000;
  localparam addr_t PMCA_BASE      = 32'h1000_0000;  // PMCA map is [PMCA_BASE, PMCA_END)
  localparam addr_t PMCA_END       = 32'h2000_0000;

  function automatic addr_t cluster_base(int unsigned c);
    return CLUSTER_BASE + addr_t'(c) * CLUSTER_STRIDE;
  endfunction

  // Write with byte enables
  function automatic data_t apply_be(data_t old, data_t wdata, logic [DW/8-1:0] be);
    data_t r = old;
    for (int b = 0; b < DW/8; b++)
      if (be[b]) r[8*b +: 8] = wdata[8*b +: 8];
    return r;
  endfunction

  // ------------------------------------------------------------------
  // RAB
  // ------------------------------------------------------------------
  localparam int unsigned PAGE_BITS = 12;              // 4 KiB pages
  localparam int unsigned VPN_W     = AW - PAGE_BITS;
  localparam int unsigned PPN_W     = 40 - PAGE_BITS;  // host physical address: 40 bit
  localparam int unsigned PA_W      = 40;

  typedef logic [VPN_W-1:0] vpn_t;
  typedef logic [PPN_W-1:0] ppn_t;
  typedef logic [PA_W-1:0]  paddr_t;

  typedef struct packed {
    logic  valid;
    logic  rd_en;   // reads allowed
    logic  wr_en;   // writes allowed
    vpn_t  vpn;
    ppn_t  ppn;
  } tlb_entry_t;

  // Request towards host memory (after translation)
  typedef struct packed {
    paddr_t           addr;
    logic             we;
    logic [DW/8-1:0]  be;
    data_t            wdata;
    id_t              id;
  } host_req_t;

endpackage
