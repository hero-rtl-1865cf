// pmca_cluster: one cluster of the programmable manycore accelerator (PMCA).
//
// A cluster holds NPE processing elements (32-bit RISC-V cores, which are
// not part of this RTL: their data ports are this module's pe_* ports) that
// work on a shared, multi-banked L1 scratchpad. Its parts:
//  * one core_demux per PE: L1 addresses go to the L1 interconnect, all
//    others to the peripheral bus;
//  * tcdm_xbar, the single-cycle L1 interconnect, with NPE + 2 masters
//    (the PEs, the DMA engine, and the external port that serves the
//    cluster bus) and NB spm_bank banks;
//  * the peripheral bus (req_bus) with the event unit, the timer, the DMA
//    engine's registers and, for everything else, the way out to the
//    cluster bus;
//  * the cluster bus (req_bus) joining outgoing PE accesses, the DMA
//    engine's external port and incoming SoC-bus accesses, with the SoC
//    bus, the L1 scratchpad and the peripherals as destinations;
//  * cluster_dma, the DMA engine.
// Two-entry stream FIFOs sit where the peripheral bus and the cluster bus
// meet (in both directions) and on the link to the SoC bus; they register
// these paths and break combinational loops between the buses.
//
// Address map of cluster CLUSTER_IDX (base B = 0x1000_0000 + idx*0x40_0000):
//   [B, B + L1_BYTES)             L1 scratchpad, word-interleaved over banks
//   B + 0x20_0000 + 0x000         event unit
//   B + 0x20_0000 + 0x400         timer
//   B + 0x20_0000 + 0x800         DMA engine
// Latency seen by a PE: an L1 access returns after one cycle if it wins its
// bank; a peripheral access after about three cycles.
// The block structure follows the source's cluster diagram; the address
// map, buffering and bus protocol are this design's own choices. The
// shared instruction cache, the shared APU and the retry extension in
// front of each PE are not part of this RTL.
module pmca_cluster
  import hero_pkg::*;
#(
  parameter int unsigned CLUSTER_IDX = 0,
  parameter int unsigned NPE         = 8,
  parameter int unsigned NB          = 16,
  parameter int unsigned L1_BYTES    = 256*1024,
  parameter int unsigned DMA_NCH     = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // PE data ports
  input  logic     [NPE-1:0]   pe_req_valid_i,
  output logic     [NPE-1:0]   pe_req_ready_o,
  input  bus_req_t [NPE-1:0]   pe_req_i,
  output logic     [NPE-1:0]   pe_rsp_valid_o,
  output bus_rsp_t [NPE-1:0]   pe_rsp_o,
  output logic     [NPE-1:0]   pe_sleep_o,
  output logic                 timer_irq_o,
  // to the SoC bus (cluster is master)
  output logic                 soc_req_valid_o,
  input  logic                 soc_req_ready_i,
  output bus_req_t             soc_req_o,
  input  logic                 soc_rsp_valid_i,
  output logic                 soc_rsp_ready_o,
  input  bus_rsp_t             soc_rsp_i,
  // from the SoC bus (cluster is slave)
  input  logic                 ext_req_valid_i,
  output logic                 ext_req_ready_o,
  input  bus_req_t             ext_req_i,
  output logic                 ext_rsp_valid_o,
  input  logic                 ext_rsp_ready_i,
  output bus_rsp_t             ext_rsp_o
);
  localparam addr_t L1_BASE    = cluster_base(CLUSTER_IDX);
  localparam addr_t L1_SIZE    = addr_t'(L1_BYTES);
  localparam addr_t PER_BASE   = L1_BASE + CL_PERIPH_OFS;
  localparam int unsigned BANK_WORDS = L1_BYTES / 4 / NB;
  localparam int unsigned RW   = $clog2(BANK_WORDS);
  localparam int unsigned NXM  = NPE + 2;          // xbar masters
  localparam int unsigned XDMA = NPE;              // xbar port of the DMA
  localparam int unsigned XEXT = NPE + 1;          // xbar port of the cluster bus
  localparam int unsigned NPM  = NPE + 1;          // peripheral bus masters
  localparam int unsigned PMB  = $clog2(NPM);      // their index width in the ID

  localparam logic [3:0][AW-1:0] PB_BASE = {addr_t'(0), PER_BASE + DMA_OFS, PER_BASE + TIMER_OFS, PER_BASE + EU_OFS};
  localparam logic [3:0][AW-1:0] PB_END  = {addr_t'(0), PER_BASE + DMA_OFS + PERIPH_SIZE,
                                            PER_BASE + TIMER_OFS + PERIPH_SIZE, PER_BASE + EU_OFS + PERIPH_SIZE};
  localparam logic [2:0][AW-1:0] CB_BASE = {PER_BASE, L1_BASE, addr_t'(0)};
  localparam logic [2:0][AW-1:0] CB_END  = {PER_BASE + 32'h1000, L1_BASE + L1_SIZE, addr_t'(0)};

  // ---------------- L1 interconnect and banks ----------------
  logic     [NXM-1:0] x_req_valid, x_req_ready, x_rsp_valid;
  bus_req_t [NXM-1:0] x_req;
  bus_rsp_t [NXM-1:0] x_rsp;
  logic     [NB-1:0]            b_req, b_we;
  logic     [NB-1:0][RW-1:0]    b_addr;
  logic     [NB-1:0][DW/8-1:0]  b_be;
  data_t    [NB-1:0]            b_wdata, b_rdata;

  tcdm_xbar #(.NM(NXM), .NB(NB), .BANK_WORDS(BANK_WORDS)) i_xbar (
    .clk_i, .rst_ni,
    .req_valid_i (x_req_valid), .req_ready_o (x_req_ready), .req_i (x_req),
    .rsp_valid_o (x_rsp_valid), .rsp_o (x_rsp),
    .bank_req_o (b_req), .bank_we_o (b_we), .bank_addr_o (b_addr),
    .bank_be_o (b_be), .bank_wdata_o (b_wdata), .bank_rdata_i (b_rdata)
  );

  for (genvar b = 0; b < NB; b++) begin : g_bank
    spm_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i, .req_i (b_req[b]), .we_i (b_we[b]), .addr_i (b_addr[b]),
      .be_i (b_be[b]), .wdata_i (b_wdata[b]), .rdata_o (b_rdata[b])
    );
  end

  // ---------------- peripheral bus ----------------
  logic     [NPM-1:0] pm_req_valid, pm_req_ready, pm_rsp_valid, pm_rsp_ready;
  bus_req_t [NPM-1:0] pm_req;
  bus_rsp_t [NPM-1:0] pm_rsp;
  logic     [3:0]     ps_req_valid, ps_req_ready, ps_rsp_valid, ps_rsp_ready;
  bus_req_t [3:0]     ps_req;
  bus_rsp_t [3:0]     ps_rsp;

  req_bus #(.NM(NPM), .NS(4), .SLV_BASE(PB_BASE), .SLV_END(PB_END), .DEFAULT_SLV(3)) i_periph_bus (
    .clk_i, .rst_ni,
    .mst_req_valid_i (pm_req_valid), .mst_req_ready_o (pm_req_ready), .mst_req_i (pm_req),
    .mst_rsp_valid_o (pm_rsp_valid), .mst_rsp_ready_i (pm_rsp_ready), .mst_rsp_o (pm_rsp),
    .slv_req_valid_o (ps_req_valid), .slv_req_ready_i (ps_req_ready), .slv_req_o (ps_req),
    .slv_rsp_valid_i (ps_rsp_valid), .slv_rsp_ready_o (ps_rsp_ready), .slv_rsp_i (ps_rsp)
  );

  // ---------------- PE demultiplexers ----------------
  for (genvar p = 0; p < NPE; p++) begin : g_pe
    core_demux #(.L1_BASE(L1_BASE), .L1_SIZE(L1_SIZE)) i_demux (
      .pe_req_valid_i (pe_req_valid_i[p]), .pe_req_ready_o (pe_req_ready_o[p]), .pe_req_i (pe_req_i[p]),
      .pe_rsp_valid_o (pe_rsp_valid_o[p]), .pe_rsp_o (pe_rsp_o[p]),
      .l1_req_valid_o (x_req_valid[p]), .l1_req_ready_i (x_req_ready[p]), .l1_req_o (x_req[p]),
      .l1_rsp_valid_i (x_rsp_valid[p]), .l1_rsp_i (x_rsp[p]),
      .per_req_valid_o (pm_req_valid[p]), .per_req_ready_i (pm_req_ready[p]), .per_req_o (pm_req[p]),
      .per_rsp_valid_i (pm_rsp_valid[p]), .per_rsp_ready_o (pm_rsp_ready[p]), .per_rsp_i (pm_rsp[p])
    );
  end

  // ---------------- peripherals ----------------
  event_unit #(.NPE(NPE), .ID_LSB(PMB)) i_event_unit (
    .clk_i, .rst_ni,
    .req_valid_i (ps_req_valid[0]), .req_ready_o (ps_req_ready[0]), .req_i (ps_req[0]),
    .rsp_valid_o (ps_rsp_valid[0]), .rsp_ready_i (ps_rsp_ready[0]), .rsp_o (ps_rsp[0]),
    .sleep_o (pe_sleep_o)
  );

  cluster_timer i_timer (
    .clk_i, .rst_ni,
    .req_valid_i (ps_req_valid[1]), .req_ready_o (ps_req_ready[1]), .req_i (ps_req[1]),
    .rsp_valid_o (ps_rsp_valid[1]), .rsp_ready_i (ps_rsp_ready[1]), .rsp_o (ps_rsp[1]),
    .irq_o (timer_irq_o)
  );

  // cluster bus wiring
  logic     [2:0] cm_req_valid, cm_req_ready, cm_rsp_valid, cm_rsp_ready;
  bus_req_t [2:0] cm_req;
  bus_rsp_t [2:0] cm_rsp;
  logic     [2:0] cs_req_valid, cs_req_ready, cs_rsp_valid, cs_rsp_ready;
  bus_req_t [2:0] cs_req;
  bus_rsp_t [2:0] cs_rsp;

  cluster_dma #(.NCH(DMA_NCH), .L1_BASE(L1_BASE), .L1_SIZE(L1_SIZE)) i_dma (
    .clk_i, .rst_ni,
    .cfg_req_valid_i (ps_req_valid[2]), .cfg_req_ready_o (ps_req_ready[2]), .cfg_req_i (ps_req[2]),
    .cfg_rsp_valid_o (ps_rsp_valid[2]), .cfg_rsp_ready_i (ps_rsp_ready[2]), .cfg_rsp_o (ps_rsp[2]),
    .l1_req_valid_o (x_req_valid[XDMA]), .l1_req_ready_i (x_req_ready[XDMA]), .l1_req_o (x_req[XDMA]),
    .l1_rsp_valid_i (x_rsp_valid[XDMA]), .l1_rsp_i (x_rsp[XDMA]),
    .ext_req_valid_o (cm_req_valid[1]), .ext_req_ready_i (cm_req_ready[1]), .ext_req_o (cm_req[1]),
    .ext_rsp_valid_i (cm_rsp_valid[1]), .ext_rsp_ready_o (cm_rsp_ready[1]), .ext_rsp_i (cm_rsp[1]),
    .done_o ()
  );

  // peripheral bus -> cluster bus (outgoing PE accesses)
  stream_fifo #(.T(bus_req_t)) i_p2c_req (
    .clk_i, .rst_ni,
    .in_valid_i (ps_req_valid[3]), .in_ready_o (ps_req_ready[3]), .in_data_i (ps_req[3]),
    .out_valid_o (cm_req_valid[0]), .out_ready_i (cm_req_ready[0]), .out_data_o (cm_req[0])
  );
  stream_fifo #(.T(bus_rsp_t)) i_p2c_rsp (
    .clk_i, .rst_ni,
    .in_valid_i (cm_rsp_valid[0]), .in_ready_o (cm_rsp_ready[0]), .in_data_i (cm_rsp[0]),
    .out_valid_o (ps_rsp_valid[3]), .out_ready_i (ps_rsp_ready[3]), .out_data_o (ps_rsp[3])
  );

  // ---------------- cluster bus ----------------
  req_bus #(.NM(3), .NS(3), .SLV_BASE(CB_BASE), .SLV_END(CB_END), .DEFAULT_SLV(0)) i_cluster_bus (
    .clk_i, .rst_ni,
    .mst_req_valid_i (cm_req_valid), .mst_req_ready_o (cm_req_ready), .mst_req_i (cm_req),
    .mst_rsp_valid_o (cm_rsp_valid), .mst_rsp_ready_i (cm_rsp_ready), .mst_rsp_o (cm_rsp),
    .slv_req_valid_o (cs_req_valid), .slv_req_ready_i (cs_req_ready), .slv_req_o (cs_req),
    .slv_rsp_valid_i (cs_rsp_valid), .slv_rsp_ready_o (cs_rsp_ready), .slv_rsp_i (cs_rsp)
  );

  // cluster bus -> SoC bus
  stream_fifo #(.T(bus_req_t)) i_out_req (
    .clk_i, .rst_ni,
    .in_valid_i (cs_req_valid[0]), .in_ready_o (cs_req_ready[0]), .in_data_i (cs_req[0]),
    .out_valid_o (soc_req_valid_o), .out_ready_i (soc_req_ready_i), .out_data_o (soc_req_o)
  );
  stream_fifo #(.T(bus_rsp_t)) i_out_rsp (
    .clk_i, .rst_ni,
    .in_valid_i (soc_rsp_valid_i), .in_ready_o (soc_rsp_ready_o), .in_data_i (soc_rsp_i),
    .out_valid_o (cs_rsp_valid[0]), .out_ready_i (cs_rsp_ready[0]), .out_data_o (cs_rsp[0])
  );

  // cluster bus -> L1
  bus2tcdm i_ext_l1 (
    .clk_i, .rst_ni,
    .req_valid_i (cs_req_valid[1]), .req_ready_o (cs_req_ready[1]), .req_i (cs_req[1]),
    .rsp_valid_o (cs_rsp_valid[1]), .rsp_ready_i (cs_rsp_ready[1]), .rsp_o (cs_rsp[1]),
    .tcdm_req_valid_o (x_req_valid[XEXT]), .tcdm_req_ready_i (x_req_ready[XEXT]), .tcdm_req_o (x_req[XEXT]),
    .tcdm_rsp_valid_i (x_rsp_valid[XEXT]), .tcdm_rsp_i (x_rsp[XEXT])
  );

  // cluster bus -> peripheral bus (incoming accesses to the peripherals)
  stream_fifo #(.T(bus_req_t)) i_c2p_req (
    .clk_i, .rst_ni,
    .in_valid_i (cs_req_valid[2]), .in_ready_o (cs_req_ready[2]), .in_data_i (cs_req[2]),
    .out_valid_o (pm_req_valid[NPE]), .out_ready_i (pm_req_ready[NPE]), .out_data_o (pm_req[NPE])
  );
  stream_fifo #(.T(bus_rsp_t)) i_c2p_rsp (
    .clk_i, .rst_ni,
    .in_valid_i (pm_rsp_valid[NPE]), .in_ready_o (pm_rsp_ready[NPE]), .in_data_i (pm_rsp[NPE]),
    .out_valid_o (cs_rsp_valid[2]), .out_ready_i (cs_rsp_ready[2]), .out_data_o (cs_rsp[2])
  );

  // SoC bus -> cluster bus (incoming accesses)
  stream_fifo #(.T(bus_req_t)) i_in_req (
    .clk_i, .rst_ni,
    .in_valid_i (ext_req_valid_i), .in_ready_o (ext_req_ready_o), .in_data_i (ext_req_i),
    .out_valid_o (cm_req_valid[2]), .out_ready_i (cm_req_ready[2]), .out_data_o (cm_req[2])
  );
  stream_fifo #(.T(bus_rsp_t)) i_in_rsp (
    .clk_i, .rst_ni,
    .in_valid_i (cm_rsp_valid[2]), .in_ready_o (cm_rsp_ready[2]), .in_data_i (cm_rsp[2]),
    .out_valid_o (ext_rsp_valid_o), .out_ready_i (ext_rsp_ready_i), .out_data_o (ext_rsp_o)
  );
endmodule
