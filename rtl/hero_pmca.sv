// hero_pmca: top level of the programmable manycore accelerator (PMCA) of a
// heterogeneous embedded SoC in which a host CPU and the PMCA share main
// memory and virtual address pointers.
//
// Contents:
//  * NC clusters (pmca_cluster), each with NPE processing elements, an
//    NB-bank L1 scratchpad of L1_BYTES, a DMA engine, event unit and timer;
//  * the SoC bus (req_bus) joining the clusters, the host's port into the
//    PMCA, the shared L2 scratchpad (l2_mem), the mailbox and the RAB;
//  * the RAB (rab): every access to an address outside the PMCA's map
//    [0x1000_0000, 0x2000_0000) is a shared-virtual-memory access and is
//    translated by the RAB before it leaves on the host memory port;
//  * three event tracers (event_tracer) on the RAB's request channel,
//    response channel and configuration port, with a shared timestamp
//    counter, and the clock gate that stops the whole PMCA while any trace
//    buffer is full.
//
// SoC bus address map (beyond the clusters' windows, see pmca_cluster):
//   0x1A10_0000  RAB configuration     0x1A12_0000  mailbox
//   0x1C00_0000  L2 scratchpad         other        RAB (shared virtual memory)
// Trace port (host_trc_*) address map: tracer t at t * 0x1_0000.
//
// Clocks: clk_i runs free. The PMCA runs on a gated copy (clk_gate) that
// stops while any trace buffer is full; the tracers, their host register
// port (host_trc_*) and the timestamp counter run on clk_i. The timestamp
// only advances while the PMCA is clocked. The host-facing handshakes
// (host_in_*, host_mem_*) and the PEs' handshakes (pe_*) are masked while
// the PMCA clock is stopped, so the outside sees the PMCA frozen.
// trace_irq_o tells the host to drain the buffers; clearing them restarts
// the clock.
//
// The processing elements (RISC-V cores), the host CPU, its DRAM and the
// chip-to-chip link are outside this RTL: the PEs' data ports are the pe_*
// ports, the host side is host_in_* (host accesses into the PMCA) and
// host_mem_* (PMCA accesses to host memory, with 40-bit physical
// addresses). Default parameters are the source's main configuration:
// 8 clusters of 8 PEs, 16 L1 banks, 256 KiB L1 per cluster, 256 KiB L2,
// RAB with a 32-entry L1 TLB and a 1024-entry, 32-way, 4-bank L2 TLB.
module hero_pmca
  import hero_pkg::*;
#(
  parameter int unsigned NC          = 8,
  parameter int unsigned NPE         = 8,
  parameter int unsigned NB          = 16,
  parameter int unsigned L1_BYTES    = 256*1024,
  parameter int unsigned L2_BYTES    = 256*1024,
  parameter int unsigned DMA_NCH     = 4,
  parameter int unsigned RAB_L1      = 32,
  parameter int unsigned RAB_L2      = 1024,
  parameter int unsigned RAB_L2_WAYS = 32,
  parameter int unsigned RAB_L2_BANKS= 4,
  parameter int unsigned MBOX_DEPTH  = 16,
  parameter int unsigned TRACE_DEPTH = 512
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // PE data ports
  input  logic     [NC-1:0][NPE-1:0]    pe_req_valid_i,
  output logic     [NC-1:0][NPE-1:0]    pe_req_ready_o,
  input  bus_req_t [NC-1:0][NPE-1:0]    pe_req_i,
  output logic     [NC-1:0][NPE-1:0]    pe_rsp_valid_o,
  output bus_rsp_t [NC-1:0][NPE-1:0]    pe_rsp_o,
  output logic     [NC-1:0][NPE-1:0]    pe_sleep_o,
  output logic     [NC-1:0]             timer_irq_o,
  // host -> PMCA
  input  logic                          host_in_req_valid_i,
  output logic                          host_in_req_ready_o,
  input  bus_req_t                      host_in_req_i,
  output logic                          host_in_rsp_valid_o,
  input  logic                          host_in_rsp_ready_i,
  output bus_rsp_t                      host_in_rsp_o,
  // PMCA -> host memory (after translation)
  output logic                          host_mem_req_valid_o,
  input  logic                          host_mem_req_ready_i,
  output host_req_t                     host_mem_req_o,
  input  logic                          host_mem_rsp_valid_i,
  output logic                          host_mem_rsp_ready_o,
  input  bus_rsp_t                      host_mem_rsp_i,
  // host -> trace buffers (free-running clock)
  input  logic                          host_trc_req_valid_i,
  output logic                          host_trc_req_ready_o,
  input  bus_req_t                      host_trc_req_i,
  output logic                          host_trc_rsp_valid_o,
  input  logic                          host_trc_rsp_ready_i,
  output bus_rsp_t                      host_trc_rsp_o,
  // interrupts and status
  output logic                          mbox_irq_host_o,
  output logic                          mbox_irq_pmca_o,
  output logic                          rab_miss_o,
  output logic                          trace_irq_o,
  output logic                          pmca_clk_en_o
);
  localparam int unsigned NSM = NC + 1;   // SoC bus masters: clusters, host
  localparam int unsigned NSS = NC + 4;   // slaves: clusters, L2, mailbox, RAB cfg, RAB
  localparam int unsigned S_L2 = NC, S_MBOX = NC + 1, S_RCFG = NC + 2, S_RAB = NC + 3;
  localparam int unsigned NTR = 3;

  function automatic logic [NSS-1:0][AW-1:0] soc_base();
    logic [NSS-1:0][AW-1:0] r;
    for (int unsigned c = 0; c < NC; c++) r[c] = cluster_base(c);
    r[S_L2]   = L2_BASE;
    r[S_MBOX] = MBOX_BASE;
    r[S_RCFG] = RAB_CFG_BASE;
    r[S_RAB]  = '0;
    return r;
  endfunction
  function automatic logic [NSS-1:0][AW-1:0] soc_end();
    logic [NSS-1:0][AW-1:0] r;
    for (int unsigned c = 0; c < NC; c++) r[c] = cluster_base(c) + CLUSTER_STRIDE;
    r[S_L2]   = L2_BASE + addr_t'(L2_BYTES);
    r[S_MBOX] = MBOX_BASE + MBOX_SIZE;
    r[S_RCFG] = RAB_CFG_BASE + RAB_CFG_SIZE;
    r[S_RAB]  = '0;
    return r;
  endfunction

  // ---------------- clocking ----------------
  logic [NTR-1:0] trc_full;
  logic           run;
  logic           pmca_clk;
  logic [31:0]    ts_q;

  assign run           = !(|trc_full);
  assign pmca_clk_en_o = run;
  assign trace_irq_o   = |trc_full;

  clk_gate i_clk_gate (.clk_i (clk_i), .en_i (run), .clk_o (pmca_clk));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)  ts_q <= '0;
    else if (run) ts_q <= ts_q + 1'b1;
  end

  // ---------------- SoC bus ----------------
  logic     [NSM-1:0] sm_req_valid, sm_req_ready, sm_rsp_valid, sm_rsp_ready;
  bus_req_t [NSM-1:0] sm_req;
  bus_rsp_t [NSM-1:0] sm_rsp;
  logic     [NSS-1:0] ss_req_valid, ss_req_ready, ss_rsp_valid, ss_rsp_ready;
  bus_req_t [NSS-1:0] ss_req;
  bus_rsp_t [NSS-1:0] ss_rsp;

  req_bus #(.NM(NSM), .NS(NSS), .SLV_BASE(soc_base()), .SLV_END(soc_end()), .DEFAULT_SLV(S_RAB)) i_soc_bus (
    .clk_i (pmca_clk), .rst_ni,
    .mst_req_valid_i (sm_req_valid), .mst_req_ready_o (sm_req_ready), .mst_req_i (sm_req),
    .mst_rsp_valid_o (sm_rsp_valid), .mst_rsp_ready_i (sm_rsp_ready), .mst_rsp_o (sm_rsp),
    .slv_req_valid_o (ss_req_valid), .slv_req_ready_i (ss_req_ready), .slv_req_o (ss_req),
    .slv_rsp_valid_i (ss_rsp_valid), .slv_rsp_ready_o (ss_rsp_ready), .slv_rsp_i (ss_rsp)
  );

  // ---------------- clusters ----------------
  // PE-facing handshakes are masked while the PMCA clock is stopped, so that
  // the PEs (in the gated clock domain) see no transfer in those cycles
  logic [NC-1:0][NPE-1:0] pe_req_ready, pe_rsp_valid;
  assign pe_req_ready_o = pe_req_ready & {NC{{NPE{run}}}};
  assign pe_rsp_valid_o = pe_rsp_valid & {NC{{NPE{run}}}};

  for (genvar c = 0; c < NC; c++) begin : g_cluster
    pmca_cluster #(.CLUSTER_IDX(c), .NPE(NPE), .NB(NB), .L1_BYTES(L1_BYTES), .DMA_NCH(DMA_NCH)) i_cluster (
      .clk_i (pmca_clk), .rst_ni,
      .pe_req_valid_i (pe_req_valid_i[c] & {NPE{run}}), .pe_req_ready_o (pe_req_ready[c]), .pe_req_i (pe_req_i[c]),
      .pe_rsp_valid_o (pe_rsp_valid[c]), .pe_rsp_o (pe_rsp_o[c]), .pe_sleep_o (pe_sleep_o[c]),
      .timer_irq_o (timer_irq_o[c]),
      .soc_req_valid_o (sm_req_valid[c]), .soc_req_ready_i (sm_req_ready[c]), .soc_req_o (sm_req[c]),
      .soc_rsp_valid_i (sm_rsp_valid[c]), .soc_rsp_ready_o (sm_rsp_ready[c]), .soc_rsp_i (sm_rsp[c]),
      .ext_req_valid_i (ss_req_valid[c]), .ext_req_ready_o (ss_req_ready[c]), .ext_req_i (ss_req[c]),
      .ext_rsp_valid_o (ss_rsp_valid[c]), .ext_rsp_ready_i (ss_rsp_ready[c]), .ext_rsp_o (ss_rsp[c])
    );
  end

  // host into the PMCA (masked while the PMCA clock is stopped)
  assign sm_req_valid[NC]    = host_in_req_valid_i && run;
  assign sm_req[NC]          = host_in_req_i;
  assign host_in_req_ready_o = sm_req_ready[NC] && run;
  assign host_in_rsp_valid_o = sm_rsp_valid[NC] && run;
  assign host_in_rsp_o       = sm_rsp[NC];
  assign sm_rsp_ready[NC]    = host_in_rsp_ready_i && run;

  // ---------------- L2 memory and mailbox ----------------
  l2_mem #(.SIZE_BYTES(L2_BYTES)) i_l2 (
    .clk_i (pmca_clk), .rst_ni,
    .req_valid_i (ss_req_valid[S_L2]), .req_ready_o (ss_req_ready[S_L2]), .req_i (ss_req[S_L2]),
    .rsp_valid_o (ss_rsp_valid[S_L2]), .rsp_ready_i (ss_rsp_ready[S_L2]), .rsp_o (ss_rsp[S_L2])
  );

  mailbox #(.DEPTH(MBOX_DEPTH)) i_mailbox (
    .clk_i (pmca_clk), .rst_ni,
    .req_valid_i (ss_req_valid[S_MBOX]), .req_ready_o (ss_req_ready[S_MBOX]), .req_i (ss_req[S_MBOX]),
    .rsp_valid_o (ss_rsp_valid[S_MBOX]), .rsp_ready_i (ss_rsp_ready[S_MBOX]), .rsp_o (ss_rsp[S_MBOX]),
    .irq_host_o (mbox_irq_host_o), .irq_pmca_o (mbox_irq_pmca_o)
  );

  // ---------------- RAB ----------------
  logic mem_req_valid, mem_rsp_ready;
  rab #(.L1_ENTRIES(RAB_L1), .L2_ENTRIES(RAB_L2), .L2_WAYS(RAB_L2_WAYS), .L2_BANKS(RAB_L2_BANKS)) i_rab (
    .clk_i (pmca_clk), .rst_ni,
    .req_valid_i (ss_req_valid[S_RAB]), .req_ready_o (ss_req_ready[S_RAB]), .req_i (ss_req[S_RAB]),
    .rsp_valid_o (ss_rsp_valid[S_RAB]), .rsp_ready_i (ss_rsp_ready[S_RAB]), .rsp_o (ss_rsp[S_RAB]),
    .host_req_valid_o (mem_req_valid), .host_req_ready_i (host_mem_req_ready_i && run), .host_req_o (host_mem_req_o),
    .host_rsp_valid_i (host_mem_rsp_valid_i && run), .host_rsp_ready_o (mem_rsp_ready), .host_rsp_i (host_mem_rsp_i),
    .cfg_req_valid_i (ss_req_valid[S_RCFG]), .cfg_req_ready_o (ss_req_ready[S_RCFG]), .cfg_req_i (ss_req[S_RCFG]),
    .cfg_rsp_valid_o (ss_rsp_valid[S_RCFG]), .cfg_rsp_ready_i (ss_rsp_ready[S_RCFG]), .cfg_rsp_o (ss_rsp[S_RCFG]),
    .miss_o (rab_miss_o)
  );
  assign host_mem_req_valid_o = mem_req_valid && run;
  assign host_mem_rsp_ready_o = mem_rsp_ready && run;

  // ---------------- event tracers ----------------
  logic [NTR-1:0]       trc_valid;
  logic [NTR-1:0][63:0] trc_data;
  always_comb begin
    // 0: RAB request channel {id, we, addr}
    trc_valid[0] = ss_req_valid[S_RAB] && ss_req_ready[S_RAB];
    trc_data[0]  = {ss_req[S_RAB].id, 15'h0, ss_req[S_RAB].we, ss_req[S_RAB].addr};
    // 1: RAB response channel {id, err, rdata}
    trc_valid[1] = ss_rsp_valid[S_RAB] && ss_rsp_ready[S_RAB];
    trc_data[1]  = {ss_rsp[S_RAB].id, 15'h0, ss_rsp[S_RAB].err, ss_rsp[S_RAB].rdata};
    // 2: RAB configuration port {id, we, offset, wdata}
    trc_valid[2] = ss_req_valid[S_RCFG] && ss_req_ready[S_RCFG];
    trc_data[2]  = {ss_req[S_RCFG].id, 7'h0, ss_req[S_RCFG].we, ss_req[S_RCFG].addr[7:0], ss_req[S_RCFG].wdata};
  end

  logic     [NTR-1:0] ts_req_valid, ts_req_ready, ts_rsp_valid, ts_rsp_ready;
  bus_req_t [NTR-1:0] ts_req;
  bus_rsp_t [NTR-1:0] ts_rsp;

  function automatic logic [NTR-1:0][AW-1:0] trc_base(int unsigned ofs);
    logic [NTR-1:0][AW-1:0] r;
    for (int unsigned t = 0; t < NTR; t++) r[t] = addr_t'((t + ofs) * 32'h1_0000);
    return r;
  endfunction

  req_bus #(.NM(1), .NS(NTR), .SLV_BASE(trc_base(0)), .SLV_END(trc_base(1)), .DEFAULT_SLV(0)) i_trace_bus (
    .clk_i, .rst_ni,
    .mst_req_valid_i (host_trc_req_valid_i), .mst_req_ready_o (host_trc_req_ready_o), .mst_req_i (host_trc_req_i),
    .mst_rsp_valid_o (host_trc_rsp_valid_o), .mst_rsp_ready_i (host_trc_rsp_ready_i), .mst_rsp_o (host_trc_rsp_o),
    .slv_req_valid_o (ts_req_valid), .slv_req_ready_i (ts_req_ready), .slv_req_o (ts_req),
    .slv_rsp_valid_i (ts_rsp_valid), .slv_rsp_ready_o (ts_rsp_ready), .slv_rsp_i (ts_rsp)
  );

  for (genvar t = 0; t < NTR; t++) begin : g_tracer
    event_tracer #(.EVT_W(64), .DEPTH(TRACE_DEPTH), .TRACER_ID(t)) i_tracer (
      .clk_i, .rst_ni,
      .run_i (run), .ts_i (ts_q),
      .evt_valid_i (trc_valid[t]), .evt_data_i (trc_data[t]),
      .full_o (trc_full[t]),
      .req_valid_i (ts_req_valid[t]), .req_ready_o (ts_req_ready[t]), .req_i (ts_req[t]),
      .rsp_valid_o (ts_rsp_valid[t]), .rsp_ready_i (ts_rsp_ready[t]), .rsp_o (ts_rsp[t])
    );
  end
endmodule
