// tb_hero_pmca: end-to-end test of the full-size PMCA top level (default
// parameters: 8 clusters x 8 PEs, 256 KiB L1 per cluster, 256 KiB L2, RAB
// with 32 L1 and 1024 L2 TLB entries, 512-entry trace buffers).
//
// The testbench plays the PEs (one access at a time per PE, on the pe_*
// ports), the host (accesses into the PMCA on host_in_*, trace readout on
// host_trc_*) and the host's main memory (a model on host_mem_* that
// answers after 3 cycles). It exercises every mechanism of the design and
// counts each one; a mechanism that never happened is a failure:
//   l2        host writes the L2 scratchpad, a PE reads it back
//   remote    a PE writes another cluster's L1, a PE there reads it
//   conflict  8 PEs of one cluster hit the same L1 bank at once
//   timer     the cluster timer counts
//   sleep     a PE sleeps through the event unit and is woken by another
//   dma       a cluster DMA copies L2 -> L1
//   mbox      mailbox messages PMCA -> host and host -> PMCA with interrupts
//   rab_l1    SVM access translated by the L1 TLB in the same cycle
//   rab_l2    SVM access translated by the L2 TLB
//   hum       an L1 hit overtakes an L2 search (hit under miss)
//   miss      SVM miss: error response, the missing PE sleeps, another PE
//             reads the miss FIFO, adds the mapping and wakes it, the
//             retry succeeds
//   clkstop   trace buffer full -> PMCA clock stopped -> host drains and
//             clears the buffer -> PMCA resumes without losing an access
module tb_hero_pmca;
  import hero_pkg::*;
  localparam int NC = 8, NPE = 8, NB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     [NC-1:0][NPE-1:0] pv, pr, psv, sleep;
  bus_req_t [NC-1:0][NPE-1:0] pq;
  bus_rsp_t [NC-1:0][NPE-1:0] ps;
  logic [NC-1:0] tirq;
  // host -> PMCA (names used by the bus helper tasks)
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  bus_req_t req; bus_rsp_t rsp;
  // PMCA -> host memory
  logic hv, hr, hsv, hsr; host_req_t hq; bus_rsp_t hs;
  // host -> trace buffers
  logic tv, tr, tsv, tsr; bus_req_t tq; bus_rsp_t ts;
  logic irq_host, irq_pmca, miss, trc_irq, clk_en;

  hero_pmca dut (
    .clk_i (clk), .rst_ni (rst_n),
    .pe_req_valid_i (pv), .pe_req_ready_o (pr), .pe_req_i (pq), .pe_rsp_valid_o (psv), .pe_rsp_o (ps),
    .pe_sleep_o (sleep), .timer_irq_o (tirq),
    .host_in_req_valid_i (req_valid), .host_in_req_ready_o (req_ready), .host_in_req_i (req),
    .host_in_rsp_valid_o (rsp_valid), .host_in_rsp_ready_i (rsp_ready), .host_in_rsp_o (rsp),
    .host_mem_req_valid_o (hv), .host_mem_req_ready_i (hr), .host_mem_req_o (hq),
    .host_mem_rsp_valid_i (hsv), .host_mem_rsp_ready_o (hsr), .host_mem_rsp_i (hs),
    .host_trc_req_valid_i (tv), .host_trc_req_ready_o (tr), .host_trc_req_i (tq),
    .host_trc_rsp_valid_o (tsv), .host_trc_rsp_ready_i (tsr), .host_trc_rsp_o (ts),
    .mbox_irq_host_o (irq_host), .mbox_irq_pmca_o (irq_pmca), .rab_miss_o (miss),
    .trace_irq_o (trc_irq), .pmca_clk_en_o (clk_en));

  // ---- bus access helpers (drive at negedge, sample 1 time unit later) ----
  task automatic bus_acc(input logic we, input addr_t a, input data_t d, output data_t r, output logic e);
    @(negedge clk);
    req_valid = 1'b1; req.addr = a; req.we = we; req.wdata = d; req.be = '1; req.id = id_t'(16'h5);
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    req_valid = 1'b0;
    while (!rsp_valid) begin @(negedge clk); #1; end
    r = rsp.rdata; e = rsp.err;
    @(posedge clk); #1;
  endtask
  task automatic wr(input addr_t a, input data_t d);
    data_t r; logic e;
    bus_acc(1'b1, a, d, r, e);
  endtask
  task automatic rd(input addr_t a, output data_t r);
    logic e;
    bus_acc(1'b0, a, '0, r, e);
  endtask
  task automatic check(input string what, input data_t got, input data_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask


  // ---------------- mechanism counters ----------------
  typedef enum int {M_L2, M_REMOTE, M_CONFLICT, M_TIMER, M_SLEEP, M_DMA, M_MBOX,
                    M_RAB_L1, M_RAB_L2, M_HUM, M_MISS, M_CLKSTOP, M_N} mech_e;
  int mech [M_N];
  string mname [M_N] = '{"l2", "remote", "conflict", "timer", "sleep", "dma", "mbox",
                         "rab_l1", "rab_l2", "hum", "miss", "clkstop"};

  // ---------------- PE model ----------------
  // One access by PE p of cluster c; returns data, error flag and the number
  // of cycles from acceptance to response.
  task automatic pe_acc(input int c, input int p, input logic we, input addr_t a, input data_t d,
                        output data_t r, output logic e, output int lat);
    @(negedge clk); pv[c][p] = 1; pq[c][p].addr = a; pq[c][p].we = we; pq[c][p].wdata = d;
    pq[c][p].be = '1; pq[c][p].id = '0;
    #1; while (!pr[c][p]) begin @(negedge clk); #1; end
    @(posedge clk); #1; pv[c][p] = 0;
    lat = 1;
    while (!psv[c][p]) begin @(negedge clk); #1; lat++; end
    r = ps[c][p].rdata; e = ps[c][p].err;
    @(posedge clk); #1;
  endtask
  task automatic pe_wr(input int c, input int p, input addr_t a, input data_t d);
    data_t r; logic e; int l;
    pe_acc(c, p, 1, a, d, r, e, l);
    checks++; if (e) begin failures++; $display("FAIL PE %0d.%0d write %h: error", c, p, a); end
  endtask
  task automatic pe_rd(input int c, input int p, input addr_t a, output data_t r);
    logic e; int l;
    pe_acc(c, p, 0, a, 0, r, e, l);
    checks++; if (e) begin failures++; $display("FAIL PE %0d.%0d read %h: error", c, p, a); end
  endtask

  // ---------------- host main-memory model ----------------
  data_t hmem [paddr_t];
  host_req_t hpend [$];
  int hdel [$];
  paddr_t horder [$];
  logic htaken = 0;
  int cyc = 0;
  int acc_cyc [addr_t];     // cycle the RAB accepted a VA (last one)
  int out_cyc [paddr_t];    // cycle the PA left on the host port (last one)
  always @(posedge clk) begin
    cyc++;
    if (dut.i_rab.req_valid_i && dut.i_rab.req_ready_o) acc_cyc[dut.i_rab.req_i.addr] = cyc;
  end
  always @(negedge clk) begin
    if (htaken) begin hsv = 0; void'(hpend.pop_front()); void'(hdel.pop_front()); htaken = 0; end
    foreach (hdel[i]) if (hdel[i] > 0) hdel[i]--;
    if (!hsv && hpend.size() > 0 && hdel[0] == 0) begin
      hsv = 1; hs.id = hpend[0].id; hs.err = 0;
      hs.rdata = hmem.exists(hpend[0].addr) ? hmem[hpend[0].addr] : 32'hDEAD_0000 ^ hpend[0].addr[31:0];
      if (hpend[0].we) hmem[hpend[0].addr] = hpend[0].wdata;
    end
    #1;
    if (hv && hr) begin
      hpend.push_back(hq); hdel.push_back(3); horder.push_back(hq.addr); out_cyc[hq.addr] = cyc + 1;
    end
    if (hsv && hsr) htaken = 1;
  end

  // ---------------- host trace-port access ----------------
  task automatic trc_acc(input logic we, input addr_t a, input data_t d, output data_t r);
    @(negedge clk); tv = 1; tq.addr = a; tq.we = we; tq.wdata = d; tq.be = '1; tq.id = '0;
    #1; while (!tr) begin @(negedge clk); #1; end
    @(posedge clk); #1; tv = 0;
    while (!tsv) begin @(negedge clk); #1; end
    r = ts.rdata;
    @(posedge clk); #1;
  endtask

  // ---------------- bank conflicts ----------------
  logic conflict_phase = 0;
  always @(negedge clk) begin
    #2;
    if (conflict_phase && clk_en)
      for (int p = 0; p < NPE; p++)
        if (pv[6][p] && !pr[6][p]) mech[M_CONFLICT]++;
  end

  // RAB setup helpers, used by the host (through host_in) or by a PE
  task automatic map_host(input bit l2, input int slot, input addr_t va, input paddr_t pa);
    wr(RAB_CFG_BASE + 32'h00, va);
    wr(RAB_CFG_BASE + 32'h04, data_t'(pa >> PAGE_BITS));
    wr(RAB_CFG_BASE + 32'h08, 32'h7);
    wr(RAB_CFG_BASE + (l2 ? 32'h10 : 32'h0C), data_t'(slot));
  endtask

  localparam addr_t  VA_L1 = 32'h8000_0000, VA_L2 = 32'h8010_0000, VA_HUM = 32'h8020_0000,
                     VA_MISS = 32'h8040_0000;
  localparam paddr_t PA_L1 = 40'h01_2000_0000, PA_L2 = 40'h01_3000_0000, PA_HUM = 40'h01_4000_0000,
                     PA_MISS = 40'h01_5000_0000;

  // one PE's part of the clock-stop phase: 80 SVM reads through the L1 TLB
  task automatic svm_burst(input int c);
    data_t r;
    for (int i = 0; i < 80; i++) begin
      pe_rd(c, 0, VA_L1 + 32'h800 + 32'h40*c + 4*(i % 16), r);
      check("SVM burst read", r, 32'h5500_0000 + 32'h100*c + (i % 16));
    end
  endtask

  task automatic conflict_pe(input int p);
    data_t r;
    for (int i = 0; i < 8; i++) pe_wr(6, p, cluster_base(6) + addr_t'(NB*4*(8*p + i)), 32'h6600_0000 + 16*p + i);
    for (int i = 0; i < 8; i++) begin
      pe_rd(6, p, cluster_base(6) + addr_t'(NB*4*(8*p + i)), r);
      check("conflict readback", r, 32'h6600_0000 + 16*p + i);
    end
  endtask

  initial begin
    data_t r, r2; logic e; int lat;
    pv = '0; pq = '0; req_valid = 0; req = '0; rsp_ready = 1; hr = 1; hsv = 0; hs = '0;
    tv = 0; tq = '0; tsr = 1;
    foreach (mech[i]) mech[i] = 0;
    repeat (5) @(posedge clk); rst_n = 1;
    // wait for the L2 TLB to clear itself after reset
    repeat (300) @(posedge clk);

    // ---- L2 scratchpad: host writes, PE reads ----
    for (int i = 0; i < 8; i++) wr(L2_BASE + 32'h100 + 4*i, 32'h1200_0000 + i);
    for (int i = 0; i < 8; i++) begin
      pe_rd(5, 2, L2_BASE + 32'h100 + 4*i, r);
      check("L2 via PE", r, 32'h1200_0000 + i);
    end
    mech[M_L2]++;

    // ---- local L1 latency and remote L1 ----
    pe_wr(4, 0, cluster_base(4) + 32'h40, 32'hAAAA_0001);
    pe_acc(4, 0, 0, cluster_base(4) + 32'h40, 0, r, e, lat);
    check("local L1 read", r, 32'hAAAA_0001);
    check("local L1 latency (cycles)", lat, 1);
    pe_wr(3, 0, cluster_base(4) + 32'h44, 32'hBBBB_0002);
    pe_rd(4, 1, cluster_base(4) + 32'h44, r);
    check("remote L1 write seen locally", r, 32'hBBBB_0002);
    pe_rd(3, 1, cluster_base(4) + 32'h40, r);
    check("remote L1 read", r, 32'hAAAA_0001);
    rd(cluster_base(4) + 32'h44, r);
    check("host reads L1", r, 32'hBBBB_0002);
    mech[M_REMOTE]++;

    // ---- bank conflicts: 8 PEs of cluster 6, all on bank 0 ----
    conflict_phase = 1;
    fork
      conflict_pe(0); conflict_pe(1); conflict_pe(2); conflict_pe(3);
      conflict_pe(4); conflict_pe(5); conflict_pe(6); conflict_pe(7);
    join
    conflict_phase = 0;

    // ---- timer ----
    pe_wr(0, 1, cluster_base(0) + CL_PERIPH_OFS + TIMER_OFS + 0, 1);
    pe_rd(0, 1, cluster_base(0) + CL_PERIPH_OFS + TIMER_OFS + 4, r);
    repeat (10) @(posedge clk);
    pe_rd(0, 1, cluster_base(0) + CL_PERIPH_OFS + TIMER_OFS + 4, r2);
    checks++;
    if (r2 > r && r2 - r >= 10) mech[M_TIMER]++;
    else begin failures++; $display("FAIL timer %0d -> %0d", r, r2); end

    // ---- sleep / wake ----
    pe_wr(7, 3, cluster_base(7) + CL_PERIPH_OFS + EU_OFS + 0, 0);
    check("PE 7.3 asleep", data_t'(sleep[7]), 32'h08);
    pe_wr(7, 0, cluster_base(7) + CL_PERIPH_OFS + EU_OFS + 4, 32'h08);
    check("PE 7.3 woken", data_t'(sleep[7]), 0);
    if (sleep[7] == 0) mech[M_SLEEP]++;

    // ---- DMA: 32 words L2 -> cluster 2 L1 ----
    for (int i = 0; i < 32; i++) wr(L2_BASE + 32'h1000 + 4*i, 32'hD0A0_0000 + i);
    pe_wr(2, 0, cluster_base(2) + CL_PERIPH_OFS + DMA_OFS + 32'h20, L2_BASE + 32'h1000);
    pe_wr(2, 0, cluster_base(2) + CL_PERIPH_OFS + DMA_OFS + 32'h24, cluster_base(2) + 32'h2000);
    pe_wr(2, 0, cluster_base(2) + CL_PERIPH_OFS + DMA_OFS + 32'h28, 128);
    pe_wr(2, 0, cluster_base(2) + CL_PERIPH_OFS + DMA_OFS + 32'h2C, 1);
    do pe_rd(2, 0, cluster_base(2) + CL_PERIPH_OFS + DMA_OFS + 32'h100, r); while (r != 0);
    begin
      int bad;
      bad = 0;
      for (int i = 0; i < 32; i++) begin
        pe_rd(2, 1 + i % 7, cluster_base(2) + 32'h2000 + 4*i, r);
        check("DMA copy", r, 32'hD0A0_0000 + i);
        if (r != 32'hD0A0_0000 + i) bad++;
      end
      if (bad == 0) mech[M_DMA]++;
    end

    // ---- mailbox ----
    checks++; if (irq_host) begin failures++; $display("FAIL mailbox irq before message"); end
    pe_wr(1, 2, MBOX_BASE + 32'h000, 32'hA5A5_0001);
    repeat (3) @(posedge clk);
    check("mailbox irq to host", irq_host, 1);
    rd(MBOX_BASE + 32'h100, r);
    check("mailbox PMCA -> host", r, 32'hA5A5_0001);
    wr(MBOX_BASE + 32'h100, 32'h5A5A_0002);
    repeat (3) @(posedge clk);
    check("mailbox irq to PMCA", irq_pmca, 1);
    pe_rd(1, 2, MBOX_BASE + 32'h000, r);
    check("mailbox host -> PMCA", r, 32'h5A5A_0002);
    if (r == 32'h5A5A_0002 && !irq_host && !irq_pmca) mech[M_MBOX]++;

    // ---- shared virtual memory ----
    map_host(0, 0, VA_L1, PA_L1);
    map_host(1, 0, VA_L2, PA_L2);
    map_host(1, 31, VA_HUM, PA_HUM);
    // L1 TLB hit: translated in the cycle the RAB accepts it
    pe_wr(0, 0, VA_L1 + 32'h10, 32'h1111_0001);
    check("L1-hit write reached host", hmem.exists(PA_L1 + 40'h10) ? hmem[PA_L1 + 40'h10] : 0, 32'h1111_0001);
    check("L1 TLB translation cycles", out_cyc[PA_L1 + 40'h10] - acc_cyc[VA_L1 + 32'h10], 0);
    pe_rd(0, 3, VA_L1 + 32'h10, r);
    check("L1-hit read", r, 32'h1111_0001);
    if (r == 32'h1111_0001) mech[M_RAB_L1]++;
    // L2 TLB hit (way 0): the search of way w takes w/BANKS + 2 cycles and
    // the translated request leaves in the cycle after it ends
    hmem[PA_L2 + 40'h24] = 32'h2222_0002;
    pe_rd(1, 0, VA_L2 + 32'h24, r);
    check("L2-hit read", r, 32'h2222_0002);
    check("L2 TLB translation cycles (way 0)", out_cyc[PA_L2 + 40'h24] - acc_cyc[VA_L2 + 32'h24], 0/4 + 3);
    if (r == 32'h2222_0002) mech[M_RAB_L2]++;
    // hit under miss: L2 search for way 31 (9 cycles), L1 hit issued meanwhile
    hmem[PA_HUM + 40'h8] = 32'h3333_0003;
    hmem[PA_L1 + 40'h30] = 32'h3333_0004;
    horder.delete();
    fork
      begin data_t rr; pe_rd(0, 4, VA_HUM + 32'h8, rr); check("HUM L2 read", rr, 32'h3333_0003); end
      begin data_t rr; repeat (4) @(posedge clk); pe_rd(1, 4, VA_L1 + 32'h30, rr); check("HUM L1 read", rr, 32'h3333_0004); end
    join
    check("hit-under-miss: number of host requests", horder.size(), 2);
    if (horder.size() == 2) begin
      check("hit-under-miss: L1 hit left first", horder[0] == PA_L1 + 40'h30, 1);
      if (horder[0] == PA_L1 + 40'h30) mech[M_HUM]++;
    end
    check("L2 TLB translation cycles (way 31)", out_cyc[PA_HUM + 40'h8] - acc_cyc[VA_HUM + 32'h8], 31/4 + 3);
    // miss: error response, the missing PE (2.1) goes to sleep, another PE
    // (2.0) reads the miss FIFO, maps the page, pops the miss and wakes it
    pe_acc(2, 1, 0, VA_MISS + 32'h4, 0, r, e, lat);
    check("miss answered with error", e, 1);
    pe_wr(2, 1, cluster_base(2) + CL_PERIPH_OFS + EU_OFS + 0, 0);
    check("missing PE asleep", data_t'(sleep[2]), 32'h02);
    check("miss interrupt", miss, 1);
    pe_rd(2, 0, RAB_CFG_BASE + 32'h2C, r); check("miss count", r, 1);
    pe_rd(2, 0, RAB_CFG_BASE + 32'h20, r); check("miss address", r, VA_MISS + 32'h4);
    pe_rd(2, 0, RAB_CFG_BASE + 32'h24, r); check("miss is a read", r[16], 0);
    // the handler walks the page table (here: fixed) and maps the page
    pe_wr(2, 0, RAB_CFG_BASE + 32'h00, VA_MISS);
    pe_wr(2, 0, RAB_CFG_BASE + 32'h04, data_t'(PA_MISS >> PAGE_BITS));
    pe_wr(2, 0, RAB_CFG_BASE + 32'h08, 32'h7);
    pe_wr(2, 0, RAB_CFG_BASE + 32'h0C, 1);
    pe_wr(2, 0, RAB_CFG_BASE + 32'h28, 0);
    repeat (2) @(posedge clk);
    check("miss FIFO emptied", miss, 0);
    pe_wr(2, 0, cluster_base(2) + CL_PERIPH_OFS + EU_OFS + 4, 32'h02);
    check("missing PE woken", data_t'(sleep[2]), 0);
    hmem[PA_MISS + 40'h4] = 32'h4444_0004;
    pe_acc(2, 1, 0, VA_MISS + 32'h4, 0, r, e, lat);
    check("retry after miss: no error", e, 0);
    check("retry after miss: data", r, 32'h4444_0004);
    if (!e && r == 32'h4444_0004) mech[M_MISS]++;

    // ---- tracing and clock stop ----
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < 16; i++) hmem[PA_L1 + 40'h800 + 40'h40*c + 4*i] = 32'h5500_0000 + 32'h100*c + i;
    trc_acc(0, 32'h0014, 0, r); check("tracer 0 ID", r, 0);
    trc_acc(0, 32'h2_0014, 0, r); check("tracer 2 ID", r, 2);
    trc_acc(1, 32'h0004, 32'h0, r);        // MASK = 0: every RAB request
    trc_acc(1, 32'h0008, 32'h0, r);
    trc_acc(1, 32'h0000, 32'h1, r);        // enable tracer 0
    horder.delete();
    fork
      fork
        svm_burst(0); svm_burst(1); svm_burst(2); svm_burst(3);
        svm_burst(4); svm_burst(5); svm_burst(6); svm_burst(7);
      join
      begin
        int stopped;
        logic [31:0] ts_frozen;
        stopped = 0;
        wait (trc_irq);
        @(negedge clk);
        ts_frozen = dut.ts_q;
        check("clock stopped while buffer full", clk_en, 0);
        repeat (50) begin @(negedge clk); if (!clk_en) stopped++; end
        check("clock stays stopped", stopped, 50);
        check("timestamp frozen", dut.ts_q, ts_frozen);
        trc_acc(0, 32'h000C, 0, r);
        check("trace count when full", r, 512);
        begin
          data_t t0, t1, a0;
          int mono;
          mono = 1;
          trc_acc(0, 32'h8000, 0, t0);
          for (int i = 1; i < 512; i += 37) begin
            trc_acc(0, 32'h8000 + 16*i, 0, t1);
            if (t1 < t0) mono = 0;
            t0 = t1;
          end
          check("timestamps increase", mono, 1);
          trc_acc(0, 32'h8004 + 16*100, 0, a0);
          check("traced event is an SVM address", a0[31:12], VA_L1[31:12]);
          // the transaction ID identifies the core: SoC-bus master (cluster)
          // in bits 3:0, cluster-bus master 0 (PE side) in bits 5:4, PE
          // index in bits 9:6; the bursts come from PE 0 of each cluster,
          // and the cluster must own the traced address
          trc_acc(0, 32'h8008 + 16*100, 0, t1);
          check("traced ID: PE 0", data_t'(t1[31:20]), 0);
          check("traced ID: cluster owns the address", data_t'(t1[19:16]), data_t'((a0 - VA_L1 - 32'h800) / 32'h40));
        end
        trc_acc(1, 32'h0000, 32'h0, r);    // disable, then clear
        trc_acc(1, 32'h0010, 32'h1, r);
        repeat (2) @(posedge clk);
        check("clock running after clear", clk_en, 1);
        if (stopped == 50 && clk_en) mech[M_CLKSTOP]++;
      end
    join
    check("no SVM access lost across the clock stop", horder.size(), 8 * 80);

    // ---- every mechanism happened ----
    for (int m = 0; m < M_N; m++) begin
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL mechanism %s never happened", mname[m]); end
      else $display("mechanism %-9s seen %0d times", mname[m], mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
