// tb_pmca_cluster: self-checking test of one cluster (4 PEs, 4 L1 banks,
// 16 KiB L1) with a memory model on its SoC-bus master port. Checks:
//  * all PEs write and read back their own L1 regions concurrently, and
//    bank conflicts occur and are resolved;
//  * a PE reads the timer, sleeps through the event unit and is woken by
//    another PE;
//  * a PE access outside the cluster leaves on the SoC port and returns;
//  * accesses coming in from the SoC bus reach the L1 and the event unit;
//  * the DMA engine copies L1 -> external memory.
module tb_pmca_cluster;
  import hero_pkg::*;
  localparam int NPE = 4;
  localparam addr_t L1B = CLUSTER_BASE, PER = CLUSTER_BASE + CL_PERIPH_OFS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     [NPE-1:0] pv, pr, psv, sleep;
  bus_req_t [NPE-1:0] pq;
  bus_rsp_t [NPE-1:0] ps;
  logic tirq;
  logic sov, sor, sosv, sosr; bus_req_t soq; bus_rsp_t sos;
  logic siv, sir, sisv, sisr; bus_req_t siq; bus_rsp_t sis;

  pmca_cluster #(.CLUSTER_IDX(0), .NPE(NPE), .NB(4), .L1_BYTES(16384), .DMA_NCH(2)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .pe_req_valid_i (pv), .pe_req_ready_o (pr), .pe_req_i (pq), .pe_rsp_valid_o (psv), .pe_rsp_o (ps),
    .pe_sleep_o (sleep), .timer_irq_o (tirq),
    .soc_req_valid_o (sov), .soc_req_ready_i (sor), .soc_req_o (soq),
    .soc_rsp_valid_i (sosv), .soc_rsp_ready_o (sosr), .soc_rsp_i (sos),
    .ext_req_valid_i (siv), .ext_req_ready_o (sir), .ext_req_i (siq),
    .ext_rsp_valid_o (sisv), .ext_rsp_ready_i (sisr), .ext_rsp_o (sis));

  task automatic check(input string what, input data_t got, input data_t exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  int conflicts = 0;
  always @(negedge clk) begin
    #2;
    for (int p = 0; p < NPE; p++)
      if (pv[p] && !pr[p] && pq[p].addr < L1B + 16384) conflicts++;
  end

  // PE access: one at a time per PE
  task automatic pe_acc(input int p, input logic we, input addr_t a, input data_t d, output data_t r);
    @(negedge clk); pv[p] = 1; pq[p].addr = a; pq[p].we = we; pq[p].wdata = d; pq[p].be = '1; pq[p].id = '0;
    #1; while (!pr[p]) begin @(negedge clk); #1; end
    @(posedge clk); #1; pv[p] = 0;
    while (!psv[p]) begin @(negedge clk); #1; end
    r = ps[p].rdata;
    @(posedge clk); #1;
  endtask

  // one PE's L1 test: write then read back 40 words of its own region
  task automatic pe_l1(input int pp);
    data_t rr;
    for (int i = 0; i < 40; i++) pe_acc(pp, 1, L1B + 32'h400*pp + 4*i, 32'hC0DE_0000 + 256*pp + i, rr);
    for (int i = 0; i < 40; i++) begin
      pe_acc(pp, 0, L1B + 32'h400*pp + 4*i, 0, rr);
      check("L1 readback", rr, 32'hC0DE_0000 + 256*pp + i);
    end
  endtask

  // SoC-side memory model (external memory at any address it receives)
  data_t xm [addr_t];
  bus_req_t xq [$];
  int xd = 0;
  logic xtaken = 0;
  always @(negedge clk) begin
    if (xtaken) begin sosv = 0; void'(xq.pop_front()); xtaken = 0; end
    sor = $urandom_range(0, 1);
    if (xd > 0) xd--;
    if (!sosv && xq.size() > 0 && xd == 0) begin
      sosv = 1; sos.id = xq[0].id; sos.err = 0;
      sos.rdata = xm.exists(xq[0].addr) ? xm[xq[0].addr] : 32'h0;
      if (xq[0].we) xm[xq[0].addr] = xq[0].wdata;
    end
    #1;
    if (sov && sor) begin xq.push_back(soq); xd = 3; end
    if (sosv && sosr) xtaken = 1;
  end

  // SoC-side master
  task automatic soc_acc(input logic we, input addr_t a, input data_t d, output data_t r);
    @(negedge clk); siv = 1; siq.addr = a; siq.we = we; siq.wdata = d; siq.be = '1; siq.id = 16'h3;
    #1; while (!sir) begin @(negedge clk); #1; end
    @(posedge clk); #1; siv = 0;
    while (!sisv) begin @(negedge clk); #1; end
    r = sis.rdata;
    check("soc id", data_t'(sis.id), 3);
    @(posedge clk); #1;
  endtask

  initial begin
    data_t r;
    pv = '0; pq = '0; siv = 0; siq = '0; sisr = 1; sosv = 0; sos = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // concurrent L1 traffic
    fork
      pe_l1(0);
      pe_l1(1);
      pe_l1(2);
      pe_l1(3);
    join
    checks++; if (conflicts == 0) begin failures++; $display("FAIL no bank conflict seen"); end
    // timer
    pe_acc(0, 1, PER + TIMER_OFS + 0, 1, r);
    pe_acc(0, 0, PER + TIMER_OFS + 4, 0, r);
    checks++; if (r == 0) begin failures++; $display("FAIL timer not counting"); end
    // sleep / wake
    pe_acc(2, 1, PER + EU_OFS + 0, 0, r);
    check("PE2 asleep", data_t'(sleep), 32'h4);
    pe_acc(1, 1, PER + EU_OFS + 4, 32'h4, r);
    check("PE2 woken", data_t'(sleep), 0);
    // external access
    pe_acc(3, 1, 32'h8000_1000, 32'h1234_5678, r);
    pe_acc(3, 0, 32'h8000_1000, 0, r);
    check("external readback", r, 32'h1234_5678);
    // incoming accesses
    soc_acc(0, L1B + 32'h400 + 8, 0, r);
    check("incoming L1 read", r, 32'hC0DE_0100 + 2);
    soc_acc(1, L1B + 32'h3000, 32'hFEED_0001, r);
    pe_acc(0, 0, L1B + 32'h3000, 0, r);
    check("incoming L1 write", r, 32'hFEED_0001);
    soc_acc(1, PER + EU_OFS + 0, 0, r);   // incoming write to SLEEP: no PE index -> ignored
    soc_acc(0, PER + EU_OFS + 8, 0, r);
    check("incoming EU status", r, 0);
    // DMA: 16 words L1 (PE0's region) -> external memory
    pe_acc(0, 1, PER + DMA_OFS + 32'h0, L1B, r);
    pe_acc(0, 1, PER + DMA_OFS + 32'h4, 32'h9000_0000, r);
    pe_acc(0, 1, PER + DMA_OFS + 32'h8, 64, r);
    pe_acc(0, 1, PER + DMA_OFS + 32'hC, 1, r);
    do pe_acc(0, 0, PER + DMA_OFS + 32'h100, 0, r); while (r != 0);
    for (int i = 0; i < 16; i++)
      check("DMA copy", xm.exists(32'h9000_0000 + 4*i) ? xm[32'h9000_0000 + 4*i] : 0, 32'hC0DE_0000 + i);
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
