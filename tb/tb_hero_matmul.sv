// tb_hero_matmul: matrix-matrix multiplication C = A * B on the full PMCA
// (default parameters), parallelised over 1, 2, 4 and 8 clusters, with the
// matrices in host memory reached through shared virtual memory.
//
// The testbench plays the host (which maps the three matrix pages in the
// RAB's L1 TLB and fills A and B in its memory model) and the PEs. Work is
// distributed as in the platform's parallel-speedup study: rows of A and C
// are split over the clusters; each cluster first copies B into its L1 with
// its DMA engine, then for each of its rows copies the row of A into L1 by
// DMA, lets its 8 PEs compute the row of C block-wise (PE p computes columns
// p, p+8, ... with real L1 loads and stores through the X-Bar), and copies
// the finished row back to host memory by DMA. The result is compared with a
// reference computed here, and the run time of each cluster count is
// measured. The platform study moves a column of B per row; here B is
// copied once per cluster because the DMA engine has no strided mode, so
// at this small size the shared bus carrying eight copies of B limits the
// speedup. Matrix size N = 16 (32-bit integers) is this test's own choice
// to keep the simulation short. The test checks that every result is
// correct and that more clusters never take longer; it prints the speedups.
module tb_hero_matmul;
  import hero_pkg::*;
  localparam int NC = 8, NPE = 8, N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     [NC-1:0][NPE-1:0] pv, pr, psv, sleep;
  bus_req_t [NC-1:0][NPE-1:0] pq;
  bus_rsp_t [NC-1:0][NPE-1:0] ps;
  logic [NC-1:0] tirq;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  bus_req_t req; bus_rsp_t rsp;
  logic hv, hr, hsv, hsr; host_req_t hq; bus_rsp_t hs;
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


  task automatic pe_acc(input int c, input int p, input logic we, input addr_t a, input data_t d,
                        output data_t r);
    @(negedge clk); pv[c][p] = 1; pq[c][p].addr = a; pq[c][p].we = we; pq[c][p].wdata = d;
    pq[c][p].be = '1; pq[c][p].id = '0;
    #1; while (!pr[c][p]) begin @(negedge clk); #1; end
    @(posedge clk); #1; pv[c][p] = 0;
    while (!psv[c][p]) begin @(negedge clk); #1; end
    r = ps[c][p].rdata;
    checks++;
    if (ps[c][p].err) begin failures++; $display("FAIL PE %0d.%0d access %h: error", c, p, a); end
    @(posedge clk); #1;
  endtask

  // host main memory model, 3-cycle latency
  data_t hmem [paddr_t];
  host_req_t hpend [$];
  int hdel [$];
  logic htaken = 0;
  always @(negedge clk) begin
    if (htaken) begin hsv = 0; void'(hpend.pop_front()); void'(hdel.pop_front()); htaken = 0; end
    foreach (hdel[i]) if (hdel[i] > 0) hdel[i]--;
    if (!hsv && hpend.size() > 0 && hdel[0] == 0) begin
      hsv = 1; hs.id = hpend[0].id; hs.err = 0;
      hs.rdata = hmem.exists(hpend[0].addr) ? hmem[hpend[0].addr] : 32'h0;
      if (hpend[0].we) hmem[hpend[0].addr] = hpend[0].wdata;
    end
    #1;
    if (hv && hr) begin hpend.push_back(hq); hdel.push_back(3); end
    if (hsv && hsr) htaken = 1;
  end

  localparam addr_t  VA_A = 32'h8000_0000, VA_B = 32'h8000_1000, VA_C = 32'h8000_2000;
  localparam paddr_t PA   = 40'h02_0000_0000;
  // L1 layout of each cluster: B at +0, the row of A at +0x1000, the row of C at +0x1100
  localparam addr_t L1_B = 32'h0, L1_A = 32'h1000, L1_C = 32'h1100;

  data_t A [N][N], B [N][N], Cref [N][N];

  task automatic dma_copy(input int c, input addr_t src, input addr_t dst, input int bytes);
    data_t r;
    addr_t dmar;
    dmar = cluster_base(c) + CL_PERIPH_OFS + DMA_OFS;
    pe_acc(c, 0, 1, dmar + 32'h00, src, r);
    pe_acc(c, 0, 1, dmar + 32'h04, dst, r);
    pe_acc(c, 0, 1, dmar + 32'h08, bytes, r);
    pe_acc(c, 0, 1, dmar + 32'h0C, 1, r);
    do pe_acc(c, 0, 0, dmar + 32'h100, 0, r); while (r != 0);
  endtask

  // PE p of cluster c computes its columns of one row of C in L1
  task automatic pe_row(input int c, input int p);
    data_t acc, a, b;
    addr_t base;
    base = cluster_base(c);
    for (int j = p; j < N; j += NPE) begin
      acc = 0;
      for (int k = 0; k < N; k++) begin
        pe_acc(c, p, 0, base + L1_A + 4*k, 0, a);
        pe_acc(c, p, 0, base + L1_B + 4*(N*k + j), 0, b);
        acc += a * b;
      end
      pe_acc(c, p, 1, base + L1_C + 4*j, acc, a);
    end
  endtask

  task automatic cluster_work(input int c, input int k);
    addr_t base;
    base = cluster_base(c);
    dma_copy(c, VA_B, base + L1_B, 4*N*N);
    for (int i = c; i < N; i += k) begin
      dma_copy(c, VA_A + 4*N*i, base + L1_A, 4*N);
      fork
        pe_row(c, 0); pe_row(c, 1); pe_row(c, 2); pe_row(c, 3);
        pe_row(c, 4); pe_row(c, 5); pe_row(c, 6); pe_row(c, 7);
      join
      dma_copy(c, base + L1_C, VA_C + 4*N*i, 4*N);
    end
  endtask

  task automatic run_clusters(input int k);
    case (k)
      1: cluster_work(0, 1);
      2: fork cluster_work(0, 2); cluster_work(1, 2); join
      4: fork cluster_work(0, 4); cluster_work(1, 4); cluster_work(2, 4); cluster_work(3, 4); join
      default: fork
        cluster_work(0, 8); cluster_work(1, 8); cluster_work(2, 8); cluster_work(3, 8);
        cluster_work(4, 8); cluster_work(5, 8); cluster_work(6, 8); cluster_work(7, 8);
      join
    endcase
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    int t0, cycles [4];
    int ks [4];
    int bad;
    data_t s;
    ks = '{1, 2, 4, 8};
    pv = '0; pq = '0; req_valid = 0; req = '0; rsp_ready = 1; hr = 1; hsv = 0; hs = '0;
    tv = 0; tq = '0; tsr = 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        A[i][j] = $urandom_range(0, 1000); B[i][j] = $urandom_range(0, 1000);
      end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        s = 0;
        for (int k = 0; k < N; k++) s += A[i][k] * B[k][j];
        Cref[i][j] = s;
      end
    repeat (5) @(posedge clk); rst_n = 1;
    repeat (300) @(posedge clk);
    // host maps the three pages (L1 TLB entries 0..2) and fills A and B
    for (int m = 0; m < 3; m++) begin
      wr(RAB_CFG_BASE + 32'h00, VA_A + 32'h1000*m);
      wr(RAB_CFG_BASE + 32'h04, data_t'((PA >> PAGE_BITS) + m));
      wr(RAB_CFG_BASE + 32'h08, 32'h7);
      wr(RAB_CFG_BASE + 32'h0C, m);
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        hmem[PA + 40'(4*(N*i + j))]          = A[i][j];
        hmem[PA + 40'h1000 + 40'(4*(N*i + j))] = B[i][j];
      end
    for (int r = 0; r < 4; r++) begin
      for (int i = 0; i < N*N; i++) hmem[PA + 40'h2000 + 40'(4*i)] = 32'hFFFF_FFFF;
      t0 = cyc;
      run_clusters(ks[r]);
      cycles[r] = cyc - t0;
      bad = 0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          checks++;
          if (hmem[PA + 40'h2000 + 40'(4*(N*i + j))] !== Cref[i][j]) bad++;
        end
      failures += bad;
      if (bad != 0) $display("FAIL %0d clusters: %0d wrong elements of C", ks[r], bad);
      $display("matmul N=%0d on %0d cluster(s): %0d cycles, speedup %0d.%02d", N, ks[r], cycles[r],
               cycles[0] / cycles[r], (100 * cycles[0] / cycles[r]) % 100);
      if (r > 0) begin
        checks++;
        if (cycles[r] >= cycles[r-1]) begin
          failures++; $display("FAIL %0d clusters not faster than %0d", ks[r], ks[r-1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
