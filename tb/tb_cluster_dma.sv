// tb_cluster_dma: self-checking test of the DMA engine. Its L1 port talks to
// a one-cycle memory model with random grant, its external port to a memory
// model with random delay. Four channels are programmed at once with
// transfers L1->external, external->L1, external->external and L1->L1;
// afterwards every destination word is compared with its source, every
// channel must have pulsed done exactly once and STATUS must read idle.
// A transfer into an address that answers with an error must set ERR.
module tb_cluster_dma;
  import hero_pkg::*;
  localparam addr_t L1B = 32'h1000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  bus_req_t req = '0; bus_rsp_t rsp;
  logic lv, lr, lsv; bus_req_t lq; bus_rsp_t ls;
  logic ev, er, esv, esr; bus_req_t eq; bus_rsp_t es;
  logic [3:0] done;
  int done_cnt [4];

  cluster_dma #(.NCH(4), .L1_BASE(L1B), .L1_SIZE(32'h1_0000)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .cfg_req_valid_i (req_valid), .cfg_req_ready_o (req_ready), .cfg_req_i (req),
    .cfg_rsp_valid_o (rsp_valid), .cfg_rsp_ready_i (rsp_ready), .cfg_rsp_o (rsp),
    .l1_req_valid_o (lv), .l1_req_ready_i (lr), .l1_req_o (lq), .l1_rsp_valid_i (lsv), .l1_rsp_i (ls),
    .ext_req_valid_o (ev), .ext_req_ready_i (er), .ext_req_o (eq),
    .ext_rsp_valid_i (esv), .ext_rsp_ready_o (esr), .ext_rsp_i (es), .done_o (done));

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


  data_t l1m [addr_t];
  data_t exm [addr_t];
  function automatic data_t rdm(ref data_t m [addr_t], input addr_t a);
    return m.exists(a) ? m[a] : 32'hBAD0_0000 ^ a;
  endfunction

  // L1 model: random grant, data one cycle later
  always @(negedge clk) lr = $urandom_range(0, 2) != 0;
  always @(posedge clk) begin
    lsv <= 0;
    if (lv && lr) begin
      if (lq.we) l1m[lq.addr] = lq.wdata;
      lsv <= 1; ls <= '{rdata: rdm(l1m, lq.addr), err: 1'b0, id: lq.id};
    end
  end
  // external model: random accept, 1..6 cycle delay, error above 0xF000_0000
  bus_req_t ep [$]; int ed = 0;
  always @(negedge clk) begin
    er = (ep.size() == 0) && $urandom_range(0, 1);
    if (ed > 0) ed--;
    if (!esv && ep.size() > 0 && ed == 0) begin
      esv = 1; es.id = ep[0].id; es.err = ep[0].addr >= 32'hF000_0000;
      es.rdata = rdm(exm, ep[0].addr);
    end
  end
  always @(posedge clk) begin
    if (ev && er) begin
      if (eq.we && eq.addr < 32'hF000_0000) exm[eq.addr] = eq.wdata;
      ep.push_back(eq); ed = $urandom_range(1, 6);
    end
    if (esv && esr) begin esv <= 0; void'(ep.pop_front()); end
  end
  always @(negedge clk) for (int c = 0; c < 4; c++) if (done[c]) done_cnt[c]++;

  task automatic prog(input int ch, input addr_t s, input addr_t d, input int len);
    wr(32'h20*ch + 32'h0, s);
    wr(32'h20*ch + 32'h4, d);
    wr(32'h20*ch + 32'h8, len);
    wr(32'h20*ch + 32'hC, 1);
  endtask

  initial begin
    data_t r;
    esv = 0; es = '0; lsv = 0; ls = '0;
    for (int c = 0; c < 4; c++) done_cnt[c] = 0;
    for (int i = 0; i < 64; i++) begin
      l1m[L1B + 4*i] = $urandom;
      exm[32'h8000_0000 + 4*i] = $urandom;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    prog(0, L1B,              32'h9000_0000,   64);   // L1 -> ext
    prog(1, 32'h8000_0000,    L1B + 32'h1000,  64);   // ext -> L1
    prog(2, 32'h8000_0040,    32'hA000_0000,   64);   // ext -> ext
    prog(3, L1B + 32'h40,     L1B + 32'h2000,  64);   // L1 -> L1
    rd(32'h100, r);
    checks++; if (r == 0) begin failures++; $display("FAIL not busy after start"); end
    do rd(32'h100, r); while (r != 0);
    for (int i = 0; i < 16; i++) begin
      check("L1->ext",  rdm(exm, 32'h9000_0000 + 4*i),  rdm(l1m, L1B + 4*i));
      check("ext->L1",  rdm(l1m, L1B + 32'h1000 + 4*i), rdm(exm, 32'h8000_0000 + 4*i));
      check("ext->ext", rdm(exm, 32'hA000_0000 + 4*i),  rdm(exm, 32'h8000_0040 + 4*i));
      check("L1->L1",   rdm(l1m, L1B + 32'h2000 + 4*i), rdm(l1m, L1B + 32'h40 + 4*i));
    end
    for (int c = 0; c < 4; c++) check("done pulses", data_t'(done_cnt[c]), 1);
    rd(32'h104, r); check("no error", r, 0);
    prog(1, L1B, 32'hF000_0000, 8);
    do rd(32'h100, r); while (r != 0);
    rd(32'h104, r); check("error flag", r, 32'h2);
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
