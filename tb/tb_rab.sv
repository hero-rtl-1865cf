// tb_rab: self-checking test of the remapping address block with a small
// L2 TLB (128 entries, 32 ways, 4 banks). A host memory model answers
// translated requests after 4 cycles. Checks:
//  * L1 hit: the translated request leaves in the same cycle it is accepted
//    (single-cycle translation) with the right physical address;
//  * L2 hit: the request leaves after the multi-cycle L2 search;
//  * hit under miss: an L1 hit issued behind an L2 search overtakes it;
//  * miss in both TLBs: error response, the miss FIFO holds address, write
//    flag and ID; after software writes an L1 entry the retry succeeds;
//  * data written through one mapping is read back through another.
module tb_rab;
  import hero_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rv = 0, rr, sv, sr = 1;
  bus_req_t rq = '0; bus_rsp_t rs;
  logic hv, hr = 1, hsv = 0, hsr;
  host_req_t hq; bus_rsp_t hs = '0;
  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  bus_req_t req = '0; bus_rsp_t rsp;
  logic miss;

  rab #(.L1_ENTRIES(8), .L2_ENTRIES(128), .L2_WAYS(32), .L2_BANKS(4), .MISS_DEPTH(4)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_valid_i (rv), .req_ready_o (rr), .req_i (rq), .rsp_valid_o (sv), .rsp_ready_i (sr), .rsp_o (rs),
    .host_req_valid_o (hv), .host_req_ready_i (hr), .host_req_o (hq),
    .host_rsp_valid_i (hsv), .host_rsp_ready_o (hsr), .host_rsp_i (hs),
    .cfg_req_valid_i (req_valid), .cfg_req_ready_o (req_ready), .cfg_req_i (req),
    .cfg_rsp_valid_o (rsp_valid), .cfg_rsp_ready_i (rsp_ready), .cfg_rsp_o (rsp), .miss_o (miss));

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


  // host memory model
  data_t hmem [paddr_t];
  host_req_t hpend [$];
  int hdelay [$];
  id_t host_order [$];
  paddr_t host_addr [id_t];
  int cyc = 0;
  int accept_cyc [id_t];
  int host_cyc [id_t];
  always @(posedge clk) begin
    cyc++;
    if (rv && rr) accept_cyc[rq.id] = cyc;
    if (hv && hr) begin
      hpend.push_back(hq); hdelay.push_back(4);
      host_order.push_back(hq.id); host_addr[hq.id] = hq.addr; host_cyc[hq.id] = cyc;
      if (hq.we) hmem[hq.addr] = hq.wdata;
    end
    if (hsv && hsr) begin hsv <= 0; void'(hpend.pop_front()); void'(hdelay.pop_front()); end
  end
  always @(negedge clk) begin
    foreach (hdelay[i]) if (hdelay[i] > 0) hdelay[i]--;
    if (!hsv && hpend.size() > 0 && hdelay[0] == 0) begin
      hsv = 1; hs.id = hpend[0].id; hs.err = 0;
      hs.rdata = hmem.exists(hpend[0].addr) ? hmem[hpend[0].addr] : 32'hBAD0_BAD0;
    end
  end
  // responses at the slave port
  bus_rsp_t got [id_t];
  always @(posedge clk) if (sv && sr) got[rs.id] = rs;

  task automatic send(input addr_t a, input logic w, input data_t d, input id_t id);
    @(negedge clk); rv = 1; rq.addr = a; rq.we = w; rq.wdata = d; rq.be = '1; rq.id = id;
    #1; while (!rr) begin @(negedge clk); #1; end
    @(posedge clk); #1; rv = 0;
  endtask
  task automatic wait_rsp(input id_t id, output bus_rsp_t r);
    int n = 0;
    while (!got.exists(id) && n < 200) begin @(posedge clk); n++; end
    checks++;
    if (!got.exists(id)) begin failures++; $display("FAIL no response for id %h", id); r = '0; end
    else begin r = got[id]; got.delete(id); end
  endtask
  task automatic map(input bit l2, input int slot, input addr_t va, input paddr_t pa, input bit wr_ok);
    wr(RAB_CFG_BASE + 8'h00, va);
    wr(RAB_CFG_BASE + 8'h04, data_t'(pa >> 12));
    wr(RAB_CFG_BASE + 8'h08, {29'h0, wr_ok, 1'b1, 1'b1});
    wr(RAB_CFG_BASE + (l2 ? 8'h10 : 8'h0C), data_t'(slot));
  endtask

  initial begin
    bus_rsp_t r; data_t d;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (40) @(posedge clk);   // L2 TLB clears itself after reset
    map(0, 0, 32'h4000_0000, 40'h80_1234_5000, 1);
    map(1, 7, 32'h4000_1000, 40'h80_2222_0000, 1);
    map(1, 30, 32'h4000_2000, 40'h80_3333_1000, 0);
    // L1 hit: write then read
    send(32'h4000_0010, 1, 32'h1111_2222, 16'h10);
    wait_rsp(16'h10, r);
    check("L1 hit PA", data_t'(host_addr[16'h10] >> 8), data_t'(40'h80_1234_5010 >> 8));
    check("L1 hit single cycle", data_t'(host_cyc[16'h10] - accept_cyc[16'h10]), 0);
    send(32'h4000_0010, 0, 0, 16'h11);
    wait_rsp(16'h11, r);
    check("L1 hit read data", r.rdata, 32'h1111_2222);
    // L2 hit (way 7: step 1 of the search)
    send(32'h4000_1040, 0, 0, 16'h20);
    wait_rsp(16'h20, r);
    check("L2 hit PA", data_t'(host_addr[16'h20]), data_t'(40'h80_2222_0040));
    checks++;
    if (host_cyc[16'h20] - accept_cyc[16'h20] < 3) begin failures++; $display("FAIL L2 search too short"); end
    check("L2 hit err", data_t'(r.err), 0);
    // hit under miss: L2-path request then L1-hit request
    host_order.delete();
    send(32'h4000_2044, 0, 0, 16'h30);   // L2 way 30: last search step
    send(32'h4000_0010, 0, 0, 16'h31);   // L1 hit
    wait_rsp(16'h30, r); wait_rsp(16'h31, r);
    checks++;
    if (host_order.size() != 2 || host_order[0] != 16'h31 || host_order[1] != 16'h30) begin
      failures++; $display("FAIL hit under miss order %p", host_order);
    end
    // write through read-only L2 entry -> permission miss
    send(32'h4000_2048, 1, 32'h5, 16'h40);
    wait_rsp(16'h40, r);
    check("permission fault err", data_t'(r.err), 1);
    rd(RAB_CFG_BASE + 8'h2C, d); check("miss count 1", d, 1);
    rd(RAB_CFG_BASE + 8'h24, d); check("miss meta", d, {15'h0, 1'b1, 16'h40});
    wr(RAB_CFG_BASE + 8'h28, 0);
    // full miss
    send(32'h5555_6078, 0, 0, 16'h50);
    wait_rsp(16'h50, r);
    check("miss err", data_t'(r.err), 1);
    check("miss_o", data_t'(miss), 1);
    rd(RAB_CFG_BASE + 8'h20, d); check("miss VA", d, 32'h5555_6078);
    rd(RAB_CFG_BASE + 8'h24, d); check("miss meta id", d, {16'h0, 16'h50});
    wr(RAB_CFG_BASE + 8'h28, 0);
    rd(RAB_CFG_BASE + 8'h2C, d); check("miss count 0", d, 0);
    // miss handling: map into L1 (same PA as first page) and retry
    map(0, 3, 32'h5555_6000, 40'h80_1234_5000, 1);
    send(32'h5555_6010, 0, 0, 16'h51);
    wait_rsp(16'h51, r);
    check("retry err", data_t'(r.err), 0);
    check("retry data via alias", r.rdata, 32'h1111_2222);
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
