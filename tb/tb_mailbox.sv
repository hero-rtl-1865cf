// tb_mailbox: self-checking test of the mailbox. The host sends words to the
// PMCA and back, order and interrupt lines are compared with a queue model,
// and overflow and underflow must return err.
module tb_mailbox;
  import hero_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  logic irq_host, irq_pmca;
  localparam addr_t PM = MBOX_BASE, HO = MBOX_BASE + 32'h100;

  mailbox #(.DEPTH(4)) dut (
    .clk_i (clk), .rst_ni (rst_n), .req_valid_i (req_valid), .req_ready_o (req_ready), .req_i (req),
    .rsp_valid_o (rsp_valid), .rsp_ready_i (rsp_ready), .rsp_o (rsp),
    .irq_host_o (irq_host), .irq_pmca_o (irq_pmca));

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


  initial begin
    data_t r; logic e;
    data_t q[$];
    repeat (3) @(posedge clk); rst_n = 1;
    check("irq idle", data_t'({irq_host, irq_pmca}), 0);
    for (int i = 0; i < 4; i++) begin
      data_t v;
      v = $urandom;
      wr(HO, v); q.push_back(v);
    end
    check("irq_pmca", data_t'(irq_pmca), 1);
    rd(PM + 4, r); check("pmca status", r, 32'h0000_0400);
    bus_acc(1, HO, 32'h1, r, e); check("overflow err", data_t'(e), 1);
    for (int i = 0; i < 4; i++) begin
      rd(PM, r); check("host->pmca order", r, q.pop_front());
    end
    bus_acc(0, PM, 0, r, e); check("underflow err", data_t'(e), 1);
    check("irq_pmca clear", data_t'(irq_pmca), 0);
    wr(PM, 32'hCAFE_0001);
    check("irq_host", data_t'(irq_host), 1);
    rd(HO, r); check("pmca->host", r, 32'hCAFE_0001);
    check("irq_host clear", data_t'(irq_host), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
