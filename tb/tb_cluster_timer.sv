// tb_cluster_timer: self-checking test of the cluster timer. Checks reset
// values, that COUNT advances by exactly one per cycle while enabled and
// stays still while disabled, and that irq_o pulses every CMP+1 cycles.
module tb_cluster_timer;
  import hero_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  logic irq;
  int irq_cnt = 0;
  always @(posedge clk) if (irq) irq_cnt++;

  cluster_timer dut (
    .clk_i (clk), .rst_ni (rst_n), .req_valid_i (req_valid), .req_ready_o (req_ready), .req_i (req),
    .rsp_valid_o (rsp_valid), .rsp_ready_i (rsp_ready), .rsp_o (rsp), .irq_o (irq));

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
    data_t r, a, b;
    repeat (3) @(posedge clk); rst_n = 1;
    rd(32'h04, r); check("reset count", r, 0);
    rd(32'h00, r); check("reset ctrl", r, 0);
    wr(32'h08, 32'hFFFF_FFFF);
    wr(32'h00, 1);
    rd(32'h04, a);
    repeat (20) @(posedge clk);
    rd(32'h04, b);
    // each rd takes 3 cycles from drive to capture; 20 waiting cycles + the
    // cycles of one access give a fixed difference
    check("count rate", b - a, 22);
    wr(32'h00, 0);
    rd(32'h04, a);
    repeat (10) @(posedge clk);
    rd(32'h04, b);
    check("count frozen", b - a, 0);
    wr(32'h04, 0);
    wr(32'h08, 9);
    irq_cnt = 0;
    wr(32'h00, 1);
    repeat (100) @(posedge clk);
    wr(32'h00, 0);
    checks++;
    if (irq_cnt < 10 || irq_cnt > 11) begin failures++; $display("FAIL irq count %0d", irq_cnt); end
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
