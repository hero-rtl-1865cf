// tb_event_unit: self-checking test of the event unit. PEs (IDs 0..7 in the
// low 4 ID bits) put themselves to sleep through SLEEP, another PE wakes
// them through WAKE and EVENT, and STATUS and sleep_o are compared with the
// expected masks after every step. Responses must arrive one cycle after
// acceptance.
module tb_event_unit;
  import hero_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  logic [7:0] sleep;
  logic [7:0] model;

  event_unit #(.NPE(8), .ID_LSB(4)) dut (
    .clk_i (clk), .rst_ni (rst_n), .req_valid_i (req_valid), .req_ready_o (req_ready), .req_i (req),
    .rsp_valid_o (rsp_valid), .rsp_ready_i (rsp_ready), .rsp_o (rsp), .sleep_o (sleep));

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


  task automatic sleep_as(input int pe);
    data_t r; logic e;
    @(negedge clk);
    req_valid = 1; req.addr = 32'h0; req.we = 1; req.wdata = '0; req.be = '1; req.id = id_t'(pe);
    #1; while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1; req_valid = 0;
    checks++; if (!rsp_valid) begin failures++; $display("FAIL response latency"); end
    @(posedge clk); #1;
    r = '0; e = 0;
  endtask

  initial begin
    data_t r;
    model = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    check("reset sleep", data_t'(sleep), 0);
    for (int i = 0; i < 8; i++) begin
      int pe;
      pe = $urandom_range(0, 7);
      sleep_as(pe); model[pe] = 1;
      check("sleep_o after SLEEP", data_t'(sleep), data_t'(model));
      rd(32'h08, r); check("STATUS", r, data_t'(model));
    end
    sleep_as(3); sleep_as(5); model[3] = 1; model[5] = 1;
    wr(32'h04, 32'h08); model[3] = 0;
    check("WAKE one", data_t'(sleep), data_t'(model));
    wr(32'h0C, 32'hFF); model = '0;
    check("EVENT all", data_t'(sleep), 0);
    rd(32'h08, r); check("STATUS after wake", r, 0);
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
