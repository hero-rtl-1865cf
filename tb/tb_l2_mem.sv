// tb_l2_mem: self-checking test of the L2 scratchpad. Random full-word and
// byte-enable writes are mirrored in a reference array and read back; the
// response to a read must come one cycle after acceptance and carry the ID.
module tb_l2_mem;
  import hero_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  data_t ref_mem [int];

  l2_mem #(.SIZE_BYTES(4096)) dut (
    .clk_i (clk), .rst_ni (rst_n), .req_valid_i (req_valid), .req_ready_o (req_ready), .req_i (req),
    .rsp_valid_o (rsp_valid), .rsp_ready_i (rsp_ready), .rsp_o (rsp));

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
    data_t r;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      wr(L2_BASE + 4*i, 32'hA500_0000 + i);
      ref_mem[i] = 32'hA500_0000 + i;
    end
    // byte writes
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      req_valid = 1; req.addr = L2_BASE + 4*i; req.we = 1; req.wdata = 32'hDEAD_BEEF; req.be = 4'b0101;
      #1; while (!req_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1; req_valid = 0;
      while (!rsp_valid) begin @(negedge clk); #1; end
      @(posedge clk); #1;
      ref_mem[i] = {ref_mem[i][31:24], 8'hAD, ref_mem[i][15:8], 8'hEF};
    end
    for (int i = 0; i < 64; i++) begin
      rd(L2_BASE + 4*i, r);
      check("readback", r, ref_mem[i]);
    end
    // latency and ID
    @(negedge clk);
    req_valid = 1; req.addr = L2_BASE + 8; req.we = 0; req.id = 16'h1234;
    @(posedge clk); #1; req_valid = 0;
    checks++;
    if (!(rsp_valid && rsp.id == 16'h1234 && rsp.rdata == ref_mem[2])) begin
      failures++; $display("FAIL one-cycle response");
    end
    @(posedge clk);
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
