// tb_event_tracer: self-checking test of the event tracer (buffer depth 8).
// Random events are offered; only those with the strobe set, the traced
// design running and data[3:0] == 0xA under the programmed mask must be
// recorded, with the timestamp of their cycle. Checks: full_o after 8
// events, no event recorded while full, every stored entry read back
// through the register port, and CLEAR.
module tb_event_tracer;
  import hero_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  bus_req_t req = '0; bus_rsp_t rsp;
  logic run = 0, ev = 0, full;
  logic [63:0] ed = '0;
  logic [31:0] ts = 0;

  event_tracer #(.EVT_W(64), .DEPTH(8), .TRACER_ID(5)) dut (
    .clk_i (clk), .rst_ni (rst_n), .run_i (run), .ts_i (ts), .evt_valid_i (ev), .evt_data_i (ed),
    .full_o (full), .req_valid_i (req_valid), .req_ready_o (req_ready), .req_i (req),
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


  logic [31:0] exp_ts [$];
  logic [63:0] exp_d [$];
  always @(posedge clk) if (run) ts <= ts + 1;

  task automatic stimulate(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      run = $urandom_range(0, 4) != 0;
      ev  = $urandom_range(0, 1);
      ed  = {$urandom, $urandom};
      if ($urandom_range(0, 1)) ed[3:0] = 4'hA;
      #1;
      if (run && ev && ed[3:0] == 4'hA && exp_d.size() < 8) begin
        exp_ts.push_back(ts); exp_d.push_back(ed);
      end
    end
    @(negedge clk); ev = 0; run = 0;
  endtask

  task automatic drain();
    data_t r;
    rd(32'h00C, r); check("count", r, data_t'(exp_d.size()));
    for (int i = 0; i < exp_d.size(); i++) begin
      rd(32'h8000 + 16*i, r);     check("entry ts", r, exp_ts[i]);
      rd(32'h8000 + 16*i + 4, r); check("entry data lo", r, exp_d[i][31:0]);
      rd(32'h8000 + 16*i + 8, r); check("entry data hi", r, exp_d[i][63:32]);
    end
    wr(32'h010, 0);
    rd(32'h00C, r); check("count after clear", r, 0);
    exp_ts.delete(); exp_d.delete();
  endtask

  initial begin
    data_t r;
    repeat (3) @(posedge clk); rst_n = 1;
    rd(32'h014, r); check("tracer id", r, 5);
    stimulate(20);
    rd(32'h00C, r); check("disabled records nothing", r, 0);
    exp_ts.delete(); exp_d.delete();
    wr(32'h004, 32'hF); wr(32'h008, 32'hA); wr(32'h000, 1);
    stimulate(6);
    drain();
    stimulate(200);
    check("full", data_t'(full), 1);
    drain();
    check("not full after clear", data_t'(full), 0);
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
