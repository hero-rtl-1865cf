// tb_tcdm_xbar: self-checking test of the L1 interconnect with 4 masters and
// 4 real banks. Each master issues random reads and writes to a shared
// memory; a reference model is updated in grant order. Checks: read data
// and ID one cycle after the grant, that masters hitting different banks
// are all granted in the same cycle, and that a bank conflict stalls all
// but one master.
module tb_tcdm_xbar;
  import hero_pkg::*;
  localparam int NM = 4, NB = 4, BW = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic     [NM-1:0] rv, rr, sv;
  bus_req_t [NM-1:0] rq;
  bus_rsp_t [NM-1:0] rs;
  logic     [NB-1:0]           breq, bwe;
  logic     [NB-1:0][5:0]      baddr;
  logic     [NB-1:0][3:0]      bbe;
  data_t    [NB-1:0]           bwd, brd;
  data_t ref_mem [NB*BW];

  tcdm_xbar #(.NM(NM), .NB(NB), .BANK_WORDS(BW)) dut (
    .clk_i (clk), .rst_ni (rst_n), .req_valid_i (rv), .req_ready_o (rr), .req_i (rq),
    .rsp_valid_o (sv), .rsp_o (rs), .bank_req_o (breq), .bank_we_o (bwe), .bank_addr_o (baddr),
    .bank_be_o (bbe), .bank_wdata_o (bwd), .bank_rdata_i (brd));
  for (genvar b = 0; b < NB; b++) begin : g_b
    spm_bank #(.WORDS(BW)) i_b (.clk_i (clk), .req_i (breq[b]), .we_i (bwe[b]), .addr_i (baddr[b]),
                                .be_i (bbe[b]), .wdata_i (bwd[b]), .rdata_o (brd[b]));
  end

  // expected read data per master, captured at the grant
  data_t exp_q [NM];
  logic  exp_v [NM];
  int parallel = 0, conflicts = 0;
  initial begin
    rv = '0; rq = '0;
    for (int m = 0; m < NM; m++) exp_v[m] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // initialise memory through master 0
    for (int i = 0; i < NB*BW; i++) begin
      @(negedge clk); rv = '0; rv[0] = 1; rq[0] = '0; rq[0].addr = CLUSTER_BASE + 4*i;
      rq[0].we = 1; rq[0].be = '1; rq[0].wdata = 32'h1000_0000 + i; ref_mem[i] = rq[0].wdata;
      #1; while (!rr[0]) begin @(negedge clk); #1; end
    end
    @(negedge clk); rv = '0;
    // same-cycle access to four different banks
    @(negedge clk);
    for (int m = 0; m < NM; m++) begin
      rv[m] = 1; rq[m] = '0; rq[m].addr = CLUSTER_BASE + 4*m; rq[m].id = id_t'(m);
    end
    #1; checks++; if (rr != '1) begin failures++; $display("FAIL: distinct banks not all granted"); end
    @(negedge clk); rv = '0;
    // all four to bank 0
    @(negedge clk);
    for (int m = 0; m < NM; m++) begin
      rv[m] = 1; rq[m] = '0; rq[m].addr = CLUSTER_BASE + 16*m; rq[m].id = id_t'(m);
    end
    #1; checks++; if ($countones(rr) != 1) begin failures++; $display("FAIL: conflict grant %b", rr); end
    @(negedge clk); rv = '0;
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      #1;
      // check responses (sampled mid cycle)
      for (int m = 0; m < NM; m++) if (exp_v[m]) begin
        checks++;
        if (!sv[m] || rs[m].rdata !== exp_q[m] || rs[m].id !== id_t'(m)) begin
          failures++; $display("FAIL read m%0d: v=%b %h vs %h", m, sv[m], rs[m].rdata, exp_q[m]);
        end
        exp_v[m] = 0;
      end
      for (int m = 0; m < NM; m++) begin
        if (!(rv[m] && !rr[m])) begin  // hold stalled requests
          rv[m] = $urandom_range(0, 2) != 0;
          rq[m].addr = CLUSTER_BASE + 4*$urandom_range(0, NB*BW-1);
          rq[m].we = $urandom_range(0, 1);
          rq[m].be = '1;
          rq[m].wdata = $urandom;
          rq[m].id = id_t'(m);
        end
      end
      #1;
      if ($countones(rr) > 1) parallel++;
      if ($countones(rv) > $countones(rr)) conflicts++;
      // apply granted accesses to the model in master order (banks differ)
      for (int m = 0; m < NM; m++) if (rr[m]) begin
        int w;
        w = (rq[m].addr - CLUSTER_BASE) / 4;
        if (rq[m].we) ref_mem[w] = rq[m].wdata;
        else begin exp_q[m] = ref_mem[w]; exp_v[m] = 1; end
      end
    end
    checks++; if (parallel == 0 || conflicts == 0) begin failures++; $display("FAIL coverage"); end
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
