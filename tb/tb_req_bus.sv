// tb_req_bus: self-checking test of the shared bus with 3 masters and 3
// slaves (two address windows and a default slave). Masters issue random
// reads, one at a time each; slave models accept with random back-pressure
// and answer after a random delay with data derived from the slave index
// and the address. Checks: every response reaches the master that issued
// it with its original ID and the right slave's data; the master index is
// appended below the ID; at most one request and one response cross per
// cycle; every master is served (round-robin fairness).
module tb_req_bus;
  import hero_pkg::*;
  localparam int NM = 3, NS = 3;
  localparam logic [NS-1:0][AW-1:0] SB = {32'h0, 32'h0000_2000, 32'h0000_1000};
  localparam logic [NS-1:0][AW-1:0] SE = {32'h0, 32'h0000_3000, 32'h0000_2000};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     [NM-1:0] mrv, mrr, msv, msr;
  bus_req_t [NM-1:0] mrq;
  bus_rsp_t [NM-1:0] mrs;
  logic     [NS-1:0] srv, srr, ssv, ssr;
  bus_req_t [NS-1:0] srq;
  bus_rsp_t [NS-1:0] srs;

  req_bus #(.NM(NM), .NS(NS), .SLV_BASE(SB), .SLV_END(SE), .DEFAULT_SLV(2)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .mst_req_valid_i (mrv), .mst_req_ready_o (mrr), .mst_req_i (mrq),
    .mst_rsp_valid_o (msv), .mst_rsp_ready_i (msr), .mst_rsp_o (mrs),
    .slv_req_valid_o (srv), .slv_req_ready_i (srr), .slv_req_o (srq),
    .slv_rsp_valid_i (ssv), .slv_rsp_ready_o (ssr), .slv_rsp_i (srs));

  function automatic int dec(addr_t a);
    for (int s = 0; s < NS; s++) if (a >= SB[s] && a < SE[s]) return s;
    return 2;
  endfunction
  function automatic data_t sdata(int s, addr_t a);
    return a ^ (data_t'(s + 1) << 28);
  endfunction

  // slave models: queue of accepted requests, answered in order after delay
  bus_req_t sq [NS][$];
  int       sdelay [NS];
  // master state
  logic  busy [NM];
  addr_t maddr [NM];
  id_t   mid [NM];
  int    served [NM];

  always @(negedge clk) if (rst_n) begin
    // slaves: drive ready and responses
    for (int s = 0; s < NS; s++) begin
      srr[s] = $urandom_range(0, 3) != 0;
      if (!ssv[s] && sq[s].size() > 0) begin
        if (sdelay[s] > 0) sdelay[s]--;
        else begin
          ssv[s] = 1;
          srs[s].id = sq[s][0].id;
          srs[s].rdata = sdata(s, sq[s][0].addr);
          srs[s].err = 0;
        end
      end
    end
    // masters
    for (int m = 0; m < NM; m++) begin
      msr[m] = $urandom_range(0, 3) != 0;
      if (!busy[m] && $urandom_range(0, 1)) begin
        busy[m] = 1; mrv[m] = 1;
        mrq[m] = '0;
        case ($urandom_range(0, 2))
          0: mrq[m].addr = 32'h1000 + 4*$urandom_range(0, 1023);
          1: mrq[m].addr = 32'h2000 + 4*$urandom_range(0, 1023);
          default: mrq[m].addr = 32'h8000_0000 + 4*$urandom_range(0, 1023);
        endcase
        mrq[m].id = id_t'($urandom_range(0, 255));
        maddr[m] = mrq[m].addr; mid[m] = mrq[m].id;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    int nreq, nrsp;
    nreq = 0; nrsp = 0;
    for (int s = 0; s < NS; s++) begin
      if (srv[s] && srr[s]) begin
        nreq++;
        checks++;
        if (dec(srq[s].addr) != s || srq[s].id[1:0] != 2'(srq[s].id[1:0]) ||
            int'(srq[s].id[1:0]) >= NM || (srq[s].id >> 2) != mid[srq[s].id[1:0]]) begin
          failures++; $display("FAIL request at slave %0d addr %h id %h", s, srq[s].addr, srq[s].id);
        end
        sq[s].push_back(srq[s]);
        sdelay[s] = $urandom_range(0, 3);
      end
      if (ssv[s] && ssr[s]) begin
        nrsp++;
        void'(sq[s].pop_front());
        ssv[s] <= 0;
      end
    end
    for (int m = 0; m < NM; m++) begin
      if (mrv[m] && mrr[m]) mrv[m] <= 0;
      if (msv[m] && msr[m]) begin
        checks++;
        if (!busy[m] || mrs[m].id !== mid[m] || mrs[m].rdata !== sdata(dec(maddr[m]), maddr[m])) begin
          failures++; $display("FAIL response at master %0d: id %h/%h data %h", m, mrs[m].id, mid[m], mrs[m].rdata);
        end
        busy[m] <= 0;
        served[m]++;
      end
    end
    checks++;
    if (nreq > 1 || nrsp > 1) begin failures++; $display("FAIL more than one transfer per cycle"); end
  end

  initial begin
    mrv = '0; mrq = '0; msr = '0; srr = '0; ssv = '0; srs = '0;
    for (int m = 0; m < NM; m++) begin busy[m] = 0; served[m] = 0; end
    for (int s = 0; s < NS; s++) sdelay[s] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3000) @(posedge clk);
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (served[m] < 100) begin failures++; $display("FAIL master %0d served only %0d", m, served[m]); end
    end
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
