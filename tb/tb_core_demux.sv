// tb_core_demux: self-checking test of the PE data demultiplexer. Random
// addresses inside and outside the L1 window must reach exactly the right
// side, ready must come from that side, and responses from either side must
// reach the PE.
module tb_core_demux;
  import hero_pkg::*;
  int checks = 0, failures = 0;
  logic pv, pr, psv, lv, lr, lsv, qv, qr, qsv, qsr;
  bus_req_t preq, lreq, qreq;
  bus_rsp_t prsp, lrsp, qrsp;
  localparam addr_t B = 32'h1040_0000, S = 32'h0004_0000;

  core_demux #(.L1_BASE(B), .L1_SIZE(S)) dut (
    .pe_req_valid_i (pv), .pe_req_ready_o (pr), .pe_req_i (preq), .pe_rsp_valid_o (psv), .pe_rsp_o (prsp),
    .l1_req_valid_o (lv), .l1_req_ready_i (lr), .l1_req_o (lreq), .l1_rsp_valid_i (lsv), .l1_rsp_i (lrsp),
    .per_req_valid_o (qv), .per_req_ready_i (qr), .per_req_o (qreq), .per_rsp_valid_i (qsv),
    .per_rsp_ready_o (qsr), .per_rsp_i (qrsp));

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic in_l1;
      pv = 1; preq = '0;
      case ($urandom_range(0, 3))
        0: preq.addr = B + $urandom_range(0, S - 1);
        1: preq.addr = B - 1 - $urandom_range(0, 255);
        2: preq.addr = B + S + $urandom_range(0, 255);
        default: preq.addr = $urandom;
      endcase
      in_l1 = preq.addr >= B && preq.addr < B + S;
      lr = $urandom_range(0, 1); qr = $urandom_range(0, 1);
      lsv = 0; qsv = 0; lrsp = '0; qrsp = '0;
      #1;
      checks++;
      if (lv !== in_l1 || qv !== !in_l1 || pr !== (in_l1 ? lr : qr) || lreq.addr !== preq.addr || qreq.addr !== preq.addr) begin
        failures++; $display("FAIL route %h", preq.addr);
      end
      lsv = $urandom_range(0, 1); qsv = !lsv; lrsp.rdata = $urandom; qrsp.rdata = $urandom;
      #1;
      checks++;
      if (!psv || prsp.rdata !== (lsv ? lrsp.rdata : qrsp.rdata) || qsr !== !lsv) begin
        failures++; $display("FAIL response");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
