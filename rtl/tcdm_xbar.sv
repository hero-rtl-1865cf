// tcdm_xbar: the cluster's low-latency logarithmic interconnect ("X-Bar")
// between its masters (PEs, DMA engine, external port) and the NB banks of
// the L1 scratchpad.
//
// Addresses are word-interleaved over the banks: bank = addr[2 +: log2(NB)],
// row = the bits above. Each bank has its own round-robin arbiter, so
// masters that target different banks are all served in the same cycle and
// only masters that collide on one bank wait (req_ready_o low). A granted
// access returns its data and the echoed ID exactly one cycle later
// (rsp_valid_o); a master must always take that response, there is no
// back-pressure on the response side. Word interleaving and round-robin
// arbitration follow common practice for this kind of cluster; the source
// names the interconnect and its low latency but not its insides.
module tcdm_xbar
  import hero_pkg::*;
#(
  parameter int unsigned NM       = 10,     // masters
  parameter int unsigned NB       = 16,     // banks
  parameter int unsigned BANK_WORDS = 4096, // words per bank
  localparam int unsigned BB      = $clog2(NB),
  localparam int unsigned RW      = $clog2(BANK_WORDS),
  localparam int unsigned MW      = (NM > 1) ? $clog2(NM) : 1
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic     [NM-1:0]  req_valid_i,
  output logic     [NM-1:0]  req_ready_o,
  input  bus_req_t [NM-1:0]  req_i,
  output logic     [NM-1:0]  rsp_valid_o,
  output bus_rsp_t [NM-1:0]  rsp_o,
  // bank side
  output logic     [NB-1:0]            bank_req_o,
  output logic     [NB-1:0]            bank_we_o,
  output logic     [NB-1:0][RW-1:0]    bank_addr_o,
  output logic     [NB-1:0][DW/8-1:0]  bank_be_o,
  output data_t    [NB-1:0]            bank_wdata_o,
  input  data_t    [NB-1:0]            bank_rdata_i
);
  logic [NM-1:0][BB-1:0] tgt;
  logic [NB-1:0][MW-1:0] last_q, win;
  logic [NB-1:0]         any;

  always_comb
    for (int unsigned m = 0; m < NM; m++) tgt[m] = req_i[m].addr[2 +: BB];

  // per-bank round-robin arbitration
  always_comb begin
    for (int unsigned b = 0; b < NB; b++) begin
      any[b] = 1'b0;
      win[b] = '0;
      for (int unsigned k = 1; k <= NM; k++) begin
        int unsigned m;
        m = (int'(last_q[b]) + k) % NM;
        if (!any[b] && req_valid_i[m] && tgt[m] == BB'(b)) begin
          any[b] = 1'b1;
          win[b] = MW'(m);
        end
      end
      bank_req_o[b]   = any[b];
      bank_we_o[b]    = req_i[win[b]].we;
      bank_addr_o[b]  = req_i[win[b]].addr[2+BB +: RW];
      bank_be_o[b]    = req_i[win[b]].be;
      bank_wdata_o[b] = req_i[win[b]].wdata;
    end
    for (int unsigned m = 0; m < NM; m++)
      req_ready_o[m] = req_valid_i[m] && any[tgt[m]] && win[tgt[m]] == MW'(m);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned b = 0; b < NB; b++) last_q[b] <= MW'(NM-1);
    end else begin
      for (int unsigned b = 0; b < NB; b++) if (any[b]) last_q[b] <= win[b];
    end
  end

  // response: one cycle after the grant
  logic     [NM-1:0]          gnt_q;
  logic     [NM-1:0][BB-1:0]  bank_q;
  id_t      [NM-1:0]          id_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) gnt_q <= '0;
    else         gnt_q <= req_ready_o;
  end
  always_ff @(posedge clk_i) begin
    for (int unsigned m = 0; m < NM; m++) begin
      bank_q[m] <= tgt[m];
      id_q[m]   <= req_i[m].id;
    end
  end

  always_comb begin
    for (int unsigned m = 0; m < NM; m++) begin
      rsp_valid_o[m]  = gnt_q[m];
      rsp_o[m].rdata  = bank_rdata_i[bank_q[m]];
      rsp_o[m].err    = 1'b0;
      rsp_o[m].id     = id_q[m];
    end
  end
endmodule
