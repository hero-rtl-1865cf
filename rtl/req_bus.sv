// req_bus: shared, address-decoded bus with NM masters and NS slaves.
//
// Used three times: as the SoC bus that joins the clusters, the L2 memory,
// the mailbox, the RAB and the host port; as the cluster bus inside each
// cluster; and as the cluster's peripheral bus. The source platform selects a
// bus (not a network on chip) as the system-level interconnect in its main
// configuration and notes that it has low latency but no scalable bandwidth;
// this module reproduces exactly that property: one request and one response
// cross it per cycle, whichever master or slave they belong to.
//
// Requests: a round-robin arbiter picks one valid master per cycle; its
// address is matched against the slaves' [base, end) windows, the first
// match wins and DEFAULT_SLV takes whatever matches none. The master sees
// ready in the same cycle as the chosen slave (zero-cycle bus). The master
// index is appended below the transaction ID (id << MB | m).
// Responses: a second round-robin arbiter picks one valid slave per cycle and
// returns its response to the master named by the low MB ID bits, with the
// ID shifted back. Arbitration, decoding and ID scheme are this design's
// own choices.
module req_bus
  import hero_pkg::*;
#(
  parameter int unsigned NM          = 2,
  parameter int unsigned NS          = 2,
  parameter logic [NS-1:0][AW-1:0] SLV_BASE = '0,
  parameter logic [NS-1:0][AW-1:0] SLV_END  = '0,
  parameter int unsigned DEFAULT_SLV = 0,
  localparam int unsigned MB         = (NM > 1) ? $clog2(NM) : 1
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // master side (requests in, responses out)
  input  logic     [NM-1:0]  mst_req_valid_i,
  output logic     [NM-1:0]  mst_req_ready_o,
  input  bus_req_t [NM-1:0]  mst_req_i,
  output logic     [NM-1:0]  mst_rsp_valid_o,
  input  logic     [NM-1:0]  mst_rsp_ready_i,
  output bus_rsp_t [NM-1:0]  mst_rsp_o,
  // slave side (requests out, responses in)
  output logic     [NS-1:0]  slv_req_valid_o,
  input  logic     [NS-1:0]  slv_req_ready_i,
  output bus_req_t [NS-1:0]  slv_req_o,
  input  logic     [NS-1:0]  slv_rsp_valid_i,
  output logic     [NS-1:0]  slv_rsp_ready_o,
  input  bus_rsp_t [NS-1:0]  slv_rsp_i
);
  localparam int unsigned SB = (NS > 1) ? $clog2(NS) : 1;

  // ---------------- request path ----------------
  logic [MB-1:0] req_last_q;   // master granted last
  logic [MB-1:0] req_win;
  logic          req_any;
  logic [SB-1:0] req_sel;
  bus_req_t      req_fwd;

  always_comb begin
    req_any = 1'b0;
    req_win = '0;
    for (int unsigned k = 1; k <= NM; k++) begin
      int unsigned m;
      m = (int'(req_last_q) + k) % NM;
      if (!req_any && mst_req_valid_i[m]) begin
        req_any = 1'b1;
        req_win = MB'(m);
      end
    end
  end

  always_comb begin
    logic hit;
    hit     = 1'b0;
    req_sel = SB'(DEFAULT_SLV);
    for (int unsigned s = 0; s < NS; s++) begin
      if (!hit && mst_req_i[req_win].addr >= SLV_BASE[s] && mst_req_i[req_win].addr < SLV_END[s]) begin
        hit     = 1'b1;
        req_sel = SB'(s);
      end
    end
  end

  always_comb begin
    req_fwd    = mst_req_i[req_win];
    req_fwd.id = (mst_req_i[req_win].id << MB) | id_t'(req_win);
    for (int unsigned s = 0; s < NS; s++) begin
      slv_req_valid_o[s] = req_any && (req_sel == SB'(s));
      slv_req_o[s]       = req_fwd;
    end
    for (int unsigned m = 0; m < NM; m++)
      mst_req_ready_o[m] = req_any && (req_win == MB'(m)) && slv_req_ready_i[req_sel];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                                       req_last_q <= MB'(NM-1);
    else if (req_any && slv_req_ready_i[req_sel])      req_last_q <= req_win;
  end

  // ---------------- response path ----------------
  logic [SB-1:0] rsp_last_q;
  logic [SB-1:0] rsp_win;
  logic          rsp_any;
  logic [MB-1:0] rsp_dst;

  always_comb begin
    rsp_any = 1'b0;
    rsp_win = '0;
    for (int unsigned k = 1; k <= NS; k++) begin
      int unsigned s;
      s = (int'(rsp_last_q) + k) % NS;
      if (!rsp_any && slv_rsp_valid_i[s]) begin
        rsp_any = 1'b1;
        rsp_win = SB'(s);
      end
    end
    rsp_dst = slv_rsp_i[rsp_win].id[MB-1:0];
  end

  always_comb begin
    for (int unsigned m = 0; m < NM; m++) begin
      mst_rsp_valid_o[m] = rsp_any && (rsp_dst == MB'(m));
      mst_rsp_o[m]       = slv_rsp_i[rsp_win];
      mst_rsp_o[m].id    = slv_rsp_i[rsp_win].id >> MB;
    end
    for (int unsigned s = 0; s < NS; s++)
      slv_rsp_ready_o[s] = rsp_any && (rsp_win == SB'(s)) && mst_rsp_ready_i[rsp_dst];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                                  rsp_last_q <= SB'(NS-1);
    else if (rsp_any && mst_rsp_ready_i[rsp_dst]) rsp_last_q <= rsp_win;
  end

  // A master must hold its request until it is accepted.
  for (genvar m = 0; m < NM; m++) begin : g_assert
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      mst_req_valid_i[m] && !mst_req_ready_o[m] |=> mst_req_valid_i[m]);
  end

endmodule
