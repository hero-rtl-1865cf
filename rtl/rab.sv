// rab: remapping address block, the PMCA's virtual-memory unit.
//
// Every PMCA access to shared virtual memory (any address outside the
// PMCA's own address map) passes through the RAB, which translates the
// 32-bit virtual address into a 40-bit host physical address before the
// access leaves for the host's main memory. This lets host and PMCA share
// virtual address pointers.
//
// Translation path (slave port in, host port out):
//  * The L1 TLB (rab_l1_tlb) is looked up combinationally. On a hit with the
//    needed permission the translated request goes to the host port in the
//    same cycle.
//  * Otherwise the request is handed to the L2 TLB (rab_l2_tlb), which
//    searches its set over several cycles. Meanwhile the slave port keeps
//    accepting requests that hit in L1 (hit under miss); a second request
//    that also misses waits until the L2 TLB is free.
//  * An L2 hit sends the translated request to the host port (it has
//    priority over new L1 hits for that cycle).
//  * An L2 miss (or a permission fault) answers the request with err set,
//    which the PMCA software treats as "retry later", and records the miss
//    {virtual address, write flag, transaction ID} in the miss FIFO. Miss
//    handling software on the PMCA reads the FIFO, walks the host's page
//    table, writes a TLB entry and wakes the PE that missed, which then
//    retries.
//  Responses from the host are passed back unchanged; the RAB's own error
//  responses take priority over them.
//
// Configuration port (a slave on the SoC bus), word registers:
//   0x00 ENTRY_VPN    virtual address of the page (bits 31:12 are kept)
//   0x04 ENTRY_PPN    physical page number (physical address >> 12)
//   0x08 ENTRY_FLAGS  {wr_en[2], rd_en[1], valid[0]}
//   0x0C L1_COMMIT    write index: L1 entry[index] <= staged entry
//   0x10 L2_COMMIT    write way: L2 entry[set of VPN][way] <= staged entry
//   0x20 MISS_ADDR    read: virtual address of the oldest miss
//   0x24 MISS_META    read: {we[16], id[15:0]} of the oldest miss
//   0x28 MISS_POP     write: drop the oldest miss
//   0x2C MISS_COUNT   read: number of queued misses
// miss_o is high while the miss FIFO is not empty. The source gives the
// behaviour (single-cycle L1 hit, multi-cycle L2 search, hit under miss,
// miss queue, software miss handling) and the table sizes; registers, entry
// format and the err-flag convention for misses are this design's choices.
module rab
  import hero_pkg::*;
#(
  parameter int unsigned L1_ENTRIES = 32,
  parameter int unsigned L2_ENTRIES = 1024,
  parameter int unsigned L2_WAYS    = 32,
  parameter int unsigned L2_BANKS   = 4,
  parameter int unsigned MISS_DEPTH = 8
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // translated slave port (from the SoC bus)
  input  logic      req_valid_i,
  output logic      req_ready_o,
  input  bus_req_t  req_i,
  output logic      rsp_valid_o,
  input  logic      rsp_ready_i,
  output bus_rsp_t  rsp_o,
  // host memory port
  output logic      host_req_valid_o,
  input  logic      host_req_ready_i,
  output host_req_t host_req_o,
  input  logic      host_rsp_valid_i,
  output logic      host_rsp_ready_o,
  input  bus_rsp_t  host_rsp_i,
  // configuration port
  input  logic      cfg_req_valid_i,
  output logic      cfg_req_ready_o,
  input  bus_req_t  cfg_req_i,
  output logic      cfg_rsp_valid_o,
  input  logic      cfg_rsp_ready_i,
  output bus_rsp_t  cfg_rsp_o,
  output logic      miss_o
);
  localparam int unsigned L1IW = $clog2(L1_ENTRIES);
  localparam int unsigned L2WW = $clog2(L2_WAYS);
  localparam int unsigned MW   = $clog2(MISS_DEPTH);

  function automatic host_req_t translate(bus_req_t r, ppn_t ppn);
    host_req_t h;
    h.addr  = {ppn, r.addr[PAGE_BITS-1:0]};
    h.we    = r.we;
    h.be    = r.be;
    h.wdata = r.wdata;
    h.id    = r.id;
    return h;
  endfunction

  // ---------------- configuration staging ----------------
  tlb_entry_t stage_q;
  logic       l1_cfg_we, l2_cfg_we;
  logic [L1IW-1:0] l1_cfg_idx;
  logic [L2WW-1:0] l2_cfg_way;

  // ---------------- L1 TLB ----------------
  logic l1_hit, l1_perm;
  ppn_t l1_ppn;
  rab_l1_tlb #(.N(L1_ENTRIES)) i_l1 (
    .clk_i, .rst_ni,
    .vpn_i       (req_i.addr[AW-1:PAGE_BITS]),
    .we_i        (req_i.we),
    .hit_o       (l1_hit),
    .perm_ok_o   (l1_perm),
    .ppn_o       (l1_ppn),
    .cfg_we_i    (l1_cfg_we),
    .cfg_idx_i   (l1_cfg_idx),
    .cfg_entry_i (stage_q)
  );

  // ---------------- L2 TLB ----------------
  logic     l2_busy, l2_done, l2_hit, l2_perm, l2_start;
  ppn_t     l2_ppn;
  logic     pend_q;       // request owned by the L2 path
  bus_req_t pend_req_q;
  logic     res_q;        // L2 result waiting to leave
  logic     res_ok_q;     // 1: translated, 0: miss
  host_req_t res_req_q;

  rab_l2_tlb #(.ENTRIES(L2_ENTRIES), .WAYS(L2_WAYS), .BANKS(L2_BANKS)) i_l2 (
    .clk_i, .rst_ni,
    .start_i     (l2_start),
    .vpn_i       (req_i.addr[AW-1:PAGE_BITS]),
    .we_i        (req_i.we),
    .busy_o      (l2_busy),
    .done_o      (l2_done),
    .hit_o       (l2_hit),
    .perm_ok_o   (l2_perm),
    .ppn_o       (l2_ppn),
    .cfg_we_i    (l2_cfg_we),
    .cfg_way_i   (l2_cfg_way),
    .cfg_entry_i (stage_q)
  );

  // ---------------- request path ----------------
  wire l1_ok      = l1_hit && l1_perm;
  wire res_out_ok = res_q && res_ok_q;     // L2 hit leaving for the host
  logic err_full_q;
  bus_rsp_t err_rsp_q;
  wire res_fail_go = res_q && !res_ok_q && !err_full_q;  // L2 miss being answered

  always_comb begin
    host_req_valid_o = 1'b0;
    host_req_o       = translate(req_i, l1_ppn);
    req_ready_o      = 1'b0;
    l2_start         = 1'b0;
    if (res_out_ok) begin
      host_req_valid_o = 1'b1;
      host_req_o       = res_req_q;
    end else if (req_valid_i && l1_ok) begin
      host_req_valid_o = 1'b1;
      req_ready_o      = host_req_ready_i;
    end
    if (req_valid_i && !l1_ok && !pend_q && !l2_busy) begin
      req_ready_o = 1'b1;
      l2_start    = 1'b1;
    end
  end

  // ---------------- miss FIFO ----------------
  typedef struct packed { addr_t addr; logic we; id_t id; } miss_t;
  miss_t         miss_mem [MISS_DEPTH];
  logic [MW-1:0] miss_rd_q, miss_wr_q;
  logic [MW:0]   miss_cnt_q;
  wire miss_push = res_fail_go && (miss_cnt_q != (MW+1)'(MISS_DEPTH));
  logic miss_pop;
  assign miss_o = (miss_cnt_q != '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      miss_rd_q <= '0; miss_wr_q <= '0; miss_cnt_q <= '0;
    end else begin
      if (miss_push) miss_wr_q <= miss_wr_q + 1'b1;
      if (miss_pop)  miss_rd_q <= miss_rd_q + 1'b1;
      miss_cnt_q <= miss_cnt_q + (MW+1)'(miss_push) - (MW+1)'(miss_pop);
    end
  end
  always_ff @(posedge clk_i)
    if (miss_push) miss_mem[miss_wr_q] <= '{addr: pend_req_q.addr, we: pend_req_q.we, id: pend_req_q.id};

  // ---------------- L2 request state ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q <= 1'b0; pend_req_q <= '0; res_q <= 1'b0; res_ok_q <= 1'b0; res_req_q <= '0;
      err_full_q <= 1'b0; err_rsp_q <= '0;
    end else begin
      if (l2_start) begin
        pend_q     <= 1'b1;
        pend_req_q <= req_i;
      end
      if (l2_done) begin
        res_q     <= 1'b1;
        res_ok_q  <= l2_hit && l2_perm;
        res_req_q <= translate(pend_req_q, l2_ppn);
      end
      if (res_out_ok && host_req_ready_i) begin
        res_q  <= 1'b0;
        pend_q <= 1'b0;
      end
      if (err_full_q && rsp_ready_i) err_full_q <= 1'b0;
      if (res_fail_go) begin
        res_q      <= 1'b0;
        pend_q     <= 1'b0;
        err_full_q <= 1'b1;
        err_rsp_q  <= '{rdata: '0, err: 1'b1, id: pend_req_q.id};
      end
    end
  end

  // ---------------- response path ----------------
  assign rsp_valid_o      = err_full_q || host_rsp_valid_i;
  assign rsp_o            = err_full_q ? err_rsp_q : host_rsp_i;
  assign host_rsp_ready_o = !err_full_q && rsp_ready_i;

  // ---------------- configuration port ----------------
  logic     cfg_full_q;
  bus_rsp_t cfg_rsp_q;
  assign cfg_req_ready_o = !cfg_full_q;
  assign cfg_rsp_valid_o = cfg_full_q;
  assign cfg_rsp_o       = cfg_rsp_q;
  wire       cfg_acc = cfg_req_valid_i && cfg_req_ready_o;
  wire [7:0] cfg_ofs = cfg_req_i.addr[7:0];

  always_comb begin
    l1_cfg_we  = cfg_acc && cfg_req_i.we && cfg_ofs == 8'h0C;
    l2_cfg_we  = cfg_acc && cfg_req_i.we && cfg_ofs == 8'h10;
    l1_cfg_idx = L1IW'(cfg_req_i.wdata);
    l2_cfg_way = L2WW'(cfg_req_i.wdata);
    miss_pop   = cfg_acc && cfg_req_i.we && cfg_ofs == 8'h28 && miss_cnt_q != '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      stage_q <= '0; cfg_full_q <= 1'b0; cfg_rsp_q <= '0;
    end else begin
      if (cfg_full_q && cfg_rsp_ready_i) cfg_full_q <= 1'b0;
      if (cfg_acc) begin
        cfg_full_q      <= 1'b1;
        cfg_rsp_q.id    <= cfg_req_i.id;
        cfg_rsp_q.err   <= 1'b0;
        cfg_rsp_q.rdata <= '0;
        case (cfg_ofs)
          8'h00: cfg_rsp_q.rdata <= {stage_q.vpn, {PAGE_BITS{1'b0}}};
          8'h04: cfg_rsp_q.rdata <= data_t'(stage_q.ppn);
          8'h08: cfg_rsp_q.rdata <= data_t'({stage_q.wr_en, stage_q.rd_en, stage_q.valid});
          8'h20: cfg_rsp_q.rdata <= miss_mem[miss_rd_q].addr;
          8'h24: cfg_rsp_q.rdata <= data_t'({miss_mem[miss_rd_q].we, miss_mem[miss_rd_q].id});
          8'h2C: cfg_rsp_q.rdata <= data_t'(miss_cnt_q);
          default: ;
        endcase
        if (cfg_req_i.we) begin
          case (cfg_ofs)
            8'h00: stage_q.vpn   <= cfg_req_i.wdata[AW-1:PAGE_BITS];
            8'h04: stage_q.ppn   <= ppn_t'(cfg_req_i.wdata);
            8'h08: {stage_q.wr_en, stage_q.rd_en, stage_q.valid} <= cfg_req_i.wdata[2:0];
            default: ;
          endcase
        end
      end
    end
  end

  // The host port must not drop a request it has not accepted.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    host_req_valid_o && !host_req_ready_i |=> host_req_valid_o);
endmodule
