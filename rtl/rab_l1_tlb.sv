// rab_l1_tlb: first-level translation table of the remapping address block
// (RAB).
//
// A fully associative table of N page entries held in flip-flops. Every
// entry compares its virtual page number with the lookup in parallel, so a
// translation is available in the same cycle as the request; together with
// the registered host port this gives the single-cycle translation the
// source reports for L1 hits. An entry matches when it is valid and its VPN
// equals vpn_i; perm_ok_o additionally requires the read or write
// permission that the access needs. When several entries match, the lowest
// index wins. Entries are written one at a time through the configuration
// port (software on the PMCA or the host manages the table) and are all
// invalid after reset. The page-based entry format (4 KiB pages, with read
// and write permission) is this design's own choice; the source gives the
// entry count (32 in the main configuration).
module rab_l1_tlb
  import hero_pkg::*;
#(
  parameter int unsigned N  = 32,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // lookup (combinational)
  input  vpn_t        vpn_i,
  input  logic        we_i,
  output logic        hit_o,
  output logic        perm_ok_o,
  output ppn_t        ppn_o,
  // configuration
  input  logic        cfg_we_i,
  input  logic [IW-1:0] cfg_idx_i,
  input  tlb_entry_t  cfg_entry_i
);
  tlb_entry_t tab_q [N];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned i = 0; i < N; i++) tab_q[i] <= '0;
    end else if (cfg_we_i) begin
      tab_q[cfg_idx_i] <= cfg_entry_i;
    end
  end

  always_comb begin
    hit_o     = 1'b0;
    perm_ok_o = 1'b0;
    ppn_o     = '0;
    for (int i = N-1; i >= 0; i--) begin
      if (tab_q[i].valid && tab_q[i].vpn == vpn_i) begin
        hit_o     = 1'b1;
        perm_ok_o = we_i ? tab_q[i].wr_en : tab_q[i].rd_en;
        ppn_o     = tab_q[i].ppn;
      end
    end
  end
endmodule
