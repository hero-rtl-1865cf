// rab_l2_tlb: second-level translation table of the RAB, set associative,
// banked and searched over several cycles.
//
// ENTRIES entries are organised as SETS = ENTRIES / WAYS sets of WAYS ways.
// The set of a page is the low log2(SETS) bits of its virtual page number.
// The ways of a set are spread over BANKS memories (block RAM on an FPGA),
// each bank holding WAYS / BANKS ways of every set. A lookup (start_i with
// vpn_i while busy_o is low) reads one way from every bank per cycle and
// compares the BANKS entries read in the previous cycle, so a full search
// of a set takes WAYS/BANKS + 1 cycles and a hit in step k (ways
// k*BANKS .. k*BANKS+BANKS-1) ends after k + 2 cycles. done_o pulses at the
// end with hit_o, perm_ok_o and ppn_o valid in that cycle. A hit ends the
// search early. Entries are written through a separate configuration port
// (set taken from the entry's VPN, way from cfg_way_i); after reset the
// block clears all entries, which takes SETS * WAYS / BANKS cycles during
// which busy_o is high. The source gives size, associativity and bank
// count (1024 entries, 32 ways, 4 banks) and the multi-cycle search; the
// one-way-per-bank-per-cycle search order is this design's own choice.
module rab_l2_tlb
  import hero_pkg::*;
#(
  parameter int unsigned ENTRIES = 1024,
  parameter int unsigned WAYS    = 32,
  parameter int unsigned BANKS   = 4,
  localparam int unsigned SETS   = ENTRIES / WAYS,
  localparam int unsigned WPB    = WAYS / BANKS,        // ways per bank
  localparam int unsigned SB     = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned KB     = (WPB > 1) ? $clog2(WPB) : 1,
  localparam int unsigned BB     = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned WB     = $clog2(WAYS),
  localparam int unsigned ROWS   = SETS * WPB,
  localparam int unsigned RB     = $clog2(ROWS)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          start_i,
  input  vpn_t          vpn_i,
  input  logic          we_i,
  output logic          busy_o,
  output logic          done_o,
  output logic          hit_o,
  output logic          perm_ok_o,
  output ppn_t          ppn_o,
  input  logic          cfg_we_i,
  input  logic [WB-1:0] cfg_way_i,
  input  tlb_entry_t    cfg_entry_i
);
  typedef enum logic [1:0] {INIT, IDLE, SEARCH} state_e;

  tlb_entry_t mem [BANKS][ROWS];
  tlb_entry_t rd_q [BANKS];

  state_e        state_q;
  logic [RB-1:0] init_q;
  vpn_t          vpn_q;
  logic          we_q;
  logic [KB:0]   k_q;       // next way step to read
  logic          cmp_q;     // rd_q holds entries to compare

  function automatic logic [SB-1:0] set_of(vpn_t v);
    return SB'(v);
  endfunction

  // compare the entries read in the previous cycle
  logic match;
  logic match_perm;
  ppn_t match_ppn;
  always_comb begin
    match      = 1'b0;
    match_perm = 1'b0;
    match_ppn  = '0;
    for (int b = BANKS-1; b >= 0; b--) begin
      if (cmp_q && rd_q[b].valid && rd_q[b].vpn == vpn_q) begin
        match      = 1'b1;
        match_perm = we_q ? rd_q[b].wr_en : rd_q[b].rd_en;
        match_ppn  = rd_q[b].ppn;
      end
    end
  end

  wire last_cmp = (k_q == (KB+1)'(WPB));  // the final step's entries are in rd_q
  assign busy_o    = (state_q != IDLE);
  assign done_o    = (state_q == SEARCH) && cmp_q && (match || last_cmp);
  assign hit_o     = match;
  assign perm_ok_o = match_perm;
  assign ppn_o     = match_ppn;

  // memory write port: initialisation or configuration
  logic          mem_we;
  logic [BB-1:0] mem_wbank;
  logic [RB-1:0] mem_wrow;
  tlb_entry_t    mem_wdata;
  always_comb begin
    if (state_q == INIT) begin
      mem_we    = 1'b1;
      mem_wbank = '0;          // all banks, see below
      mem_wrow  = init_q;
      mem_wdata = '0;
    end else begin
      mem_we    = cfg_we_i;
      mem_wbank = BB'(cfg_way_i % BANKS);
      mem_wrow  = RB'(set_of(cfg_entry_i.vpn)) * RB'(WPB) + RB'(cfg_way_i / BANKS);
      mem_wdata = cfg_entry_i;
    end
  end

  logic [RB-1:0] rd_row;
  assign rd_row = RB'(set_of(vpn_q)) * RB'(WPB) + RB'(k_q[KB-1:0]);

  always_ff @(posedge clk_i) begin
    for (int unsigned b = 0; b < BANKS; b++) begin
      if (mem_we && (state_q == INIT || mem_wbank == BB'(b))) mem[b][mem_wrow] <= mem_wdata;
      rd_q[b] <= mem[b][rd_row];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= INIT;
      init_q  <= '0;
      vpn_q   <= '0;
      we_q    <= 1'b0;
      k_q     <= '0;
      cmp_q   <= 1'b0;
    end else begin
      case (state_q)
        INIT: begin
          init_q <= init_q + 1'b1;
          if (init_q == RB'(ROWS-1)) state_q <= IDLE;
        end
        IDLE: if (start_i) begin
          vpn_q   <= vpn_i;
          we_q    <= we_i;
          k_q     <= '0;
          cmp_q   <= 1'b0;
          state_q <= SEARCH;
        end
        SEARCH: begin
          if (done_o) begin
            state_q <= IDLE;
            cmp_q   <= 1'b0;
          end else begin
            // step k_q is read this cycle, compared next cycle
            cmp_q <= 1'b1;
            if (!last_cmp) k_q <= k_q + 1'b1;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
