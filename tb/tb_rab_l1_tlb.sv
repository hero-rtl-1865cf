// tb_rab_l1_tlb: self-checking test of the RAB's L1 TLB. Random entries
// are written and random lookups (mostly to configured pages) are compared
// with a reference table: hit, permission and physical page number, all in
// the same cycle as the lookup. Entries invalidated later must miss.
module tb_rab_l1_tlb;
  import hero_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  vpn_t vpn = '0; logic we = 0, hit, perm;
  ppn_t ppn;
  logic cfg_we = 0; logic [4:0] cfg_idx = '0; tlb_entry_t cfg_e = '0;
  tlb_entry_t tab [N];

  rab_l1_tlb #(.N(N)) dut (.clk_i (clk), .rst_ni (rst_n), .vpn_i (vpn), .we_i (we), .hit_o (hit),
    .perm_ok_o (perm), .ppn_o (ppn), .cfg_we_i (cfg_we), .cfg_idx_i (cfg_idx), .cfg_entry_i (cfg_e));

  task automatic lookup_check(input vpn_t v, input logic w);
    logic eh, ep; ppn_t epn;
    eh = 0; ep = 0; epn = '0;
    for (int i = N-1; i >= 0; i--)
      if (tab[i].valid && tab[i].vpn == v) begin eh = 1; ep = w ? tab[i].wr_en : tab[i].rd_en; epn = tab[i].ppn; end
    vpn = v; we = w; #1;
    checks++;
    if (hit !== eh || (eh && (perm !== ep || ppn !== epn))) begin
      failures++; $display("FAIL lookup %h: hit %b/%b perm %b/%b ppn %h/%h", v, hit, eh, perm, ep, ppn, epn);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) tab[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    lookup_check(vpn_t'(0), 0);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_idx = 5'(i);
      cfg_e.valid = $urandom_range(0, 7) != 0; cfg_e.rd_en = $urandom_range(0, 3) != 0;
      cfg_e.wr_en = $urandom_range(0, 1); cfg_e.vpn = vpn_t'($urandom_range(0, 47)); cfg_e.ppn = ppn_t'($urandom);
      tab[i] = cfg_e;
    end
    @(negedge clk); cfg_we = 0;
    for (int n = 0; n < 500; n++) lookup_check(vpn_t'($urandom_range(0, 63)), 1'($urandom_range(0, 1)));
    for (int i = 0; i < N; i += 2) begin
      @(negedge clk); cfg_we = 1; cfg_idx = 5'(i); cfg_e = '0; tab[i] = '0;
    end
    @(negedge clk); cfg_we = 0;
    for (int n = 0; n < 500; n++) lookup_check(vpn_t'($urandom_range(0, 63)), 1'($urandom_range(0, 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
