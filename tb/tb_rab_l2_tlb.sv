// tb_rab_l2_tlb: self-checking test of the RAB's L2 TLB (128 entries,
// 32 ways, 4 banks: 4 sets, 8 ways per bank). Entries are placed in chosen
// ways; every lookup is timed: a hit in way w must finish after w/4 + 2
// cycles and a miss after 8 + 1 cycles, with the right physical page.
module tb_rab_l2_tlb;
  import hero_pkg::*;
  localparam int E = 128, W = 32, B = 4, SETS = E / W, WPB = W / B;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, we = 0, busy, done, hit, perm;
  vpn_t vpn = '0; ppn_t ppn;
  logic cfg_we = 0; logic [4:0] cfg_way = '0; tlb_entry_t cfg_e = '0;
  tlb_entry_t tab [SETS][W];

  rab_l2_tlb #(.ENTRIES(E), .WAYS(W), .BANKS(B)) dut (.clk_i (clk), .rst_ni (rst_n), .start_i (start),
    .vpn_i (vpn), .we_i (we), .busy_o (busy), .done_o (done), .hit_o (hit), .perm_ok_o (perm), .ppn_o (ppn),
    .cfg_we_i (cfg_we), .cfg_way_i (cfg_way), .cfg_entry_i (cfg_e));

  task automatic search(input vpn_t v, input logic w);
    int cyc, ew, set;
    logic eh, ep; ppn_t epn;
    set = int'(v) % SETS;
    eh = 0; ew = -1; ep = 0; epn = '0;
    // first way (in search order) that matches: step k covers ways k*B..k*B+B-1
    for (int k = 0; k < WPB && !eh; k++)
      for (int b = B-1; b >= 0; b--) begin
        int way;
        way = b + k*B;
        if (tab[set][way].valid && tab[set][way].vpn == v) begin
          eh = 1; ew = way; ep = w ? tab[set][way].wr_en : tab[set][way].rd_en; epn = tab[set][way].ppn;
        end
      end
    @(negedge clk); start = 1; vpn = v; we = w;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (hit !== eh || (eh && (ppn !== epn || perm !== ep))) begin
      failures++; $display("FAIL search %h: hit %b/%b ppn %h/%h", v, hit, eh, ppn, epn);
    end
    checks++;
    if (cyc != (eh ? ew / B + 2 : WPB + 1)) begin
      failures++; $display("FAIL search %h cycles %0d (hit %b way %0d)", v, cyc, eh, ew);
    end
  endtask

  initial begin
    for (int s = 0; s < SETS; s++) for (int w = 0; w < W; w++) tab[s][w] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (!busy) begin failures++; $display("FAIL not busy during init"); end
    while (busy) @(negedge clk);
    // fill random ways with distinct pages
    for (int n = 0; n < 60; n++) begin
      tlb_entry_t e;
      int way, set;
      e.valid = 1; e.rd_en = 1; e.wr_en = $urandom_range(0, 1);
      e.vpn = vpn_t'(n * 5 + 3); e.ppn = ppn_t'($urandom);
      set = int'(e.vpn) % SETS; way = $urandom_range(0, W-1);
      @(negedge clk); cfg_we = 1; cfg_way = 5'(way); cfg_e = e;
      tab[set][way] = e;
      @(negedge clk); cfg_we = 0;
    end
    for (int n = 0; n < 300; n++) search(vpn_t'($urandom_range(0, 320)), 1'($urandom_range(0, 1)));
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
