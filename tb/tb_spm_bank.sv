// tb_spm_bank: self-checking test of one L1 scratchpad bank. Random reads
// and byte-masked writes are compared with a reference array; read data must
// appear exactly one cycle after the request.
module tb_spm_bank;
  import hero_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req = 0, we = 0;
  logic [7:0] addr = '0;
  logic [3:0] be = '0;
  data_t wdata = '0, rdata;
  data_t ref_mem [256];

  spm_bank #(.WORDS(256)) dut (.clk_i (clk), .req_i (req), .we_i (we), .addr_i (addr), .be_i (be),
                               .wdata_i (wdata), .rdata_o (rdata));

  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); req = 1; we = 1; addr = 8'(i); be = 4'hF; wdata = $urandom; ref_mem[i] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      req = 1; addr = 8'($urandom); we = $urandom_range(0, 1); be = 4'($urandom); wdata = $urandom;
      if (we) begin
        ref_mem[addr] = apply_be(ref_mem[addr], wdata, be);
      end else begin
        data_t exp;
        exp = ref_mem[addr];
        @(negedge clk); req = 0;
        checks++;
        if (rdata !== exp) begin failures++; $display("FAIL read %0d: %h vs %h", addr, rdata, exp); end
      end
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
