// spm_bank: one bank of a cluster's multi-banked L1 scratchpad memory (SPM).
//
// A single-port, word-wide memory written as an array, which FPGA tools map
// to block RAM. It accepts an access in every cycle: a write updates the
// bytes selected by be_i at the clock edge, a read returns the word one
// cycle after the request (rdata_o holds it until the next read). The
// source platform gives the total L1 size and the number of banks
// (256 KiB in 16 banks in its main configuration, so 4096 words per bank);
// the single-cycle, single-port bank is this design's own choice.
module spm_bank
  import hero_pkg::*;
#(
  parameter int unsigned WORDS = 4096,
  localparam int unsigned RW   = $clog2(WORDS)
) (
  input  logic            clk_i,
  input  logic            req_i,
  input  logic            we_i,
  input  logic [RW-1:0]   addr_i,   // word index inside the bank
  input  logic [DW/8-1:0] be_i,
  input  data_t           wdata_i,
  output data_t           rdata_o
);
  data_t mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) mem[addr_i] <= apply_be(mem[addr_i], wdata_i, be_i);
      else      rdata_o     <= mem[addr_i];
    end
  end
endmodule
