// l2_mem: the shared L2 scratchpad on the SoC bus.
//
// A word-wide memory written as an array (block RAM on an FPGA). It is a
// slave on the SoC bus: an access is accepted whenever no response is
// waiting, a write updates the enabled bytes, and the response (read data
// or write acknowledge) follows one cycle after acceptance. Addresses are
// taken modulo the memory size. The source gives the size (256 KiB in the
// main configuration); the interface timing is this design's own choice.
module l2_mem
  import hero_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 256*1024,
  localparam int unsigned WORDS     = SIZE_BYTES / (DW/8),
  localparam int unsigned RW        = $clog2(WORDS)
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     req_valid_i,
  output logic     req_ready_o,
  input  bus_req_t req_i,
  output logic     rsp_valid_o,
  input  logic     rsp_ready_i,
  output bus_rsp_t rsp_o
);
  data_t         mem [WORDS];
  logic          rsp_full_q;
  id_t           id_q;
  data_t         rdata_q;
  wire  [RW-1:0] row = req_i.addr[2 +: RW];
  wire           acc = req_valid_i && req_ready_o;

  assign req_ready_o = !rsp_full_q || rsp_ready_i;
  assign rsp_valid_o = rsp_full_q;
  assign rsp_o       = '{rdata: rdata_q, err: 1'b0, id: id_q};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)  rsp_full_q <= 1'b0;
    else if (acc) rsp_full_q <= 1'b1;
    else if (rsp_ready_i) rsp_full_q <= 1'b0;
  end

  always_ff @(posedge clk_i) begin
    if (acc) begin
      id_q <= req_i.id;
      if (req_i.we) mem[row] <= apply_be(mem[row], req_i.wdata, req_i.be);
      else          rdata_q  <= mem[row];
    end
  end
endmodule
