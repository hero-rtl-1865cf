// core_demux: the data-port demultiplexer in front of each processing
// element (PE).
//
// A request whose address lies in the cluster's own L1 scratchpad window
// [L1_BASE, L1_BASE + L1_SIZE) goes to the PE's port on the L1 interconnect;
// every other request goes to the peripheral bus, which leads to the
// cluster's peripherals and, through the cluster bus, to the rest of the
// system. The selection is combinational, so an L1 access costs no extra
// cycle. Responses from both sides are merged onto the PE's response port;
// since a PE has at most one access in flight they never collide. The PE
// must always accept a response. The source shows the demultiplexer and
// its two destinations; the address test is this design's own choice.
module core_demux
  import hero_pkg::*;
#(
  parameter addr_t L1_BASE = 32'h1000_0000,
  parameter addr_t L1_SIZE = 32'h0004_0000
) (
  input  logic     pe_req_valid_i,
  output logic     pe_req_ready_o,
  input  bus_req_t pe_req_i,
  output logic     pe_rsp_valid_o,
  output bus_rsp_t pe_rsp_o,
  // to the L1 interconnect
  output logic     l1_req_valid_o,
  input  logic     l1_req_ready_i,
  output bus_req_t l1_req_o,
  input  logic     l1_rsp_valid_i,
  input  bus_rsp_t l1_rsp_i,
  // to the peripheral bus
  output logic     per_req_valid_o,
  input  logic     per_req_ready_i,
  output bus_req_t per_req_o,
  input  logic     per_rsp_valid_i,
  output logic     per_rsp_ready_o,
  input  bus_rsp_t per_rsp_i
);
  logic to_l1;
  assign to_l1 = (pe_req_i.addr >= L1_BASE) && (pe_req_i.addr < L1_BASE + L1_SIZE);

  assign l1_req_valid_o  = pe_req_valid_i &&  to_l1;
  assign per_req_valid_o = pe_req_valid_i && !to_l1;
  assign l1_req_o        = pe_req_i;
  assign per_req_o       = pe_req_i;
  assign pe_req_ready_o  = to_l1 ? l1_req_ready_i : per_req_ready_i;

  assign pe_rsp_valid_o  = l1_rsp_valid_i || per_rsp_valid_i;
  assign pe_rsp_o        = l1_rsp_valid_i ? l1_rsp_i : per_rsp_i;
  assign per_rsp_ready_o = !l1_rsp_valid_i;
endmodule
