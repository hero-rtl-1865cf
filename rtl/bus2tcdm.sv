// bus2tcdm: lets a bus master (the cluster bus, carrying DMA transfers and
// accesses from other clusters or the host) into one port of the L1
// interconnect.
//
// It forwards one request at a time: the request is passed to the
// interconnect, the data that comes back one cycle after the grant is held
// in a register until the bus takes the response, and only then is the next
// request admitted. This converts the interconnect's fixed one-cycle,
// no-back-pressure response into the bus's valid/ready response. One
// access per two to three cycles is enough for this port; the adapter is
// this design's own choice.
module bus2tcdm
  import hero_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  // bus slave side
  input  logic     req_valid_i,
  output logic     req_ready_o,
  input  bus_req_t req_i,
  output logic     rsp_valid_o,
  input  logic     rsp_ready_i,
  output bus_rsp_t rsp_o,
  // interconnect master side
  output logic     tcdm_req_valid_o,
  input  logic     tcdm_req_ready_i,
  output bus_req_t tcdm_req_o,
  input  logic     tcdm_rsp_valid_i,
  input  bus_rsp_t tcdm_rsp_i
);
  logic busy_q;   // a request is in flight or its response is held
  logic full_q;
  bus_rsp_t rsp_q;

  assign tcdm_req_valid_o = req_valid_i && !busy_q;
  assign tcdm_req_o       = req_i;
  assign req_ready_o      = !busy_q && tcdm_req_ready_i;
  assign rsp_valid_o      = full_q;
  assign rsp_o            = rsp_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      full_q <= 1'b0;
    end else begin
      if (req_valid_i && req_ready_o)  busy_q <= 1'b1;
      if (tcdm_rsp_valid_i)            full_q <= 1'b1;
      if (full_q && rsp_ready_i) begin
        full_q <= 1'b0;
        busy_q <= 1'b0;
      end
    end
  end
  always_ff @(posedge clk_i) if (tcdm_rsp_valid_i) rsp_q <= tcdm_rsp_i;
endmodule
