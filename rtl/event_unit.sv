// event_unit: puts the PEs of a cluster to sleep and wakes them up.
//
// In the source platform a PE whose access misses in the RAB goes to sleep
// and the PE that handles the miss wakes it once the translation has been
// set up; this unit provides those two operations as memory-mapped
// registers on the peripheral bus:
//   0x00 SLEEP   write: the writing PE goes to sleep
//   0x04 WAKE    write: every PE whose bit is set in wdata wakes up
//   0x08 STATUS  read : bit i set while PE i sleeps
//   0x0C EVENT   write: raise a wake-up for the PEs set in wdata (same as WAKE)
// The writing PE is identified by the low ID_LSB bits of the transaction ID,
// which the peripheral bus sets to the index of the PE's master port. A
// wake-up that arrives in the same cycle as the sleep request wins, so a
// wake-up is never lost. Each access is answered one cycle after it was
// accepted; a new access is accepted once the response has been taken.
// sleep_o drives the PEs' clock or fetch enable (outside this design).
// The register map and the encoding are this design's own choices.
module event_unit
  import hero_pkg::*;
#(
  parameter int unsigned NPE    = 8,
  parameter int unsigned ID_LSB = 4   // width of the bus master index in the ID
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            req_valid_i,
  output logic            req_ready_o,
  input  bus_req_t        req_i,
  output logic            rsp_valid_o,
  input  logic            rsp_ready_i,
  output bus_rsp_t        rsp_o,
  output logic [NPE-1:0]  sleep_o
);
  logic [NPE-1:0] sleep_q;
  logic           rsp_full_q;
  bus_rsp_t       rsp_q;

  assign req_ready_o = !rsp_full_q;
  assign rsp_valid_o = rsp_full_q;
  assign rsp_o       = rsp_q;
  assign sleep_o     = sleep_q;

  wire        acc = req_valid_i && req_ready_o;
  wire [7:0]  reg_ofs = req_i.addr[7:0];
  wire [ID_LSB-1:0] src = req_i.id[ID_LSB-1:0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sleep_q    <= '0;
      rsp_full_q <= 1'b0;
      rsp_q      <= '0;
    end else begin
      if (rsp_full_q && rsp_ready_i) rsp_full_q <= 1'b0;
      if (acc) begin
        rsp_full_q  <= 1'b1;
        rsp_q.id    <= req_i.id;
        rsp_q.err   <= 1'b0;
        rsp_q.rdata <= (reg_ofs == 8'h08) ? data_t'(sleep_q) : '0;
        if (req_i.we) begin
          case (reg_ofs)
            8'h00: for (int unsigned i = 0; i < NPE; i++) if (int'(src) == i) sleep_q[i] <= 1'b1;
            8'h04, 8'h0C: sleep_q <= sleep_q & ~req_i.wdata[NPE-1:0];
            default: ;
          endcase
        end
      end
    end
  end
endmodule
