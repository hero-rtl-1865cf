// cluster_timer: a 32-bit timer for the PEs of a cluster.
//
// Registers on the peripheral bus:
//   0x00 CTRL    bit 0 enables counting
//   0x04 COUNT   current value, writable
//   0x08 CMP     compare value
// While enabled, COUNT increments by one every cycle. irq_o pulses for one
// cycle when COUNT reaches CMP (COUNT is then cleared, so the timer is
// periodic). Each access is answered one cycle after it was accepted.
// The source only names the timer; the registers and behaviour are this
// design's own choice.
module cluster_timer
  import hero_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     req_valid_i,
  output logic     req_ready_o,
  input  bus_req_t req_i,
  output logic     rsp_valid_o,
  input  logic     rsp_ready_i,
  output bus_rsp_t rsp_o,
  output logic     irq_o
);
  logic     en_q;
  data_t    cnt_q, cmp_q;
  logic     rsp_full_q;
  bus_rsp_t rsp_q;

  assign req_ready_o = !rsp_full_q;
  assign rsp_valid_o = rsp_full_q;
  assign rsp_o       = rsp_q;

  wire       acc     = req_valid_i && req_ready_o;
  wire [7:0] reg_ofs = req_i.addr[7:0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q <= 1'b0; cnt_q <= '0; cmp_q <= '1; irq_o <= 1'b0;
      rsp_full_q <= 1'b0; rsp_q <= '0;
    end else begin
      irq_o <= 1'b0;
      if (en_q) begin
        if (cnt_q == cmp_q) begin
          cnt_q <= '0;
          irq_o <= 1'b1;
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end
      if (rsp_full_q && rsp_ready_i) rsp_full_q <= 1'b0;
      if (acc) begin
        rsp_full_q <= 1'b1;
        rsp_q.id   <= req_i.id;
        rsp_q.err  <= 1'b0;
        case (reg_ofs)
          8'h00:   rsp_q.rdata <= data_t'(en_q);
          8'h04:   rsp_q.rdata <= cnt_q;
          8'h08:   rsp_q.rdata <= cmp_q;
          default: rsp_q.rdata <= '0;
        endcase
        if (req_i.we) begin
          case (reg_ofs)
            8'h00: en_q  <= req_i.wdata[0];
            8'h04: cnt_q <= req_i.wdata;
            8'h08: cmp_q <= req_i.wdata;
            default: ;
          endcase
        end
      end
    end
  end
endmodule
