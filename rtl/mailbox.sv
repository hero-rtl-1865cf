// mailbox: message queues between the host and the PMCA.
//
// The host driver and the PMCA runtime synchronise through this block: each
// direction has a FIFO of DEPTH 32-bit words. The block is a single slave
// on the SoC bus with two register windows, one for each side:
//   PMCA window, offset 0x000      host window, offset 0x100
//     +0x00 DATA   write: send a word to the other side
//                  read : receive the oldest word from the other side
//                         (reads 0 and sets err when the queue is empty)
//     +0x04 STATUS read : {rx_count[15:8], tx_full[1], rx_empty[0]}
// A write to a full queue is dropped and answered with err. irq_host_o is
// high while a word waits for the host, irq_pmca_o while a word waits for
// the PMCA. Responses follow one cycle after acceptance. The source names
// the mailbox and lists synchronisation between PMCA and host among the
// driver's tasks; windows, registers and depth are this design's choices.
module mailbox
  import hero_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned CW   = $clog2(DEPTH+1)
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     req_valid_i,
  output logic     req_ready_o,
  input  bus_req_t req_i,
  output logic     rsp_valid_o,
  input  logic     rsp_ready_i,
  output bus_rsp_t rsp_o,
  output logic     irq_host_o,
  output logic     irq_pmca_o
);
  localparam int unsigned PW = $clog2(DEPTH);

  // queue 0: PMCA -> host, queue 1: host -> PMCA
  data_t         q_mem [2][DEPTH];
  logic [PW-1:0] rd_q [2], wr_q [2];
  logic [CW-1:0] cnt_q [2];

  logic     rsp_full_q;
  bus_rsp_t rsp_q;

  assign req_ready_o = !rsp_full_q;
  assign rsp_valid_o = rsp_full_q;
  assign rsp_o       = rsp_q;
  assign irq_host_o  = (cnt_q[0] != '0);
  assign irq_pmca_o  = (cnt_q[1] != '0);

  wire       acc     = req_valid_i && req_ready_o;
  wire       host    = req_i.addr[8];     // which window
  wire [7:0] reg_ofs = req_i.addr[7:0];
  // the side's transmit queue and receive queue
  wire       txq     = host;              // host sends on queue 1
  wire       rxq     = !host;             // host receives on queue 0

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int q = 0; q < 2; q++) begin
        rd_q[q] <= '0; wr_q[q] <= '0; cnt_q[q] <= '0;
      end
      rsp_full_q <= 1'b0;
      rsp_q      <= '0;
    end else begin
      if (rsp_full_q && rsp_ready_i) rsp_full_q <= 1'b0;
      if (acc) begin
        rsp_full_q  <= 1'b1;
        rsp_q.id    <= req_i.id;
        rsp_q.err   <= 1'b0;
        rsp_q.rdata <= '0;
        if (reg_ofs == 8'h00 && req_i.we) begin
          if (cnt_q[txq] == CW'(DEPTH)) begin
            rsp_q.err <= 1'b1;
          end else begin
            q_mem[txq][wr_q[txq]] <= req_i.wdata;
            wr_q[txq]  <= wr_q[txq] + 1'b1;
            cnt_q[txq] <= cnt_q[txq] + 1'b1;
          end
        end else if (reg_ofs == 8'h00) begin
          if (cnt_q[rxq] == '0) begin
            rsp_q.err <= 1'b1;
          end else begin
            rsp_q.rdata <= q_mem[rxq][rd_q[rxq]];
            rd_q[rxq]   <= rd_q[rxq] + 1'b1;
            cnt_q[rxq]  <= cnt_q[rxq] - 1'b1;
          end
        end else if (reg_ofs == 8'h04) begin
          rsp_q.rdata <= {16'h0, 8'(cnt_q[rxq]), 6'h0,
                          cnt_q[txq] == CW'(DEPTH), cnt_q[rxq] == '0};
        end
      end
    end
  end
endmodule
