// cluster_dma: the cluster's multi-channel DMA engine.
//
// PEs use it to copy data between their cluster's L1 scratchpad and remote
// memories (other clusters' scratchpads, the L2 memory, or shared main
// memory, which is reached through the RAB with virtual addresses). Each of
// NCH channels is programmed through the peripheral bus:
//   ch*0x20 + 0x00 SRC   source byte address (word aligned)
//   ch*0x20 + 0x04 DST   destination byte address (word aligned)
//   ch*0x20 + 0x08 LEN   length in bytes (multiple of 4)
//   ch*0x20 + 0x0C CMD   write: start the channel; read: 1 while busy
//           0x100  STATUS read: busy bit per channel
//           0x104  ERR    read: error bit per channel (set by an error
//                          response, e.g. a RAB miss; cleared by a start)
// A single copy engine serves the started channels in round-robin order,
// one complete transfer at a time. It moves one word per step: read the
// source, then write the destination. Each access goes to the L1 port when
// its address lies in this cluster's L1 window and to the external port
// (the cluster bus) otherwise. done_o[ch] pulses when a channel finishes.
// The source describes the DMA engines as lightweight and multi-channel;
// the channel count, registers and the word-by-word engine are this
// design's own choices (a burst engine would be faster).
module cluster_dma
  import hero_pkg::*;
#(
  parameter int unsigned NCH     = 4,
  parameter addr_t       L1_BASE = 32'h1000_0000,
  parameter addr_t       L1_SIZE = 32'h0004_0000,
  localparam int unsigned CHW    = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // configuration port (peripheral bus slave)
  input  logic            cfg_req_valid_i,
  output logic            cfg_req_ready_o,
  input  bus_req_t        cfg_req_i,
  output logic            cfg_rsp_valid_o,
  input  logic            cfg_rsp_ready_i,
  output bus_rsp_t        cfg_rsp_o,
  // L1 interconnect master port
  output logic            l1_req_valid_o,
  input  logic            l1_req_ready_i,
  output bus_req_t        l1_req_o,
  input  logic            l1_rsp_valid_i,
  input  bus_rsp_t        l1_rsp_i,
  // external master port (cluster bus)
  output logic            ext_req_valid_o,
  input  logic            ext_req_ready_i,
  output bus_req_t        ext_req_o,
  input  logic            ext_rsp_valid_i,
  output logic            ext_rsp_ready_o,
  input  bus_rsp_t        ext_rsp_i,
  output logic [NCH-1:0]  done_o
);
  typedef enum logic [2:0] {IDLE, RD_REQ, RD_WAIT, WR_REQ, WR_WAIT} state_e;

  addr_t [NCH-1:0]  src_q, dst_q, len_q;
  logic  [NCH-1:0]  busy_q, err_q;
  state_e           state_q;
  logic  [CHW-1:0]  cur_q, last_q;
  addr_t            rd_ptr_q, wr_ptr_q, rem_q;
  data_t            buf_q;

  function automatic logic in_l1(addr_t a);
    return (a >= L1_BASE) && (a < L1_BASE + L1_SIZE);
  endfunction

  // ---------------- configuration port ----------------
  logic     cfg_full_q;
  bus_rsp_t cfg_rsp_q;
  assign cfg_req_ready_o = !cfg_full_q;
  assign cfg_rsp_valid_o = cfg_full_q;
  assign cfg_rsp_o       = cfg_rsp_q;
  wire        cfg_acc = cfg_req_valid_i && cfg_req_ready_o;
  wire [8:0]  cfg_ofs = cfg_req_i.addr[8:0];
  wire [CHW-1:0] cfg_ch = CHW'(cfg_req_i.addr[8:5]);
  wire        cfg_ch_ok = !cfg_ofs[8] && (int'(cfg_req_i.addr[7:5]) < NCH);

  // ---------------- engine ----------------
  logic            pick_any;
  logic [CHW-1:0]  pick;
  always_comb begin
    pick_any = 1'b0;
    pick     = '0;
    for (int unsigned k = 1; k <= NCH; k++) begin
      int unsigned c;
      c = (int'(last_q) + k) % NCH;
      if (!pick_any && busy_q[c]) begin
        pick_any = 1'b1;
        pick     = CHW'(c);
      end
    end
  end

  bus_req_t acc_req;
  logic     acc_l1;
  always_comb begin
    acc_req       = '0;
    acc_req.be    = '1;
    acc_req.we    = (state_q == WR_REQ);
    acc_req.addr  = (state_q == WR_REQ) ? wr_ptr_q : rd_ptr_q;
    acc_req.wdata = buf_q;
    acc_l1        = in_l1(acc_req.addr);
  end
  wire issuing = ((state_q == RD_REQ) && rem_q >= 4) || (state_q == WR_REQ);
  assign l1_req_valid_o  = issuing &&  acc_l1;
  assign ext_req_valid_o = issuing && !acc_l1;
  assign l1_req_o        = acc_req;
  assign ext_req_o       = acc_req;
  assign ext_rsp_ready_o = 1'b1;
  wire issued   = (l1_req_valid_o && l1_req_ready_i) || (ext_req_valid_o && ext_req_ready_i);
  wire rsp_in   = l1_rsp_valid_i || ext_rsp_valid_i;
  wire rsp_err  = ext_rsp_valid_i && ext_rsp_i.err;
  data_t rsp_data;
  assign rsp_data = l1_rsp_valid_i ? l1_rsp_i.rdata : ext_rsp_i.rdata;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q <= '0; dst_q <= '0; len_q <= '0; busy_q <= '0; err_q <= '0;
      state_q <= IDLE; cur_q <= '0; last_q <= CHW'(NCH-1);
      rd_ptr_q <= '0; wr_ptr_q <= '0; rem_q <= '0; buf_q <= '0;
      done_o <= '0; cfg_full_q <= 1'b0; cfg_rsp_q <= '0;
    end else begin
      done_o <= '0;
      // configuration
      if (cfg_full_q && cfg_rsp_ready_i) cfg_full_q <= 1'b0;
      if (cfg_acc) begin
        cfg_full_q      <= 1'b1;
        cfg_rsp_q.id    <= cfg_req_i.id;
        cfg_rsp_q.err   <= 1'b0;
        cfg_rsp_q.rdata <= '0;
        if (cfg_ofs == 9'h100)      cfg_rsp_q.rdata <= data_t'(busy_q);
        else if (cfg_ofs == 9'h104) cfg_rsp_q.rdata <= data_t'(err_q);
        else if (cfg_ch_ok) begin
          case (cfg_ofs[4:0])
            5'h00: cfg_rsp_q.rdata <= src_q[cfg_ch];
            5'h04: cfg_rsp_q.rdata <= dst_q[cfg_ch];
            5'h08: cfg_rsp_q.rdata <= len_q[cfg_ch];
            5'h0C: cfg_rsp_q.rdata <= data_t'(busy_q[cfg_ch]);
            default: ;
          endcase
          if (cfg_req_i.we && !busy_q[cfg_ch]) begin
            case (cfg_ofs[4:0])
              5'h00: src_q[cfg_ch] <= cfg_req_i.wdata;
              5'h04: dst_q[cfg_ch] <= cfg_req_i.wdata;
              5'h08: len_q[cfg_ch] <= cfg_req_i.wdata;
              5'h0C: begin busy_q[cfg_ch] <= 1'b1; err_q[cfg_ch] <= 1'b0; end
              default: ;
            endcase
          end
        end
      end
      // copy engine
      case (state_q)
        IDLE: if (pick_any) begin
          cur_q    <= pick;
          last_q   <= pick;
          rd_ptr_q <= src_q[pick];
          wr_ptr_q <= dst_q[pick];
          rem_q    <= len_q[pick];
          state_q  <= RD_REQ;
        end
        RD_REQ: begin
          if (rem_q < 4) begin
            busy_q[cur_q] <= 1'b0;
            done_o[cur_q] <= 1'b1;
            state_q       <= IDLE;
          end else if (issued) state_q <= RD_WAIT;
        end
        RD_WAIT: if (rsp_in) begin
          buf_q   <= rsp_data;
          if (rsp_err) err_q[cur_q] <= 1'b1;
          state_q <= WR_REQ;
        end
        WR_REQ: if (issued) state_q <= WR_WAIT;
        WR_WAIT: if (rsp_in) begin
          if (rsp_err) err_q[cur_q] <= 1'b1;
          rd_ptr_q <= rd_ptr_q + 4;
          wr_ptr_q <= wr_ptr_q + 4;
          rem_q    <= rem_q - 4;
          state_q  <= RD_REQ;
        end
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
