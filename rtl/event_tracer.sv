// event_tracer: records timestamped events into a local buffer without
// disturbing the traced design.
//
// The tracer watches an EVT_W-bit signal bundle (evt_data_i) together with a
// strobe (evt_valid_i, e.g. the handshake of a bus channel). In every cycle
// in which the traced design is clocked (run_i high), the strobe is high and
// the user-programmed activation condition holds,
//     enable && ((evt_data_i & MASK) == MATCH),
// the tracer writes {timestamp, evt_data_i} into its buffer, a memory array
// (block RAM on an FPGA) of DEPTH entries. The timestamp (ts_i) comes from a
// counter shared by all tracers that only advances while the traced design
// is clocked, so all tracers' timestamps agree and count traced cycles.
// When the buffer is full, full_o goes high. The top level then stops the
// clock of the traced design (so no event is lost and the design's state is
// frozen) and raises an interrupt to the host, whose driver reads the
// buffer out and clears it, after which the clock runs again.
//
// Host register port (its own clock domain is the free-running clock):
//   0x000 CTRL    bit 0: enable
//   0x004 MASK    0x008 MATCH  (low 32 bits of the condition)
//   0x00C COUNT   read: number of stored events
//   0x010 CLEAR   write: empty the buffer
//   0x014 ID      read: TRACER_ID
//   0x8000 + 16*i entry i: +0 timestamp, +4 data[31:0], +8 data[63:32]
// The port decodes a 64 KiB window (addr[15:0]), so DEPTH is at most 2048.
// Reading entry words costs one cycle each. The source describes the
// tracer's behaviour (activation condition, BRAM buffers, clock stop and
// interrupt when full, shared timestamp clock); register map, depth and the
// mask/match form of the condition are this design's choices.
module event_tracer
  import hero_pkg::*;
#(
  parameter int unsigned EVT_W     = 64,
  parameter int unsigned DEPTH     = 512,
  parameter int unsigned TRACER_ID = 0,
  localparam int unsigned PW       = $clog2(DEPTH)
) (
  input  logic             clk_i,       // free-running clock
  input  logic             rst_ni,
  input  logic             run_i,       // traced design is clocked this cycle
  input  logic [31:0]      ts_i,        // shared timestamp
  input  logic             evt_valid_i,
  input  logic [EVT_W-1:0] evt_data_i,
  output logic             full_o,
  // host register port
  input  logic             req_valid_i,
  output logic             req_ready_o,
  input  bus_req_t         req_i,
  output logic             rsp_valid_o,
  input  logic             rsp_ready_i,
  output bus_rsp_t         rsp_o
);
  typedef struct packed {
    logic [31:0]      ts;
    logic [EVT_W-1:0] data;
  } entry_t;

  entry_t          buf_mem [DEPTH];
  logic [PW:0]     cnt_q;
  logic            en_q;
  logic [EVT_W-1:0] mask_q, match_q;

  assign full_o = (cnt_q == (PW+1)'(DEPTH));

  wire record = run_i && en_q && evt_valid_i && !full_o &&
                ((evt_data_i & mask_q) == match_q);

  always_ff @(posedge clk_i)
    if (record) buf_mem[cnt_q[PW-1:0]] <= '{ts: ts_i, data: evt_data_i};

  // host port
  logic     rsp_full_q;
  bus_rsp_t rsp_q;
  assign req_ready_o = !rsp_full_q;
  assign rsp_valid_o = rsp_full_q;
  assign rsp_o       = rsp_q;
  wire        acc = req_valid_i && req_ready_o;
  wire [15:0] ofs = req_i.addr[15:0];
  wire [PW-1:0] ent = PW'(req_i.addr[PW+3:4]);
  wire          ent_ok = ofs[15] && (int'(req_i.addr[PW+3:4]) < DEPTH);
  logic [EVT_W+31:0] ent_word;
  assign ent_word = buf_mem[ent];

  logic [95:0] ent_bits;
  assign ent_bits = 96'(ent_word[EVT_W-1:0]) << 32 | 96'(ent_word[EVT_W+31:EVT_W]);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0; en_q <= 1'b0; mask_q <= '0; match_q <= '0;
      rsp_full_q <= 1'b0; rsp_q <= '0;
    end else begin
      if (record) cnt_q <= cnt_q + 1'b1;
      if (rsp_full_q && rsp_ready_i) rsp_full_q <= 1'b0;
      if (acc) begin
        rsp_full_q  <= 1'b1;
        rsp_q.id    <= req_i.id;
        rsp_q.err   <= 1'b0;
        rsp_q.rdata <= '0;
        if (ent_ok) begin
          case (ofs[3:2])
            2'd0: rsp_q.rdata <= ent_bits[31:0];
            2'd1: rsp_q.rdata <= ent_bits[63:32];
            2'd2: rsp_q.rdata <= ent_bits[95:64];
            default: ;
          endcase
        end else begin
          case (ofs)
            16'h000: rsp_q.rdata <= data_t'(en_q);
            16'h004: rsp_q.rdata <= mask_q[31:0];
            16'h008: rsp_q.rdata <= match_q[31:0];
            16'h00C: rsp_q.rdata <= data_t'(cnt_q);
            16'h014: rsp_q.rdata <= data_t'(TRACER_ID);
            default: ;
          endcase
        end
        if (req_i.we) begin
          case (ofs)
            16'h000: en_q    <= req_i.wdata[0];
            16'h004: mask_q  <= EVT_W'(req_i.wdata);
            16'h008: match_q <= EVT_W'(req_i.wdata);
            16'h010: cnt_q   <= '0;
            default: ;
          endcase
        end
      end
    end
  end
endmodule
