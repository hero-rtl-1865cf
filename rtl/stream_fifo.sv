// stream_fifo: small first-in first-out buffer on a valid/ready stream.
//
// Used as a register slice wherever two buses meet (cluster <-> SoC bus,
// peripheral bus <-> cluster bus). Because in_ready depends only on the fill
// level, the FIFO breaks every combinational path between the two sides.
// With DEPTH = 2 it sustains one transfer per cycle; data appears at the
// output one cycle after it was accepted. The buffer and its depth are this
// design's own choice.
module stream_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 2
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic in_valid_i,
  output logic in_ready_o,
  input  T     in_data_i,
  output logic out_valid_o,
  input  logic out_ready_i,
  output T     out_data_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                 mem_q [DEPTH];
  logic [PW-1:0]    rd_q, wr_q;
  logic [PW:0]      cnt_q;

  wire push = in_valid_i && in_ready_o;
  wire pop  = out_valid_o && out_ready_i;

  assign in_ready_o  = (cnt_q != (PW+1)'(DEPTH));
  assign out_valid_o = (cnt_q != '0);
  assign out_data_o  = mem_q[rd_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= (wr_q == PW'(DEPTH-1)) ? '0 : wr_q + 1'b1;
      if (pop)  rd_q <= (rd_q == PW'(DEPTH-1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) if (push) mem_q[wr_q] <= in_data_i;

endmodule
