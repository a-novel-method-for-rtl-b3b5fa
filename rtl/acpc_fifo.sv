// acpc_fifo: synchronous FIFO used as the TX (write) and RX (read) buffer of
// the HWICAP block.
//
// The buffers decouple the rate of the master/ACPC side from that of the
// configuration port. The published design only says that the FIFO depth is
// flexible; DEPTH = 16 words and the valid/ready handshake on both sides are
// this design's choices. Storage is a register array with separate read and
// write pointers and an occupancy counter. in_ready = 0 when full, out_valid =
// 0 when empty; out_data shows the head entry (first-word fall-through), so a
// word written in one cycle can be read in the next. Push and pop may happen
// in the same cycle.
module acpc_fifo #(
  parameter int unsigned WIDTH = 17,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic             push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  always_ff @(posedge clk) if (push) mem[wr_ptr] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);

endmodule
