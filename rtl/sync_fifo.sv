// sync_fifo: single-clock valid/ready FIFO used as the AXI bridge's tile-side
// buffers.
//
// A circular buffer of DEPTH entries (DEPTH a power of two) with read and
// write pointers one bit wider than the index, so full and empty are told
// apart by the extra bit. in_ready is high while the FIFO is not full,
// out_valid while it is not empty; out_data shows the head entry
// combinationally. A word written in cycle t can be read in cycle t+1.
// Depth and reset behaviour (pointers cleared, contents not) are this
// design's choices.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  wire full  = (wptr[AW] != rptr[AW]) && (wptr[AW-1:0] == rptr[AW-1:0]);
  wire empty = (wptr == rptr);

  assign in_ready  = !full;
  assign out_valid = !empty;
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && !full) mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (in_valid && !full)   wptr <= wptr + 1'b1;
      if (out_ready && !empty) rptr <= rptr + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("sync_fifo: DEPTH must be a power of two >= 2");

endmodule
