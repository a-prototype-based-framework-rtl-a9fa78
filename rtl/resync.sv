// resync: resynchronizer placed where a stream crosses from one frequency
// island to another (for example between an accelerator tile and its NoC
// router when the two run from different DFS actuators).
//
// It is a dual-clock FIFO: the write side runs on wclk, the read side on
// rclk, and the pointers cross the boundary in Gray code through two-flop
// synchronizers, so either clock may change frequency or stop at any time
// without corrupting data. Interface: valid/ready on both sides; a word
// accepted on the write side appears on the read side three to four read
// clocks later. Only the existence and purpose of the resynchronizers come
// from the paper; the FIFO structure, DEPTH and WIDTH are this design's
// choices.
module resync #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 8
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             w_valid,
  output logic             w_ready,
  input  logic [WIDTH-1:0] w_data,
  input  logic             rclk,
  input  logic             rrst_n,
  output logic             r_valid,
  input  logic             r_ready,
  output logic [WIDTH-1:0] r_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer seen by the write side
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer seen by the read side

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // Write side
  wire full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign w_ready = !full;
  wire [AW:0] wbin_nx = wbin + (AW+1)'(w_valid && !full);

  always_ff @(posedge wclk) begin
    if (w_valid && !full) mem[wbin[AW-1:0]] <= w_data;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin <= wbin_nx;
      wgray <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  // Read side
  wire empty = (rgray == wgray_r2);
  assign r_valid = !empty;
  assign r_data  = mem[rbin[AW-1:0]];
  wire [AW:0] rbin_nx = rbin + (AW+1)'(r_ready && !empty);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin <= rbin_nx;
      rgray <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  initial assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("resync: DEPTH must be a power of two >= 4");

endmodule
