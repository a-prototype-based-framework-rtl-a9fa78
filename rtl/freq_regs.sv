// freq_regs: the frequency registers of the auxiliary I/O tile.
//
// One register per frequency island holds the island's requested clock
// frequency (freq_in) and its enable (en_in); the outputs drive the islands'
// DFS actuators directly. Software (on a CPU core or from the host through
// the I/O tile) writes them over a simple APB slave with zero wait states:
//   address 4*i, bits [4:0] : frequency code of island i, in 5 MHz units
//   address 4*i, bit  [8]   : enable of island i (0 stops the island clock)
// Reads return the stored values; unused addresses read as zero and ignore
// writes. A write is visible on freq_code/freq_en one clock after the APB
// access phase. The table of freq_in/en_in per island follows the paper;
// the bus, register layout and reset values (every island enabled at
// RESET_CODE) are this design's choices.
module freq_regs
  import vespa_pkg::*;
#(
  parameter int unsigned NI         = N_ISLANDS,
  parameter int unsigned RESET_CODE = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  psel,
  input  logic                  penable,
  input  logic                  pwrite,
  input  logic [APB_AW-1:0]     paddr,
  input  logic [APB_DW-1:0]     pwdata,
  output logic [APB_DW-1:0]     prdata,
  output logic                  pready,
  output logic [NI-1:0][FREQ_W-1:0] freq_code,
  output logic [NI-1:0]         freq_en
);
  wire [APB_AW-3:0] idx = paddr[APB_AW-1:2];
  localparam int unsigned IW = (NI > 1) ? $clog2(NI) : 1;
  wire [IW-1:0] sel = idx[IW-1:0];
  wire in_range = (32'(idx) < NI);
  wire wr = psel && penable && pwrite;

  assign pready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NI; i++) begin
        freq_code[i] <= FREQ_W'(RESET_CODE);
        freq_en[i]   <= 1'b1;
      end
    end else if (wr && in_range) begin
      freq_code[sel] <= pwdata[FREQ_W-1:0];
      freq_en[sel]   <= pwdata[8];
    end
  end

  always_comb begin
    prdata = '0;
    if (in_range) begin
      prdata[FREQ_W-1:0] = freq_code[sel];
      prdata[8]          = freq_en[sel];
    end
  end

endmodule
