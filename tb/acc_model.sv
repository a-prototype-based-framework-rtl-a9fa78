// acc_model: behavioural stand-in for one accelerator replica (the real
// ones are third-party HLS kernels), for simulation only.
//
// On acc_start it processes nwords 64-bit words in chunks of chunk words:
// for each chunk it issues a DMA read on rdCtrl (index rd_base + offset),
// takes the words from rdData, waits compute_cycles per word, issues a DMA
// write on wrCtrl (index wr_base + offset) and sends word + 1 on wrData.
// After the last chunk it pulses acc_done. Valid is held until ready.
`timescale 1ns/1ps
module acc_model
  import vespa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] rd_base,
  input  logic [31:0] wr_base,
  input  logic [31:0] nwords,
  input  logic [31:0] chunk,
  input  int          compute_cycles,
  input  logic        acc_start,
  output logic        acc_done,
  output logic        rdctrl_valid,
  input  logic        rdctrl_ready,
  output dma_ctrl_t   rdctrl,
  output logic        wrctrl_valid,
  input  logic        wrctrl_ready,
  output dma_ctrl_t   wrctrl,
  input  logic        rddata_valid,
  output logic        rddata_ready,
  input  logic [63:0] rddata,
  output logic        wrdata_valid,
  input  logic        wrdata_ready,
  output logic [63:0] wrdata
);
  logic [63:0] buf_q [$];
  int          busy_cycles = 0;

  initial begin
    acc_done = 0; rdctrl_valid = 0; wrctrl_valid = 0; rddata_ready = 0; wrdata_valid = 0;
    rdctrl = '0; wrctrl = '0; wrdata = '0;
  end

  // Outputs change shortly after a rising edge; handshakes are decided from
  // the values seen at the falling edge before the rising edge that
  // completes them.
  initial forever begin
    do @(negedge clk); while (!(acc_start && rst_n));
    @(posedge clk); #0.1;
    for (int off = 0; off < int'(nwords); off += int'(chunk)) begin
      automatic int n = (int'(nwords) - off < int'(chunk)) ? int'(nwords) - off : int'(chunk);
      rdctrl_valid = 1'b1;
      rdctrl       = '{index: rd_base + 32'(off), length: 32'(n)};
      do @(negedge clk); while (!rdctrl_ready);
      @(posedge clk); #0.1;
      rdctrl_valid = 1'b0;
      rddata_ready = 1'b1;
      buf_q = {};
      while (buf_q.size() < n) begin
        @(negedge clk);
        if (rddata_valid) buf_q.push_back(rddata);
        @(posedge clk); #0.1;
      end
      rddata_ready = 1'b0;
      repeat (compute_cycles * n) @(posedge clk);
      #0.1;
      busy_cycles += compute_cycles * n;
      wrctrl_valid = 1'b1;
      wrctrl       = '{index: wr_base + 32'(off), length: 32'(n)};
      do @(negedge clk); while (!wrctrl_ready);
      @(posedge clk); #0.1;
      wrctrl_valid = 1'b0;
      for (int i = 0; i < n; i++) begin
        wrdata_valid = 1'b1;
        wrdata       = buf_q[i] + 64'd1;
        do @(negedge clk); while (!wrdata_ready);
        @(posedge clk); #0.1;
      end
      wrdata_valid = 1'b0;
    end
    acc_done = 1'b1;
    @(posedge clk); #0.1;
    acc_done = 1'b0;
  end
endmodule
