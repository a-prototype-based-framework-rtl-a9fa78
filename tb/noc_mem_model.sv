// noc_mem_model: behavioural stand-in for the NoC plus the memory tile, for
// simulation only. N tiles each present the four DMA streams. One request
// is served at a time, tiles taken in round-robin order: a read waits
// LATENCY cycles, then streams 'length' words to the tile; a write takes
// 'length' words from the tile into memory. mem is WORDS 64-bit words,
// initialised to word[i] = i * 3 + 7 (see init_word). in_beats counts the
// data words entering memory (the write traffic).
`timescale 1ns/1ps
module noc_mem_model
  import vespa_pkg::*;
#(
  parameter int N       = 1,
  parameter int WORDS   = 4096,
  parameter int LATENCY = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic      [N-1:0]    rdctrl_valid,
  output logic      [N-1:0]    rdctrl_ready,
  input  dma_ctrl_t [N-1:0]    rdctrl,
  input  logic      [N-1:0]    wrctrl_valid,
  output logic      [N-1:0]    wrctrl_ready,
  input  dma_ctrl_t [N-1:0]    wrctrl,
  output logic      [N-1:0]    rddata_valid,
  input  logic      [N-1:0]    rddata_ready,
  output logic [N-1:0][63:0]   rddata,
  input  logic      [N-1:0]    wrdata_valid,
  output logic      [N-1:0]    wrdata_ready,
  input  logic [N-1:0][63:0]   wrdata
);
  logic [63:0] mem [WORDS];
  longint      in_beats = 0;
  longint      reads = 0, writes = 0;
  int          ptr = 0;

  function automatic logic [63:0] init_word(int i);
    return 64'(i) * 3 + 7;
  endfunction

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = init_word(i);
    rdctrl_ready = '0; wrctrl_ready = '0; rddata_valid = '0; wrdata_ready = '0; rddata = '0;
  end

  // Outputs change shortly after a rising edge; handshakes are decided from
  // the values seen at the falling edge.
  initial forever begin
    automatic int t = -1;
    automatic bit is_rd = 0;
    @(negedge clk);
    if (!rst_n) continue;
    for (int o = 0; o < N; o++) begin
      automatic int i = (ptr + o) % N;
      if (t < 0 && rdctrl_valid[i]) begin t = i; is_rd = 1; end
      else if (t < 0 && wrctrl_valid[i]) begin t = i; is_rd = 0; end
    end
    if (t < 0) continue;
    ptr = (t + 1) % N;
    if (is_rd) begin
      automatic dma_ctrl_t c = rdctrl[t];
      @(posedge clk); #0.1;
      rdctrl_ready[t] = 1'b1;      // accepted at the next rising edge
      @(posedge clk); #0.1;
      rdctrl_ready[t] = 1'b0;
      reads++;
      repeat (LATENCY) @(posedge clk);
      #0.1;
      for (int k = 0; k < int'(c.length); k++) begin
        rddata_valid[t] = 1'b1;
        rddata[t]       = mem[(int'(c.index) + k) % WORDS];
        do @(negedge clk); while (!rddata_ready[t]);
        @(posedge clk); #0.1;
      end
      rddata_valid[t] = 1'b0;
    end else begin
      automatic dma_ctrl_t c = wrctrl[t];
      @(posedge clk); #0.1;
      wrctrl_ready[t] = 1'b1;
      @(posedge clk); #0.1;
      wrctrl_ready[t] = 1'b0;
      writes++;
      wrdata_ready[t] = 1'b1;
      for (int k = 0; k < int'(c.length); ) begin
        @(negedge clk);
        if (wrdata_valid[t]) begin
          mem[(int'(c.index) + k) % WORDS] = wrdata[t];
          in_beats++;
          k++;
          if (k == int'(c.length)) begin @(posedge clk); #0.1; wrdata_ready[t] = 1'b0; end
        end
        if (k < int'(c.length)) begin @(posedge clk); #0.1; end
      end
      wrdata_ready[t] = 1'b0;
    end
  end
endmodule
