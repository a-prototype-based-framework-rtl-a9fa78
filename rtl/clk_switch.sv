// clk_switch: glitch-free two-input clock multiplexer with enable, used by
// the DFS actuator to hand the island clock from one MMCM to the other.
//
// Each input clock has its own select flop, clocked on that clock's falling
// edge and allowed to rise only after the other input's select flop has
// fallen (the classic cross-coupled switch). The output is
// (clk0 & on0) | (clk1 & on1), so a change of sel or en takes effect only
// while the clocks involved are low and never shortens a high or low phase.
// With en low both select flops fall and the output stays low. A switch
// completes within about two periods of each clock; both clocks must be
// running for it to complete. On an FPGA this function is provided by a
// global clock buffer with two inputs; this RTL equivalent is this design's
// choice. The clock gating and muxing here is intentional combinational logic
// on clock nets.
module clk_switch (
  input  logic clk0,
  input  logic clk1,
  input  logic rst_n,
  input  logic sel,     // 0: clk0, 1: clk1
  input  logic en,      // 0: output held low
  output logic clk_out,
  output logic on0,     // clk0 currently drives the output
  output logic on1      // clk1 currently drives the output
);
  logic s0_meta, s1_meta;

  always_ff @(posedge clk0 or negedge rst_n)
    if (!rst_n) s0_meta <= 1'b0; else s0_meta <= en && !sel && !on1;
  always_ff @(negedge clk0 or negedge rst_n)
    if (!rst_n) on0 <= 1'b0; else on0 <= s0_meta;

  always_ff @(posedge clk1 or negedge rst_n)
    if (!rst_n) s1_meta <= 1'b0; else s1_meta <= en && sel && !on0;
  always_ff @(negedge clk1 or negedge rst_n)
    if (!rst_n) on1 <= 1'b0; else on1 <= s1_meta;

  assign clk_out = (clk0 && on0) || (clk1 && on1);

endmodule
