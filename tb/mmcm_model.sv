// mmcm_model: behavioural model of a reconfigurable FPGA clock manager
// (MMCM), for simulation only; not synthesizable.
//
// A one-cycle rcfg_start pulse, sampled on dclk, starts reprogramming to
// rcfg_code (5 MHz units): locked falls and the output clock is held low
// for LOCK_NS nanoseconds, then the clock restarts at code * 5 MHz and
// locked rises. Before its first programming the model produces no clock.
`timescale 1ns/1ps
module mmcm_model #(
  parameter int LOCK_NS = 300
) (
  input  logic       dclk,
  input  logic [4:0] rcfg_code,
  input  logic       rcfg_start,
  output logic       clk,
  output logic       locked
);
  realtime half_ns = 50.0;
  logic    running = 1'b0;
  int      reconfigs = 0;

  initial begin
    clk    = 1'b0;
    locked = 1'b0;
  end

  always @(posedge dclk) begin
    if (rcfg_start) begin
      automatic logic [4:0] code = rcfg_code;
      reconfigs++;
      running = 1'b0;
      locked  = 1'b0;
      fork
        begin
          #(LOCK_NS * 1ns);
          half_ns = 100.0 / ((code == 0) ? 1 : code);
          running = 1'b1;
          locked  = 1'b1;
        end
      join_none
    end
  end

  always begin
    if (running) begin
      clk = 1'b1;
      #(half_ns * 1ns);
      clk = 1'b0;
      #(half_ns * 1ns);
    end else begin
      clk = 1'b0;
      @(posedge running);
    end
  end
endmodule
