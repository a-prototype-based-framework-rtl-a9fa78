// dfs_actuator_tb: self-checking test of the DFS actuator with two MMCM
// models. After reset it checks the 10 MHz start-up clock, then steps the
// island through a sequence of frequencies (including the 10/30/50 MHz
// steps and a 100 MHz request) and for each change checks: the final clock
// period, the reported code, that the gap between island clock edges during
// the change never exceeds twice the old plus the new period (the time the glitch-free switch needs) (the clock is never
// stopped by the MMCM reprogramming), that exactly one MMCM was reprogrammed
// and that the change finished within the lock time plus a bounded number of
// reference cycles. Requests above the range are clamped. Finally the enable
// is dropped (clock must stop) and raised again.
`timescale 1ns/1ps
module dfs_actuator_tb;
  import vespa_pkg::*;
  localparam int LOCK_NS = 1000;
  logic clk_ref = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so flops without a running clock reset too
  logic [FREQ_W-1:0] freq_in = 5'd2;
  logic en_in = 1;
  logic [1:0][FREQ_W-1:0] mmcm_rcfg_code;
  logic [1:0] mmcm_rcfg_start, mmcm_clk, mmcm_locked;
  logic clk_out, busy;
  logic [FREQ_W-1:0] cur_freq;
  int checks = 0, failures = 0;

  dfs_actuator #(.FREQ_MIN(2), .FREQ_MAX(20), .FREQ_RESET(2)) dut (.*);
  for (genvar m = 0; m < 2; m++) begin : g_mmcm
    mmcm_model #(.LOCK_NS(LOCK_NS)) u (.dclk(clk_ref), .rcfg_code(mmcm_rcfg_code[m]),
      .rcfg_start(mmcm_rcfg_start[m]), .clk(mmcm_clk[m]), .locked(mmcm_locked[m]));
  end

  always #5 clk_ref = ~clk_ref;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // edge gap tracking
  realtime last_edge = 0, max_gap = 0;
  int edges = 0;
  always @(posedge clk_out) begin
    if (last_edge > 0 && $realtime - last_edge > max_gap) max_gap = $realtime - last_edge;
    last_edge = $realtime;
    edges++;
  end

  task automatic measure_period(output realtime p);
    realtime t0;
    @(posedge clk_out); @(posedge clk_out);
    t0 = $realtime;
    @(posedge clk_out);
    p = $realtime - t0;
  endtask

  int starts = 0;
  always @(posedge clk_ref) starts += mmcm_rcfg_start[0] + mmcm_rcfg_start[1];

  task automatic change(input int code, input int expect_code, input int expect_reprog = 1);
    realtime p, t0, old_p, dt;
    int s0;
    measure_period(old_p);
    s0 = starts;
    max_gap = 0;
    t0 = $realtime;
    freq_in <= FREQ_W'(code);
    repeat (8) @(posedge clk_ref);
    wait (!busy);
    dt = $realtime - t0;
    measure_period(p);
    check(cur_freq == FREQ_W'(expect_code), $sformatf("code %0d: cur_freq %0d", code, cur_freq));
    check(p > 200.0 / expect_code - 0.01 && p < 200.0 / expect_code + 0.01,
          $sformatf("code %0d: period %0.3f ns expected %0.3f", code, p, 200.0 / expect_code));
    check(max_gap <= 2 * (old_p + p) + 0.01, $sformatf("code %0d: clock gap %0.1f ns (old %0.1f, new %0.1f)", code, max_gap, old_p, p));
    check(starts - s0 == expect_reprog, $sformatf("code %0d: %0d MMCM reprogrammings", code, starts - s0));
    check(dt < LOCK_NS + 400 + 3 * (old_p + p), $sformatf("code %0d: change took %0.1f ns", code, dt));
  endtask

  initial begin
    realtime p;
    int e0;
    #33 rst_n = 1;
    wait (!busy);
    measure_period(p);
    check(cur_freq == 2 && p > 99.99 && p < 100.01, $sformatf("start-up period %0.2f", p));
    change(6, 6);
    change(10, 10);
    change(2, 2);
    change(11, 11);
    change(20, 20);
    change(25, 20, 0);   // clamped to 20, already there: nothing to do
    change(3, 3);
    // clock stop
    en_in <= 0;
    repeat (20) @(posedge clk_ref);
    e0 = edges;
    repeat (200) @(posedge clk_ref);
    check(edges == e0, "clock stopped while disabled");
    en_in <= 1;
    repeat (200) @(posedge clk_ref);
    check(edges > e0 + 5, "clock resumed when enabled");
    change(14, 14);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
