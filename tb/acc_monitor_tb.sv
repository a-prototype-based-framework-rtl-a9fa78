// acc_monitor_tb: self-checking test of the run-time monitoring counters.
// Drives random start/done, request and data strobes for several phases,
// with random counter enables and manual clears, and compares the four
// counters every cycle with a reference model kept in the testbench: the
// execution timer counts the cycles from start to done, the packet counters
// count strobes, and the round-trip counter accumulates, per read request,
// the cycles from the request to its first data beat.
`timescale 1ns/1ps
module acc_monitor_tb;
  import vespa_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so flops without a running clock reset too
  logic tile_start = 0, tile_done = 0, rdctrl_hs = 0, wrctrl_hs = 0, wrdata_hs = 0, rddata_hs = 0;
  logic [31:0] rdctrl_len = 0;
  logic [3:0] enable = 4'hF;
  logic [2:0] clear = 0;
  logic [3:0][31:0] cnt;
  logic running;
  int checks = 0, failures = 0;

  acc_monitor dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference model
  longint e_exec = 0, e_in = 0, e_out = 0, e_rtt = 0, now = 0;
  bit     e_run = 0;
  longint req_ts [$];
  int     req_len [$];
  int     beat = 0;
  int     rtt_events = 0;

  always @(posedge clk) if (rst_n) begin
    // compare what the DUT shows before this edge
    check(cnt[MON_EXEC] == 32'(e_exec) && cnt[MON_IN] == 32'(e_in) && cnt[MON_OUT] == 32'(e_out)
          && cnt[MON_RTT] == 32'(e_rtt) && running == e_run,
          $sformatf("t=%0t cnt %0d %0d %0d %0d expected %0d %0d %0d %0d", $time,
                    cnt[0], cnt[1], cnt[2], cnt[3], e_exec, e_in, e_out, e_rtt));
    // update the model with the strobes sampled at this edge
    if (tile_start) begin e_run = 1; if (enable[0]) e_exec = 0; end
    else if (tile_done) e_run = 0;
    else if (e_run && enable[0]) e_exec++;
    if (clear[0]) e_in = 0; else if (enable[1] && rddata_hs) e_in++;
    if (clear[1]) e_out = 0; else if (enable[2]) e_out += rdctrl_hs + wrctrl_hs + wrdata_hs;
    if (req_len.size() && req_len[0] == 0) begin void'(req_ts.pop_front()); void'(req_len.pop_front()); end
    else if (rddata_hs && req_len.size()) begin
      if (beat == 0) begin
        if (clear[2]) e_rtt = 0; else if (enable[3]) e_rtt += now - req_ts[0];
        rtt_events++;
      end else if (clear[2]) e_rtt = 0;
      beat++;
      if (beat == req_len[0]) begin beat = 0; void'(req_ts.pop_front()); void'(req_len.pop_front()); end
    end else if (clear[2]) e_rtt = 0;
    if (rdctrl_hs) begin req_ts.push_back(now); req_len.push_back(rdctrl_len); end
    now++;
  end

  int outstanding_words = 0;
  initial begin
    #22 rst_n = 1;
    for (int ph = 0; ph < 6; ph++) begin
      enable <= (ph == 3) ? 4'($urandom) : 4'hF;
      @(posedge clk); tile_start <= 1;
      @(posedge clk); tile_start <= 0;
      for (int c = 0; c < 300; c++) begin
        automatic int room = 8 - req_len.size();
        rdctrl_hs  <= (room > 3) && ($urandom % 6 == 0);
        rdctrl_len <= 1 + $urandom % 4;
        wrctrl_hs  <= $urandom % 7 == 0;
        wrdata_hs  <= $urandom % 3 == 0;
        rddata_hs  <= (req_len.size() > 0) && ($urandom % 2 == 0);
        clear      <= ($urandom % 97 == 0) ? 3'($urandom) : 3'b000;
        @(posedge clk);
      end
      rdctrl_hs <= 0; wrctrl_hs <= 0; wrdata_hs <= 0; rddata_hs <= 0; clear <= 0;
      // drain outstanding reads
      while (req_len.size() > 0) begin rddata_hs <= 1; @(posedge clk); rddata_hs <= 0; @(posedge clk); end
      rddata_hs <= 0;
      tile_done <= 1; @(posedge clk); tile_done <= 0;
      repeat (20) @(posedge clk);   // exec counter must stay frozen
    end
    check(rtt_events > 50, $sformatf("round-trip events seen: %0d", rtt_events));
    check(e_exec > 0 && e_rtt > 0, "counters moved");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
