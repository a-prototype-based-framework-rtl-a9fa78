// resync_tb: self-checking test of the dual-clock resynchronizer.
// Streams 2000 random words from a 10 ns write clock to a read clock that
// switches between 7 ns, 23 ns and a stopped phase, with random valid and
// ready, and checks order and content against a queue. Also checks that
// the write side stops at DEPTH words when the reader is stalled and that
// a word takes at most four read clocks to cross.
`timescale 1ns/1ps
module resync_tb;
  localparam int W = 16, D = 8, NW = 2000;
  logic wclk = 0, rclk = 0, wrst_n = 1, rrst_n = 1;
  initial #1 begin wrst_n = 0; rrst_n = 0; end
  logic w_valid = 0, w_ready, r_valid, r_ready = 0;
  logic [W-1:0] w_data = '0, r_data;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  realtime rhalf = 3.5;
  bit rstop = 0;

  resync #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 wclk = ~wclk;
  always begin
    if (rstop) begin rclk = 0; @(negedge rstop); end
    #(rhalf * 1ns) rclk = ~rclk;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int sent = 0, got = 0;
  // writer
  initial begin
    #33 wrst_n = 1; rrst_n = 1;
    // fill test: reader stalled
    repeat (3) @(posedge wclk);
    for (int i = 0; i < 20; i++) begin
      w_valid <= 1; w_data <= W'($urandom);
      @(posedge wclk);
      if (w_valid && w_ready) begin q.push_back(w_data); sent++; end
    end
    w_valid <= 0;
    check(sent == D, $sformatf("write side accepted %0d words while reader stalled, expected %0d", sent, D));
    r_ready <= 1;
    while (sent < NW) begin
      w_valid <= ($urandom % 4) != 0;
      w_data  <= W'($urandom);
      @(posedge wclk);
      if (w_valid && w_ready) begin q.push_back(w_data); sent++; end
    end
    w_valid <= 0;
  end

  // reader
  initial begin
    @(posedge rrst_n);
    wait (r_ready);
    while (got < NW) begin
      @(posedge rclk);
      if (r_valid && r_ready) begin
        check(q.size() > 0 && r_data == q[0], $sformatf("word %0d: got %h expected %h", got, r_data, q.size() ? q[0] : 'x));
        if (q.size()) void'(q.pop_front());
        got++;
      end
      r_ready <= ($urandom % 3) != 0;
    end
  end

  // read clock profile
  initial begin
    #3000 rhalf = 11.5;
    #3000 rstop = 1;
    #500  rstop = 0;
    #2000 rhalf = 3.5;
  end

  // crossing latency: one word into an empty FIFO
  initial begin
    wait (got == NW);
    repeat (5) @(posedge rclk);
    @(posedge wclk);
    w_valid <= 1; w_data <= 16'hBEEF;
    @(posedge wclk);
    w_valid <= 0;
    begin
      int n = 0;
      while (!r_valid && n < 10) begin @(posedge rclk); n++; end
      check(r_valid && r_data == 16'hBEEF && n <= 4, $sformatf("crossing took %0d read clocks", n));
    end
    check(got == NW, "all words received");
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
