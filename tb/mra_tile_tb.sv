// mra_tile_tb: self-checking test of a multi-replica accelerator tile with
// K = 4 replica models and a NoC/memory model. Software-style APB accesses
// start the tile, poll for done and read the monitoring counters. Checked:
// the memory image produced by all replicas; the execution-time counter
// against the cycles the testbench counts between start and done; the
// incoming/outgoing packet counters against the traffic seen on the tile
// streams; the round-trip counter against a reference measured on the same
// streams; manual clearing; and, in a second run with only the execution
// timer enabled, that disabled counters stay still while the timer restarts.
`timescale 1ns/1ps
module mra_tile_tb;
  import vespa_pkg::*;
  localparam int K = 4, NW = 32, OUT = 1024, LAT = 6;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so flops without a running clock reset too
  int checks = 0, failures = 0;

  logic psel = 0, penable = 0, pwrite = 0, pready;
  logic [7:0] paddr = 0;
  logic [31:0] pwdata = 0, prdata;
  logic      [K-1:0] rc_v, rc_r, wc_v, wc_r, rd_v, rd_r, wd_v, wd_r, start, done;
  dma_ctrl_t [K-1:0] rc_d, wc_d;
  logic [63:0]       rd_d;
  logic [K-1:0][63:0] wd_d;
  logic      n_rc_v, n_rc_r, n_wc_v, n_wc_r, n_rd_v, n_rd_r, n_wd_v, n_wd_r;
  dma_ctrl_t n_rc_d, n_wc_d;
  logic [63:0] n_rd_d, n_wd_d;

  mra_tile #(.K(K)) dut (
    .clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready,
    .acc_start(start), .acc_done(done),
    .acc_rdctrl_valid(rc_v), .acc_rdctrl_ready(rc_r), .acc_rdctrl(rc_d),
    .acc_wrctrl_valid(wc_v), .acc_wrctrl_ready(wc_r), .acc_wrctrl(wc_d),
    .acc_rddata_valid(rd_v), .acc_rddata_ready(rd_r), .acc_rddata(rd_d),
    .acc_wrdata_valid(wd_v), .acc_wrdata_ready(wd_r), .acc_wrdata(wd_d),
    .noc_rdctrl_valid(n_rc_v), .noc_rdctrl_ready(n_rc_r), .noc_rdctrl(n_rc_d),
    .noc_wrctrl_valid(n_wc_v), .noc_wrctrl_ready(n_wc_r), .noc_wrctrl(n_wc_d),
    .noc_rddata_valid(n_rd_v), .noc_rddata_ready(n_rd_r), .noc_rddata(n_rd_d),
    .noc_wrdata_valid(n_wd_v), .noc_wrdata_ready(n_wd_r), .noc_wrdata(n_wd_d)
  );

  int base = 0;
  for (genvar k = 0; k < K; k++) begin : g_acc
    acc_model u_acc (
      .clk, .rst_n, .rd_base(32'(base + k * NW)), .wr_base(32'(OUT + base + k * NW)), .nwords(32'(NW)),
      .chunk(32'(8)), .compute_cycles(k),
      .acc_start(start[k]), .acc_done(done[k]),
      .rdctrl_valid(rc_v[k]), .rdctrl_ready(rc_r[k]), .rdctrl(rc_d[k]),
      .wrctrl_valid(wc_v[k]), .wrctrl_ready(wc_r[k]), .wrctrl(wc_d[k]),
      .rddata_valid(rd_v[k]), .rddata_ready(rd_r[k]), .rddata(rd_d),
      .wrdata_valid(wd_v[k]), .wrdata_ready(wd_r[k]), .wrdata(wd_d[k])
    );
  end

  noc_mem_model #(.N(1), .WORDS(4096), .LATENCY(LAT)) u_mem (
    .clk, .rst_n,
    .rdctrl_valid(n_rc_v), .rdctrl_ready(n_rc_r), .rdctrl(n_rc_d),
    .wrctrl_valid(n_wc_v), .wrctrl_ready(n_wc_r), .wrctrl(n_wc_d),
    .rddata_valid(n_rd_v), .rddata_ready(n_rd_r), .rddata(n_rd_d),
    .wrdata_valid(n_wd_v), .wrdata_ready(n_wd_r), .wrdata(n_wd_d)
  );

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic apb(input bit w, input logic [7:0] a, input logic [31:0] d, output logic [31:0] r);
    @(posedge clk); #0.1;
    psel = 1; pwrite = w; paddr = a; pwdata = d; penable = 0;
    @(posedge clk); #0.1;
    penable = 1;
    @(negedge clk); r = prdata;
    @(posedge clk); #0.1;
    psel = 0; penable = 0; pwrite = 0;
  endtask

  // reference traffic counts and round-trip times on the tile streams,
  // sampled at the falling edge (values that the next rising edge takes)
  longint r_in = 0, r_out = 0, r_rtt = 0, cyc = 0;
  longint ts_q [$];
  int     len_q [$];
  int     beat = 0;
  bit     running_ref = 0;
  longint exec_ref = 0;
  always @(negedge clk) if (rst_n) begin
    if (n_rd_v && n_rd_r) begin
      r_in++;
      if (beat == 0) r_rtt += cyc - ts_q[0];
      beat++;
      if (beat == len_q[0]) begin beat = 0; void'(ts_q.pop_front()); void'(len_q.pop_front()); end
    end
    if (n_rc_v && n_rc_r) begin ts_q.push_back(cyc); len_q.push_back(n_rc_d.length); r_out++; end
    r_out += (n_wc_v && n_wc_r) + (n_wd_v && n_wd_r);
    cyc++;
  end

  initial begin
    logic [31:0] r, st, c_exec, c_in, c_out, c_rtt;
    longint t_start, t_done;
    #22 rst_n = 1;
    apb(1, 8'h08, 32'hF, r);
    // run 1: all counters
    apb(1, 8'h00, 32'h1, r);
    t_start = cyc;
    do apb(0, 8'h04, 0, st); while (!st[1]);
    apb(0, 8'h10, 0, c_exec);
    apb(0, 8'h14, 0, c_in);
    apb(0, 8'h18, 0, c_out);
    apb(0, 8'h1C, 0, c_rtt);
    for (int k = 0; k < K; k++)
      for (int i = 0; i < NW; i++)
        check(u_mem.mem[OUT + k * NW + i] == u_mem.init_word(k * NW + i) + 1, $sformatf("replica %0d word %0d", k, i));
    check(c_in == 32'(r_in) && r_in == K * NW, $sformatf("incoming %0d expected %0d", c_in, r_in));
    check(c_out == 32'(r_out) && r_out == K * NW + 2 * K * (NW / 8), $sformatf("outgoing %0d expected %0d", c_out, r_out));
    check(c_rtt == 32'(r_rtt) && r_rtt >= K * (NW / 8) * LAT, $sformatf("round trip %0d expected %0d", c_rtt, r_rtt));
    check(c_exec > 100 && c_exec <= 32'(cyc - t_start), $sformatf("exec time %0d, at most %0d", c_exec, cyc - t_start));
    // the execution timer is frozen after done
    repeat (30) @(posedge clk);
    apb(0, 8'h10, 0, r);
    check(r == c_exec, "exec time frozen after done");
    // manual clear
    apb(1, 8'h0C, 32'h7, r);
    apb(0, 8'h14, 0, r); check(r == 0, "incoming cleared");
    apb(0, 8'h18, 0, r); check(r == 0, "outgoing cleared");
    apb(0, 8'h1C, 0, r); check(r == 0, "round trip cleared");
    apb(0, 8'h10, 0, r); check(r == c_exec, "exec time not cleared manually");
    // run 2: only the execution timer, on a fresh input area
    apb(1, 8'h08, 32'h1, r);
    apb(1, 8'h00, 32'h1, r);
    do apb(0, 8'h04, 0, st); while (!st[1]);
    apb(0, 8'h10, 0, r);
    check(r > 100 && r < c_exec + c_exec / 2, $sformatf("run 2 exec time %0d (run 1 %0d)", r, c_exec));
    apb(0, 8'h14, 0, r); check(r == 0, "disabled incoming stays 0");
    apb(0, 8'h18, 0, r); check(r == 0, "disabled outgoing stays 0");
    apb(0, 8'h1C, 0, r); check(r == 0, "disabled round trip stays 0");
    apb(0, 8'h08, 0, r); check(r == 1, "MON_EN reads back");
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
