// fig5_traffic_tb: memory incoming traffic while the islands' clock
// frequencies change at run time (the traffic-profile experiment: A1 and A2
// both running a memory-bound kernel, traffic generators active, the
// accelerator island stepping 10 -> 30 -> 50 MHz, the NoC-and-memory island
// at 10, 55 or 100 MHz and the TG island stopped or at 10, 30 or 50 MHz,
// the values printed on the published frequency-profile axis).
//
// The fabric is the default one. All replicas are behavioural models with
// endless work: A1/A2 spend A_COMPUTE cycles per word (the single-replica
// dfmul rate), the TGs TG_COMPUTE, so every tile's demand follows its clock;
// incoming traffic counts the packets that reach memory: read requests,
// write requests and write-data words. For each NoC/TG setting the test
// measures the incoming rate over a 24 us window during which A1/A2 step
// through their three frequencies, and prints the table. Checked: traffic
// flows in every window and never exceeds one packet per NoC cycle; at NoC
// 100 MHz, running the TGs at 50 MHz raises memory traffic well above TGs
// stopped and above TGs at 10 MHz, and 30 MHz lies above 10 MHz; with TGs at
// 50 MHz, a 100 MHz NoC carries over twice the traffic of a 10 MHz one.
// Stopping the TG island mid-transfer also exercises resynchronizers whose
// writer clock stops.
`timescale 1ns/1ps
module fig5_traffic_tb;
  import vespa_pkg::*;
  localparam int NI = 5, NT = 13, KA = 4, KMAX = 4, NW = 16, CH = 4, OUT = 1024;
  localparam int BIG = 1000000;   // words per replica: the kernels never finish here
  localparam int TG_COMPUTE = 43; // TG (dfadd) cycles per word: 400 / 9.22 MB/s, the published 1x figure
  localparam int A_COMPUTE  = 46; // A1/A2 cycles per word: 400 / 8.70 MB/s, the published dfmul 1x figure
  int checks = 0, failures = 0;
  logic clk_ref = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so flops without a running clock reset too
  logic [NI-1:0] fixed_clk = '0;
  logic [NI-1:0][1:0][FREQ_W-1:0] mmcm_rcfg_code;
  logic [NI-1:0][1:0] mmcm_rcfg_start, mmcm_clk, mmcm_locked;
  logic [NI-1:0] island_clk, island_rst_n, island_busy;
  logic [NI-1:0][FREQ_W-1:0] island_freq;
  logic io_psel = 0, io_penable = 0, io_pwrite = 0, io_pready;
  logic [7:0] io_paddr = 0;
  logic [31:0] io_pwdata = 0, io_prdata;
  logic [NT-1:0] t_psel, t_penable, t_pwrite, t_pready;
  logic [NT-1:0][7:0] t_paddr;
  logic [NT-1:0][31:0] t_pwdata, t_prdata;
  logic      [NT-1:0][KMAX-1:0] acc_start, acc_done, rc_v, rc_r, wc_v, wc_r, rd_v, rd_r, wd_v, wd_r;
  dma_ctrl_t [NT-1:0][KMAX-1:0] rc_d, wc_d;
  logic      [NT-1:0][63:0] rd_d;
  logic [NT-1:0][KMAX-1:0][63:0] wd_d;
  logic      [NT-1:0] n_rc_v, n_rc_r, n_wc_v, n_wc_r, n_rd_v, n_rd_r, n_wd_v, n_wd_r;
  dma_ctrl_t [NT-1:0] n_rc_d, n_wc_d;
  logic      [NT-1:0][63:0] n_rd_d, n_wd_d;

  vespa_soc dut (
    .clk_ref, .rst_n, .fixed_clk('0), .mmcm_rcfg_code, .mmcm_rcfg_start, .mmcm_clk, .mmcm_locked,
    .island_clk, .island_rst_n, .island_freq, .island_busy,
    .io_psel, .io_penable, .io_pwrite, .io_paddr, .io_pwdata, .io_prdata, .io_pready,
    .t_psel, .t_penable, .t_pwrite, .t_paddr, .t_pwdata, .t_prdata, .t_pready,
    .acc_start, .acc_done,
    .acc_rdctrl_valid(rc_v), .acc_rdctrl_ready(rc_r), .acc_rdctrl(rc_d),
    .acc_wrctrl_valid(wc_v), .acc_wrctrl_ready(wc_r), .acc_wrctrl(wc_d),
    .acc_rddata_valid(rd_v), .acc_rddata_ready(rd_r), .acc_rddata(rd_d),
    .acc_wrdata_valid(wd_v), .acc_wrdata_ready(wd_r), .acc_wrdata(wd_d),
    .noc_rdctrl_valid(n_rc_v), .noc_rdctrl_ready(n_rc_r), .noc_rdctrl(n_rc_d),
    .noc_wrctrl_valid(n_wc_v), .noc_wrctrl_ready(n_wc_r), .noc_wrctrl(n_wc_d),
    .noc_rddata_valid(n_rd_v), .noc_rddata_ready(n_rd_r), .noc_rddata(n_rd_d),
    .noc_wrdata_valid(n_wd_v), .noc_wrdata_ready(n_wd_r), .noc_wrdata(n_wd_d)
  );

  always #5 clk_ref = ~clk_ref;

  for (genvar i = 0; i < NI; i++) begin : g_mmcm
    for (genvar m = 0; m < 2; m++) begin : g_m
      mmcm_model #(.LOCK_NS(500)) u (.dclk(clk_ref), .rcfg_code(mmcm_rcfg_code[i][m]),
        .rcfg_start(mmcm_rcfg_start[i][m]), .clk(mmcm_clk[i][m]), .locked(mmcm_locked[i][m]));
    end
  end

  noc_mem_model #(.N(NT), .WORDS(2048), .LATENCY(4)) u_mem (
    .clk(island_clk[ISL_NOC]), .rst_n(island_rst_n[ISL_NOC]),
    .rdctrl_valid(n_rc_v), .rdctrl_ready(n_rc_r), .rdctrl(n_rc_d),
    .wrctrl_valid(n_wc_v), .wrctrl_ready(n_wc_r), .wrctrl(n_wc_d),
    .rddata_valid(n_rd_v), .rddata_ready(n_rd_r), .rddata(n_rd_d),
    .wrdata_valid(n_wd_v), .wrdata_ready(n_wd_r), .wrdata(n_wd_d)
  );

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask


  task automatic io_write(input int isl, input int code, input bit en);
    @(posedge island_clk[ISL_IO]); #0.1;
    io_psel = 1; io_pwrite = 1; io_paddr = 8'(4 * isl); io_pwdata = {23'd0, en, 3'd0, 5'(code)}; io_penable = 0;
    @(posedge island_clk[ISL_IO]); #0.1;
    io_penable = 1;
    @(posedge island_clk[ISL_IO]); #0.1;
    io_psel = 0; io_penable = 0; io_pwrite = 0;
  endtask

  task automatic wait_settled(input int isl, input int code);
    repeat (10) @(posedge clk_ref);
    while (island_busy[isl] || island_freq[isl] != FREQ_W'(code)) @(posedge clk_ref);
  endtask

  bit [NT-1:0] run_req = '0;

  for (genvar t = 0; t < NT; t++) begin : g_tile
    localparam int KT  = (t < 2) ? KA : 1;
    localparam int ISL = (t < 2) ? int'(ISL_ACC) : int'(ISL_TG);
    wire tclk = island_clk[ISL];
    logic psel = 0, penable = 0, pwrite = 0;
    logic [7:0] paddr = 0;
    logic [31:0] pwdata = 0;
    assign t_psel[t] = psel;
    assign t_penable[t] = penable;
    assign t_pwrite[t] = pwrite;
    assign t_paddr[t] = paddr;
    assign t_pwdata[t] = pwdata;

    for (genvar k = 0; k < KMAX; k++) begin : g_rep
      if (k < KT) begin : g_on
        acc_model u_acc (
          .clk(tclk), .rst_n(island_rst_n[ISL]),
          .rd_base(32'((t * KMAX + k) * NW)), .wr_base(32'(OUT + (t * KMAX + k) * NW)),
          .nwords(32'(BIG)), .chunk(32'(CH)), .compute_cycles((t < 2) ? A_COMPUTE : TG_COMPUTE),
          .acc_start(acc_start[t][k]), .acc_done(acc_done[t][k]),
          .rdctrl_valid(rc_v[t][k]), .rdctrl_ready(rc_r[t][k]), .rdctrl(rc_d[t][k]),
          .wrctrl_valid(wc_v[t][k]), .wrctrl_ready(wc_r[t][k]), .wrctrl(wc_d[t][k]),
          .rddata_valid(rd_v[t][k]), .rddata_ready(rd_r[t][k]), .rddata(rd_d[t]),
          .wrdata_valid(wd_v[t][k]), .wrdata_ready(wd_r[t][k]), .wrdata(wd_d[t][k])
        );
      end else begin : g_off
        assign acc_done[t][k] = 1'b0;
        assign rc_v[t][k] = 1'b0;
        assign rc_d[t][k] = '0;
        assign wc_v[t][k] = 1'b0;
        assign wc_d[t][k] = '0;
        assign rd_r[t][k] = 1'b0;
        assign wd_v[t][k] = 1'b0;
        assign wd_d[t][k] = '0;
      end
    end

    task automatic apb(input bit w, input logic [7:0] a, input logic [31:0] d, output logic [31:0] r);
      @(posedge tclk); #0.1;
      psel = 1; pwrite = w; paddr = a; pwdata = d; penable = 0;
      @(posedge tclk); #0.1;
      penable = 1;
      @(negedge tclk); r = t_prdata[t];
      @(posedge tclk); #0.1;
      psel = 0; penable = 0; pwrite = 0;
    endtask

    initial begin
      logic [31:0] r;
      wait (run_req[t]);
      apb(1, 8'h00, 32'h1, r);
    end
  end

  // memory incoming traffic per window: packets reaching memory, that is
  // read requests, write requests and write-data words
  task automatic window(input int noc, input int tg, output real rate);
    longint b0;
    realtime t0;
    if (tg == 0) io_write(ISL_TG, 10, 0);
    else begin io_write(ISL_TG, tg, 1); wait_settled(ISL_TG, tg); end
    io_write(ISL_NOC, noc, 1);
    wait_settled(ISL_NOC, noc);
    b0 = u_mem.in_beats + u_mem.reads + u_mem.writes;
    t0 = $realtime;
    // A1 and A2 step through 10, 30 and 50 MHz inside the window
    foreach (acc_steps[i]) begin
      longint s0;
      realtime u0;
      io_write(ISL_ACC, acc_steps[i], 1);
      s0 = u_mem.in_beats + u_mem.reads + u_mem.writes;
      u0 = $realtime;
      repeat (WIN_NS / 30) @(posedge clk_ref);
      step_rate[i] = 1000.0 * (u_mem.in_beats + u_mem.reads + u_mem.writes - s0) / ($realtime - u0);
    end
    rate = 1000.0 * (u_mem.in_beats + u_mem.reads + u_mem.writes - b0) / ($realtime - t0);   // Mpkt/s
  endtask

  localparam int WIN_NS = 24000;
  real step_rate [3];   // incoming traffic at each A1/A2 step of the last window
  int acc_steps [3] = '{2, 6, 10};

  initial begin
    int  nocs [3] = '{2, 11, 20};
    int  tgs  [4] = '{0, 2, 6, 10};
    real r [3][4];
    #33 rst_n = 1;
    for (int i = 0; i < NI; i++) wait_settled(i, 2);
    run_req = '1;
    for (int n = 0; n < 3; n++)
      for (int g = 0; g < 4; g++) begin
        window(nocs[n], tgs[g], r[n][g]);
        $display("NoC %3d MHz, TG %2d MHz: memory incoming %6.2f Mpkt/s (A1/A2 at 10/30/50 MHz: %6.2f %6.2f %6.2f)",
                 5 * nocs[n], 5 * tgs[g], r[n][g], step_rate[0], step_rate[1], step_rate[2]);
        check(r[n][g] > 0.0, "traffic flows");
        check(r[n][g] <= 5.0 * nocs[n] + 0.01, $sformatf("traffic %0.2f within one packet per NoC cycle", r[n][g]));
      end
    check(r[2][3] > 1.5 * r[2][0], $sformatf("NoC 100 MHz: TG at 50 MHz raises traffic %0.2f -> %0.2f", r[2][0], r[2][3]));
    check(r[2][3] > 1.5 * r[2][1], $sformatf("NoC 100 MHz: TG 50 MHz well above TG 10 MHz (%0.2f vs %0.2f)", r[2][3], r[2][1]));
    check(r[2][2] > r[2][1], "NoC 100 MHz: TG 30 MHz above TG 10 MHz");
    check(r[2][3] > 2.0 * r[0][3], $sformatf("TG 50 MHz: NoC 100 MHz carries more than NoC 10 MHz (%0.2f vs %0.2f)", r[2][3], r[0][3]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
