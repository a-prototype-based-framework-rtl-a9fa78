// vespa_soc_tb: end-to-end test of the frequency-island SoC fabric at its
// default size (five islands, thirteen accelerator tiles: A1 and A2 with
// four replicas, eleven traffic-generator tiles with one).
//
// Around the fabric: ten MMCM models, one replica model per accelerator
// replica and one NoC/memory model serving all thirteen tiles in the NoC
// island. A "software" process on the I/O island programs the frequency
// registers; one process per tile starts its tile, waits for done and reads
// the monitoring counters. While the tiles run, the accelerator island is
// stepped 10 -> 30 -> 50 MHz and back, the NoC island 100 -> 55 -> 100 MHz,
// and the traffic-generator island is stopped and restarted (en = 0/1),
// the run mirroring the kind of frequency profile used to study memory
// traffic. Checked: every island reaches the requested (clamped) frequency
// at the measured clock period; every replica's output in memory; each
// tile's incoming/outgoing packet counters against its replicas' traffic;
// execution and round-trip counters non-zero. Counted mechanisms, each of
// which must occur: DFS changes, clamped requests, island clock stops,
// replica contention inside a tile, tile streams held back by the shared
// memory (backpressure through the resynchronizers), words crossing a
// resynchronizer while the tile and NoC clocks differ.
`timescale 1ns/1ps
module vespa_soc_tb;
  import vespa_pkg::*;
  localparam int NI = 5, NT = 13, KA = 4, KMAX = 4, NW = 16, CH = 4, OUT = 1024;
  int checks = 0, failures = 0;

  logic clk_ref = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so flops without a running clock reset too
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

  // ---------------- mechanism counters ----------------
  int dfs_changes = 0, clamped = 0, clock_stops = 0, contention = 0, backpressure = 0, cross_words = 0;
  logic [NI-1:0][FREQ_W-1:0] freq_prev;
  always @(posedge clk_ref) begin
    for (int i = 0; i < NI; i++) if (rst_n && island_freq[i] != freq_prev[i]) dfs_changes++;
    freq_prev <= island_freq;
  end
  always @(negedge island_clk[ISL_ACC]) begin
    if ($countones(rc_v[0]) > 1 || $countones(rc_v[1]) > 1) contention++;
  end
  always @(negedge island_clk[ISL_NOC]) begin
    for (int t = 0; t < NT; t++) begin
      if ((n_rc_v[t] && !n_rc_r[t]) || (n_wd_v[t] && !n_wd_r[t])) backpressure++;
      if (n_wd_v[t] && n_wd_r[t] && island_freq[ISL_NOC] != island_freq[t < 2 ? ISL_ACC : ISL_TG]) cross_words++;
    end
  end

  // tile-stream reference counts (NoC side)
  longint ref_in [NT], ref_out [NT];
  always @(negedge island_clk[ISL_NOC]) begin
    for (int t = 0; t < NT; t++) begin
      ref_in[t]  += n_rd_v[t] && n_rd_r[t];
      ref_out[t] += (n_rc_v[t] && n_rc_r[t]) + (n_wc_v[t] && n_wc_r[t]) + (n_wd_v[t] && n_wd_r[t]);
    end
  end

  // ---------------- I/O-island software: frequency registers ----------------
  task automatic io_write(input int isl, input int code, input bit en);
    @(posedge island_clk[ISL_IO]); #0.1;
    io_psel = 1; io_pwrite = 1; io_paddr = 8'(4 * isl); io_pwdata = {23'd0, en, 3'd0, 5'(code)}; io_penable = 0;
    @(posedge island_clk[ISL_IO]); #0.1;
    io_penable = 1;
    @(posedge island_clk[ISL_IO]); #0.1;
    io_psel = 0; io_penable = 0; io_pwrite = 0;
  endtask

  task automatic wait_settled(input int isl, input int code);
    realtime t0, p;
    repeat (10) @(posedge clk_ref);
    while (island_busy[isl] || island_freq[isl] != FREQ_W'(code)) @(posedge clk_ref);
    @(posedge island_clk[isl]); @(posedge island_clk[isl]);
    t0 = $realtime;
    @(posedge island_clk[isl]);
    p = $realtime - t0;
    check(p > 200.0 / code - 0.01 && p < 200.0 / code + 0.01,
          $sformatf("island %0d: period %0.2f ns for code %0d", isl, p, code));
  endtask

  // ---------------- per-tile software and replicas ----------------
  bit go = 0;
  bit [NT-1:0] tile_finished = '0;

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
          .nwords(32'(NW)), .chunk(32'(CH)), .compute_cycles((t < 2) ? 1 : 0),
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
      logic [31:0] r, c_exec, c_in, c_out, c_rtt;
      wait (go);
      apb(1, 8'h00, 32'h1, r);
      do apb(0, 8'h04, 0, r); while (!r[1]);
      // done means the replicas have handed over their last words; let the
      // last writes cross the resynchronizers into memory
      for (int w = 0; w < 2000 && ref_out[t] < KT * (NW + 2 * NW / CH); w++) @(posedge clk_ref);
      apb(0, 8'h10, 0, c_exec);
      apb(0, 8'h14, 0, c_in);
      apb(0, 8'h18, 0, c_out);
      apb(0, 8'h1C, 0, c_rtt);
      // the counters run in the tile clock, the references in the NoC clock:
      // once all traffic is over both must agree
      check(c_in == 32'(ref_in[t]) && c_in == KT * NW, $sformatf("tile %0d incoming %0d ref %0d", t, c_in, ref_in[t]));
      check(c_out == 32'(ref_out[t]) && c_out == KT * (NW + 2 * NW / CH),
            $sformatf("tile %0d outgoing %0d ref %0d", t, c_out, ref_out[t]));
      check(c_exec > 0 && c_rtt > 0, $sformatf("tile %0d exec %0d rtt %0d", t, c_exec, c_rtt));
      for (int k = 0; k < KT; k++)
        for (int i = 0; i < NW; i++)
          check(u_mem.mem[OUT + (t * KMAX + k) * NW + i] == u_mem.init_word((t * KMAX + k) * NW + i) + 1,
                $sformatf("tile %0d replica %0d word %0d", t, k, i));
      tile_finished[t] = 1'b1;
    end
  end

  // ---------------- scenario ----------------
  initial begin
    int e0;
    #33 rst_n = 1;
    for (int i = 0; i < NI; i++) wait_settled(i, 2);
    io_write(ISL_NOC, 20, 1);
    io_write(ISL_ACC, 2, 1);
    io_write(ISL_TG, 10, 1);
    wait_settled(ISL_NOC, 20);
    wait_settled(ISL_TG, 10);
    go = 1;
    // accelerator island steps while the tiles run
    io_write(ISL_ACC, 6, 1);
    wait_settled(ISL_ACC, 6);
    io_write(ISL_ACC, 20, 1);          // above the 50 MHz limit: clamped
    wait_settled(ISL_ACC, 10);
    clamped += (island_freq[ISL_ACC] == 10);
    io_write(ISL_NOC, 11, 1);
    wait_settled(ISL_NOC, 11);
    // stop the traffic-generator island for a while
    io_write(ISL_TG, 10, 0);
    repeat (50) @(posedge clk_ref);
    e0 = 0;
    fork
      begin forever begin @(posedge island_clk[ISL_TG]); e0++; end end
      begin repeat (300) @(posedge clk_ref); end
    join_any
    disable fork;
    check(e0 == 0, $sformatf("TG island clock stopped (%0d edges)", e0));
    clock_stops += (e0 == 0);
    io_write(ISL_TG, 10, 1);
    io_write(ISL_NOC, 20, 1);
    wait_settled(ISL_NOC, 20);
    io_write(ISL_ACC, 2, 1);
    wait_settled(ISL_ACC, 2);
    wait (&tile_finished);
    check(dfs_changes > 0, $sformatf("DFS changes: %0d", dfs_changes));
    check(clamped > 0, "clamped request");
    check(clock_stops > 0, "island clock stop");
    check(contention > 0, $sformatf("replica contention cycles: %0d", contention));
    check(backpressure > 0, $sformatf("cycles a tile stream waited at the NoC: %0d", backpressure));
    check(cross_words > 0, $sformatf("words crossing islands at different clocks: %0d", cross_words));
    $display("mechanisms: dfs_changes=%0d clamped=%0d clock_stops=%0d contention=%0d backpressure=%0d cross_words=%0d",
             dfs_changes, clamped, clock_stops, contention, backpressure, cross_words);
    $display("memory: reads=%0d writes=%0d words in=%0d", u_mem.reads, u_mem.writes, u_mem.in_beats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
