// island_map_tb: the design-time assignment of tiles to frequency islands.
//
// The fabric has its default size but a different tile-to-island map: A1
// (tile 0) sits in the NoC-and-memory island, so its link to the router has
// no resynchronizers; A2 (tile 1) stays in the accelerator island; TG tiles
// 2-6 are in the TG island and 7-12 in the CPU island. The test first runs
// every tile at once, with the four tile islands at different frequencies,
// and checks every output word. It then runs A1 alone and A2 alone, with
// the NoC and accelerator islands both at 50 MHz, and reads their IN and RTT
// counters: with the same clock, same work and same memory, A1's average
// read round-trip time must be shorter, by the crossing latency that its
// direct link avoids, and both must count every read-data beat. It also
// checks, by hierarchy, that A1 was built with the direct link and A2 with
// resyncs, and that A1's request stream reaches the router unchanged.
`timescale 1ns/1ps
module island_map_tb;
  import vespa_pkg::*;
  localparam int NI = 5, NT = 13, KA = 4, KMAX = 4, NW = 16, CH = 4, OUT = 1024, TW = 24;
  localparam logic [NT-1:0][2:0] MAP = {{6{ISL_CPU}}, {5{ISL_TG}}, ISL_ACC, ISL_NOC};
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

  vespa_soc #(.TILE_ISL(MAP)) dut (
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

  function automatic int tile_isl(int t);
    return int'(MAP[t]);
  endfunction

  // per-tile software: start on request, wait for done, read counters
  bit [NT-1:0] run_req = '0, run_done = '0;
  logic [31:0] exec_cnt [NT], in_cnt [NT], rtt_cnt [NT];

  for (genvar t = 0; t < NT; t++) begin : g_tile
    localparam int KT  = (t < 2) ? KA : 1;
    localparam int ISL = int'(MAP[t]);
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
          .rd_base(32'((t < 2) ? (t * KMAX + k) * NW : 256 + (t - 2) * TW)),
          .wr_base(32'((t < 2) ? OUT + (t * KMAX + k) * NW : OUT + 256 + (t - 2) * TW)),
          .nwords(32'((t < 2) ? NW : TW)), .chunk(32'(CH)), .compute_cycles(2),
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

    initial forever begin
      logic [31:0] r;
      wait (run_req[t]);
      run_req[t] = 1'b0;
      apb(1, 8'h0C, 32'h7, r);   // clear IN, OUT, RTT
      apb(1, 8'h00, 32'h1, r);
      do apb(0, 8'h04, 0, r); while (!r[1]);
      apb(0, 8'h10, 0, exec_cnt[t]);
      apb(0, 8'h14, 0, in_cnt[t]);
      apb(0, 8'h1C, 0, rtt_cnt[t]);
      run_done[t] = 1'b1;
    end
  end

  // A1's direct link: the tile's request stream is the router's, cycle by cycle
  int a1_req_cycles = 0, a1_link_diff = 0;
  always @(negedge island_clk[ISL_NOC]) if (island_rst_n[ISL_NOC]) begin
    if (dut.g_tile[0].rc_v) a1_req_cycles++;
    if (dut.g_tile[0].rc_v != n_rc_v[0] || dut.g_tile[0].rd_v != n_rd_v[0]) a1_link_diff++;
  end

  task automatic clear_out();
    for (int i = 0; i < 1024; i++) u_mem.mem[OUT + i] = '0;
  endtask

  task automatic check_tile(int t);
    if (t < 2) begin
      for (int k = 0; k < KA; k++)
        for (int i = 0; i < NW; i++)
          check(u_mem.mem[OUT + (t * KMAX + k) * NW + i] == u_mem.init_word((t * KMAX + k) * NW + i) + 1,
                $sformatf("tile %0d replica %0d word %0d", t, k, i));
    end else begin
      for (int i = 0; i < TW; i++)
        check(u_mem.mem[OUT + 256 + (t - 2) * TW + i] == u_mem.init_word(256 + (t - 2) * TW + i) + 1,
              $sformatf("tile %0d word %0d", t, i));
    end
  endtask

  initial begin
    real rtt_a1, rtt_a2;
    #33 rst_n = 1;
    for (int i = 0; i < NI; i++) wait_settled(i, 2);
    // hierarchy: A1 linked directly, A2 through resyncs
    check(dut.g_tile[1].g_resync.u_rs_rd.DEPTH == 8, "A2 built with resyncs");
    // phase 1: every tile at once, islands at different frequencies
    io_write(ISL_NOC, 14, 1);   // 70 MHz
    io_write(ISL_ACC, 9, 1);    // 45 MHz
    io_write(ISL_TG, 5, 1);     // 25 MHz
    io_write(ISL_CPU, 7, 1);    // 35 MHz
    wait_settled(ISL_NOC, 14); wait_settled(ISL_ACC, 9);
    wait_settled(ISL_TG, 5);   wait_settled(ISL_CPU, 7);
    clear_out();
    run_done = '0;
    run_req = '1;
    wait (run_done == '1);
    repeat (50) @(posedge island_clk[ISL_NOC]);
    for (int t = 0; t < NT; t++) check_tile(t);
    // phase 2: A1 alone, then A2 alone, NoC and accelerator islands at 50 MHz
    io_write(ISL_NOC, 10, 1);
    io_write(ISL_ACC, 10, 1);
    wait_settled(ISL_NOC, 10); wait_settled(ISL_ACC, 10);
    for (int t = 0; t < 2; t++) begin
      clear_out();
      run_done = '0;
      run_req[t] = 1'b1;
      wait (run_done[t]);
      repeat (50) @(posedge island_clk[ISL_NOC]);
      check_tile(t);
      check(in_cnt[t] == KA * NW, $sformatf("tile %0d IN counter %0d", t, in_cnt[t]));
    end
    rtt_a1 = real'(rtt_cnt[0]) / (KA * NW / CH);
    rtt_a2 = real'(rtt_cnt[1]) / (KA * NW / CH);
    $display("average read round trip: A1 (NoC island, direct) %0.1f cycles, A2 (own island, resync) %0.1f cycles; EXEC %0d vs %0d",
             rtt_a1, rtt_a2, exec_cnt[0], exec_cnt[1]);
    check(rtt_a1 + 2.0 < rtt_a2, "direct link shortens the round trip");
    check(a1_req_cycles > 0 && a1_link_diff == 0,
          $sformatf("A1 request stream reaches its router unchanged (%0d cycles, %0d differ)", a1_req_cycles, a1_link_diff));
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
