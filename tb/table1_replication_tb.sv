// table1_replication_tb: throughput of the A1 tile with one, two and four
// active replicas (the replication study: NoC-and-memory island at 100 MHz,
// A1 island at 50 MHz, traffic generators disabled).
//
// The fabric is the default one. Only tile A1 has replica models; every
// other tile is idle. The five kernels of the study are stood in for by
// behavioural replicas whose compute time per 64-bit word is derived from the
// published single-replica throughput T (MB/s) at 50 MHz: cycles per word =
// 50 MHz * 8 B / T = 400 / T, rounded. Each run splits W words evenly over the
// active replicas (the others get no work and finish at once), starts the
// tile through its command register and reads its execution-time counter.
// Throughput is W * 8 bytes over that time. Checked: every output word of
// every run; the single-replica throughput is within 20% of the published
// figure (the rest is DMA time the model cannot know); two and four replicas
// give at least 1.7x and 3.0x the single-replica throughput for every kernel;
// the averages are printed next to the published 1.92x and 3.58x.
`timescale 1ns/1ps
module table1_replication_tb;
  import vespa_pkg::*;
  localparam int NI = 5, NT = 13, KMAX = 4, CH = 4, OUT = 1024, W = 64;
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

  // kernels: name, published 1x / 2x / 4x throughput (MB/s)
  string kname [5] = '{"adpcm", "dfadd", "dfmul", "dfsin", "gsm"};
  real   thr1  [5] = '{1.40, 9.22, 8.70, 0.33, 4.61};
  real   thr2  [5] = '{2.76, 16.88, 15.07, 0.65, 8.90};
  real   thr4  [5] = '{5.41, 26.06, 26.06, 1.24, 16.67};

  int          cpw = 0;                  // compute cycles per word
  int          words [KMAX];             // words per replica in this run
  logic [31:0] exec_cnt;
  bit          run_req = 0, run_done = 0;

  for (genvar t = 0; t < NT; t++) begin : g_tile
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
      if (t == 0) begin : g_on
        acc_model u_acc (
          .clk(tclk), .rst_n(island_rst_n[ISL]),
          .rd_base(32'(k * words[0])), .wr_base(32'(OUT + k * words[0])),
          .nwords(32'(words[k])), .chunk(32'(CH)), .compute_cycles(cpw),
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

    if (t == 0) begin : g_sw
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
        wait (run_req);
        run_req = 1'b0;
        apb(1, 8'h00, 32'h1, r);
        do apb(0, 8'h04, 0, r); while (!r[1]);
        apb(0, 8'h10, 0, exec_cnt);
        run_done = 1'b1;
      end
    end
  end

  // one run: kernel j with r active replicas; returns throughput in MB/s
  task automatic run(input int j, input int r, output real thr);
    cpw = int'(400.0 / thr1[j] + 0.5);
    for (int k = 0; k < KMAX; k++) words[k] = (k < r) ? W / r : 0;
    for (int i = 0; i < W; i++) u_mem.mem[OUT + i] = '0;
    run_done = 1'b0;
    run_req = 1'b1;
    wait (run_done);
    repeat (50) @(posedge island_clk[ISL_NOC]);
    for (int i = 0; i < W; i++)
      check(u_mem.mem[OUT + i] == u_mem.init_word(i) + 1, $sformatf("%s %0dx word %0d", kname[j], r, i));
    thr = 8.0 * W / (real'(exec_cnt) / 50.0);   // bytes per microsecond = MB/s
  endtask

  initial begin
    real t1, t2, t4, s2 = 0.0, s4 = 0.0;
    #33 rst_n = 1;
    for (int i = 0; i < NI; i++) wait_settled(i, 2);
    io_write(ISL_NOC, 20, 1);
    io_write(ISL_ACC, 10, 1);
    io_write(ISL_TG, 2, 0);
    wait_settled(ISL_NOC, 20);
    wait_settled(ISL_ACC, 10);
    for (int j = 0; j < 5; j++) begin
      run(j, 1, t1);
      run(j, 2, t2);
      run(j, 4, t4);
      $display("%-6s %3d cycles/word: 1x %6.2f MB/s (published %5.2f), 2x %6.2f (%5.2f), 4x %6.2f (%5.2f); scaling %4.2fx %4.2fx",
               kname[j], cpw, t1, thr1[j], t2, thr2[j], t4, thr4[j], t2 / t1, t4 / t1);
      check(t1 > 0.8 * thr1[j] && t1 < 1.2 * thr1[j], $sformatf("%s 1x throughput %0.2f near %0.2f", kname[j], t1, thr1[j]));
      check(t2 > 1.7 * t1, $sformatf("%s 2x scaling %0.2f", kname[j], t2 / t1));
      check(t4 > 3.0 * t1, $sformatf("%s 4x scaling %0.2f", kname[j], t4 / t1));
      s2 += t2 / t1 / 5.0;
      s4 += t4 / t1 / 5.0;
    end
    $display("average scaling: 2x %4.2fx (published 1.92x), 4x %4.2fx (published 3.58x)", s2, s4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
