// fig3_workload_tb: throughput of a four-replica accelerator in the A2 tile
// against the number of active traffic-generator tiles, for a
// compute-bound and a memory-bound kernel (the experiment of the
// throughput-versus-traffic study: NoC island at 10 MHz, accelerator and TG
// islands at 50 MHz, 0 to 11 TG tiles active).
//
// The fabric is the default one (13 tiles, A1/A2 with four replicas), except
// that the CPU and I/O islands run from fixed 50 MHz clocks, which also
// exercises the fixed-clock island option. The kernels are behavioural
// replica models spending a fixed number of cycles per word, taken from the
// published single-replica throughputs: adpcm (compute-bound) 286, dfmul
// (memory-bound) 46, and dfadd 43 for the TG tiles, which process TG_WORDS
// words each. For 0, 7
// and 11 active TGs the test starts the TGs, then A2, and reads A2's
// execution-time counter. Checked: A2's output words in every run; the
// fixed-clock islands; that the memory-bound kernel slows down clearly with
// traffic (more than 1.5x from 0 to 11 TGs) while the compute-bound kernel
// changes much less (its slowdown is less than half that of the memory-bound
// one), at 7 and at 11 TGs. The measured table is printed. How flat the
// compute-bound curve is depends on the memory model, which here is a
// single server that handles one request at a time and one word per NoC
// cycle; with it the compute-bound kernel also slows down, less than the
// memory-bound one.
`timescale 1ns/1ps
module fig3_workload_tb;
  import vespa_pkg::*;
  localparam int NI = 5, NT = 13, KA = 4, KMAX = 4, NW = 16, CH = 4, OUT = 1024;
  localparam int TG_WORDS = 48;
  // cycles per word at 50 MHz from the published single-replica throughput
  // T (MB/s): 400 / T. adpcm 1.40 -> 286, dfmul 8.70 -> 46, dfadd 9.22 -> 43
  localparam int ADPCM = 286, DFMUL = 46, DFADD = 43;
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

  vespa_soc #(.DFS_ISLANDS(5'b00111)) dut (
    .clk_ref, .rst_n, .fixed_clk(fixed_clk), .mmcm_rcfg_code, .mmcm_rcfg_start, .mmcm_clk, .mmcm_locked,
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

  always #10 fixed_clk[ISL_CPU] = ~fixed_clk[ISL_CPU];
  always #10 fixed_clk[ISL_IO]  = ~fixed_clk[ISL_IO];

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

  // per-tile software: start on request, wait for done, report EXEC
  int          a2_compute = 0;
  bit [NT-1:0] run_req = '0, run_done = '0;
  logic [31:0] exec_cnt [NT];

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
          .rd_base(32'((t < 2) ? (t * KMAX + k) * NW : 256 + (t - 2) * TG_WORDS)),
          .wr_base(32'((t < 2) ? OUT + (t * KMAX + k) * NW : OUT + 256 + (t - 2) * TG_WORDS)),
          .nwords(32'((t < 2) ? NW : TG_WORDS)), .chunk(32'(CH)),
          .compute_cycles((t < 2) ? a2_compute : DFADD),
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
      apb(1, 8'h00, 32'h1, r);
      do apb(0, 8'h04, 0, r); while (!r[1]);
      apb(0, 8'h10, 0, exec_cnt[t]);
      run_done[t] = 1'b1;
    end
  end

  // one measurement: n active TGs, A2 with the given compute cycles per word
  task automatic point(input int n_tg, input int compute, output int exec);
    a2_compute = compute;
    for (int i = 0; i < 4 * NW; i++) u_mem.mem[OUT + KMAX * NW + i] = '0;
    run_done = '0;
    for (int t = 2; t < 2 + n_tg; t++) run_req[t] = 1'b1;
    repeat (2) @(posedge island_clk[ISL_NOC]);
    run_req[1] = 1'b1;
    wait (run_done[1]);
    exec = int'(exec_cnt[1]);
    for (int t = 2; t < 2 + n_tg; t++) wait (run_done[t]);
    repeat (50) @(posedge island_clk[ISL_NOC]);
    for (int k = 0; k < KA; k++)
      for (int i = 0; i < NW; i++)
        check(u_mem.mem[OUT + (KMAX + k) * NW + i] == u_mem.init_word((KMAX + k) * NW + i) + 1,
              $sformatf("A2 replica %0d word %0d (TGs %0d, compute %0d)", k, i, n_tg, compute));
  endtask

  initial begin
    int tgs [3] = '{0, 7, 11};
    int ex_c [3], ex_m [3];
    realtime t0;
    #33 rst_n = 1;
    for (int i = 0; i < 3; i++) wait_settled(i, 2);
    // fixed-clock islands: 50 MHz, code 0, not busy
    @(posedge island_clk[ISL_CPU]); t0 = $realtime; @(posedge island_clk[ISL_CPU]);
    check($realtime - t0 > 19.99 && $realtime - t0 < 20.01 && island_freq[ISL_CPU] == 0 && island_freq[ISL_IO] == 0
          && !island_busy[ISL_CPU] && mmcm_rcfg_start[ISL_IO] == '0, "fixed-clock islands");
    io_write(ISL_NOC, 2, 1);
    io_write(ISL_ACC, 10, 1);
    io_write(ISL_TG, 10, 1);
    wait_settled(ISL_ACC, 10);
    wait_settled(ISL_TG, 10);
    for (int p = 0; p < 3; p++) begin
      point(tgs[p], ADPCM, ex_c[p]);
      point(tgs[p], DFMUL, ex_m[p]);
      $display("active TGs %2d: A2 compute-bound %0d cycles (%0.2f words/kcycle), memory-bound %0d cycles (%0.2f words/kcycle)",
               tgs[p], ex_c[p], 1000.0 * KA * NW / ex_c[p], ex_m[p], 1000.0 * KA * NW / ex_m[p]);
    end
    check(ex_m[2] > ex_m[0] * 3 / 2, $sformatf("memory-bound slowdown %0.2fx", real'(ex_m[2]) / ex_m[0]));
    check((real'(ex_c[2]) / ex_c[0] - 1.0) < 0.5 * (real'(ex_m[2]) / ex_m[0] - 1.0),
          $sformatf("compute-bound slowdown %0.2fx against memory-bound %0.2fx",
                    real'(ex_c[2]) / ex_c[0], real'(ex_m[2]) / ex_m[0]));
    check((real'(ex_c[1]) / ex_c[0] - 1.0) < 0.5 * (real'(ex_m[1]) / ex_m[0] - 1.0),
          $sformatf("at 7 TGs: compute-bound slowdown %0.2fx against memory-bound %0.2fx",
                    real'(ex_c[1]) / ex_c[0], real'(ex_m[1]) / ex_m[0]));
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
