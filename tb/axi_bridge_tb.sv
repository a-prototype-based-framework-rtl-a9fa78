// axi_bridge_tb: self-checking test of the AXI bridge with K = 4 replica
// models and a NoC/memory model. Every replica processes its own slice of
// memory (read word i, write word i + 1 to an output area) in chunks, with
// different chunk sizes so that the replicas' requests interleave. The
// memory image afterwards is compared with the expected result, and the
// test checks that read data reached every replica, that several replicas
// competed for the bridge in the same cycle, that the tile-side buffers
// applied backpressure, and that the tile streams carried exactly the
// expected number of requests and words.
`timescale 1ns/1ps
module axi_bridge_tb;
  import vespa_pkg::*;
  localparam int K = 4, NW = 48, OUT = 1024;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so flops without a running clock reset too
  int checks = 0, failures = 0;

  logic      [K-1:0] rc_v, rc_r, wc_v, wc_r, rd_v, rd_r, wd_v, wd_r, start, done;
  dma_ctrl_t [K-1:0] rc_d, wc_d;
  logic [63:0]       rd_d;
  logic [K-1:0][63:0] wd_d;
  logic      n_rc_v, n_rc_r, n_wc_v, n_wc_r, n_rd_v, n_rd_r, n_wd_v, n_wd_r;
  dma_ctrl_t n_rc_d, n_wc_d;
  logic [63:0] n_rd_d, n_wd_d;

  axi_bridge #(.K(K)) dut (
    .clk, .rst_n,
    .acc_rdctrl_valid(rc_v), .acc_rdctrl_ready(rc_r), .acc_rdctrl(rc_d),
    .acc_wrctrl_valid(wc_v), .acc_wrctrl_ready(wc_r), .acc_wrctrl(wc_d),
    .acc_rddata_valid(rd_v), .acc_rddata_ready(rd_r), .acc_rddata(rd_d),
    .acc_wrdata_valid(wd_v), .acc_wrdata_ready(wd_r), .acc_wrdata(wd_d),
    .noc_rdctrl_valid(n_rc_v), .noc_rdctrl_ready(n_rc_r), .noc_rdctrl(n_rc_d),
    .noc_wrctrl_valid(n_wc_v), .noc_wrctrl_ready(n_wc_r), .noc_wrctrl(n_wc_d),
    .noc_rddata_valid(n_rd_v), .noc_rddata_ready(n_rd_r), .noc_rddata(n_rd_d),
    .noc_wrdata_valid(n_wd_v), .noc_wrdata_ready(n_wd_r), .noc_wrdata(n_wd_d)
  );

  for (genvar k = 0; k < K; k++) begin : g_acc
    acc_model u_acc (
      .clk, .rst_n, .rd_base(32'(k * NW)), .wr_base(32'(OUT + k * NW)), .nwords(32'(NW)),
      .chunk(32'(4 + 2 * k)), .compute_cycles(k % 2),
      .acc_start(start[k]), .acc_done(done[k]),
      .rdctrl_valid(rc_v[k]), .rdctrl_ready(rc_r[k]), .rdctrl(rc_d[k]),
      .wrctrl_valid(wc_v[k]), .wrctrl_ready(wc_r[k]), .wrctrl(wc_d[k]),
      .rddata_valid(rd_v[k]), .rddata_ready(rd_r[k]), .rddata(rd_d),
      .wrdata_valid(wd_v[k]), .wrdata_ready(wd_r[k]), .wrdata(wd_d[k])
    );
  end

  noc_mem_model #(.N(1), .WORDS(2048), .LATENCY(6)) u_mem (
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

  int contention = 0, backpressure = 0, n_rc = 0, n_wc = 0, n_wd = 0, n_rd = 0;
  int rd_beats [K];
  always @(posedge clk) if (rst_n) begin
    if ($countones(rc_v) > 1 || $countones(wc_v) > 1) contention++;
    if (n_rd_v && !n_rd_r) backpressure++;
    if (n_rc_v && !n_rc_r) backpressure++;
    n_rc += n_rc_v && n_rc_r;
    n_wc += n_wc_v && n_wc_r;
    n_wd += n_wd_v && n_wd_r;
    n_rd += n_rd_v && n_rd_r;
    for (int k = 0; k < K; k++) if (rd_v[k] && rd_r[k]) rd_beats[k]++;
  end

  logic [K-1:0] done_seen = '0;
  always @(posedge clk) done_seen <= done_seen | done;

  initial begin
    int exp_req;
    start = '0;
    #22 rst_n = 1;
    @(posedge clk); start <= '1;
    @(posedge clk); start <= '0;
    wait (&done_seen);
    repeat (5) @(posedge clk);
    for (int k = 0; k < K; k++) begin
      check(rd_beats[k] == NW, $sformatf("replica %0d received %0d words", k, rd_beats[k]));
      for (int i = 0; i < NW; i++)
        check(u_mem.mem[OUT + k * NW + i] == u_mem.init_word(k * NW + i) + 1,
              $sformatf("replica %0d word %0d = %0d expected %0d", k, i, u_mem.mem[OUT + k * NW + i],
                        u_mem.init_word(k * NW + i) + 1));
    end
    exp_req = 0;
    for (int k = 0; k < K; k++) exp_req += (NW + (4 + 2 * k) - 1) / (4 + 2 * k);
    check(n_rc == exp_req && n_wc == exp_req, $sformatf("requests rd %0d wr %0d expected %0d", n_rc, n_wc, exp_req));
    check(n_wd == K * NW && n_rd == K * NW, $sformatf("tile words wr %0d rd %0d", n_wd, n_rd));
    check(contention > 0, "replicas competed for the bridge");
    check(backpressure > 0, "tile buffers applied backpressure");
    $display("contention cycles %0d, backpressure cycles %0d", contention, backpressure);
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
