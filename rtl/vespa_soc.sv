// vespa_soc: frequency-island and accelerator-tile fabric of a 4x4 tile SoC
// with fine-grained dynamic frequency scaling (DFS).
//
// The SoC is split into NI frequency islands (by default the five of the
// evaluated system: A1/A2 accelerators, NoC plus memory, traffic-generator
// tiles, CPU, I/O). For every island a dfs_actuator turns the request held
// in the I/O tile's freq_regs into a clock, using two external MMCMs so the
// clock keeps running while it changes. This module holds:
//  * freq_regs (in the I/O island clock, APB port io_*),
//  * NI dfs_actuators and per-island reset synchronizers,
//  * N_TILES multi-replica accelerator tiles: tiles 0 and 1 are A1 and A2
//    (K_A replicas each, island ISL_ACC), tiles 2..N_TILES-1 are the traffic
//    generators (K_TG replicas each, island ISL_TG),
//  * a resync on each of the four streams of every tile whose island is
//    not the NoC island; a tile placed in the NoC island is linked to its
//    router directly.
// TILE_ISL assigns each tile to an island at design time (default: A1/A2
// in ISL_ACC, the TGs in ISL_TG, as evaluated).
// An island whose DFS_ISLANDS bit is clear is instead clocked by
// fixed_clk[i] (a fixed-frequency island); by default all five have DFS, as
// in the evaluated system, and fixed_clk is unused.
// After rst_n rises, island resets are released only once every actuator
// has finished its first lock, so all islands are reset with running clocks.
// The MMCMs, the accelerator replicas, the NoC routers and the CPU, memory
// and I/O tiles are outside: their signals are ports. Replica ports are
// sized for KMAX replicas per tile; a tile with fewer uses the low ones and
// drives the rest inactive. Tile streams on the noc_* ports are in the NoC
// island clock (island_clk[ISL_NOC]); tile register buses t_* and replica
// ports in their tile's island clock; io_* in island_clk[ISL_IO].
// Island roles, counts, replication of A1/A2 and frequency ranges (NoC
// island 10-100 MHz, the others 10-50 MHz, 5 MHz steps) and the choice
// between a fixed and a DFS clock per island follow the paper;
// the traffic generators' replication factor, the reset frequency and all
// interface details are this design's choices.
module vespa_soc
  import vespa_pkg::*;
#(
  parameter int unsigned NI      = N_ISLANDS,
  parameter int unsigned N_TILES = 13,
  parameter int unsigned K_A     = 4,
  parameter int unsigned K_TG    = 1,
  parameter int unsigned DW      = DATA_W,
  parameter int unsigned KMAX    = (K_A > K_TG) ? K_A : K_TG,
  // island of each tile (3 bits per tile, tile 0 lowest); a tile in the NoC
  // island is linked to its router directly, any other through resyncs
  parameter logic [N_TILES-1:0][2:0] TILE_ISL = (3*N_TILES)'(default_tile_isl()),
  // bit i set: island i is clocked by its DFS actuator; clear: by fixed_clk[i]
  parameter logic [NI-1:0] DFS_ISLANDS = '1
) (
  input  logic                          clk_ref,
  input  logic                          rst_n,
  input  logic [NI-1:0]                 fixed_clk,
  // MMCMs, two per island
  output logic [NI-1:0][1:0][FREQ_W-1:0] mmcm_rcfg_code,
  output logic [NI-1:0][1:0]            mmcm_rcfg_start,
  input  logic [NI-1:0][1:0]            mmcm_clk,
  input  logic [NI-1:0][1:0]            mmcm_locked,
  // island clocks and resets for the tiles outside this module
  output logic [NI-1:0]                 island_clk,
  output logic [NI-1:0]                 island_rst_n,
  output logic [NI-1:0][FREQ_W-1:0]     island_freq,
  output logic [NI-1:0]                 island_busy,
  // frequency registers (I/O island)
  input  logic                          io_psel,
  input  logic                          io_penable,
  input  logic                          io_pwrite,
  input  logic [APB_AW-1:0]             io_paddr,
  input  logic [APB_DW-1:0]             io_pwdata,
  output logic [APB_DW-1:0]             io_prdata,
  output logic                          io_pready,
  // tile register buses
  input  logic [N_TILES-1:0]                 t_psel,
  input  logic [N_TILES-1:0]                 t_penable,
  input  logic [N_TILES-1:0]                 t_pwrite,
  input  logic [N_TILES-1:0][APB_AW-1:0]     t_paddr,
  input  logic [N_TILES-1:0][APB_DW-1:0]     t_pwdata,
  output logic [N_TILES-1:0][APB_DW-1:0]     t_prdata,
  output logic [N_TILES-1:0]                 t_pready,
  // accelerator replicas
  output logic      [N_TILES-1:0][KMAX-1:0]  acc_start,
  input  logic      [N_TILES-1:0][KMAX-1:0]  acc_done,
  input  logic      [N_TILES-1:0][KMAX-1:0]  acc_rdctrl_valid,
  output logic      [N_TILES-1:0][KMAX-1:0]  acc_rdctrl_ready,
  input  dma_ctrl_t [N_TILES-1:0][KMAX-1:0]  acc_rdctrl,
  input  logic      [N_TILES-1:0][KMAX-1:0]  acc_wrctrl_valid,
  output logic      [N_TILES-1:0][KMAX-1:0]  acc_wrctrl_ready,
  input  dma_ctrl_t [N_TILES-1:0][KMAX-1:0]  acc_wrctrl,
  output logic      [N_TILES-1:0][KMAX-1:0]  acc_rddata_valid,
  input  logic      [N_TILES-1:0][KMAX-1:0]  acc_rddata_ready,
  output logic      [N_TILES-1:0][DW-1:0]    acc_rddata,
  input  logic      [N_TILES-1:0][KMAX-1:0]  acc_wrdata_valid,
  output logic      [N_TILES-1:0][KMAX-1:0]  acc_wrdata_ready,
  input  logic [N_TILES-1:0][KMAX-1:0][DW-1:0] acc_wrdata,
  // tile streams at the NoC routers (NoC island clock)
  output logic      [N_TILES-1:0]            noc_rdctrl_valid,
  input  logic      [N_TILES-1:0]            noc_rdctrl_ready,
  output dma_ctrl_t [N_TILES-1:0]            noc_rdctrl,
  output logic      [N_TILES-1:0]            noc_wrctrl_valid,
  input  logic      [N_TILES-1:0]            noc_wrctrl_ready,
  output dma_ctrl_t [N_TILES-1:0]            noc_wrctrl,
  input  logic      [N_TILES-1:0]            noc_rddata_valid,
  output logic      [N_TILES-1:0]            noc_rddata_ready,
  input  logic      [N_TILES-1:0][DW-1:0]    noc_rddata,
  output logic      [N_TILES-1:0]            noc_wrdata_valid,
  input  logic      [N_TILES-1:0]            noc_wrdata_ready,
  output logic      [N_TILES-1:0][DW-1:0]    noc_wrdata
);
  // ---------------- frequency registers and DFS actuators ----------------
  logic [NI-1:0][FREQ_W-1:0] freq_code;
  logic [NI-1:0]             freq_en;

  freq_regs #(.NI(NI)) u_freq_regs (
    .clk(island_clk[ISL_IO]), .rst_n(island_rst_n[ISL_IO]),
    .psel(io_psel), .penable(io_penable), .pwrite(io_pwrite), .paddr(io_paddr),
    .pwdata(io_pwdata), .prdata(io_prdata), .pready(io_pready),
    .freq_code, .freq_en
  );

  // Boot sequencing (this design's choice). Every island stays in reset
  // until all actuators have finished their first lock, so each island's
  // flops, and both sides of every resync, see reset with a running clock.
  // The actuators follow the frequency registers only once the I/O island,
  // which holds them, has left reset; before that they keep the reset code.
  logic boot_done, io_up_s1, io_up;
  always_ff @(posedge clk_ref or negedge rst_n) begin
    if (!rst_n) begin
      boot_done <= 1'b0;
      io_up_s1  <= 1'b0;
      io_up     <= 1'b0;
    end else begin
      if (!(|island_busy)) boot_done <= 1'b1;
      io_up_s1 <= island_rst_n[ISL_IO];
      io_up    <= io_up_s1;
    end
  end
  wire island_rst_in = rst_n && boot_done;

  for (genvar i = 0; i < NI; i++) begin : g_island
    if (DFS_ISLANDS[i]) begin : g_dfs
      // NoC-and-memory island: 10-100 MHz; the others: 10-50 MHz.
      localparam int unsigned FMAX = (i == int'(ISL_NOC)) ? 20 : 10;
      dfs_actuator #(.FREQ_MIN(2), .FREQ_MAX(FMAX), .FREQ_RESET(2)) u_dfs (
        .clk_ref, .rst_n,
        .freq_in(io_up ? freq_code[i] : FREQ_W'(2)), .en_in(io_up ? freq_en[i] : 1'b1),
        .mmcm_rcfg_code(mmcm_rcfg_code[i]), .mmcm_rcfg_start(mmcm_rcfg_start[i]),
        .mmcm_clk(mmcm_clk[i]), .mmcm_locked(mmcm_locked[i]),
        .clk_out(island_clk[i]), .cur_freq(island_freq[i]), .busy(island_busy[i])
      );
    end else begin : g_fixed
      // Fixed-frequency island: its MMCM ports stay idle and it reports code 0.
      assign island_clk[i]      = fixed_clk[i];
      assign island_freq[i]     = '0;
      assign island_busy[i]     = 1'b0;
      assign mmcm_rcfg_code[i]  = '0;
      assign mmcm_rcfg_start[i] = '0;
    end
    rst_sync u_rst (.clk(island_clk[i]), .rst_n_in(island_rst_in), .rst_n_out(island_rst_n[i]));
  end

  wire noc_clk   = island_clk[ISL_NOC];
  wire noc_rst_n = island_rst_n[ISL_NOC];

  // ---------------- accelerator tiles ----------------
  for (genvar t = 0; t < N_TILES; t++) begin : g_isl_check
    if (int'(TILE_ISL[t]) >= NI) begin : g_bad
      $error("vespa_soc: TILE_ISL names an island that does not exist");
    end
  end

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    localparam int unsigned KT  = (t < 2) ? K_A : K_TG;
    localparam int unsigned ISL = int'(TILE_ISL[t]);
    wire tclk   = island_clk[ISL];
    wire trst_n = island_rst_n[ISL];

    logic      rc_v, rc_r, wc_v, wc_r, rd_v, rd_r, wd_v, wd_r;
    dma_ctrl_t rc_d, wc_d;
    logic [DW-1:0] rd_d, wd_d;

    mra_tile #(.K(KT), .DW(DW)) u_tile (
      .clk(tclk), .rst_n(trst_n),
      .psel(t_psel[t]), .penable(t_penable[t]), .pwrite(t_pwrite[t]), .paddr(t_paddr[t]),
      .pwdata(t_pwdata[t]), .prdata(t_prdata[t]), .pready(t_pready[t]),
      .acc_start(acc_start[t][KT-1:0]), .acc_done(acc_done[t][KT-1:0]),
      .acc_rdctrl_valid(acc_rdctrl_valid[t][KT-1:0]), .acc_rdctrl_ready(acc_rdctrl_ready[t][KT-1:0]),
      .acc_rdctrl(acc_rdctrl[t][KT-1:0]),
      .acc_wrctrl_valid(acc_wrctrl_valid[t][KT-1:0]), .acc_wrctrl_ready(acc_wrctrl_ready[t][KT-1:0]),
      .acc_wrctrl(acc_wrctrl[t][KT-1:0]),
      .acc_rddata_valid(acc_rddata_valid[t][KT-1:0]), .acc_rddata_ready(acc_rddata_ready[t][KT-1:0]),
      .acc_rddata(acc_rddata[t]),
      .acc_wrdata_valid(acc_wrdata_valid[t][KT-1:0]), .acc_wrdata_ready(acc_wrdata_ready[t][KT-1:0]),
      .acc_wrdata(acc_wrdata[t][KT-1:0]),
      .noc_rdctrl_valid(rc_v), .noc_rdctrl_ready(rc_r), .noc_rdctrl(rc_d),
      .noc_wrctrl_valid(wc_v), .noc_wrctrl_ready(wc_r), .noc_wrctrl(wc_d),
      .noc_rddata_valid(rd_v), .noc_rddata_ready(rd_r), .noc_rddata(rd_d),
      .noc_wrdata_valid(wd_v), .noc_wrdata_ready(wd_r), .noc_wrdata(wd_d)
    );

    if (KT < KMAX) begin : g_unused
      assign acc_start[t][KMAX-1:KT]        = '0;
      assign acc_rdctrl_ready[t][KMAX-1:KT] = '0;
      assign acc_wrctrl_ready[t][KMAX-1:KT] = '0;
      assign acc_rddata_valid[t][KMAX-1:KT] = '0;
      assign acc_wrdata_ready[t][KMAX-1:KT] = '0;
    end

    if (ISL == int'(ISL_NOC)) begin : g_direct
      // same island as the routers: no clock boundary, no resync
      assign noc_rdctrl_valid[t] = rc_v;
      assign rc_r                = noc_rdctrl_ready[t];
      assign noc_rdctrl[t]       = rc_d;
      assign noc_wrctrl_valid[t] = wc_v;
      assign wc_r                = noc_wrctrl_ready[t];
      assign noc_wrctrl[t]       = wc_d;
      assign noc_wrdata_valid[t] = wd_v;
      assign wd_r                = noc_wrdata_ready[t];
      assign noc_wrdata[t]       = wd_d;
      assign rd_v                = noc_rddata_valid[t];
      assign noc_rddata_ready[t] = rd_r;
      assign rd_d                = noc_rddata[t];
    end else begin : g_resync
      // resynchronizers between the tile's island and the NoC island
      resync #(.WIDTH(CTRL_W)) u_rs_rc (
        .wclk(tclk), .wrst_n(trst_n), .w_valid(rc_v), .w_ready(rc_r), .w_data(rc_d),
        .rclk(noc_clk), .rrst_n(noc_rst_n),
        .r_valid(noc_rdctrl_valid[t]), .r_ready(noc_rdctrl_ready[t]), .r_data(noc_rdctrl[t])
      );
      resync #(.WIDTH(CTRL_W)) u_rs_wc (
        .wclk(tclk), .wrst_n(trst_n), .w_valid(wc_v), .w_ready(wc_r), .w_data(wc_d),
        .rclk(noc_clk), .rrst_n(noc_rst_n),
        .r_valid(noc_wrctrl_valid[t]), .r_ready(noc_wrctrl_ready[t]), .r_data(noc_wrctrl[t])
      );
      resync #(.WIDTH(DW)) u_rs_wd (
        .wclk(tclk), .wrst_n(trst_n), .w_valid(wd_v), .w_ready(wd_r), .w_data(wd_d),
        .rclk(noc_clk), .rrst_n(noc_rst_n),
        .r_valid(noc_wrdata_valid[t]), .r_ready(noc_wrdata_ready[t]), .r_data(noc_wrdata[t])
      );
      resync #(.WIDTH(DW)) u_rs_rd (
        .wclk(noc_clk), .wrst_n(noc_rst_n), .w_valid(noc_rddata_valid[t]), .w_ready(noc_rddata_ready[t]),
        .w_data(noc_rddata[t]),
        .rclk(tclk), .rrst_n(trst_n), .r_valid(rd_v), .r_ready(rd_r), .r_data(rd_d)
      );
    end
  end

endmodule
