// mra_tile: multi-replica accelerator (MRA) tile.
//
// Holds the logic around K replicas of one accelerator: the AXI bridge that
// merges the replicas' four stream interfaces into the tile's single set
// facing the NoC, the run-time monitoring counters that watch those tile
// streams, and a small register block on an APB slave (zero wait states):
//   0x00 CMD     write bit 0 = 1: start all K replicas (one-cycle acc_start)
//   0x04 STATUS  bit 0 running, bit 1 done (every replica has pulsed
//                acc_done since the last start)
//   0x08 MON_EN  bits [3:0] enable of counters EXEC, IN, OUT, RTT
//   0x0C MON_CLR write bits [2:0] clears counters IN, OUT, RTT
//   0x10 + 4*i   counter i (read only)
// The tile counts as started when CMD is written and as done when the last
// replica reports done; these two events start and stop the execution-time
// counter. The replicas themselves (third-party accelerators, each with its
// own configuration) sit outside this module. The replicated structure, the
// bridge and the memory-mapped counters follow the paper; the register map
// and the start/done convention are this design's choices.
module mra_tile
  import vespa_pkg::*;
#(
  parameter int unsigned K         = 4,
  parameter int unsigned DW        = DATA_W,
  parameter int unsigned BUF_DEPTH = 4,
  parameter int unsigned OUTST     = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // register bus
  input  logic                 psel,
  input  logic                 penable,
  input  logic                 pwrite,
  input  logic [APB_AW-1:0]    paddr,
  input  logic [APB_DW-1:0]    pwdata,
  output logic [APB_DW-1:0]    prdata,
  output logic                 pready,
  // replica control
  output logic [K-1:0]         acc_start,
  input  logic [K-1:0]         acc_done,
  // replica streams
  input  logic      [K-1:0]    acc_rdctrl_valid,
  output logic      [K-1:0]    acc_rdctrl_ready,
  input  dma_ctrl_t [K-1:0]    acc_rdctrl,
  input  logic      [K-1:0]    acc_wrctrl_valid,
  output logic      [K-1:0]    acc_wrctrl_ready,
  input  dma_ctrl_t [K-1:0]    acc_wrctrl,
  output logic      [K-1:0]    acc_rddata_valid,
  input  logic      [K-1:0]    acc_rddata_ready,
  output logic      [DW-1:0]   acc_rddata,
  input  logic      [K-1:0]    acc_wrdata_valid,
  output logic      [K-1:0]    acc_wrdata_ready,
  input  logic [K-1:0][DW-1:0] acc_wrdata,
  // tile streams towards the NoC
  output logic                 noc_rdctrl_valid,
  input  logic                 noc_rdctrl_ready,
  output dma_ctrl_t            noc_rdctrl,
  output logic                 noc_wrctrl_valid,
  input  logic                 noc_wrctrl_ready,
  output dma_ctrl_t            noc_wrctrl,
  input  logic                 noc_rddata_valid,
  output logic                 noc_rddata_ready,
  input  logic      [DW-1:0]   noc_rddata,
  output logic                 noc_wrdata_valid,
  input  logic                 noc_wrdata_ready,
  output logic      [DW-1:0]   noc_wrdata
);
  axi_bridge #(.K(K), .DW(DW), .BUF_DEPTH(BUF_DEPTH), .OUTST(OUTST)) u_bridge (
    .clk, .rst_n,
    .acc_rdctrl_valid, .acc_rdctrl_ready, .acc_rdctrl,
    .acc_wrctrl_valid, .acc_wrctrl_ready, .acc_wrctrl,
    .acc_rddata_valid, .acc_rddata_ready, .acc_rddata,
    .acc_wrdata_valid, .acc_wrdata_ready, .acc_wrdata,
    .noc_rdctrl_valid, .noc_rdctrl_ready, .noc_rdctrl,
    .noc_wrctrl_valid, .noc_wrctrl_ready, .noc_wrctrl,
    .noc_rddata_valid, .noc_rddata_ready, .noc_rddata,
    .noc_wrdata_valid, .noc_wrdata_ready, .noc_wrdata
  );

  // ---------------- registers ----------------
  wire wr = psel && penable && pwrite;
  wire [APB_AW-1:0] a = paddr;

  logic [3:0]   mon_en;
  logic [K-1:0] done_seen;
  logic         done_flag;
  logic         start_p, done_p;
  logic [2:0]   clr;
  logic         running;
  logic [3:0][CNT_W-1:0] cnt;

  assign start_p   = wr && (a == 8'h00) && pwdata[0];
  assign clr       = (wr && (a == 8'h0C)) ? pwdata[2:0] : 3'b000;
  assign acc_start = {K{start_p}};
  assign done_p    = running && !done_flag && (&(done_seen | acc_done));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mon_en    <= 4'hF;
      done_seen <= '0;
      done_flag <= 1'b0;
    end else begin
      if (wr && a == 8'h08) mon_en <= pwdata[3:0];
      if (start_p) begin
        done_seen <= '0;
        done_flag <= 1'b0;
      end else begin
        done_seen <= done_seen | acc_done;
        if (done_p) done_flag <= 1'b1;
      end
    end
  end

  assign pready = 1'b1;
  always_comb begin
    unique case (a)
      8'h00:   prdata = '0;
      8'h04:   prdata = {30'd0, done_flag, running};
      8'h08:   prdata = {28'd0, mon_en};
      8'h10:   prdata = cnt[0];
      8'h14:   prdata = cnt[1];
      8'h18:   prdata = cnt[2];
      8'h1C:   prdata = cnt[3];
      default: prdata = '0;
    endcase
  end

  acc_monitor #(.OUTST(OUTST)) u_mon (
    .clk, .rst_n,
    .tile_start (start_p),
    .tile_done  (done_p),
    .rdctrl_hs  (noc_rdctrl_valid && noc_rdctrl_ready),
    .rdctrl_len (noc_rdctrl.length),
    .wrctrl_hs  (noc_wrctrl_valid && noc_wrctrl_ready),
    .wrdata_hs  (noc_wrdata_valid && noc_wrdata_ready),
    .rddata_hs  (noc_rddata_valid && noc_rddata_ready),
    .enable     (mon_en),
    .clear      (clr),
    .cnt        (cnt),
    .running    (running)
  );

endmodule
