// axi_bridge: the AXI bridge of a multi-replica accelerator (MRA) tile.
//
// K copies of an accelerator each expose four AXI4-Stream style interfaces:
// read control (rdCtrl, a DMA read request), write control (wrCtrl), read
// data (rdData, towards the accelerator) and write data (wrData). The tile
// offers the NoC exactly one set of the same four interfaces, so the NoC and
// the rest of the SoC see a single accelerator. The bridge multiplexes the K
// sets onto four tile buffers (sync_fifo, BUF_DEPTH entries each):
//  * rdCtrl: round-robin among replicas; each accepted request also records
//    {replica, length} in an outstanding-read queue (OUTST entries).
//  * rdData: beats leaving the rdData buffer go to the replica at the head of
//    the outstanding-read queue until its length is used up. Read data is
//    assumed to return in request order.
//  * wrCtrl: round-robin among replicas, one write burst at a time; the
//    granted replica owns wrData until 'length' beats have passed.
// All streams use valid/ready; a DMA control word is vespa_pkg::dma_ctrl_t
// (index, length in DATA_W-bit words). Latency: one cycle through each
// buffer. The multiplexing of K replicas into four buffers follows the
// paper; the arbitration policy, the ordering rule, the routing queue and
// the buffer depths are this design's choices.
module axi_bridge
  import vespa_pkg::*;
#(
  parameter int unsigned K         = 4,
  parameter int unsigned DW        = DATA_W,
  parameter int unsigned BUF_DEPTH = 4,
  parameter int unsigned OUTST     = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // replica side
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
  // tile (NoC) side
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
  localparam int unsigned IW = (K > 1) ? $clog2(K) : 1;

  // ---------------- read control ----------------
  logic          rc_any, rc_buf_ready, tag_in_ready;
  logic [IW-1:0] rc_idx;
  wire rc_go = rc_any && rc_buf_ready && tag_in_ready;

  rr_arbiter #(.N(K)) u_rc_arb (
    .clk, .rst_n, .req(acc_rdctrl_valid), .accept(rc_go), .any(rc_any), .grant_idx(rc_idx)
  );

  always_comb begin
    acc_rdctrl_ready = '0;
    acc_rdctrl_ready[rc_idx] = rc_go;
  end

  sync_fifo #(.WIDTH(CTRL_W), .DEPTH(BUF_DEPTH)) u_rc_buf (
    .clk, .rst_n,
    .in_valid(rc_go), .in_ready(rc_buf_ready), .in_data(acc_rdctrl[rc_idx]),
    .out_valid(noc_rdctrl_valid), .out_ready(noc_rdctrl_ready), .out_data(noc_rdctrl)
  );

  // outstanding-read queue: {replica, length}
  logic          tag_valid, tag_pop;
  logic [IW-1:0] tag_id;
  logic [31:0]   tag_len;

  sync_fifo #(.WIDTH(IW + 32), .DEPTH(OUTST)) u_tag_q (
    .clk, .rst_n,
    .in_valid(rc_go), .in_ready(tag_in_ready), .in_data({rc_idx, acc_rdctrl[rc_idx].length}),
    .out_valid(tag_valid), .out_ready(tag_pop), .out_data({tag_id, tag_len})
  );

  // ---------------- read data ----------------
  logic          rd_buf_valid, rd_buf_ready;
  logic [DW-1:0] rd_buf_data;
  logic [31:0]   rd_cnt;   // beats of the head request already delivered

  sync_fifo #(.WIDTH(DW), .DEPTH(BUF_DEPTH)) u_rd_buf (
    .clk, .rst_n,
    .in_valid(noc_rddata_valid), .in_ready(noc_rddata_ready), .in_data(noc_rddata),
    .out_valid(rd_buf_valid), .out_ready(rd_buf_ready), .out_data(rd_buf_data)
  );

  wire tag_empty_len = tag_valid && (tag_len == 0);
  wire rd_deliver    = tag_valid && !tag_empty_len && rd_buf_valid && acc_rddata_ready[tag_id];
  wire rd_last       = rd_deliver && (rd_cnt == tag_len - 1);

  assign rd_buf_ready = rd_deliver;
  assign tag_pop      = tag_empty_len || rd_last;
  assign acc_rddata   = rd_buf_data;

  always_comb begin
    acc_rddata_valid = '0;
    acc_rddata_valid[tag_id] = tag_valid && !tag_empty_len && rd_buf_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          rd_cnt <= '0;
    else if (rd_last)    rd_cnt <= '0;
    else if (rd_deliver) rd_cnt <= rd_cnt + 1;
  end

  // ---------------- write control and write data ----------------
  logic          wc_any, wc_buf_ready;
  logic [IW-1:0] wc_idx;
  logic          wr_busy;
  logic [IW-1:0] wr_owner;
  logic [31:0]   wr_left;
  wire wc_go = wc_any && wc_buf_ready && !wr_busy;

  rr_arbiter #(.N(K)) u_wc_arb (
    .clk, .rst_n, .req(acc_wrctrl_valid), .accept(wc_go), .any(wc_any), .grant_idx(wc_idx)
  );

  always_comb begin
    acc_wrctrl_ready = '0;
    acc_wrctrl_ready[wc_idx] = wc_go;
  end

  sync_fifo #(.WIDTH(CTRL_W), .DEPTH(BUF_DEPTH)) u_wc_buf (
    .clk, .rst_n,
    .in_valid(wc_go), .in_ready(wc_buf_ready), .in_data(acc_wrctrl[wc_idx]),
    .out_valid(noc_wrctrl_valid), .out_ready(noc_wrctrl_ready), .out_data(noc_wrctrl)
  );

  logic wd_buf_ready;
  wire  wd_take = wr_busy && acc_wrdata_valid[wr_owner] && wd_buf_ready;

  always_comb begin
    acc_wrdata_ready = '0;
    acc_wrdata_ready[wr_owner] = wr_busy && wd_buf_ready;
  end

  sync_fifo #(.WIDTH(DW), .DEPTH(BUF_DEPTH)) u_wd_buf (
    .clk, .rst_n,
    .in_valid(wd_take), .in_ready(wd_buf_ready), .in_data(acc_wrdata[wr_owner]),
    .out_valid(noc_wrdata_valid), .out_ready(noc_wrdata_ready), .out_data(noc_wrdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_busy  <= 1'b0;
      wr_owner <= '0;
      wr_left  <= '0;
    end else if (wc_go) begin
      wr_owner <= wc_idx;
      wr_left  <= acc_wrctrl[wc_idx].length;
      wr_busy  <= (acc_wrctrl[wc_idx].length != 0);
    end else if (wd_take) begin
      wr_left <= wr_left - 1;
      if (wr_left == 1) wr_busy <= 1'b0;
    end
  end

  // Handshake rules: at most one replica is served per cycle on each path.
  a_rc_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(acc_rdctrl_ready));
  a_wc_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(acc_wrctrl_ready));
  a_rd_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(acc_rddata_valid));
  // Read data never arrives without an outstanding request.
  a_rd_tagged: assert property (@(posedge clk) disable iff (!rst_n) rd_buf_valid |-> tag_valid);

endmodule
