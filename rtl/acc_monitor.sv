// acc_monitor: run-time monitoring counters of an accelerator tile.
//
// Four counters, each with its own enable bit (enable[mon_e]):
//  * MON_EXEC  execution time: cleared by tile_start, counts clock cycles
//              while the tile is computing, stops at tile_done.
//  * MON_IN    incoming packets: read-data beats accepted from the NoC.
//  * MON_OUT   outgoing packets: rdCtrl, wrCtrl and wrData transfers sent to
//              the NoC (up to three per cycle).
//  * MON_RTT   round-trip time: for every read request, the cycles from the
//              request leaving the tile to the first beat of its data
//              arriving, accumulated. A queue of OUTST {timestamp, length}
//              entries pairs each request with its data.
// MON_IN, MON_OUT and MON_RTT keep their value until cleared through
// clear[2:0] (bit 0 MON_IN, bit 1 MON_OUT, bit 2 MON_RTT). All inputs are
// single-cycle strobes in the tile clock domain; counts appear one cycle
// after the event. The four statistics, the automatic reset of the execution
// timer and the manual reset of the others follow the paper; what counts as
// one packet, the accumulation of round-trip times and the counter width are
// this design's choices.
module acc_monitor
  import vespa_pkg::*;
#(
  parameter int unsigned CW    = CNT_W,
  parameter int unsigned OUTST = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  tile_start,
  input  logic                  tile_done,
  input  logic                  rdctrl_hs,
  input  logic [31:0]           rdctrl_len,
  input  logic                  wrctrl_hs,
  input  logic                  wrdata_hs,
  input  logic                  rddata_hs,
  input  logic [3:0]            enable,
  input  logic [2:0]            clear,
  output logic [3:0][CW-1:0]    cnt,
  output logic                  running
);
  logic [CW-1:0] now;

  // request queue for round-trip timing
  logic          q_valid, q_pop;
  logic [CW-1:0] q_ts;
  logic [31:0]   q_len;
  logic [31:0]   beat;
  logic          q_in_ready;

  sync_fifo #(.WIDTH(CW + 32), .DEPTH(OUTST)) u_q (
    .clk, .rst_n,
    .in_valid(rdctrl_hs), .in_ready(q_in_ready), .in_data({now, rdctrl_len}),
    .out_valid(q_valid), .out_ready(q_pop), .out_data({q_ts, q_len})
  );

  wire q_zero  = q_valid && (q_len == 0);
  wire rd_head = rddata_hs && q_valid && !q_zero;
  wire first   = rd_head && (beat == 0);
  wire last    = rd_head && (beat == q_len - 1);
  assign q_pop = q_zero || last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now     <= '0;
      beat    <= '0;
      running <= 1'b0;
      cnt     <= '0;
    end else begin
      now <= now + 1'b1;
      if (last) beat <= '0;
      else if (rd_head) beat <= beat + 1;

      // execution time
      if (tile_start) begin
        running <= 1'b1;
        if (enable[MON_EXEC]) cnt[MON_EXEC] <= '0;
      end else if (tile_done) begin
        running <= 1'b0;
      end else if (running && enable[MON_EXEC]) begin
        cnt[MON_EXEC] <= cnt[MON_EXEC] + 1'b1;
      end

      // incoming packets
      if (clear[0]) cnt[MON_IN] <= '0;
      else if (enable[MON_IN] && rddata_hs) cnt[MON_IN] <= cnt[MON_IN] + 1'b1;

      // outgoing packets
      if (clear[1]) cnt[MON_OUT] <= '0;
      else if (enable[MON_OUT])
        cnt[MON_OUT] <= cnt[MON_OUT] + CW'(rdctrl_hs) + CW'(wrctrl_hs) + CW'(wrdata_hs);

      // round-trip time
      if (clear[2]) cnt[MON_RTT] <= '0;
      else if (enable[MON_RTT] && first) cnt[MON_RTT] <= cnt[MON_RTT] + (now - q_ts);
    end
  end

  // The tile never has more reads in flight than the queue holds.
  a_queue_room: assert property (@(posedge clk) disable iff (!rst_n) rdctrl_hs |-> q_in_ready);

endmodule
