// dfs_actuator: dynamic frequency scaling actuator of one frequency island.
//
// A reconfigurable clock synthesizer (MMCM) drives its output low while it
// is being reprogrammed, which would stall the island. The actuator therefore
// owns two MMCMs: the master drives the island clock while the slave is
// reprogrammed to the new frequency; once the slave reports lock, a
// glitch-free switch (clk_switch) moves the island clock onto it and the two
// swap roles. The island clock never stops during a change.
//
// The FSM runs on the fixed reference clock clk_ref. freq_in/en_in come from
// the frequency registers in another clock domain: every bit passes a
// two-flop synchronizer and a new request is accepted only after two equal
// consecutive samples. Requests are clamped to [FREQ_MIN, FREQ_MAX].
// en_in low holds clk_out low (clock stopped) without touching the MMCMs.
//
// MMCM port (one per MMCM, both in the clk_ref domain): mmcm_rcfg_code holds
// the target code and a one-cycle mmcm_rcfg_start pulse starts programming;
// the MMCM drops mmcm_locked and raises it again once its clock is stable.
// FSM: INIT programs MMCM 0 to FREQ_RESET after reset; IDLE waits for a
// request; PROG pulses start on the slave; UNLOCK and LOCK wait for the
// slave's lock to fall and rise; SWITCH moves the clock and waits until the
// switch has completed; then master and slave swap. A change takes the
// MMCM lock time plus about six clk_ref cycles and two periods of each
// island clock. The two-MMCM scheme and the FSM's role come from the paper;
// the MMCM port abstraction, the synchronizers, clamping and reset sequence
// are this design's choices.
module dfs_actuator
  import vespa_pkg::*;
#(
  parameter int unsigned FREQ_MIN   = 2,    // 10 MHz
  parameter int unsigned FREQ_MAX   = 20,   // 100 MHz
  parameter int unsigned FREQ_RESET = 2     // 10 MHz
) (
  input  logic                   clk_ref,
  input  logic                   rst_n,
  input  logic [FREQ_W-1:0]      freq_in,
  input  logic                   en_in,
  output logic [1:0][FREQ_W-1:0] mmcm_rcfg_code,
  output logic [1:0]             mmcm_rcfg_start,
  input  logic [1:0]             mmcm_clk,
  input  logic [1:0]             mmcm_locked,
  output logic                   clk_out,
  output logic [FREQ_W-1:0]      cur_freq,
  output logic                   busy
);
  typedef enum logic [2:0] {S_INIT, S_INIT_LOCK, S_IDLE, S_PROG, S_UNLOCK, S_LOCK, S_SWITCH} state_e;
  state_e state;

  // Synchronizers
  logic [FREQ_W:0] req_s1, req_s2, req_s3;
  logic [1:0]      lck_s1, lck_s2;
  logic [1:0]      on_s1, on_s2;
  logic [1:0]      on_raw;
  logic            master;           // index of the MMCM driving clk_out
  logic            sel;
  logic            en_q;
  logic [FREQ_W-1:0] target;

  always_ff @(posedge clk_ref or negedge rst_n) begin
    if (!rst_n) begin
      req_s1 <= '0; req_s2 <= '0; req_s3 <= '0;
      lck_s1 <= '0; lck_s2 <= '0; on_s1 <= '0; on_s2 <= '0;
    end else begin
      req_s1 <= {en_in, freq_in};
      req_s2 <= req_s1;
      req_s3 <= req_s2;
      lck_s1 <= mmcm_locked;
      lck_s2 <= lck_s1;
      on_s1  <= on_raw;
      on_s2  <= on_s1;
    end
  end

  // Stable request, clamped to the island's range
  logic [FREQ_W-1:0] req_f;
  always_comb begin
    req_f = req_s3[FREQ_W-1:0];
    if (req_f < FREQ_W'(FREQ_MIN)) req_f = FREQ_W'(FREQ_MIN);
    if (req_f > FREQ_W'(FREQ_MAX)) req_f = FREQ_W'(FREQ_MAX);
  end
  wire stable = (req_s2 == req_s3);

  wire slave = !master;

  always_ff @(posedge clk_ref or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_INIT;
      master          <= 1'b0;
      sel             <= 1'b0;
      en_q            <= 1'b0;
      target          <= FREQ_W'(FREQ_RESET);
      cur_freq        <= FREQ_W'(FREQ_RESET);
      mmcm_rcfg_code  <= {FREQ_W'(FREQ_RESET), FREQ_W'(FREQ_RESET)};
      mmcm_rcfg_start <= '0;
    end else begin
      mmcm_rcfg_start <= '0;
      if (stable && state != S_INIT && state != S_INIT_LOCK) en_q <= req_s3[FREQ_W];
      unique case (state)
        S_INIT: begin
          mmcm_rcfg_code[0]  <= FREQ_W'(FREQ_RESET);
          mmcm_rcfg_start[0] <= 1'b1;
          state              <= S_INIT_LOCK;
        end
        S_INIT_LOCK:
          if (lck_s2[0]) state <= S_IDLE;
        S_IDLE:
          if (stable && req_f != cur_freq) begin
            target <= req_f;
            state  <= S_PROG;
          end
        S_PROG: begin
          mmcm_rcfg_code[slave]  <= target;
          mmcm_rcfg_start[slave] <= 1'b1;
          state                  <= S_UNLOCK;
        end
        S_UNLOCK:
          if (!lck_s2[slave]) state <= S_LOCK;
        S_LOCK:
          if (lck_s2[slave]) begin
            sel   <= slave;
            state <= S_SWITCH;
          end
        S_SWITCH:
          // With the clock disabled the switch cannot (and need not) happen
          // now: sel already points at the new MMCM.
          if (!en_q || (on_s2[sel] && !on_s2[!sel])) begin
            master   <= sel;
            cur_freq <= target;
            state    <= S_IDLE;
          end
        default: state <= S_INIT;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  clk_switch u_switch (
    .clk0   (mmcm_clk[0]),
    .clk1   (mmcm_clk[1]),
    .rst_n  (rst_n),
    .sel    (sel),
    .en     (en_q),
    .clk_out(clk_out),
    .on0    (on_raw[0]),
    .on1    (on_raw[1])
  );

  // The MMCM that drives the island clock is never reprogrammed.
  a_master_untouched: assert property (@(posedge clk_ref) disable iff (!rst_n)
    (state inside {S_IDLE, S_PROG, S_UNLOCK, S_LOCK}) |-> !mmcm_rcfg_start[master]);

endmodule
