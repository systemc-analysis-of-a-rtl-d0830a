// lem: Local Energy Manager of one IP.
//
// The LEM decides the power state of its IP's Power State Machine (PSM).
//
// Running a task.  The IP raises task_req with the task's priority class and
// length (instructions) and holds them until task_grant.  The LEM latches
// them, forwards the request to the Global Energy Manager (gem_req, with its
// energy estimate on gem_energy = task_len * E_INSTR) and estimates battery
// and temperature at the end of the task: with the energy requested by the
// other IPs (others_energy, from the GEM) added, a total of BAT_STEP or more
// lowers the battery one class and a total of TEMP_STEP or more raises the
// temperature one class.  From priority and the two estimates the rule table
// (dpm_pkg::select_state) gives the power state.  If the GEM does not enable
// this IP, or the table gives SL1, the PSM is held in SL1 and the request
// waits, re-evaluated every cycle.  Otherwise the LEM sets the chosen ON state,
// waits until the PSM has reached it, pulses task_grant, and from then on adds
// the PSM's per-cycle energy until the IP pulses task_done; the sum is
// reported on task_energy with task_energy_vld.
//
// Idle.  After a task the IP stays in its ON state.  The LEM counts idle
// cycles; after IDLE_TIMEOUT of them it compares its prediction of the idle
// time with the break-even time of each sleep state (BREAK_EVEN for SL1..SL4
// and OFF) and sends the IP to the deepest state whose break-even time the
// prediction reaches, or leaves it on if none.  The prediction is the
// average of the previous prediction and the last measured idle period,
// updated when the next request ends the idle period.  An idle IP still in
// an ON state goes to SL1 at once when the GEM withdraws its enable (a task
// already running is allowed to finish).
//
// The default break-even times follow from the PSM's default transition
// costs: a round trip into state s and back takes T = ENTER_LAT + WAKE_LAT[s]
// cycles at the transition power Pt = 64; against staying in the slowest ON
// state (Pon = 23) with sleep power Ps, sleeping pays off for idle periods
// of at least T + T*(Pt - Pon)/(Pon - Ps), i.e. 23, 57, 195, 739 and 2855
// cycles for SL1..SL4 and OFF.  Change them together with the PSM's numbers.
//
// Follows the paper: the inputs (priority, battery, temperature, others'
// energy, GEM enable), the rule table, GEM forwarding, SL1 when disabled, the
// idle-time prediction compared with break-even times, energy measured from
// PSM signals.  This design's own choices: the estimate thresholds, the
// prediction formula, the idle timeout, the break-even numbers and the
// request/grant handshake.  With USE_GEM = 0 the LEM runs without a GEM.
// Reset is asynchronous, active low; the IP starts in soft off.
module lem #(
  parameter int unsigned EW             = 24,
  parameter int unsigned LW             = 16,
  parameter int unsigned TW             = 20,
  parameter bit          USE_GEM        = 1'b1,
  parameter int unsigned E_INSTR        = 256,
  parameter int unsigned BAT_STEP       = 1 << 20,
  parameter int unsigned TEMP_STEP      = 1 << 19,
  parameter int unsigned IDLE_TIMEOUT   = 8,
  // break-even time of SL1, SL2, SL3, SL4, OFF in cycles, from the PSM's
  // default transition costs (see the header)
  parameter int unsigned BREAK_EVEN [5] = '{23, 57, 195, 739, 2855}
) (
  input  logic               clk,
  input  logic               rst_n,
  // functional IP
  input  logic               task_req,
  input  dpm_pkg::prio_t     task_prio,
  input  logic [LW-1:0]      task_len,
  input  logic               task_done,
  output logic               task_grant,
  // SoC resources
  input  dpm_pkg::bat_t      bat,
  input  dpm_pkg::temp_t     temp,
  // GEM
  output logic               gem_req,
  output logic [EW-1:0]      gem_energy,
  input  logic               gem_en,
  input  logic [EW-1:0]      others_energy,
  // PSM
  output dpm_pkg::pstate_t   psm_target,
  input  dpm_pkg::pstate_t   psm_state,
  input  logic               psm_busy,
  input  logic [EW-1:0]      psm_energy,
  // measurement
  output logic [EW+7:0]      task_energy,
  output logic               task_energy_vld,
  output logic [TW-1:0]      idle_pred
);
  import dpm_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_SLEEP, S_REQ, S_WAKE, S_RUN} lem_st_t;

  lem_st_t         st;
  prio_t           prio_q;
  logic [LW-1:0]   len_q;
  logic [TW-1:0]   idle_cnt;
  logic [EW+7:0]   acc;
  logic [EW-1:0]   est;
  logic [EW+1:0]   total;
  bat_t            bat_est;
  temp_t           temp_est;
  pstate_t         sel, sleep_sel;
  logic            sleep_ok, enabled;

  // energy estimate of the latched task, at least 1
  always_comb begin
    logic [LW+31:0] prod;
    prod = (LW+32)'(len_q) * (LW+32)'(E_INSTR);
    if (prod > (LW+32)'({EW{1'b1}})) est = '1;
    else if (prod == '0)             est = EW'(1);
    else                             est = EW'(prod);
  end

  // battery and temperature expected at the end of the task
  always_comb begin
    total    = (EW+2)'(est) + (EW+2)'(others_energy);
    bat_est  = bat;
    temp_est = temp;
    if (total >= (EW+2)'(BAT_STEP) && bat != BAT_E && bat != BAT_PS)
      bat_est = bat_t'(bat - 3'd1);
    if (total >= (EW+2)'(TEMP_STEP) && temp != TEMP_H)
      temp_est = temp_t'(temp + 2'd1);
    sel     = select_state(prio_q, bat_est, temp_est);
    enabled = !USE_GEM || gem_en;
  end

  // deepest sleep state whose break-even time the prediction reaches
  always_comb begin
    sleep_ok  = 1'b0;
    sleep_sel = PS_SL1;
    for (int s = 0; s < 5; s++) begin
      if (32'(idle_pred) >= BREAK_EVEN[s]) begin
        sleep_ok  = 1'b1;
        sleep_sel = pstate_t'(4'(int'(PS_SL1) + s));
      end
    end
  end

  assign gem_req    = (st == S_REQ);
  assign gem_energy = (st == S_REQ || st == S_WAKE || st == S_RUN) ? est : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st              <= S_SLEEP;
      prio_q          <= PRIO_L;
      len_q           <= '0;
      idle_cnt        <= '0;
      idle_pred       <= '0;
      acc             <= '0;
      task_energy     <= '0;
      task_energy_vld <= 1'b0;
      task_grant      <= 1'b0;
      psm_target      <= PS_OFF;
    end else begin
      task_grant      <= 1'b0;
      task_energy_vld <= 1'b0;
      unique case (st)
        S_IDLE, S_SLEEP: begin
          if (idle_cnt != '1) idle_cnt <= idle_cnt + 1'b1;
          if (task_req) begin
            prio_q    <= task_prio;
            len_q     <= task_len;
            idle_pred <= TW'(({1'b0, idle_pred} + {1'b0, idle_cnt}) >> 1);
            st        <= S_REQ;
          end else if (st == S_IDLE && !enabled) begin
            // the GEM withdraws the enable: an idle IP left on goes to SL1
            psm_target <= PS_SL1;
            st         <= S_SLEEP;
          end else if (st == S_IDLE && 32'(idle_cnt) + 1 == IDLE_TIMEOUT && sleep_ok) begin
            psm_target <= sleep_sel;
            st         <= S_SLEEP;
          end
        end
        S_REQ: begin
          if (!enabled || sel == PS_SL1) begin
            psm_target <= PS_SL1;
          end else begin
            psm_target <= sel;
            st         <= S_WAKE;
          end
        end
        S_WAKE: begin
          if (psm_state == psm_target && !psm_busy) begin
            task_grant <= 1'b1;
            acc        <= '0;
            st         <= S_RUN;
          end
        end
        S_RUN: begin
          acc <= acc + (EW+8)'(psm_energy);
          if (task_done) begin
            task_energy     <= acc + (EW+8)'(psm_energy);
            task_energy_vld <= 1'b1;
            idle_cnt        <= '0;
            st              <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_grant_on: assert property (@(posedge clk) disable iff (!rst_n)
                               task_grant |-> is_on(psm_state));
  a_sl1_not_run: assert property (@(posedge clk) disable iff (!rst_n)
                                  (st == S_RUN) |-> is_on(psm_target));

endmodule
