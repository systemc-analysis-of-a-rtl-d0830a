// psm: Power State Machine of one IP.
//
// Holds the power state of its IP: execution states ON1..ON4 (decreasing
// clock frequency and supply voltage), sleep states SL1..SL4 (increasing
// depth) and soft off.  The LEM drives the wanted state on `target`; when it
// differs from the present state and no transition is in progress the PSM
// starts one, stays `busy` for the transition's delay, then takes the new
// state.  A change of `target` during a transition is acted on after it ends.
//
// Transition delays (this design's numbers, in cycles):
//   ON  -> other ON      : VS_LAT (voltage/frequency change)
//   SLx/OFF -> ON        : WAKE_LAT[x] (deeper states wake more slowly)
//   any -> SLx/OFF       : ENTER_LAT
//
// In state ONk the IP is enabled through `run_en`, a clock enable that is high
// one cycle out of CLK_DIV[k] (ON1 every cycle).  No run_en is given while
// busy or in a sleep/off state.  `vdd_sel` and `clk_div` tell the regulator
// and clock generator the operating point.  `energy` is the characterised
// average energy of one cycle in the present state for the type of
// instruction the IP reports on `itype` (ENERGY[itype][state], or
// TRANS_ENERGY while busy); the LEM accumulates it to measure its task's
// consumption.  The default table has two instruction types, the second
// drawing 60% of the first's energy in the ON states.
//
// The state set follows the paper (ACPI recommendations), as does an energy
// figure per power state and instruction type; delays, clock divisions,
// the number of instruction types and the energy figures are this design's
// own assumed numbers (ON energies scaled as f*V^2 with V = 1, 0.8, 0.7, 0.6).
// Reset is asynchronous, active low, and puts the IP in soft off.
module psm #(
  parameter int unsigned EW           = 24,
  parameter int unsigned LATW         = 16,
  parameter int unsigned VS_LAT       = 8,
  parameter int unsigned ENTER_LAT    = 2,
  // wake-up delay from SL1, SL2, SL3, SL4, OFF
  parameter int unsigned WAKE_LAT [5] = '{4, 16, 64, 256, 1024},
  // clock division of ON1..ON4
  parameter int unsigned CLK_DIV  [4] = '{1, 2, 3, 4},
  // instruction types: 2**ITW
  parameter int unsigned ITW          = 1,
  // energy per cycle of ON1..ON4, SL1..SL4, OFF (arbitrary units), one row
  // per instruction type
  parameter int unsigned ENERGY [2**ITW][9] = '{'{256, 82, 42, 23, 8, 4, 2, 1, 0},
                                                '{154, 49, 25, 14, 8, 4, 2, 1, 0}},
  parameter int unsigned TRANS_ENERGY = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  dpm_pkg::pstate_t  target,
  input  logic [ITW-1:0]    itype,
  output dpm_pkg::pstate_t  state,
  output logic              busy,
  output logic              run_en,
  output logic [2:0]        clk_div,
  output logic [1:0]        vdd_sel,
  output logic [EW-1:0]     energy
);
  import dpm_pkg::*;

  pstate_t         next_st;
  logic [LATW-1:0] lat_cnt;
  logic [2:0]      div_cnt;
  logic [LATW-1:0] lat_of;

  // delay of the transition from `state` to `target`
  always_comb begin
    if (!is_on(target))   lat_of = LATW'(ENTER_LAT);
    else if (is_on(state)) lat_of = LATW'(VS_LAT);
    else                   lat_of = LATW'(WAKE_LAT[int'(state) - int'(PS_SL1)]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= PS_OFF;
      next_st <= PS_OFF;
      busy    <= 1'b0;
      lat_cnt <= '0;
    end else if (busy) begin
      if (lat_cnt <= 1) begin
        busy  <= 1'b0;
        state <= next_st;
      end
      lat_cnt <= lat_cnt - 1'b1;
    end else if (target != state) begin
      busy    <= 1'b1;
      next_st <= target;
      lat_cnt <= lat_of;
    end
  end

  // clock enable of the IP in the ON states
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                   div_cnt <= '0;
    else if (busy || !is_on(state))               div_cnt <= '0;
    else if (32'(div_cnt) + 1 >= CLK_DIV[state[1:0]]) div_cnt <= '0;
    else                                          div_cnt <= div_cnt + 1'b1;
  end

  assign run_en  = !busy && is_on(state) && (div_cnt == '0);
  assign clk_div = is_on(state) ? 3'(CLK_DIV[state[1:0]]) : 3'd0;
  assign vdd_sel = is_on(state) ? state[1:0] : 2'd3;
  assign energy  = busy ? EW'(TRANS_ENERGY) : EW'(ENERGY[itype][state]);

  a_state_legal: assert property (@(posedge clk) disable iff (!rst_n)
                                  int'(state) <= int'(PS_OFF));
  a_no_run_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                  busy |-> !run_en);

endmodule
