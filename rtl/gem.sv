// gem: Global Energy Manager.
//
// One GEM serves all the Local Energy Managers (LEMs) of the chip.  It gives
// each IP a fixed static priority (parameter IP_PRIO, 1 = highest) and, from
// the battery and temperature classes, decides which LEMs may run a task:
//
//   battery Medium/High/Full and temperature Low/Medium : every IP enabled
//   battery Empty/Low        and temperature Low/Medium : only high-priority
//                                                         IPs enabled
//   otherwise                                           : no IP enabled and
//                                                         the supplementary
//                                                         fan switched on
//
// An IP counts as high priority when IP_PRIO <= HIGH_PRIO_MAX.  A LEM that is
// not enabled keeps its IP in sleep state SL1.  The GEM also returns to each
// LEM the sum of the energies requested by all other LEMs (req_energy of a LEM
// is its estimate for the task it is requesting or running, zero otherwise),
// so that the LEM can estimate battery and temperature at the end of its task.
//
// The enable rule follows the paper's GEM algorithm.  This design's own
// choices: an external power supply counts like a Full battery, the
// high-priority threshold, and registering all outputs (one cycle latency
// from any input change to en, others_energy and fan_on).  Reset is
// asynchronous, active low, and clears every enable.
module gem #(
  parameter int unsigned N_IP          = 4,
  parameter int unsigned EW            = 24,   // energy value width
  parameter int unsigned HIGH_PRIO_MAX = 2,
  parameter int unsigned IP_PRIO [N_IP] = '{1, 2, 3, 4}
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  dpm_pkg::bat_t         bat,
  input  dpm_pkg::temp_t        temp,
  input  logic [N_IP-1:0]       req,
  input  logic [N_IP-1:0][EW-1:0] req_energy,
  output logic [N_IP-1:0]       en,
  output logic [N_IP-1:0][EW-1:0] others_energy,
  output logic                  fan_on
);
  import dpm_pkg::*;

  logic             temp_ok, bat_strong, bat_weak;
  logic [N_IP-1:0]  en_d;
  logic [EW+7:0]    total;
  logic [N_IP-1:0][EW-1:0] others_d;

  assign temp_ok    = (temp == TEMP_L) || (temp == TEMP_M);
  assign bat_strong = (bat == BAT_M) || (bat == BAT_H) || (bat == BAT_F) || (bat == BAT_PS);
  assign bat_weak   = (bat == BAT_E) || (bat == BAT_L);

  always_comb begin
    total = '0;
    for (int i = 0; i < N_IP; i++) total += (EW+8)'(req_energy[i]);
    for (int i = 0; i < N_IP; i++) begin
      // saturate at the largest EW-bit value
      if (total - (EW+8)'(req_energy[i]) > (EW+8)'({EW{1'b1}}))
        others_d[i] = '1;
      else
        others_d[i] = EW'(total - (EW+8)'(req_energy[i]));
      if (temp_ok && bat_strong)    en_d[i] = 1'b1;
      else if (temp_ok && bat_weak) en_d[i] = (IP_PRIO[i] <= HIGH_PRIO_MAX);
      else                          en_d[i] = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en            <= '0;
      others_energy <= '0;
      fan_on        <= 1'b0;
    end else begin
      en            <= en_d;
      others_energy <= others_d;
      fan_on        <= !temp_ok;
    end
  end

  // a request is only meaningful with a non-zero energy estimate
  for (genvar i = 0; i < N_IP; i++) begin : g_chk
    a_req_energy: assert property (@(posedge clk) disable iff (!rst_n)
                                   req[i] |-> req_energy[i] != '0);
  end

endmodule
