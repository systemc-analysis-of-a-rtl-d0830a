// dpm_soc: dynamic power management of a system on chip with N_IP managed IPs.
//
// One Global Energy Manager (GEM) and, for every IP, a Local Energy Manager
// (LEM) and a Power State Machine (PSM), wired as the architecture draws
// them: IP -> LEM task request, LEM <-> GEM (request and energy estimate out,
// enable and other IPs' energy back), LEM -> PSM target state, PSM -> LEM
// state and energy, PSM -> IP clock enable.  The functional IPs themselves,
// the battery gauge and the temperature sensor are outside this module: their
// signals are ports.  Battery and temperature arrive already coded in classes.
//
// Per IP i the interface is the LEM's task handshake (task_req/task_prio/
// task_len held until task_grant, task_done pulsed at the end of the task),
// ip_itype (type of the instruction the IP executes, one of two, which
// selects the PSM's energy figure) plus the PSM's outputs: ip_run_en (one instruction may execute in a cycle
// where it is high), ip_clk_div and ip_vdd_sel (operating point), ip_state and
// ip_energy (characterised energy of this cycle).  task_energy/
// task_energy_vld report each finished task's measured energy and
// ip_idle_pred the LEM's present idle-time prediction.  fan_on is the
// GEM's supplementary-fan request.
//
// The structure follows the paper; the widths, the static priorities 1..N_IP
// in IP order and the timing numbers are this design's own, and are the
// defaults of the sub-blocks.
module dpm_soc #(
  parameter int unsigned N_IP = 4,
  parameter int unsigned EW   = 24,
  parameter int unsigned LW   = 16,
  parameter int unsigned TW   = 20,
  parameter int unsigned IP_PRIO [N_IP] = '{1, 2, 3, 4}
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  dpm_pkg::bat_t                  bat,
  input  dpm_pkg::temp_t                 temp,
  input  logic           [N_IP-1:0]      task_req,
  input  dpm_pkg::prio_t [N_IP-1:0]      task_prio,
  input  logic           [N_IP-1:0][LW-1:0] task_len,
  input  logic           [N_IP-1:0]      task_done,
  input  logic           [N_IP-1:0]      ip_itype,
  output logic           [N_IP-1:0]      task_grant,
  output logic           [N_IP-1:0]      ip_run_en,
  output logic           [N_IP-1:0][2:0] ip_clk_div,
  output logic           [N_IP-1:0][1:0] ip_vdd_sel,
  output dpm_pkg::pstate_t [N_IP-1:0]    ip_state,
  output logic           [N_IP-1:0][EW-1:0] ip_energy,
  output logic           [N_IP-1:0][EW+7:0] task_energy,
  output logic           [N_IP-1:0]      task_energy_vld,
  output logic           [N_IP-1:0][TW-1:0] ip_idle_pred,
  output logic           [N_IP-1:0]      gem_en,
  output logic                           fan_on
);
  import dpm_pkg::*;

  logic    [N_IP-1:0]         gem_req;
  logic    [N_IP-1:0][EW-1:0] gem_energy, others_energy;
  pstate_t [N_IP-1:0]         psm_target;
  logic    [N_IP-1:0]         psm_busy;

  gem #(.N_IP(N_IP), .EW(EW), .IP_PRIO(IP_PRIO)) u_gem (
    .clk, .rst_n, .bat, .temp,
    .req(gem_req), .req_energy(gem_energy),
    .en(gem_en), .others_energy(others_energy), .fan_on
  );

  for (genvar i = 0; i < N_IP; i++) begin : g_ip
    lem #(.EW(EW), .LW(LW), .TW(TW)) u_lem (
      .clk, .rst_n,
      .task_req(task_req[i]), .task_prio(task_prio[i]), .task_len(task_len[i]),
      .task_done(task_done[i]), .task_grant(task_grant[i]),
      .bat, .temp,
      .gem_req(gem_req[i]), .gem_energy(gem_energy[i]),
      .gem_en(gem_en[i]), .others_energy(others_energy[i]),
      .psm_target(psm_target[i]), .psm_state(ip_state[i]),
      .psm_busy(psm_busy[i]), .psm_energy(ip_energy[i]),
      .task_energy(task_energy[i]), .task_energy_vld(task_energy_vld[i]),
      .idle_pred(ip_idle_pred[i])
    );

    psm #(.EW(EW)) u_psm (
      .clk, .rst_n,
      .target(psm_target[i]), .itype(ip_itype[i]), .state(ip_state[i]), .busy(psm_busy[i]),
      .run_en(ip_run_en[i]), .clk_div(ip_clk_div[i]), .vdd_sel(ip_vdd_sel[i]),
      .energy(ip_energy[i])
    );
  end

endmodule
