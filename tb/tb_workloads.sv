// tb_workloads: runs the six evaluation scenarios of the architecture and
// reports energy saving, temperature reduction and delay overhead against
// an IP that runs every task at full speed and never sleeps.
//
// A1..A4: one LEM, PSM and IP without a GEM (LEM parameter USE_GEM = 0),
//   the same kind of task sequence (40 tasks of 20..200 instructions, idle
//   periods of 0..1500 cycles, random priority class) with battery Full or
//   Low and the chip starting at temperature Low or High:
//   A1 Full/Low, A2 Low/Low, A3 Full/High, A4 Low/High.
// B, C: the full SoC (GEM, four LEMs and PSMs), battery Low, temperature
//   starting Low.  B: IP1 and IP2 busy (idle 0..40), IP3 and IP4 mostly idle
//   (idle 500..3000); C: the reverse.  IPs have static priorities 1..4.
//
// Temperature comes from a first-order thermal model in this file: a heat
// integrator h <- h + energy - h/1024, classed Low below 120000, High from
// 200000; a full-speed IP settles at 262144 (High).  The battery class is
// held fixed.  The baseline spends 256 energy units every cycle (ON1) for
// the length of the task sequence at full speed (instructions + idle).
//
// Checks: every A scenario completes all its tasks and saves energy; the
// Low battery scenarios save more energy and take more delay than their
// Full battery counterparts (as the published results do); in B and C the
// high-priority IPs complete their tasks, the SoC saves energy, and IP3 and
// IP4 never run, since the GEM enables only IPs of priority 1 and 2 while the
// battery is Low.  Energy and delay are measured on the design; the numbers
// will not match the published ones, which come from a different power
// characterisation and task mix.
module tb_workloads;
  import dpm_pkg::*;

  localparam int EW = 24, LW = 16, TW = 20;
  localparam longint H_LOW = 120000, H_HIGH = 200000;
  localparam int E_ON1 = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  longint cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) cycle++;

  function automatic temp_t t_class(longint h);
    if (h < H_LOW)  return TEMP_L;
    if (h < H_HIGH) return TEMP_M;
    return TEMP_H;
  endfunction

  function automatic void check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ A1..A4
  localparam bat_t  A_BAT  [4] = '{BAT_F, BAT_L, BAT_F, BAT_L};
  localparam longint A_H0 [4] = '{0, 0, 230000, 230000};

  longint a_energy [4], a_heat [4], a_heat_sum [4], a_end [4];
  int     a_tasks [4];
  longint a_instrs [4], a_lat [4], a_ideal [4], a_idle [4];
  logic   [3:0] a_fin;

  for (genvar a = 0; a < 4; a++) begin : g_a
    logic req, done, grant, run_en, busy, evld, idle_now, itype;
    prio_t prio;
    logic [LW-1:0] len;
    temp_t temp;
    pstate_t target, state;
    logic [EW-1:0] energy;
    logic [EW+7:0] tenergy;
    logic [TW-1:0] pred;
    logic [2:0] cdiv;
    logic [1:0] vsel;
    logic greq;
    logic [EW-1:0] gen;

    assign temp = t_class(a_heat[a]);

    lem #(.EW(EW), .LW(LW), .TW(TW), .USE_GEM(1'b0)) u_lem (
      .clk, .rst_n, .task_req(req), .task_prio(prio), .task_len(len),
      .task_done(done), .task_grant(grant), .bat(A_BAT[a]), .temp,
      .gem_req(greq), .gem_energy(gen), .gem_en(1'b0), .others_energy('0),
      .psm_target(target), .psm_state(state), .psm_busy(busy), .psm_energy(energy),
      .task_energy(tenergy), .task_energy_vld(evld), .idle_pred(pred));
    psm #(.EW(EW)) u_psm (
      .clk, .rst_n, .target, .itype, .state, .busy, .run_en, .clk_div(cdiv), .vdd_sel(vsel),
      .energy);
    ip_traffic_gen #(.MIN_IDLE(0), .MAX_IDLE(1500), .MAX_TASKS(40)) u_ip (
      .clk, .rst_n, .stop(1'b0), .task_grant(grant), .run_en, .task_req(req),
      .task_prio(prio), .task_len(len), .task_done(done), .itype, .tasks(a_tasks[a]),
      .instrs(a_instrs[a]), .latency(a_lat[a]), .ideal(a_ideal[a]), .idle_now,
      .idle_cycles(a_idle[a]), .finished(a_fin[a]));

    initial begin a_energy[a] = 0; a_heat[a] = A_H0[a]; a_heat_sum[a] = 0; a_end[a] = 0; end
    always @(posedge clk) if (rst_n && !a_fin[a]) begin
      a_energy[a]   += longint'(energy);
      a_heat[a]      = a_heat[a] + longint'(energy) - a_heat[a] / 1024;
      a_heat_sum[a] += a_heat[a];
      a_end[a]       = cycle;
    end
  end

  // ------------------------------------------------------------ B, C
  longint s_energy [2], s_heat [2], s_heat_sum [2];
  int     s_tasks [2][4];
  longint s_instrs [2][4], s_lat [2][4], s_ideal [2][4], s_idle [2][4];
  logic   [3:0] s_fin [2];
  logic   s_stop = 1'b0;
  logic   [3:0] s_req [2];

  for (genvar c = 0; c < 2; c++) begin : g_s
    logic [3:0] done, grant, run_en, evld, gen, idle_now, itype;
    prio_t [3:0] prio;
    logic [3:0][LW-1:0] len;
    logic [3:0][2:0] cdiv;
    logic [3:0][1:0] vsel;
    pstate_t [3:0] state;
    logic [3:0][EW-1:0] energy;
    logic [3:0][EW+7:0] tenergy;
    logic [3:0][TW-1:0] pred;
    logic fan;
    temp_t temp;

    assign temp = t_class(s_heat[c]);

    dpm_soc u_soc (
      .clk, .rst_n, .bat(BAT_L), .temp, .task_req(s_req[c]), .task_prio(prio),
      .task_len(len), .task_done(done), .ip_itype(itype), .task_grant(grant), .ip_run_en(run_en),
      .ip_clk_div(cdiv), .ip_vdd_sel(vsel), .ip_state(state), .ip_energy(energy),
      .task_energy(tenergy), .task_energy_vld(evld), .ip_idle_pred(pred),
      .gem_en(gen), .fan_on(fan));

    for (genvar i = 0; i < 4; i++) begin : g_ip
      // B: IP1, IP2 busy; C: IP3, IP4 busy
      localparam bit BUSY = (c == 0) ? (i < 2) : (i >= 2);
      ip_traffic_gen #(.MIN_IDLE(BUSY ? 0 : 500), .MAX_IDLE(BUSY ? 40 : 3000),
                       .MAX_TASKS(BUSY ? 60 : 10)) u_ip (
        .clk, .rst_n, .stop(s_stop), .task_grant(grant[i]), .run_en(run_en[i]),
        .task_req(s_req[c][i]), .task_prio(prio[i]), .task_len(len[i]),
        .task_done(done[i]), .itype(itype[i]), .tasks(s_tasks[c][i]), .instrs(s_instrs[c][i]),
        .latency(s_lat[c][i]), .ideal(s_ideal[c][i]), .idle_now(idle_now[i]),
        .idle_cycles(s_idle[c][i]), .finished(s_fin[c][i]));
    end

    initial begin s_energy[c] = 0; s_heat[c] = 0; s_heat_sum[c] = 0; end
    always @(posedge clk) if (rst_n) begin
      for (int i = 0; i < 4; i++) s_energy[c] += longint'(energy[i]);
      for (int i = 0; i < 4; i++) s_heat[c] += longint'(energy[i]);
      s_heat[c] = s_heat[c] - s_heat[c] / 1024;
      s_heat_sum[c] += s_heat[c];
    end
  end

  // baseline heat: full-speed energy every cycle, from the same start
  function automatic longint base_heat_sum(longint h0, longint power, longint n);
    longint h = h0, sum = 0;
    for (longint k = 0; k < n; k++) begin
      h = h + power - h / 1024;
      sum += h;
    end
    return sum;
  endfunction

  function automatic real pct(real a, real b);
    return 100.0 * (1.0 - a / b);
  endfunction

  initial begin
    real sav [6], tred [6], dly [6];
    longint n_base, win;
    string nm [6] = '{"A1", "A2", "A3", "A4", "B", "C"};
    int paper_sav [6] = '{39, 55, 39, 55, 65, 64};
    int paper_tr  [6] = '{31, 21, 18, 18, 19, 18};
    int paper_dl  [6] = '{30, 339, 37, 339, 242, 253};
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    // A scenarios
    wait (a_fin == 4'hF);
    for (int a = 0; a < 4; a++) begin
      check(a_tasks[a] == 40, $sformatf("A%0d completes its 40 tasks", a + 1));
      n_base  = a_ideal[a] + a_idle[a];
      sav[a]  = pct(real'(a_energy[a]), real'(n_base * E_ON1));
      tred[a] = pct(real'(a_heat_sum[a]) / real'(a_end[a]),
                    real'(base_heat_sum(A_H0[a], E_ON1, n_base)) / real'(n_base));
      dly[a]  = 100.0 * real'(a_lat[a] - a_ideal[a]) / real'(a_ideal[a]);
      check(sav[a] > 0.0, $sformatf("A%0d saves energy", a + 1));
      check(tred[a] > 0.0, $sformatf("A%0d lowers temperature", a + 1));
    end
    check(sav[1] > sav[0], "A2 saves more than A1");
    check(dly[1] > dly[0], "A2 delay above A1");
    check(sav[3] > sav[2], "A4 saves more than A3");
    check(dly[3] > dly[2], "A4 delay above A3");
    // B and C: until the high-priority IPs are done
    wait (s_fin[0][1:0] == 2'b11 && s_fin[1][1:0] == 2'b11);
    win = cycle;
    for (int c = 0; c < 2; c++) begin
      sav[4 + c]  = pct(real'(s_energy[c]), real'(4 * win * E_ON1));
      tred[4 + c] = pct(real'(s_heat_sum[c]),
                        real'(base_heat_sum(0, 4 * E_ON1, win)));
      dly[4 + c]  = 100.0 * real'(s_lat[c][0] + s_lat[c][1] - s_ideal[c][0] - s_ideal[c][1])
                    / real'(s_ideal[c][0] + s_ideal[c][1]);
      check(sav[4 + c] > 0.0, $sformatf("%s saves energy", nm[4 + c]));
      check(tred[4 + c] > 0.0, $sformatf("%s lowers temperature", nm[4 + c]));
      check(s_tasks[c][2] == 0 && s_tasks[c][3] == 0,
            $sformatf("%s: priority 3 and 4 IPs held while the battery is Low", nm[4 + c]));
      check(s_req[c][2] && s_req[c][3], $sformatf("%s: IP3 and IP4 still requesting", nm[4 + c]));
    end
    $display("scenario  energy saving %%   temperature reduction %%   delay overhead %%   (published)");
    for (int k = 0; k < 6; k++)
      $display("%-8s  %6.1f (%0d)          %6.1f (%0d)                %7.1f (%0d)",
               nm[k], sav[k], paper_sav[k], tred[k], paper_tr[k], dly[k], paper_dl[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
