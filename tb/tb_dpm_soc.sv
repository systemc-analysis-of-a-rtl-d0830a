// tb_dpm_soc: end-to-end testbench of the power-managed SoC at its default
// size (four IPs, static priorities 1..4, default timing).
//
// Four traffic-generator IPs (two busy, two mostly idle; IP1 with tasks of up
// to 2400 instructions, the others up to 200) run while the
// battery and temperature classes step through a fixed scenario:
// Full/Low, Medium/Low, Low/Low, Empty/Low, Full/High, external supply/Medium,
// then Full/Low until every IP has finished its last task.  Checked on every
// cycle, independently of the design:
//   - the GEM enable of each IP and the fan follow the classes of the cycle
//     before (all IPs; only IP1 and IP2; none and fan on);
//   - run_en only in an ON state, at the rate of that state (ONk: once in k);
//   - a task is only granted in an ON state, and not to an IP whose GEM
//     enable has been low for longer than the longest wake-up;
//   - each task's reported energy equals the sum of the PSM energy values
//     from grant to done, summed here.
// It counts how often each mechanism happened and fails if one never did:
// every execution state ON1..ON4 used, voltage/frequency change between ON
// states, SL1 forced by the GEM, SL1 chosen by the rule table, sleep or
// off entered on an idle prediction, wake-up from a deep state, fan on,
// end-of-task estimate changing the choice, tasks finished by every IP.
module tb_dpm_soc;
  import dpm_pkg::*;

  localparam int N = 4, EW = 24, LW = 16, TW = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  bat_t bat;
  temp_t temp;
  logic [N-1:0] ip_itype;
  logic [N-1:0] task_req, task_done, task_grant, ip_run_en, task_energy_vld, gem_en;
  prio_t [N-1:0] task_prio;
  logic [N-1:0][LW-1:0] task_len;
  logic [N-1:0][2:0] ip_clk_div;
  logic [N-1:0][1:0] ip_vdd_sel;
  pstate_t [N-1:0] ip_state;
  logic [N-1:0][EW-1:0] ip_energy;
  logic [N-1:0][EW+7:0] task_energy;
  logic [N-1:0][TW-1:0] ip_idle_pred;
  logic fan_on;
  logic stop = 1'b0;

  int     tasks [N];
  longint instrs [N], latency [N], ideal [N];
  logic [N-1:0] idle_now;

  int checks = 0, failures = 0;
  longint cycle = 0;

  dpm_soc dut (.*);

  // IP1 has some tasks long enough for their energy estimate alone to raise
  // the expected temperature class
  ip_traffic_gen #(.MIN_IDLE(0),   .MAX_IDLE(40), .MAX_LEN(2400))   u_ip1 (.clk, .rst_n, .stop,
    .task_grant(task_grant[0]), .run_en(ip_run_en[0]), .task_req(task_req[0]),
    .task_prio(task_prio[0]), .task_len(task_len[0]), .task_done(task_done[0]), .itype(ip_itype[0]),
    .tasks(tasks[0]), .instrs(instrs[0]), .latency(latency[0]), .ideal(ideal[0]),
    .idle_now(idle_now[0]), .idle_cycles(), .finished());
  ip_traffic_gen #(.MIN_IDLE(0),   .MAX_IDLE(40))   u_ip2 (.clk, .rst_n, .stop,
    .task_grant(task_grant[1]), .run_en(ip_run_en[1]), .task_req(task_req[1]),
    .task_prio(task_prio[1]), .task_len(task_len[1]), .task_done(task_done[1]), .itype(ip_itype[1]),
    .tasks(tasks[1]), .instrs(instrs[1]), .latency(latency[1]), .ideal(ideal[1]),
    .idle_now(idle_now[1]), .idle_cycles(), .finished());
  ip_traffic_gen #(.MIN_IDLE(300), .MAX_IDLE(3000)) u_ip3 (.clk, .rst_n, .stop,
    .task_grant(task_grant[2]), .run_en(ip_run_en[2]), .task_req(task_req[2]),
    .task_prio(task_prio[2]), .task_len(task_len[2]), .task_done(task_done[2]), .itype(ip_itype[2]),
    .tasks(tasks[2]), .instrs(instrs[2]), .latency(latency[2]), .ideal(ideal[2]),
    .idle_now(idle_now[2]), .idle_cycles(), .finished());
  ip_traffic_gen #(.MIN_IDLE(300), .MAX_IDLE(3000)) u_ip4 (.clk, .rst_n, .stop,
    .task_grant(task_grant[3]), .run_en(ip_run_en[3]), .task_req(task_req[3]),
    .task_prio(task_prio[3]), .task_len(task_len[3]), .task_done(task_done[3]), .itype(ip_itype[3]),
    .tasks(tasks[3]), .instrs(instrs[3]), .latency(latency[3]), .ideal(ideal[3]),
    .idle_now(idle_now[3]), .idle_cycles(), .finished());

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cycle, what);
    end
  endfunction

  // ---- mechanism counters
  int n_on [4];
  int n_vs, n_gem_sl1, n_rule_sl1, n_sleep, n_wake_deep, n_fan, n_est;

  // ---- per-cycle monitor
  bat_t  bat_q;
  temp_t temp_q;
  logic  [N-1:0] running;
  longint acc [N];
  pstate_t prev_state [N];
  int    div_cnt [N];
  logic  [N-1:0] was_deep;
  int    gem_off [N];
  int    stable = 0;      // cycles the classes have not changed   // cycles since gem_en of the IP was last high

  always @(posedge clk) begin
    logic [N-1:0] exp_en;
    if (rst_n) begin
      cycle++;
      // GEM enable and fan, from the classes of the previous cycle
      for (int i = 0; i < N; i++) begin
        if (temp_q == TEMP_H)                   exp_en[i] = 1'b0;
        else if (bat_q == BAT_E || bat_q == BAT_L) exp_en[i] = (i < 2);
        else                                    exp_en[i] = 1'b1;
      end
      if (cycle > 2) begin
        check(gem_en == exp_en, "GEM enable");
        check(fan_on == (temp_q == TEMP_H), "fan request");
      end
      if (fan_on) n_fan++;
      for (int i = 0; i < N; i++) begin
        if (ip_run_en[i]) check(is_on(ip_state[i]), "run_en only when ON");
        if (task_grant[i]) check(is_on(ip_state[i]), "grant only when ON");
        // a grant needs an enable no older than the longest wake-up
        gem_off[i] = gem_en[i] ? 0 : gem_off[i] + 1;
        if (task_grant[i]) check(gem_off[i] < 1100, $sformatf("IP%0d granted while disabled", i + 1));
        // rate of run_en: the gap between two enables equals the division
        if (is_on(ip_state[i]) && prev_state[i] == ip_state[i]) begin
          if (ip_run_en[i]) begin
            if (div_cnt[i] > 0)
              check(div_cnt[i] == int'(ip_state[i]) + 1, "run_en rate of the ON state");
            div_cnt[i] = 1;
          end else if (div_cnt[i] > 0) div_cnt[i]++;
        end else div_cnt[i] = 0;
        // energy of a task
        // the LEM sums the cycles from the one after its grant register is
        // set up to the one where task_done is sampled
        if (task_energy_vld[i]) begin
          check(longint'(task_energy[i]) == acc[i], $sformatf("task energy of IP%0d: %0d vs %0d", i + 1, task_energy[i], acc[i]));
          running[i] = 1'b0;
        end
        if (running[i]) acc[i] += longint'(ip_energy[i]);
        if (task_grant[i]) begin
          running[i] = 1'b1;
          acc[i] = longint'(ip_energy[i]);
          if (is_on(ip_state[i])) n_on[ip_state[i]]++;
          if (was_deep[i]) n_wake_deep++;
          was_deep[i] = 1'b0;
        end
        if (ip_state[i] >= PS_SL2 && cycle > 20) was_deep[i] = 1'b1;
        // transitions
        if (ip_state[i] != prev_state[i]) begin
          if (is_on(ip_state[i]) && is_on(prev_state[i])) n_vs++;
          if (ip_state[i] == PS_SL1 && task_req[i] && !gem_en[i]) n_gem_sl1++;
          if (ip_state[i] == PS_SL1 && task_req[i] && gem_en[i])  n_rule_sl1++;
          if (ip_state[i] >= PS_SL2 && idle_now[i]) n_sleep++;
        end
        // a granted state that differs from the table for the raw classes
        // (only with classes unchanged for longer than any wake-up)
        if (task_grant[i] && stable > 1100 &&
            ip_state[i] != select_state(task_prio[i], bat_q, temp_q))
          n_est++;
        prev_state[i] = ip_state[i];
      end
    end
    stable = (bat == bat_q && temp == temp_q) ? stable + 1 : 0;
    bat_q  <= bat;
    temp_q <= temp;
  end

  task automatic phase(input bat_t b, input temp_t t, input int cycles);
    @(negedge clk);
    bat = b; temp = t;
    repeat (cycles) @(posedge clk);
  endtask

  initial begin
    bat = BAT_F; temp = TEMP_L; bat_q = BAT_F; temp_q = TEMP_L;
    running = '0; was_deep = '0;
    for (int i = 0; i < N; i++) begin acc[i] = 0; prev_state[i] = PS_OFF; div_cnt[i] = 0; gem_off[i] = 0; end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    phase(BAT_F,  TEMP_L, 20000);
    phase(BAT_M,  TEMP_L, 15000);
    phase(BAT_L,  TEMP_L, 10000);
    phase(BAT_E,  TEMP_L, 6000);
    phase(BAT_F,  TEMP_H, 3000);
    phase(BAT_PS, TEMP_M, 6000);
    @(negedge clk);
    bat = BAT_F; temp = TEMP_L; stop = 1'b1;
    wait (task_req == '0 && running == '0 && idle_now == '1);
    repeat (10) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      check(tasks[i] > 0, $sformatf("IP%0d finished tasks", i + 1));
      $display("IP%0d: %0d tasks, %0d instructions, latency %0d cycles vs %0d at full speed",
               i + 1, tasks[i], instrs[i], latency[i], ideal[i]);
    end
    $display("grants in ON1..ON4: %0d %0d %0d %0d", n_on[0], n_on[1], n_on[2], n_on[3]);
    $display("ON->ON changes %0d, SL1 by GEM %0d, SL1 by rule %0d, sleep on idle %0d",
             n_vs, n_gem_sl1, n_rule_sl1, n_sleep);
    $display("wake from deep state %0d, fan cycles %0d, estimate changed choice %0d",
             n_wake_deep, n_fan, n_est);
    for (int s = 0; s < 4; s++) check(n_on[s] > 0, $sformatf("ON%0d used", s + 1));
    check(n_vs > 0, "voltage/frequency change");
    check(n_gem_sl1 > 0, "SL1 forced by GEM");
    check(n_rule_sl1 > 0, "SL1 chosen by the rule table");
    check(n_sleep > 0, "sleep on idle prediction");
    check(n_wake_deep > 0, "wake-up from a deep state");
    check(n_fan > 0, "fan switched on");
    check(n_est > 0, "end-of-task estimate changed a choice");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
