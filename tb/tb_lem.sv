// tb_lem: self-checking testbench of the Local Energy Manager.
//
// A small model of the PSM (state follows the target after 3 busy cycles,
// energy 10 per cycle) closes the loop.  The GEM side is driven directly.
//  1. Every priority x battery x temperature class, with no other energy:
//     the target state must be the one of the reference rule list below
//     (kept here as a data table, separate from the design's function).  For
//     an ON state the task is granted once the PSM is there, and its
//     measured energy must be 10 per running cycle.  For SL1 the request
//     must wait in SL1 until the battery is Full and temperature Low.
//  2. GEM enable low: SL1 and no grant until enable returns; an idle IP
//     left on goes to SL1 when its enable is withdrawn.
//  3. End-of-task estimate: a large energy from the other IPs must lower the
//     battery and raise the temperature class used for the choice.
//  4. Idle: the prediction is the mean of the old prediction and the idle
//     period, and after the idle timeout the deepest sleep state whose
//     break-even time the prediction reaches is chosen.
module tb_lem;
  import dpm_pkg::*;

  localparam int EW = 24, LW = 16, TW = 20;
  localparam int E_INSTR = 256, BAT_STEP = 1 << 20, TEMP_STEP = 1 << 19;
  localparam int TIMEOUT = 8;
  localparam int BE [5] = '{23, 57, 195, 739, 2855};

  logic clk = 1'b0, rst_n = 1'b0;
  logic task_req, task_done, task_grant;
  prio_t task_prio;
  logic [LW-1:0] task_len;
  bat_t bat;
  temp_t temp;
  logic gem_req, gem_en;
  logic [EW-1:0] gem_energy, others_energy;
  pstate_t psm_target, psm_state;
  logic psm_busy;
  logic [EW-1:0] psm_energy;
  logic [EW+7:0] task_energy;
  logic task_energy_vld;
  logic [TW-1:0] idle_pred;
  int checks = 0, failures = 0;

  lem dut (.*);

  always #5 clk = ~clk;

  // PSM model
  int pcnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psm_state <= PS_OFF; psm_busy <= 1'b0; pcnt <= 0;
    end else if (psm_busy) begin
      if (pcnt == 1) begin psm_busy <= 1'b0; psm_state <= psm_target; end
      pcnt <= pcnt - 1;
    end else if (psm_target != psm_state) begin
      psm_busy <= 1'b1; pcnt <= 3;
    end
  end
  assign psm_energy = EW'(10);

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
      $display("FAIL %s (prio=%0d bat=%0d temp=%0d target=%s)", what, task_prio, bat,
               temp, psm_target.name());
    end
  endfunction

  // Reference rules: {prio mask (L,M,H,V bits 0..3), battery mask (E,L,M,H,F,PS),
  // temperature mask (L,M,H), state}; first match wins, default ON4.
  typedef struct { bit [3:0] p; bit [5:0] b; bit [2:0] t; pstate_t s; } rule_t;
  rule_t rules [13] = '{
    '{4'b1000, 6'b111111 & 6'b000001, 3'b111, PS_ON4},
    '{4'b1000, 6'b111111, 3'b100, PS_ON4},
    '{4'b0111, 6'b000001, 3'b111, PS_SL1},
    '{4'b0111, 6'b111111, 3'b100, PS_SL1},
    '{4'b1111, 6'b000010, 3'b011, PS_ON4},
    '{4'b1111, 6'b000001, 3'b010, PS_ON4},
    '{4'b1000, 6'b001100, 3'b001, PS_ON1},
    '{4'b0100, 6'b001100, 3'b001, PS_ON2},
    '{4'b0010, 6'b001100, 3'b001, PS_ON3},
    '{4'b0001, 6'b001100, 3'b001, PS_ON4},
    '{4'b1110, 6'b010000, 3'b001, PS_ON1},
    '{4'b0001, 6'b010000, 3'b001, PS_ON2},
    '{4'b1111, 6'b100000, 3'b011, PS_ON1}};

  function automatic pstate_t ref_state(int p, int b, int t);
    foreach (rules[r])
      if (rules[r].p[p] && rules[r].b[b] && rules[r].t[t]) return rules[r].s;
    return PS_ON4;
  endfunction

  // request a task and run it for `run` cycles; returns the granted state
  task automatic run_task(input int run, output pstate_t got, output int wait_cycles);
    int w = 0;
    @(negedge clk);
    task_req = 1'b1;
    do begin
      @(posedge clk); #1; w++;
      if (w == 1) check(gem_energy == EW'(int'(task_len) * E_INSTR),
                        "energy estimate forwarded to the GEM");
    end while (!task_grant && w < 2000);
    check(task_grant, "task granted");
    got = psm_target;
    check(psm_state == psm_target && is_on(psm_state), "granted in the target ON state");
    @(negedge clk);
    task_req = 1'b0;
    for (int c = 0; c < run; c++) begin
      if (c == run - 1) task_done = 1'b1;
      @(posedge clk); #1;
      @(negedge clk);
      task_done = 1'b0;
    end
    @(posedge clk); #1;
    check(task_energy == (EW+8)'(10 * run), $sformatf("task energy %0d for %0d cycles", task_energy, run));
    wait_cycles = w;
  endtask

  initial begin
    pstate_t got, exp_s;
    int w, idle, pred_exp, deepest;
    task_req = 0; task_done = 0; task_prio = PRIO_L; task_len = 16'd4;
    bat = BAT_F; temp = TEMP_L; gem_en = 1'b1; others_energy = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    // 1. rule table
    for (int p = 0; p < 4; p++)
      for (int b = 0; b < 6; b++)
        for (int t = 0; t < 3; t++) begin
          @(negedge clk);
          task_prio = prio_t'(p); bat = bat_t'(b); temp = temp_t'(t);
          exp_s = ref_state(p, b, t);
          if (exp_s == PS_SL1) begin
            task_req = 1'b1;
            repeat (6) @(posedge clk);
            #1;
            check(gem_req, "gem_req while waiting");
            check(psm_target == PS_SL1, "held in SL1 by the rule table");
            check(!task_grant, "no grant in SL1");
            @(negedge clk);
            bat = BAT_F; temp = TEMP_L;
            exp_s = (p == 0) ? PS_ON2 : PS_ON1;
          end
          run_task(5 + p, got, w);
          check(got == exp_s, $sformatf("selected %s expected %s", got.name(), exp_s.name()));
        end
    // 2. GEM disables the IP
    @(negedge clk);
    gem_en = 1'b0; bat = BAT_F; temp = TEMP_L; task_prio = PRIO_V;
    task_req = 1'b1;
    repeat (20) @(posedge clk);
    #1;
    check(psm_target == PS_SL1 && psm_state == PS_SL1, "forced to SL1 by GEM");
    check(!task_grant && gem_req, "request waits");
    @(negedge clk);
    gem_en = 1'b1;
    run_task(3, got, w);
    check(got == PS_ON1, "runs in ON1 once enabled");
    // 2b. enable withdrawn while the IP idles in an ON state: SL1 at once
    @(negedge clk);
    check(is_on(psm_target), "idle IP left on after its task");
    gem_en = 1'b0;
    repeat (2) @(posedge clk);
    #1;
    check(psm_target == PS_SL1, "idle IP forced to SL1 when disabled");
    @(negedge clk);
    gem_en = 1'b1;
    run_task(3, got, w);
    check(got == PS_ON1, "runs again once enabled");
    // 3. estimate: others' energy pushes battery Medium -> Low, temperature Low -> Medium
    @(negedge clk);
    task_prio = PRIO_V; bat = BAT_M; temp = TEMP_L; others_energy = EW'(BAT_STEP);
    run_task(3, got, w);
    check(got == ref_state(3, 1, 1), "estimate lowers battery and raises temperature");
    @(negedge clk);
    others_energy = EW'(TEMP_STEP - 4 * E_INSTR);   // only temperature crosses
    task_prio = PRIO_V; bat = BAT_F; temp = TEMP_M;
    run_task(3, got, w);
    check(got == ref_state(3, 4, 2), "estimate raises temperature to High");
    @(negedge clk);
    others_energy = '0; task_len = 16'(TEMP_STEP / E_INSTR);   // own task alone
    task_prio = PRIO_H; bat = BAT_H; temp = TEMP_L;
    run_task(3, got, w);
    check(got == ref_state(2, 3, 1), "own task energy raises temperature");
    @(negedge clk);
    task_len = 16'd4; task_prio = PRIO_H; bat = BAT_H; temp = TEMP_L;
    run_task(3, got, w);
    check(got == PS_ON2, "small task: no change of class");
    // 4. idle prediction and sleep
    for (int k = 0; k < 6; k++) begin
      idle = (k < 3) ? 3000 : 40;
      pred_exp = idle_pred;
      // idle period
      for (int c = 0; c < idle; c++) begin
        if (c == TIMEOUT + 1) begin
          deepest = -1;
          for (int s = 0; s < 5; s++) if (int'(idle_pred) >= BE[s]) deepest = s;
          if (deepest >= 0) check(psm_target == pstate_t'(4 + deepest), "sleep state by break-even");
          else              check(psm_target == PS_ON2, "stays on when prediction is short");
        end
        if (c == TIMEOUT - 3) check(is_on(psm_target), "still on before the timeout");
        @(posedge clk); #1;
      end
      run_task(3, got, w);
      pred_exp = (pred_exp + idle) / 2;
      check(int'(idle_pred) >= pred_exp - 2 && int'(idle_pred) <= pred_exp + 2,
            $sformatf("prediction %0d expected about %0d", idle_pred, pred_exp));
      if (deepest >= 0)
        check(w >= 3, "wake-up from sleep takes the PSM transition");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
