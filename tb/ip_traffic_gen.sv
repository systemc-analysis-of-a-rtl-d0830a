// ip_traffic_gen: behavioural model of a managed functional IP, for
// testbenches only (not synthesizable).
//
// The IP is a traffic generator: it alternates idle periods and tasks.  Each
// task has a random priority class (or PRIO_FIXED when that is 0..3) and a
// random length in instructions, and all its instructions are of one random
// type (itype, for the PSM's energy figure).  The IP raises task_req with priority and
// length, holds them until task_grant, then executes one instruction in
// every cycle where run_en (the PSM's clock enable) is high and pulses
// task_done in the cycle after its last instruction.  It counts its
// tasks and instructions, and sums for every task the cycles from request to
// completion (latency) and the length (the latency at full speed with no
// power management), and sums its idle periods.  `stop` ends the traffic
// after the task in progress; with MAX_TASKS > 0 the IP stops after that
// many tasks and raises `finished`.
module ip_traffic_gen #(
  parameter int LW        = 16,
  parameter int MIN_LEN   = 20,
  parameter int MAX_LEN   = 200,
  parameter int MIN_IDLE  = 0,
  parameter int MAX_IDLE  = 50,
  parameter int PRIO_FIXED = -1,
  parameter int MAX_TASKS = 0          // 0: no limit
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              stop,
  input  logic              task_grant,
  input  logic              run_en,
  output logic              task_req,
  output dpm_pkg::prio_t    task_prio,
  output logic [LW-1:0]     task_len,
  output logic              task_done,
  output logic              itype,
  output int                tasks,
  output longint            instrs,
  output longint            latency,
  output longint            ideal,
  output logic              idle_now,
  output longint            idle_cycles,
  output logic              finished
);
  import dpm_pkg::*;

  initial begin
    int len, idle, n;
    longint t0;
    task_req = 1'b0; task_done = 1'b0; itype = 1'b0; task_prio = PRIO_L; task_len = '0;
    tasks = 0; instrs = 0; latency = 0; ideal = 0; idle_now = 1'b1;
    idle_cycles = 0; finished = 1'b0;
    @(posedge rst_n);
    while (MAX_TASKS == 0 || tasks < MAX_TASKS) begin
      idle = $urandom_range(MAX_IDLE, MIN_IDLE);
      idle_cycles += idle;
      repeat (idle) @(posedge clk);
      while (stop) @(posedge clk);
      #1;
      len = $urandom_range(MAX_LEN, MIN_LEN);
      task_len  = LW'(len);
      task_prio = (PRIO_FIXED >= 0) ? prio_t'(PRIO_FIXED) : prio_t'($urandom_range(3, 0));
      task_req  = 1'b1;
      idle_now  = 1'b0;
      itype     = 1'($urandom_range(1, 0));
      t0 = 0;
      do begin @(posedge clk); t0++; end while (!task_grant);
      #1 task_req = 1'b0;
      n = 0;
      while (n < len) begin
        @(posedge clk);
        t0++;
        if (run_en) n++;
      end
      #1 task_done = 1'b1;
      @(posedge clk);
      t0++;
      #1 task_done = 1'b0;
      idle_now = 1'b1;
      tasks++;
      instrs  += len;
      latency += t0;
      ideal   += len;
    end
    finished = 1'b1;
  end

endmodule
