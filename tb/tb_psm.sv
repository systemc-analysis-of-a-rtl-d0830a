// tb_psm: self-checking testbench of the Power State Machine.
//
// Drives a random sequence of target states (including every sleep state
// and soft off).  For every transition it counts the cycles the PSM reports
// busy and compares them with the delay expected for that pair of states
// (voltage change, wake-up from the given sleep depth, or entry into sleep),
// then checks the final state, the characterised energy per cycle for both
// instruction types, and in
// ON states the clock-enable rate (ONk: one run_en in k cycles) over 24
// cycles.  Also checks that run_en stays low in sleep and while busy.
module tb_psm;
  import dpm_pkg::*;

  localparam int EW = 24;
  localparam int VS = 8, EN = 2;
  localparam int WAKE [5] = '{4, 16, 64, 256, 1024};
  localparam int EPC  [2][9] = '{'{256, 82, 42, 23, 8, 4, 2, 1, 0},
                                 '{154, 49, 25, 14, 8, 4, 2, 1, 0}};

  logic clk = 1'b0, rst_n = 1'b0;
  pstate_t target, state;
  logic itype;
  logic busy, run_en;
  logic [2:0] clk_div;
  logic [1:0] vdd_sel;
  logic [EW-1:0] energy;
  int checks = 0, failures = 0;

  psm dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s: target=%s state=%s", what, target.name(), state.name());
    end
  endfunction

  function automatic int exp_lat(int from, int to);
    if (to >= 4) return EN;        // into sleep or off
    if (from <= 3) return VS;      // between ON states
    return WAKE[from - 4];         // wake-up
  endfunction

  initial begin
    int from, to, nbusy, nrun, expect_run;
    target = PS_OFF; itype = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(state == PS_OFF && !busy && !run_en, "reset state is soft off");
    check(energy == EW'(EPC[0][8]) && vdd_sel == 2'd3, "soft-off outputs");
    for (int n = 0; n < 60; n++) begin
      from = int'(state);
      // alternate ON and random states so that every wake-up depth occurs
      if (n < 9)             to = (n + 1) % 9;
      else if (n % 2 == 0)   to = $urandom_range(0, 3);
      else                   to = $urandom_range(0, 8);
      if (to == from) to = (to + 1) % 9;
      @(negedge clk);
      target = pstate_t'(to);
      nbusy = 0;
      @(posedge clk); #1;
      while (busy) begin
        nbusy++;
        check(!run_en, "no run_en while busy");
        check(energy == EW'(64), "transition energy");
        @(posedge clk); #1;
      end
      check(nbusy == exp_lat(from, to), $sformatf("delay %0d->%0d got %0d", from, to, nbusy));
      check(state == pstate_t'(to), "state reached");
      itype = 1'b0; #1;
      check(energy == EW'(EPC[0][to]), "energy per cycle");
      itype = 1'b1; #1;
      check(energy == EW'(EPC[1][to]), "energy per cycle, second instruction type");
      itype = 1'(n % 2); #1;
      nrun = 0;
      for (int c = 0; c < 24; c++) begin
        if (run_en) nrun++;
        @(posedge clk); #1;
      end
      expect_run = (to <= 3) ? 24 / (to + 1) : 0;
      check(nrun == expect_run, $sformatf("run_en rate in %0d: %0d", to, nrun));
      if (to <= 3) check(clk_div == 3'(to + 1) && vdd_sel == 2'(to), "operating point");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
