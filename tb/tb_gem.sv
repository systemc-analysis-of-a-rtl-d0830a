// tb_gem: self-checking testbench of the Global Energy Manager.
//
// Sweeps every battery/temperature class pair, each with random request
// energies, and checks one cycle later the per-IP enable (every IP, only
// static priority 1..2, or none), the fan request and the sum of the other
// IPs' energies, against values worked out here from the enable rule
// written as a lookup by class.
module tb_gem;
  import dpm_pkg::*;

  localparam int N  = 4;
  localparam int EW = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  bat_t  bat;
  temp_t temp;
  logic [N-1:0] req;
  logic [N-1:0][EW-1:0] req_energy;
  logic [N-1:0] en;
  logic [N-1:0][EW-1:0] others_energy;
  logic fan_on;
  int checks = 0, failures = 0;

  gem dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (bat=%0d temp=%0d)", what, bat, temp);
    end
  endfunction

  initial begin
    logic [N-1:0] exp_en;
    bit exp_fan;
    longint sum;
    bat = BAT_F; temp = TEMP_L; req = '0; req_energy = '0;
    repeat (3) @(posedge clk);
    check(en == '0 && fan_on == 1'b0, "reset values");
    rst_n = 1'b1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int b = 0; b < 6; b++) begin
        for (int t = 0; t < 3; t++) begin
          @(negedge clk);
          bat  = bat_t'(b);
          temp = temp_t'(t);
          for (int i = 0; i < N; i++) begin
            req[i]        = ($urandom_range(0, 1) == 1);
            req_energy[i] = req[i] ? EW'($urandom_range(1, (1 << 22))) : '0;
          end
          if (rep == 3) req_energy = '1; // saturation of the sums
          if (rep == 3) req = '1;
          // expected enable: classes of the paper's GEM algorithm
          if (t != 2 && b >= 2)      exp_en = 4'b1111;       // M/H/F/supply
          else if (t != 2)           exp_en = 4'b0011;       // E/L: IP1, IP2
          else                       exp_en = 4'b0000;
          exp_fan = (t == 2);
          @(posedge clk); #1;
          check(en === exp_en, "enable");
          check(fan_on === exp_fan, "fan");
          for (int i = 0; i < N; i++) begin
            sum = 0;
            for (int j = 0; j < N; j++) if (j != i) sum += longint'(req_energy[j]);
            if (sum > (1 << EW) - 1) sum = (1 << EW) - 1;
            check(longint'(others_energy[i]) == sum, "others_energy");
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
