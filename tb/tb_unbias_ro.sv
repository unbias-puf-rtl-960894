// tb_unbias_ro: checks the ring-oscillator model.
// Three oscillators are built: two at the same position on different chips and
// one at another position. For each the testbench measures every half period over
// 20,000 cycles. Every half period must lie within the jitter band around the
// nominal 19 x 400 ps scaled by the model's deviation, the mean must be within a
// few ps of the centre, the deviation must stay inside the systematic plus local
// bound, and chips and positions must differ as intended: the same position on
// two chips differs by at most twice the local bound.
module tb_unbias_ro;
  timeunit 1ps;
  timeprecision 1ps;

  localparam longint NOMINAL = 19 * 400;
  localparam longint SYS_PPM = 30_000, LOCAL_PPM = 5_300, JITTER = 500;

  logic osc [3];
  int checks = 0, failures = 0;

  unbias_ro #(.POSITION(3), .CHIP_SEED(1)) ro0 (.osc(osc[0]));
  unbias_ro #(.POSITION(3), .CHIP_SEED(2)) ro1 (.osc(osc[1]));
  unbias_ro #(.POSITION(12), .CHIP_SEED(1)) ro2 (.osc(osc[2]));

  longint centre [3];
  assign centre[0] = ro0.half_period_ps;
  assign centre[1] = ro1.half_period_ps;
  assign centre[2] = ro2.half_period_ps;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  longint mean_hp [3];

  for (genvar i = 0; i < 3; i++) begin : g_meas
    initial begin
      longint t0, t1, sum;
      int bad;
      bad = 0;
      sum = 0;
      #1;                     // past the model's initialisation of osc
      @(osc[i]);
      t0 = $time;
      for (int n = 0; n < 40_000; n++) begin
        @(osc[i]);
        t1 = $time;
        if (t1 - t0 < centre[i] - JITTER || t1 - t0 > centre[i] + JITTER) bad++;
        sum += t1 - t0;
        t0 = t1;
      end
      mean_hp[i] = sum / 40_000;
      check(bad == 0, $sformatf("ro%0d: %0d half periods outside the jitter band", i, bad));
    end
  end

  initial begin
    #(NOMINAL * 2 * 21_000);
    for (int i = 0; i < 3; i++) begin
      check(mean_hp[i] > centre[i] - 10 && mean_hp[i] < centre[i] + 10,
            $sformatf("ro%0d mean half period %0d, centre %0d", i, mean_hp[i], centre[i]));
      check(centre[i] * 1_000_000 >= NOMINAL * (1_000_000 - SYS_PPM - LOCAL_PPM) - 1_000_000 &&
            centre[i] * 1_000_000 <= NOMINAL * (1_000_000 + SYS_PPM + LOCAL_PPM) + 1_000_000,
            $sformatf("ro%0d centre %0d outside the variation bound", i, centre[i]));
    end
    // same position, other chip: only the local part differs
    check((centre[0] - centre[1]) * 1_000_000 <= NOMINAL * 2 * LOCAL_PPM + 1_000_000 &&
          (centre[1] - centre[0]) * 1_000_000 <= NOMINAL * 2 * LOCAL_PPM + 1_000_000,
          "same position on two chips differs by more than the local bound");
    check(centre[0] != centre[1] || centre[0] != centre[2], "all oscillators identical");
    $display("half periods: %0d %0d %0d ps", centre[0], centre[1], centre[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(NOMINAL * 2 * 40_000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
