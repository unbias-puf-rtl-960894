// tb_unbias_puf_full: the UNBIAS PUF at its full size, every parameter at default.
//
// Ten path configurations, RO counters releasing after 50,000 oscillations,
// 19-bit difference register, inspection bit 10, 50 MHz clock and oscillators with
// their default noise. Three measurements are made (one challenge twice, to see the
// repeatability a response relies on). Each race lasts about 7.6 ms, i.e. some
// 380,000 clock cycles. For each the testbench checks the difference register
// against the time stamps of the two STOP signals (+-2.5 cycles), against the race
// worked out from the oscillator periods (within 120 cycles: the bound on the
// model's accumulated jitter), that the response is bit 10, and that the race length
// is 10 x 50,002 oscillator periods.
module tb_unbias_puf_full;
  localparam int unsigned N    = 10;
  localparam int unsigned THR  = 50_000;
  localparam int unsigned W    = 19;
  localparam int unsigned IW   = $clog2(W);
  localparam real         TCLK = 20.0;

  logic clk = 1'b0;
  logic rst_n, start, busy, resp_valid, response;
  logic [N-1:0] challenge;
  logic [IW-1:0] insp_bit;
  logic signed [W-1:0] diff;
  int checks = 0, failures = 0;

  always #(TCLK / 2) clk = ~clk;

  unbias_puf dut (
    .clk(clk), .rst_n(rst_n), .start(start), .challenge(challenge), .insp_bit(insp_bit),
    .busy(busy), .resp_valid(resp_valid), .response(response), .diff(diff)
  );

  longint hp [N][2];
  for (genvar k = 0; k < N; k++) begin : g_hp
    for (genvar r = 0; r < 2; r++) begin : g_r
      assign hp[k][r] = dut.g_stage[k].g_path[r].u_ro.half_period_ps;
    end
  end

  realtime t_trig, t_stop [2];
  always @(posedge dut.trigger) t_trig = $realtime;
  always @(posedge dut.race[N][0]) t_stop[0] = $realtime;
  always @(posedge dut.race[N][1]) t_stop[1] = $realtime;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic measure(input logic [N-1:0] c, output logic signed [W-1:0] d_out);
    real t [2];
    real tmp, exp_diff, meas_diff;
    t[0] = 0.0;
    t[1] = 0.0;
    for (int k = 0; k < N; k++) begin
      for (int r = 0; r < 2; r++) t[r] += (THR + 1.5) * 2.0 * real'(hp[k][r]) / 1000.0;
      if (c[k]) begin
        tmp  = t[0];
        t[0] = t[1];
        t[1] = tmp;
      end
    end
    exp_diff = (t[0] - t[1]) / TCLK;
    @(negedge clk);
    challenge = c;
    start     = 1'b1;
    @(negedge clk);
    start = 1'b0;
    wait (resp_valid);
    @(negedge clk);
    meas_diff = (t_stop[0] - t_stop[1]) / TCLK;
    $display("challenge %b: diff %0d (from STOP stamps %f, expected %f), race %f cycles, response %0b",
             c, diff, meas_diff, exp_diff, (t_stop[0] - t_trig) / TCLK, response);
    check(real'(diff) > meas_diff - 2.5 && real'(diff) < meas_diff + 2.5, "diff against STOP stamps");
    check(real'(diff) > exp_diff - 120.0 && real'(diff) < exp_diff + 120.0, "diff against oscillator periods");
    check(response == diff[10], "response is bit 10");
    check((t_stop[0] - t_trig) / TCLK > t[0] / TCLK - 120.0 &&
          (t_stop[0] - t_trig) / TCLK < t[0] / TCLK + 120.0, "race length of the upper path");
    d_out = diff;
  endtask

  initial begin
    logic signed [W-1:0] d0, d1, d2;
    rst_n     = 1'b0;
    start     = 1'b0;
    challenge = '0;
    insp_bit  = IW'(unbias_pkg::DEFAULT_INSP_BIT);
    #100 rst_n = 1'b1;
    measure(10'b01_1010_0111, d0);
    measure(10'b01_1010_0111, d1);
    measure(10'b10_0101_1000, d2);
    check(d0 - d1 < 150 && d1 - d0 < 150, "repeated challenge gives nearly the same difference");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #40ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
