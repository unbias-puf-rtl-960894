// tb_unbias_puf: end-to-end test of the UNBIAS PUF at a reduced RO threshold.
//
// The PUF is built with 10 stages and the 19-bit difference register as on the FPGA
// build, but RO counters that release after 3,000 instead of 50,000 oscillations
// and noise-free oscillators, so that a race lasts about 0.46 ms of simulated time.
// For every challenge the testbench works out the expected race independently of
// the design: it follows both race signals through the stages, adding
// (THRESHOLD + 1.5) periods of the oscillator on the row each signal is on and
// swapping rows where the challenge bit is 1, and compares the expected arrival
// times and their difference in clock cycles with the design's difference
// register. It also time-stamps the two STOP signals and checks the difference
// register against them to within the synchroniser's +-2 cycles, checks that the
// response is the chosen inspection bit of the difference, and checks the latency
// from Trigger to resp_valid. It counts how often each mechanism occurred: a
// straight and a crossed path configuration, positive and negative differences,
// responses of 0 and 1, and a start request ignored while busy.
module tb_unbias_puf;
  localparam int unsigned N      = 10;
  localparam int unsigned THR    = 3_000;
  localparam int unsigned W      = 19;
  localparam int unsigned IW     = $clog2(W);
  localparam real         TCLK   = 20.0;   // ns, 50 MHz
  localparam int          NMEAS  = 24;

  logic clk = 1'b0;
  logic rst_n, start, busy, resp_valid, response;
  logic [N-1:0] challenge;
  logic [IW-1:0] insp_bit;
  logic signed [W-1:0] diff;
  int checks = 0, failures = 0;
  int n_straight = 0, n_crossed = 0, n_pos = 0, n_neg = 0, n_r0 = 0, n_r1 = 0, n_ignored = 0;

  always #(TCLK / 2) clk = ~clk;

  unbias_puf #(
    .N_STAGES(N), .RO_THRESHOLD(THR), .DIFF_W(W), .CHIP_SEED(5), .RO_JITTER_PS(0)
  ) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .challenge(challenge), .insp_bit(insp_bit),
    .busy(busy), .resp_valid(resp_valid), .response(response), .diff(diff)
  );

  // Oscillator half periods (ps), read from the models.
  longint hp [N][2];
  for (genvar k = 0; k < N; k++) begin : g_hp
    for (genvar r = 0; r < 2; r++) begin : g_r
      assign hp[k][r] = dut.g_stage[k].g_path[r].u_ro.half_period_ps;
    end
  end

  // Time stamps of Trigger and the two STOPs.
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

  task automatic measure(input logic [N-1:0] c, input logic [IW-1:0] ib, input logic poke);
    real    t [2];    // expected arrival (ns) of the signal currently on each row
    real    tmp, exp_diff, meas_diff;
    int     cycles;
    for (int k = 0; k < N; k++) begin
      for (int r = 0; r < 2; r++) t[r] += 0.0;
    end
    t[0] = 0.0;
    t[1] = 0.0;
    for (int k = 0; k < N; k++) begin
      for (int r = 0; r < 2; r++) t[r] += (THR + 1.5) * 2.0 * real'(hp[k][r]) / 1000.0;
      if (c[k]) begin
        tmp  = t[0];
        t[0] = t[1];
        t[1] = tmp;
        n_crossed++;
      end else n_straight++;
    end
    exp_diff = (t[0] - t[1]) / TCLK;

    @(negedge clk);
    challenge = c;
    insp_bit  = ib;
    start     = 1'b1;
    @(negedge clk);
    start  = 1'b0;
    cycles = 0;
    while (!resp_valid) begin
      @(negedge clk);
      cycles++;
      if (poke && cycles == 100) begin
        start     = 1'b1;     // must be ignored: busy
        challenge = ~c;
        n_ignored++;
      end else start = 1'b0;
      if (cycles > 2 * THR * N) break;
    end
    start = 1'b0;
    meas_diff = (t_stop[0] - t_stop[1]) / TCLK;
    check(resp_valid, "resp_valid arrives");
    check(real'(diff) > meas_diff - 2.5 && real'(diff) < meas_diff + 2.5,
          $sformatf("diff %0d, STOP time stamps give %f", diff, meas_diff));
    check(real'(diff) > exp_diff - 12.0 && real'(diff) < exp_diff + 12.0,
          $sformatf("c=%b: diff %0d, expected from the oscillators %f", c, diff, exp_diff));
    check(response == diff[ib], "response is the inspection bit");
    // latency: Trigger to resp_valid is the later STOP plus synchroniser and two states
    tmp = ((t_stop[0] > t_stop[1] ? t_stop[0] : t_stop[1]) - t_trig) / TCLK;
    check(real'($realtime - t_trig) / TCLK < tmp + 7.0 &&
          real'($realtime - t_trig) / TCLK > tmp + 1.0,
          $sformatf("latency %f cycles after the last STOP", real'($realtime - t_trig) / TCLK - tmp));
    if (diff > 0) n_pos++;
    if (diff < 0) n_neg++;
    if (response) n_r1++; else n_r0++;
  endtask

  initial begin
    rst_n     = 1'b0;
    start     = 1'b0;
    challenge = '0;
    insp_bit  = IW'(4);
    #100 rst_n = 1'b1;
    measure('0, IW'(4), 1'b0);
    measure('1, IW'(18), 1'b1);
    measure(10'b10_1010_1010, IW'(3), 1'b0);
    for (int i = 3; i < NMEAS; i++) measure(N'($urandom), IW'($urandom_range(0, W - 1)), i[0]);
    $display("mechanisms: straight=%0d crossed=%0d diff>0=%0d diff<0=%0d resp0=%0d resp1=%0d ignored_start=%0d",
             n_straight, n_crossed, n_pos, n_neg, n_r0, n_r1, n_ignored);
    check(n_straight > 0, "a straight path configuration occurred");
    check(n_crossed > 0, "a crossed path configuration occurred");
    check(n_pos > 0, "a positive difference occurred");
    check(n_neg > 0, "a negative difference occurred");
    check(n_r0 > 0 && n_r1 > 0, "both response values occurred");
    check(n_ignored > 0, "a start while busy occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(NMEAS * 0.6ms);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
