// tb_unbias_ctrl: checks the measurement sequencer cycle by cycle.
// The testbench plays both clock counters: it raises done_a and done_b a chosen
// number of cycles after Trigger, in either order. It checks that the challenge is
// latched on start, that the clear phase (RO counters in reset, clock counters
// cleared, Trigger low) lasts CLEAR_CYCLES cycles, that Trigger then stays high,
// that capture comes only on the cycle after both STOPs, that resp_valid is a
// one-cycle pulse right after capture, and that a start during a run is ignored.
module tb_unbias_ctrl;
  localparam int unsigned N     = 10;
  localparam int unsigned CLEAR = 4;

  logic clk = 1'b0;
  logic rst_n, start, done_a, done_b;
  logic [N-1:0] challenge, challenge_q;
  logic busy, ro_rst_n, cnt_clr, trigger, capture, resp_valid;
  unbias_pkg::ctrl_state_e state;
  int checks = 0, failures = 0;
  int ignored_starts = 0;

  always #10 clk = ~clk;

  unbias_ctrl #(.N(N), .CLEAR_CYCLES(CLEAR)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .challenge(challenge),
    .done_a(done_a), .done_b(done_b), .challenge_q(challenge_q), .busy(busy),
    .ro_rst_n(ro_rst_n), .cnt_clr(cnt_clr), .trigger(trigger), .capture(capture),
    .resp_valid(resp_valid), .state(state)
  );

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run(input int da, input int db, input logic poke_start);
    logic [N-1:0] c;
    int clear_cycles, cyc;
    c = N'($urandom);
    @(negedge clk);
    check(!busy, "idle before start");
    challenge = c;
    start     = 1'b1;
    @(negedge clk);
    start     = 1'b0;
    challenge = ~c;                     // must not reach challenge_q
    check(busy && challenge_q == c, "challenge latched on start");
    clear_cycles = 0;
    while (cnt_clr) begin
      check(!ro_rst_n && !trigger, "clear phase: RO counters reset, Trigger low");
      clear_cycles++;
      @(negedge clk);
      if (clear_cycles > 20) break;
    end
    check(clear_cycles == CLEAR, $sformatf("clear lasted %0d cycles", clear_cycles));
    check(trigger && ro_rst_n, "Trigger high after clear");
    cyc = 0;
    while (!capture) begin
      if (cyc == da) done_a = 1'b1;
      if (cyc == db) done_b = 1'b1;
      if (poke_start && cyc == 2) begin
        start = 1'b1;
        ignored_starts++;
      end else start = 1'b0;
      @(negedge clk);
      check(trigger, "Trigger held during the race");
      check(challenge_q == c, "challenge held during the race");
      cyc++;
      if (cyc > 1000) break;
    end
    start = 1'b0;
    // capture is the cycle after the later of the two STOPs was seen
    check(cyc == ((da > db ? da : db) + 1), $sformatf("capture after %0d cycles", cyc));
    check(done_a && done_b, "capture only after both STOPs");
    @(negedge clk);
    check(resp_valid && !capture, "resp_valid follows capture");
    @(negedge clk);
    check(!resp_valid && !busy, "resp_valid is one cycle, then idle");
    done_a = 1'b0;
    done_b = 1'b0;
  endtask

  initial begin
    rst_n     = 1'b0;
    start     = 1'b0;
    done_a    = 1'b0;
    done_b    = 1'b0;
    challenge = '0;
    #45 rst_n = 1'b1;
    run(5, 9, 1'b0);
    run(30, 3, 1'b1);
    run(7, 7, 1'b0);
    for (int i = 0; i < 20; i++) run($urandom_range(0, 60), $urandom_range(0, 60), i[0]);
    check(ignored_starts > 0, "a start during a run was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
