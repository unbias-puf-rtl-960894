// tb_unbias_clock_counter: checks that the clock counter measures START-to-STOP in
// system clock cycles. START and STOP are raised between clock edges (as the
// asynchronous race signals are) a known number of cycles apart; the count must be
// that number exactly, since both go through the same synchroniser. It also checks
// done, that counting stops at STOP, clear, and wrap-around of the 19-bit counter.
module tb_unbias_clock_counter;
  localparam int unsigned W = 19;

  logic clk = 1'b0;
  logic rst_n, clr, start, stop, running, done;
  logic [W-1:0] count;
  int checks = 0, failures = 0;

  always #10 clk = ~clk;  // 50 MHz

  unbias_clock_counter #(.W(W)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .start(start), .stop(stop),
    .count(count), .running(running), .done(done)
  );

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic measure(input int unsigned n);
    logic [W-1:0] expected;
    @(posedge clk) clr <= 1'b1;
    @(posedge clk) clr <= 1'b0;
    start = 1'b0;
    stop  = 1'b0;
    repeat (3) @(posedge clk);
    #3 start = 1'b1;               // between edges
    repeat (n) @(posedge clk);
    #7 stop = 1'b1;                // n cycles after start
    repeat (4) @(posedge clk);
    #1;
    expected = W'(n);
    check(done, "done after STOP");
    check(!running, "not running after STOP");
    check(count == expected, $sformatf("n=%0d: count %0d, expected %0d", n, count, expected));
    repeat (20) @(posedge clk);
    #1;
    check(count == expected, "count holds after STOP");
    start = 1'b0;
    stop  = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0;
    clr   = 1'b0;
    start = 1'b0;
    stop  = 1'b0;
    #45 rst_n = 1'b1;
    measure(1);
    measure(17);
    measure(1000);
    measure($urandom_range(5000, 20000));
    measure((1 << W) + 123);       // wraps: only the value modulo 2^W is kept
    // clear returns the count to zero
    @(posedge clk) clr <= 1'b1;
    @(posedge clk) clr <= 1'b0;
    #1 check(count == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
