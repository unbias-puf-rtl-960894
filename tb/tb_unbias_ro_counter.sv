// tb_unbias_ro_counter: checks the RO counter at the paper's threshold of 50,000.
// The testbench drives the oscillator clock itself, raises sig_in on a falling
// edge and counts rising edges until sig_out rises: that must be exactly
// SYNC_STAGES + THRESHOLD. It also checks that sig_out stays low before, stays high
// after (the counter stops at THRESHOLD), and that reset clears the counter.
module tb_unbias_ro_counter;
  localparam int unsigned THRESHOLD = 50_000;
  localparam int unsigned SYNC      = 2;

  logic ro_clk = 1'b0;
  logic rst_n, sig_in, sig_out;
  logic [$clog2(THRESHOLD+1)-1:0] count;
  int checks = 0, failures = 0;

  always #3.7 ro_clk = ~ro_clk;

  unbias_ro_counter #(.THRESHOLD(THRESHOLD), .SYNC_STAGES(SYNC)) dut (
    .ro_clk(ro_clk), .rst_n(rst_n), .sig_in(sig_in), .sig_out(sig_out), .count(count)
  );

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    int edges;
    rst_n  = 1'b0;
    sig_in = 1'b0;
    #20 rst_n = 1'b1;
    for (int run = 0; run < 3; run++) begin
      // idle for a while: nothing may count
      repeat (50 + run * 13) @(negedge ro_clk);
      check(count == 0 && !sig_out, "counter idle before sig_in");
      sig_in = 1'b1;
      edges  = 0;
      while (!sig_out) begin
        @(posedge ro_clk);
        edges++;
        #0.1;
        if (edges > THRESHOLD + 10) break;
      end
      check(edges == THRESHOLD + SYNC,
            $sformatf("run %0d: sig_out after %0d edges, expected %0d", run, edges, THRESHOLD + SYNC));
      check(count == THRESHOLD, $sformatf("count %0d at release", count));
      repeat (100) @(posedge ro_clk);
      #0.1;
      check(sig_out && count == THRESHOLD, "counter holds after release");
      // clear for the next run
      @(negedge ro_clk);
      sig_in = 1'b0;
      rst_n  = 1'b0;
      #1;
      check(!sig_out && count == 0, "reset clears the counter");
      @(negedge ro_clk);
      rst_n = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
