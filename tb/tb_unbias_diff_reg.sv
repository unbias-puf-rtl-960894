// tb_unbias_diff_reg: checks the difference register and the response extraction.
// Random counter pairs (including pairs whose counters wrapped) are captured; the
// held value must be the signed difference cnt_a - cnt_b worked out in 64-bit
// integers and reduced to 19 bits, and the response must be bit insp_bit of it for
// every inspection bit, or the sign bit for an index beyond the MSB. It also checks
// that the register holds while capture is low.
module tb_unbias_diff_reg;
  localparam int unsigned W  = 19;
  localparam int unsigned IW = $clog2(W);

  logic clk = 1'b0;
  logic rst_n, capture, response;
  logic [W-1:0] cnt_a, cnt_b;
  logic [IW-1:0] insp_bit;
  logic signed [W-1:0] diff;
  int checks = 0, failures = 0;

  always #10 clk = ~clk;

  unbias_diff_reg #(.W(W)) dut (
    .clk(clk), .rst_n(rst_n), .capture(capture), .cnt_a(cnt_a), .cnt_b(cnt_b),
    .insp_bit(insp_bit), .diff(diff), .response(response)
  );

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    longint a, b, d, dmod;
    logic exp_bit;
    rst_n    = 1'b0;
    capture  = 1'b0;
    cnt_a    = '0;
    cnt_b    = '0;
    insp_bit = '0;
    #25 rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      // a biased race: b near a, sometimes far, sometimes wrapped
      a = longint'($urandom_range(0, 400_000));
      case (t % 4)
        0: b = a + longint'($urandom_range(0, 4000)) - 2000;
        1: b = a - 3000 - longint'($urandom_range(0, 600));
        2: b = longint'($urandom_range(0, 400_000));
        default: b = a + longint'($urandom_range(0, 100_000));
      endcase
      if (b < 0) b = 0;
      d = a - b;                                  // true difference
      dmod = d & ((64'd1 << W) - 1);              // as 19-bit two's complement
      @(negedge clk);
      cnt_a   = W'(a);                            // counters wrap modulo 2^W
      cnt_b   = W'(b);
      capture = 1'b1;
      @(negedge clk);
      capture = 1'b0;
      check(longint'(diff) == ((dmod >= (64'd1 << (W-1))) ? dmod - (64'd1 << W) : dmod),
            $sformatf("diff %0d, expected %0d", diff, d));
      for (int i = 0; i < (1 << IW); i++) begin
        insp_bit = IW'(i);
        #1;
        exp_bit = (i < W) ? dmod[i] : dmod[W-1];
        check(response == exp_bit, $sformatf("bit %0d of %0d: %0b", i, d, response));
      end
      // the register holds while capture is low
      cnt_a = ~cnt_a;
      @(negedge clk);
      check(W'(diff) == W'(dmod), "diff holds without capture");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
