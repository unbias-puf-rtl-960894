// tb_unbias_path_switch: exhaustive check of the 2x2 path configuration switch.
// All eight combinations of challenge bit and input pair are applied; with c = 0 the
// pair must pass straight, with c = 1 crossed.
module tb_unbias_path_switch;
  logic c;
  logic [1:0] in, out, exp;
  int checks = 0, failures = 0;

  unbias_path_switch dut (.c(c), .in(in), .out(out));

  initial begin
    for (int i = 0; i < 8; i++) begin
      c  = i[2];
      in = i[1:0];
      #1;
      exp = c ? {in[0], in[1]} : in;
      checks++;
      if (out !== exp) begin
        failures++;
        $display("FAIL c=%0b in=%b out=%b expected %b", c, in, out, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
