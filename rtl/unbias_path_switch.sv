// unbias_path_switch: one path configuration of the UNBIAS PUF.
//
// A 2x2 switch between two delay stages, set by one challenge bit. With c = 0 the
// upper race signal continues on the upper path and the lower on the lower path;
// with c = 1 the two are crossed. in[0] and out[0] are the upper path. The switch is
// purely combinational; the challenge is held stable by the controller for the whole
// measurement. The paper shows the switch as a crossed box driven by the challenge
// bit; which value of the bit crosses the paths is this design's choice.
module unbias_path_switch (
  input  logic       c,
  input  logic [1:0] in,
  output logic [1:0] out
);

  always_comb begin
    if (c) out = {in[0], in[1]};
    else   out = in;
  end

endmodule
