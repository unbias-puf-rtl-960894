// unbias_sync: multi-flop synchroniser for one asynchronous level.
//
// The race signals of the PUF travel between unrelated clock domains (one per ring
// oscillator, plus the system clock). Each receiver samples them through this chain
// of STAGES flip-flops, so a level change at d appears at q STAGES rising edges of
// clk later (STAGES-1 or STAGES, depending on where in the clock period d changed).
// The fixed latency is the same on both racing paths and cancels in the
// difference register. The asynchronous reset clears the chain to 0. The paper
// does not say how its counters sample the race signals; the synchroniser is this
// design's choice.
module unbias_sync #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);

  logic [STAGES-1:0] ff;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ff <= '0;
    else        ff <= {ff[STAGES-2:0], d};
  end

  assign q = ff[STAGES-1];

  initial assert (STAGES >= 2) else $error("unbias_sync: STAGES must be at least 2");

endmodule
