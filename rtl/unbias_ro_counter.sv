// unbias_ro_counter: the counter that turns a ring oscillator into a long delay.
//
// Each delay stage of the PUF is a ring oscillator and this counter, clocked by the
// oscillator. The counter idles until the race signal from the previous path
// configuration (sig_in) arrives, then counts oscillator periods; on the
// THRESHOLD-th counted rising edge it raises sig_out, which is the race signal for
// the next path configuration, and stops. sig_out stays high until rst_n clears
// the counter for the next measurement. The delay of a stage is therefore about
// THRESHOLD oscillator periods, so a small difference in oscillator frequency
// becomes a large difference in arrival time.
//
// Timing: sig_in passes a SYNC_STAGES-flop synchroniser in the oscillator domain,
// so sig_out rises SYNC_STAGES + THRESHOLD rising edges of ro_clk after sig_in
// rises (one fewer when sig_in changes just before an edge). The counting and the
// threshold of 50,000 follow the paper; the synchroniser, the level-style
// handshake and the reset are this design's choices.
module unbias_ro_counter #(
  parameter int unsigned THRESHOLD   = unbias_pkg::RO_THRESHOLD,
  parameter int unsigned SYNC_STAGES = 2,
  localparam int unsigned CW         = $clog2(THRESHOLD + 1)
) (
  input  logic          ro_clk,
  input  logic          rst_n,
  input  logic          sig_in,
  output logic          sig_out,
  output logic [CW-1:0] count
);

  logic in_s;
  logic fired;

  unbias_sync #(.STAGES(SYNC_STAGES)) u_sync (
    .clk  (ro_clk),
    .rst_n(rst_n),
    .d    (sig_in),
    .q    (in_s)
  );

  always_ff @(posedge ro_clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      fired <= 1'b0;
    end else if (in_s && !fired) begin
      count <= count + 1'b1;
      if (count == CW'(THRESHOLD - 1)) fired <= 1'b1;
    end
  end

  assign sig_out = fired;

  initial assert (THRESHOLD >= 1) else $error("unbias_ro_counter: THRESHOLD must be at least 1");

endmodule
