// unbias_clock_counter: measures the arrival time of one race signal in system clocks.
//
// The counter starts counting rising edges of the system clock when the Trigger
// reaches its START input and stops when the race signal leaving the last path
// configuration reaches its STOP input. Both inputs are asynchronous to clk and
// pass an identical SYNC_STAGES-flop synchroniser, so the synchroniser latency
// cancels between START and STOP. count holds the number of cycles between the two;
// done is high once STOP has been seen. clr (synchronous, high active) returns the
// counter to zero before the next measurement.
//
// The width W is the difference register's (19 bits): the counter may wrap, because
// only the difference of the two counters modulo 2^W is used, and that is exact as
// long as the true difference fits the signed 19-bit range, the condition the paper
// states for the difference register. The start/stop behaviour follows the paper;
// the synchronisers, clear and width are this design's choices.
module unbias_clock_counter #(
  parameter int unsigned W           = unbias_pkg::DIFF_W,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         start,
  input  logic         stop,
  output logic [W-1:0] count,
  output logic         running,
  output logic         done
);

  logic start_s, stop_s;

  unbias_sync #(.STAGES(SYNC_STAGES)) u_sync_start (
    .clk(clk), .rst_n(rst_n), .d(start), .q(start_s)
  );
  unbias_sync #(.STAGES(SYNC_STAGES)) u_sync_stop (
    .clk(clk), .rst_n(rst_n), .d(stop), .q(stop_s)
  );

  assign running = start_s && !stop_s;
  assign done    = stop_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       count <= '0;
    else if (clr)     count <= '0;
    else if (running) count <= count + 1'b1;
  end

endmodule
