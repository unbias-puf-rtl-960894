// unbias_diff_reg: difference register and response extraction.
//
// On capture the register loads cnt_a - cnt_b, the arrival time of the upper race
// signal minus that of the lower one in system clocks, as a W-bit two's-complement
// number (range -2^(W-1) .. 2^(W-1)-1). The one-bit response is the bit of that
// value at position insp_bit, the public inspection bit. Reading bit i divides the
// number line into alternating bins of width 2^i (bit = 0, bit = 1), so a delay
// difference that is biased by routing still lands in either bin with nearly
// equal probability across chips when 2^i is small against the chip-to-chip spread,
// while repeated measurements on one chip stay in one bin when 2^i is large against
// the noise. With insp_bit = W-1 the response is the sign (the arbiter-PUF answer).
//
// Timing: diff and response change on the clock edge on which capture is high and
// then hold. The subtraction and bit selection follow the paper; the order of the
// subtraction (upper minus lower) and treating an insp_bit beyond the MSB as the
// MSB are this design's choices.
module unbias_diff_reg #(
  parameter int unsigned W  = unbias_pkg::DIFF_W,
  localparam int unsigned IW = $clog2(W)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                capture,
  input  logic [W-1:0]        cnt_a,
  input  logic [W-1:0]        cnt_b,
  input  logic [IW-1:0]       insp_bit,
  output logic signed [W-1:0] diff,
  output logic                response
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       diff <= '0;
    else if (capture) diff <= cnt_a - cnt_b;
  end

  always_comb begin
    if (32'(insp_bit) < W) response = diff[insp_bit];
    else                   response = diff[W-1];
  end

endmodule
