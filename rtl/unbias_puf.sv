// unbias_puf: the strong UNBIAS PUF, top level.
//
// Two race signals leave the Trigger together and each crosses N_STAGES (10)
// delay stages. A stage is a ring oscillator with its RO counter on each of the two
// paths, followed by a path configuration (2x2 switch) set by one challenge bit, so
// the challenge decides which oscillators each signal passes through. Each RO
// counter holds its signal back for RO_THRESHOLD (50,000) oscillations, which makes
// a race last milliseconds. Two clock counters, started by the Trigger and stopped
// by the race signal leaving the last switch on their path, measure the two
// arrival times in cycles of the 50 MHz system clock; the difference register keeps
// upper minus lower (19 bits) and the response is its bit at position insp_bit.
// No arbiter flip-flop decides a close race and no symmetric layout is needed:
// a routing bias only shifts the difference, and the inspection bit is chosen
// (off-chip, once per design) so that the shift does not matter.
//
// Stage k uses challenge bit k: bit 0 sets the switch after the first pair of
// oscillators, bit N_STAGES-1 the switch in front of the clock counters. race[k] is
// the pair of race signals entering stage k, index 0 the upper path.
//
// Interface: pulse start for one clk cycle with challenge and insp_bit set while busy
// is low. About N_STAGES * RO_THRESHOLD oscillator periods later resp_valid is high
// for one cycle; response and the signed difference diff then hold until the next
// measurement. insp_bit may change at any time and acts on the held difference.
//
// The structure follows the paper's figures 1 and 2. The oscillators are
// behavioural models (unbias_ro); CHIP_SEED selects which simulated die they model
// and RO_JITTER_PS their noise. The controller and the synchronisers are this
// design's own choices.
module unbias_puf #(
  parameter int unsigned N_STAGES     = unbias_pkg::N_STAGES,
  parameter int unsigned RO_THRESHOLD = unbias_pkg::RO_THRESHOLD,
  parameter int unsigned DIFF_W       = unbias_pkg::DIFF_W,
  parameter int unsigned CHIP_SEED    = 1,
  parameter int unsigned RO_JITTER_PS = 500,
  localparam int unsigned IW          = $clog2(DIFF_W)
) (
  input  logic                     clk,         // system clock (50 MHz on the FPGA build)
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [N_STAGES-1:0]      challenge,
  input  logic [IW-1:0]            insp_bit,
  output logic                     busy,
  output logic                     resp_valid,
  output logic                     response,
  output logic signed [DIFF_W-1:0] diff
);

  logic [N_STAGES-1:0] challenge_q;
  logic                ro_rst_n, cnt_clr, trigger, capture;
  logic                done_a, done_b;
  logic [DIFF_W-1:0]   cnt_a, cnt_b;
  unbias_pkg::ctrl_state_e state;  // visible to testbenches

  logic [1:0]          race    [N_STAGES+1];  // pair entering stage k; race[N_STAGES] = STOPs
  logic [1:0]          delayed [N_STAGES];    // pair leaving the RO counters of stage k
  logic [1:0]          ro_clk  [N_STAGES];

  assign race[0] = {trigger, trigger};

  for (genvar k = 0; k < N_STAGES; k++) begin : g_stage
    for (genvar r = 0; r < 2; r++) begin : g_path
      unbias_ro #(
        .POSITION (r * N_STAGES + k),
        .CHIP_SEED(CHIP_SEED),
        .JITTER_PS(RO_JITTER_PS)
      ) u_ro (
        .osc(ro_clk[k][r])
      );

      unbias_ro_counter #(
        .THRESHOLD(RO_THRESHOLD)
      ) u_ro_cnt (
        .ro_clk (ro_clk[k][r]),
        .rst_n  (ro_rst_n),
        .sig_in (race[k][r]),
        .sig_out(delayed[k][r]),
        .count  ()
      );
    end

    unbias_path_switch u_switch (
      .c  (challenge_q[k]),
      .in (delayed[k]),
      .out(race[k+1])
    );
  end

  unbias_clock_counter #(.W(DIFF_W)) u_cnt_a (
    .clk(clk), .rst_n(rst_n), .clr(cnt_clr),
    .start(trigger), .stop(race[N_STAGES][0]),
    .count(cnt_a), .running(), .done(done_a)
  );

  unbias_clock_counter #(.W(DIFF_W)) u_cnt_b (
    .clk(clk), .rst_n(rst_n), .clr(cnt_clr),
    .start(trigger), .stop(race[N_STAGES][1]),
    .count(cnt_b), .running(), .done(done_b)
  );

  unbias_diff_reg #(.W(DIFF_W)) u_diff (
    .clk(clk), .rst_n(rst_n), .capture(capture),
    .cnt_a(cnt_a), .cnt_b(cnt_b), .insp_bit(insp_bit),
    .diff(diff), .response(response)
  );

  unbias_ctrl #(.N(N_STAGES)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .challenge(challenge),
    .done_a(done_a), .done_b(done_b), .challenge_q(challenge_q),
    .busy(busy), .ro_rst_n(ro_rst_n), .cnt_clr(cnt_clr), .trigger(trigger),
    .capture(capture), .resp_valid(resp_valid), .state(state)
  );

endmodule
