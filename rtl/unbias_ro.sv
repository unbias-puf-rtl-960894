// unbias_ro: behavioural model of one delay-stage ring oscillator.
//
// This is a behavioural model, not synthesizable logic. On silicon the part is a
// loop of N_INV (19) inverters with no enable and no configuration; its period is
// set by the inverter and wire delays of the particular die, which is where the
// PUF's secret comes from. A combinational loop cannot be simulated cycle by cycle,
// so the model toggles osc every half period instead, with
//
//   half period = N_INV * INV_DELAY_PS * (1 + (sys + local) / 1e6)   [ps]
//
// sys   a deviation in ppm drawn from POSITION alone, uniform in +-SYS_PPM. It is the
//       same on every chip and stands for placement, routing and systematic process
//       effects: it is the bias the PUF has to be immune to.
// local a deviation in ppm drawn from POSITION and CHIP_SEED, uniform in +-LOCAL_PPM:
//       the random die-to-die variation that makes each chip unique.
// Each half period is further moved by a fresh random amount uniform in
// +-JITTER_PS, standing for measurement noise. The model starts at a random phase.
//
// The 19 inverters and the free-running loop follow the paper. The inverter delay
// (400 ps, about 66 MHz, so a 10-stage race with 50,000 counts per stage lasts about
// 7.6 ms and 120 challenges take under a second at 50 MHz), and the sizes of the
// three variation terms are this model's own choices, picked so that the spread
// of the difference register across chips is of the order of the sigma = 521
// clocks reported for the FPGA build.
module unbias_ro #(
  parameter int unsigned N_INV        = unbias_pkg::N_INV,
  parameter int unsigned INV_DELAY_PS = 400,
  parameter int unsigned POSITION     = 0,
  parameter int unsigned CHIP_SEED    = 1,
  parameter int unsigned SYS_PPM      = 30_000,
  parameter int unsigned LOCAL_PPM    = 5_300,
  parameter int unsigned JITTER_PS    = 500
) (
  output logic osc
);
  timeunit 1ps;
  timeprecision 1ps;

  // Uniform deviation in [-range, +range] ppm from a hash of key.
  function automatic longint dev_ppm(int unsigned key, int unsigned range);
    longint h;
    h = longint'(unbias_pkg::mix32(key));
    return (h % (2 * longint'(range) + 1)) - longint'(range);
  endfunction

  localparam longint NOMINAL_PS = longint'(N_INV) * longint'(INV_DELAY_PS);
  localparam longint SYS_DEV    = dev_ppm(POSITION * 32'h9E37_79B9 + 32'h1234_5678, SYS_PPM);
  localparam longint LOCAL_DEV  = dev_ppm(unbias_pkg::mix32(CHIP_SEED) ^ (POSITION * 32'h7FEB_352D),
                                          LOCAL_PPM);
  localparam longint HALF_PS    = NOMINAL_PS + (NOMINAL_PS * (SYS_DEV + LOCAL_DEV)) / 1_000_000;

  // Exposed for testbenches that compute expected race times.
  longint half_period_ps;
  assign half_period_ps = HALF_PS;

  initial begin
    int unsigned d;
    osc = 1'b0;
    #($urandom_range(int'(2 * HALF_PS)));
    forever begin
      d = int'(HALF_PS) - int'(JITTER_PS) + $urandom_range(2 * JITTER_PS);
      #(d) osc = ~osc;
    end
  end

  initial assert (HALF_PS > longint'(JITTER_PS)) else $error("unbias_ro: jitter exceeds half period");

endmodule
