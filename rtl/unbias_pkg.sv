// unbias_pkg: constants and types shared by the UNBIAS PUF modules.
//
// The sizes are those of the FPGA build of the design: ten path configurations
// (a 10-bit challenge), ring-oscillator counters that release the race signal after
// 50,000 oscillations, 19-inverter ring oscillators, a 19-bit difference register
// and a 50 MHz system clock. Inspection bit 10 is the one the enrolment procedure
// picked on that build. The controller's state encoding and the hash used by the
// ring-oscillator model to draw its delay variation are this design's own.
package unbias_pkg;

  localparam int unsigned N_STAGES         = 10;      // path configurations = challenge bits
  localparam int unsigned RO_THRESHOLD     = 50_000;  // RO counts before the signal moves on
  localparam int unsigned N_INV            = 19;      // inverters per ring oscillator
  localparam int unsigned DIFF_W           = 19;      // difference register width
  localparam int unsigned INSP_W           = $clog2(DIFF_W);
  localparam int unsigned DEFAULT_INSP_BIT = 10;
  localparam int unsigned CLK_PERIOD_PS    = 20_000;  // 50 MHz system clock

  // Measurement controller states.
  typedef enum logic [2:0] {
    ST_IDLE    = 3'd0,  // waiting for a challenge
    ST_CLEAR   = 3'd1,  // counters held in reset, Trigger low
    ST_RUN     = 3'd2,  // Trigger high, race in flight
    ST_CAPTURE = 3'd3,  // both STOPs seen: load the difference register
    ST_DONE    = 3'd4   // response valid for one cycle
  } ctrl_state_e;

  // 32-bit integer mixer (murmur3 finaliser). Used only by the ring-oscillator
  // model to turn a position and a chip seed into a repeatable pseudo-random
  // delay deviation.
  function automatic int unsigned mix32(int unsigned x);
    int unsigned h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    return h;
  endfunction

endpackage
