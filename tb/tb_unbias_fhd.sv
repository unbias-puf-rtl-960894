// tb_unbias_fhd: uniqueness and reliability experiment on seven simulated chips.
//
// Seven PUFs that differ only in CHIP_SEED (the die they model) receive the same
// challenges, each T = 10 times, and the testbench evaluates, for every inspection
// bit, two figures:
//   intra-FHD  the predicted intra-chip fractional Hamming distance of each
//              challenge, n_one * n_zero / C(T,2) over its T responses, averaged
//              over challenges and chips;
//   inter-FHD  the fraction of chip pairs whose first responses differ, averaged
//              over challenges;
//   predicted  the lower bound of the inter-FHD for bin width w = 2^i: with the
//              chip-to-chip spread taken as normal with standard deviation sigma
//              (the median over challenges of the spread of the seven chips), and
//              its mean in the middle of a bin (the worst case),
//              A1 = sum_n Phi((2nw + w/2)/sigma) - Phi((2nw - w/2)/sigma),
//              R = A1 / (1 - A1), bound = 2R / (1 + R)^2.
// To keep the run short the RO counters release after 781 oscillations instead of
// 50,000 (1/64), at the real 50 MHz clock. Every delay difference then shrinks by
// 64, i.e. by six bit positions: bit i here plays the role of bit i+6 of the
// full-size design (bit 4 here is the full design's bit 10). The oscillator jitter
// is set so that the accumulated noise also shrinks by about 64, but the +-1-cycle
// quantisation of the clock counters does not shrink, so the lowest bits are
// noisier than a full-size run would show. Fewer challenges are used than the 120
// of the FPGA experiment (CHALLENGES below).
//
// Checks (besides the predicted bound, which must not exceed the measured
// inter-FHD by more than 15 points): each response is bit 4 of its difference; the bit that stands for the
// full design's bit 16 gives a low inter-FHD (the delay paths are biased); some
// low bit gives an inter-FHD near 50%; intra-FHD grows towards the LSB; the bit
// standing for bit 10 has a low intra-FHD. A watchdog counts a failure if the
// measurements do not finish.
module tb_unbias_fhd;
  localparam int unsigned CHIPS      = 7;
  localparam int unsigned CHALLENGES = 4;
  localparam int unsigned T          = 10;
  localparam int unsigned N          = 10;
  localparam int unsigned W          = 19;
  localparam int unsigned IW         = $clog2(W);
  localparam int unsigned THR        = 781;   // 50,000 / 64
  localparam int unsigned JITTER     = 62;    // ps: 500 ps / 8, noise shrinks by 64
  localparam int unsigned SHIFT      = 6;     // log2(64): bit i here = bit i+6 at full size
  localparam int unsigned INSP       = 10 - SHIFT;

  logic clk = 1'b0;
  logic rst_n, start;
  logic [N-1:0] challenge;
  logic [CHIPS-1:0] busy, resp_valid, response;
  logic signed [W-1:0] diff [CHIPS];
  int checks = 0, failures = 0;

  always #10 clk = ~clk;   // 50 MHz

  for (genvar c = 0; c < CHIPS; c++) begin : g_chip
    unbias_puf #(
      .N_STAGES(N), .RO_THRESHOLD(THR), .DIFF_W(W), .CHIP_SEED(c + 1), .RO_JITTER_PS(JITTER)
    ) u_puf (
      .clk(clk), .rst_n(rst_n), .start(start), .challenge(challenge),
      .insp_bit(IW'(INSP)), .busy(busy[c]), .resp_valid(resp_valid[c]),
      .response(response[c]), .diff(diff[c])
    );
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Standard normal CDF, from the Abramowitz-Stegun 7.1.26 approximation of erf.
  function automatic real phi(input real x);
    real z, t, y;
    z = (x < 0.0 ? -x : x) / $sqrt(2.0);
    t = 1.0 / (1.0 + 0.3275911 * z);
    y = 1.0 - (((((1.061405429 * t - 1.453152027) * t) + 1.421413741) * t - 0.284496736) * t
               + 0.254829592) * t * $exp(-z * z);
    return (x < 0.0) ? 0.5 * (1.0 - y) : 0.5 * (1.0 + y);
  endfunction

  // Worst-case (mean in the middle of a bin) inter-FHD for bin width w.
  function automatic real inter_bound(input real w, input real sigma);
    real a1, r;
    int  nmax;
    a1 = 0.0;
    nmax = int'(8.0 * sigma / w) + 2;
    for (int n = -nmax; n <= nmax; n++)
      a1 += phi((2.0 * n * w + 0.5 * w) / sigma) - phi((2.0 * n * w - 0.5 * w) / sigma);
    if (a1 >= 1.0) return 0.0;
    r = a1 / (1.0 - a1);
    return 2.0 * r / ((1.0 + r) * (1.0 + r));
  endfunction

  int d [CHIPS][CHALLENGES][T];
  real pred [0:10];
  real sigma;
  real intra [0:10], inter [0:10];

  initial begin
    logic [N-1:0] chal [CHALLENGES];
    logic [CHIPS-1:0] got;
    int n1, pairs, differ;
    real s;
    rst_n = 1'b0;
    start = 1'b0;
    challenge = '0;
    for (int k = 0; k < CHALLENGES; k++) chal[k] = N'($urandom);
    #1000 rst_n = 1'b1;
    for (int k = 0; k < CHALLENGES; k++) begin
      for (int m = 0; m < T; m++) begin
        @(negedge clk);
        challenge = chal[k];
        start = 1'b1;
        @(negedge clk);
        start = 1'b0;
        got = '0;
        while (got != '1) begin
          @(negedge clk);
          for (int c = 0; c < CHIPS; c++) if (resp_valid[c]) begin
            got[c] = 1'b1;
            d[c][k][m] = int'(diff[c]);
            check(response[c] == diff[c][INSP], "response is the inspection bit of the difference");
          end
        end
      end
    end
    // chip-to-chip sigma: median over challenges of the spread of first measurements
    begin
      real sd [CHALLENGES];
      real mu, v, tmp;
      for (int k = 0; k < CHALLENGES; k++) begin
        mu = 0.0;
        for (int c = 0; c < CHIPS; c++) mu += real'(d[c][k][0]);
        mu /= real'(CHIPS);
        v = 0.0;
        for (int c = 0; c < CHIPS; c++) v += (real'(d[c][k][0]) - mu) ** 2;
        sd[k] = $sqrt(v / real'(CHIPS - 1));
      end
      for (int a = 0; a < CHALLENGES; a++)
        for (int b = a + 1; b < CHALLENGES; b++)
          if (sd[b] < sd[a]) begin
            tmp = sd[a]; sd[a] = sd[b]; sd[b] = tmp;
          end
      sigma = (CHALLENGES % 2 == 1) ? sd[CHALLENGES / 2]
                                    : 0.5 * (sd[CHALLENGES / 2 - 1] + sd[CHALLENGES / 2]);
      $display("chip-to-chip sigma (median over challenges): %0.1f cycles", sigma);
    end
    // statistics per inspection bit
    for (int i = 10; i >= 0; i--) begin
      s = 0.0;
      for (int c = 0; c < CHIPS; c++)
        for (int k = 0; k < CHALLENGES; k++) begin
          n1 = 0;
          for (int m = 0; m < T; m++) n1 += (d[c][k][m] >> i) & 1;
          s += real'(n1 * (T - n1)) / real'(T * (T - 1) / 2);
        end
      intra[i] = s / real'(CHIPS * CHALLENGES);
      pairs  = 0;
      differ = 0;
      for (int k = 0; k < CHALLENGES; k++)
        for (int a = 0; a < CHIPS; a++)
          for (int b = a + 1; b < CHIPS; b++) begin
            pairs++;
            differ += ((d[a][k][0] >> i) & 1) ^ ((d[b][k][0] >> i) & 1);
          end
      inter[i] = real'(differ) / real'(pairs);
      pred[i]  = inter_bound(real'(1 << i), sigma);
      $display("bit %2d (full-size bit %2d)  bin width %5d  intra-FHD %5.1f%%  inter-FHD %5.1f%%  predicted >= %5.1f%%",
               i, i + SHIFT, 1 << i, 100.0 * intra[i], 100.0 * inter[i], 100.0 * pred[i]);
      check(pred[i] <= inter[i] + 0.15,
            $sformatf("bit %0d: predicted bound %f far above measured %f", i, pred[i], inter[i]));
    end
    begin
      real best_inter;
      best_inter = 0.0;
      for (int i = 0; i <= 4; i++) if (inter[i] > best_inter) best_inter = inter[i];
      check(inter[10] < 0.30, "full-size bit 16: inter-FHD low, the paths are biased");
      check(best_inter > 0.35, "a low inspection bit brings inter-FHD near 50%");
      check(intra[0] > intra[6], "intra-FHD grows towards the LSB");
      check(intra[INSP] < 0.20, "full-size bit 10: low intra-FHD");
      check(pred[10] < 0.05 && pred[0] > 0.45, "bound rises from 0 to 50% as the bins narrow");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2 * CHALLENGES * T * 125us);   // a race lasts about 120 us
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
