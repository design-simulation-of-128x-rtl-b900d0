// interp128_tb -- end-to-end test of the 128x interpolator at its default parameters.
//
// Stimulus, 44.1 kHz samples: a 1 kHz sine at 0.9 of full scale (the kind of tone used
// to show the stages at work), random full-range samples, and a worst-case pattern
// whose signs line up with the half-band taps so that the first half-band stage must
// clip. The clock enable is dropped at random, so the cascade stalls often.
// Reference: a model written from the filter definitions only. Each half-band stage is
// a zero-insertion up-sampler followed by the full 47-tap filter (zeros included),
// rounding half up to 15 fraction bits and clipping to the stage width; the CIC is the
// zero-stuffed sequence convolved with the sinc^5 impulse response (a box of 32 ones
// convolved with itself five times); the output is its top 20 of 38 bits.
// Timing checked: exactly one output per enabled cycle and one input request every
// 128 enabled cycles; the stage outputs line up so that the CIC output after enabled
// cycle n is the reference value n - 9 (four enabled cycles through the strobe
// offsets and the two half-band output registers, five through the CIC).
// Mechanisms counted, each of which must occur: stalls, input requests, FIR-branch and
// original-sample outputs of both half-band stages, zero-stuffed CIC cycles, clipping
// in the first half-band stage. Clipping in the second stage is counted and compared
// but cannot occur: with one guard bit per stage its FIR branch stays below 3.5 of
// the 4.0 it may reach (half its taps meet first-stage original samples, |x| <= 1,
// half meet first-stage branch outputs, |x| <= 2.21; each half of the taps sums to
// about 1.1 in magnitude).
// The in-band gain is checked too: the output peak during the sine must be 0.9 of
// full scale within 0.5 %.
module interp128_tb;
  import interp_pkg::*;

  localparam int IN_W  = 16;
  localparam int OUT_W = 20;
  localparam int NS    = 200;                 // input samples
  localparam int NSIN  = 100;                 // of which the sine
  localparam int L     = 47;
  localparam int R     = 32;
  localparam int NCIC  = 5;
  localparam int GL    = NCIC * (R - 1) + 1;
  localparam int NY    = NS * 128;
  localparam int LAT   = 9;

  logic clk = 1'b0;
  logic rst, clk_enable;
  logic signed [IN_W-1:0]  filter_in;
  logic                    ce_in, ce_out;
  logic signed [OUT_W-1:0] filter_out;
  logic [1:0]              hb_sat;

  int checks = 0, failures = 0;
  longint x [NS];
  longint y1 [];
  longint y2 [];
  longint y3 [NY];
  bit     c1 [];
  bit     c2 [];
  longint g [GL];
  int     H [L];

  int nstep = 0, nin = 0;
  int n_stall = 0, n_hb1_fir = 0, n_hb1_orig = 0, n_hb2_fir = 0, n_hb2_orig = 0;
  int n_stuffed = 0, n_sat1 = 0, n_sat2 = 0, n_sat1_ref = 0, n_sat2_ref = 0;
  longint peak = 0;

  always #5 clk = ~clk;

  interp128 dut (
    .clk(clk), .rst(rst), .clk_enable(clk_enable), .filter_in(filter_in),
    .ce_in(ce_in), .filter_out(filter_out), .ce_out(ce_out), .hb_sat(hb_sat)
  );

  initial begin
    repeat (4 * NY) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference half-band stage: up-sample by 2, 47-tap filter, round, clip
  function automatic void hb_ref(input longint xin [], input int n, input int ow,
                                 ref longint yout [], ref bit clip []);
    longint acc, q, maxv, minv;
    maxv = (longint'(1) <<< (ow - 1)) - 1;
    minv = -(longint'(1) <<< (ow - 1));
    for (int m = 0; m < 2*n; m++) begin
      acc = 0;
      for (int t = 0; t < L; t++)
        if (m - t >= 0 && ((m - t) % 2) == 0) acc += longint'(H[t]) * xin[(m - t) / 2];
      q = (acc + 16384) >>> 15;
      clip[m] = (q > maxv) || (q < minv);
      yout[m] = (q > maxv) ? maxv : (q < minv) ? minv : q;
    end
  endfunction

  function automatic void make_taps();
    longint t [GL];
    // half-band taps: the odd-offset taps written out, the centre 1.0, the rest 0
    int half [12] = '{-8, 26, -66, 144, -278, 495, -832, 1348, -2156, 3543, -6558, 20726};
    for (int i = 0; i < L; i++) H[i] = 0;
    for (int i = 0; i < 12; i++) begin
      H[2*i]      = half[i];
      H[L-1-2*i]  = half[i];
    end
    H[23] = 32768;
    // sinc^5 taps
    for (int i = 0; i < GL; i++) g[i] = (i < R) ? 1 : 0;
    for (int s = 1; s < NCIC; s++) begin
      for (int i = 0; i < GL; i++) t[i] = 0;
      for (int i = 0; i < GL; i++)
        for (int j = 0; j < R; j++)
          if (i + j < GL) t[i+j] += g[i];
      for (int i = 0; i < GL; i++) g[i] = t[i];
    end
  endfunction

  function automatic void make_ref();
    y1 = new[2*NS]; c1 = new[2*NS];
    y2 = new[4*NS]; c2 = new[4*NS];
    hb_ref(x, NS, 17, y1, c1);
    hb_ref(y1, 2*NS, 18, y2, c2);
    for (int n = 0; n < NY; n++) begin
      longint acc = 0;
      for (int j = 0; j < 4*NS; j++)
        if (n - R*j >= 0 && n - R*j < GL) acc += g[n - R*j] * y2[j];
      y3[n] = acc >>> 18;
    end
    foreach (c1[i]) if (c1[i]) n_sat1_ref++;
    foreach (c2[i]) if (c2[i]) n_sat2_ref++;
  endfunction

  // one check per enabled cycle, on the outputs it produced
  always @(posedge clk) begin
    if (!rst) begin
      if (!clk_enable) n_stall++;
      if (ce_out) begin
        longint e;
        int idx;
        idx = nstep - 1 - LAT;
        e = (idx >= 0 && idx < NY) ? y3[idx] : 0;
        checks++;
        if (64'(filter_out) != e) begin
          failures++;
          if (failures < 10)
            $display("enabled cycle %0d: out %0d, expected %0d", nstep - 1, filter_out, e);
        end
        if (idx >= 0 && idx < NSIN * 128) begin
          if (64'(filter_out) > peak) peak = 64'(filter_out);
        end
      end
      if (clk_enable) begin
        // internal events, counted for coverage
        if (dut.hb1_ce) begin
          if (dut.u_hbf1.phase == PH_FIR) n_hb1_fir++; else n_hb1_orig++;
        end
        if (dut.hb2_ce) begin
          if (dut.u_hbf2.phase == PH_FIR) n_hb2_fir++; else n_hb2_orig++;
        end
        if (!dut.u_cic.pend) n_stuffed++;
        if (hb_sat[0]) n_sat1++;
        if (hb_sat[1]) n_sat2++;
        if (ce_in) begin
          checks++;
          if (nstep % 128 != 0) begin
            failures++;
            $display("input request on enabled cycle %0d", nstep);
          end
          nin++;
        end
      end
    end
  end

  initial begin
    make_taps();
    for (int k = 0; k < NS; k++) begin
      if (k < NSIN) begin
        x[k] = longint'($rtoi($floor(0.9 * 32767.0 * $sin(2.0 * 3.14159265358979 * 1000.0
                                                        * k / 44100.0) + 0.5)));
      end else if (k >= 140 && k < 188) begin
        int i;
        i = 23 - ((k - 140) % 24);
        x[k] = (H[2*i] >= 0) ? 32767 : -32768;
      end else begin
        x[k] = longint'($signed(16'($urandom)));
      end
    end
    make_ref();

    rst = 1'b1; clk_enable = 1'b0; filter_in = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    while (nstep < NY) begin
      clk_enable = ($urandom % 8 != 0);
      filter_in  = (nin < NS) ? IN_W'(x[nin]) : '0;
      @(posedge clk); #1;
      if (clk_enable) nstep++;
    end
    clk_enable = 1'b0;
    @(posedge clk); #1;

    // rates and coverage
    checks++;
    if (nin != NS) begin
      failures++;
      $display("input requests %0d", nin);
    end
    checks++;
    if (n_stall == 0 || n_hb1_fir == 0 || n_hb1_orig == 0 || n_hb2_fir == 0 ||
        n_hb2_orig == 0 || n_stuffed == 0 || n_sat1 == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    checks++;
    if (n_hb2_fir != 2 * n_hb1_fir || n_hb1_fir != nin || n_hb1_orig != nin) begin
      failures++;
      $display("stage output counts %0d/%0d %0d/%0d for %0d inputs", n_hb1_fir, n_hb1_orig,
               n_hb2_fir, n_hb2_orig, nin);
    end
    checks++;
    if (n_sat1 != n_sat1_ref || n_sat2 != n_sat2_ref) begin
      failures++;
      $display("clipping: HBF1 %0d (ref %0d), HBF2 %0d (ref %0d)", n_sat1, n_sat1_ref,
               n_sat2, n_sat2_ref);
    end
    // in-band gain: output is Q3.17, the sine peak is 0.9 * 32767 / 2^15
    checks++;
    begin
      real pk;
      pk = real'(peak) / 131072.0;
      if (pk < 0.9 * 32767.0 / 32768.0 * 0.995 || pk > 0.9 * 32767.0 / 32768.0 * 1.005) begin
        failures++;
        $display("sine peak %f", pk);
      end
      $display("sine peak at the output %f of full scale (input 0.9)", pk);
    end
    $display("enabled cycles %0d, stalled %0d, inputs %0d", nstep, n_stall, nin);
    $display("HBF1 outputs %0d FIR / %0d original, HBF2 %0d / %0d, zero-stuffed cycles %0d",
             n_hb1_fir, n_hb1_orig, n_hb2_fir, n_hb2_orig, n_stuffed);
    $display("clipped: HBF1 %0d, HBF2 %0d", n_sat1, n_sat2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
