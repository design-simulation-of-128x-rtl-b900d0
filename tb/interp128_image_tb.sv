// interp128_image_tb -- pass-band gain and image rejection of the 128x interpolator,
// measured on its output.
//
// Two tones at half of full scale, 1 kHz and 17 kHz (near the top of the pass band),
// are sampled at 44.1 kHz and interpolated to 5.6448 MHz, one after the other with a
// reset in between. After a warm-up of 64 input samples, 441 input periods (56448
// output samples, a whole number of tone periods) are analysed with a single-bin DFT
// at the tone and at every image k fs - f0 and k fs + f0, k = 1 .. 63, up to half the
// output rate. All these frequencies are multiples of fs/441, so the bins do not leak
// into one another and no window is needed.
// Pass criteria, from the stage specification the design follows:
//   tone gain equal to the CIC droop [sin(pi f R/F)/(R sin(pi f/F))]^5 (R = 32,
//   F = 128 fs) within 0.01 dB; the half-band pass-band ripple is below 0.001 dB;
//   images the half-band stages must remove (k not a multiple of 4) at least 80 dB
//   below the tone;
//   images around multiples of 4 fs, which only the CIC (sinc^5) removes, at least
//   65 dB below the tone.
// Runs at the default parameters with the clock enable held high.
module interp128_image_tb;
  localparam int    IN_W  = 16;
  localparam int    OUT_W = 20;
  localparam int    NWARM = 64;
  localparam int    NPER  = 441;              // input samples analysed
  localparam int    NOUT  = NPER * 128;
  localparam int    KMAX  = 63;
  localparam int    NF    = 2 * KMAX + 1;
  localparam real   FS    = 44100.0;
  localparam real   AMP   = 0.5;
  localparam real   PI    = 3.14159265358979323846;

  logic clk;
  logic rst, clk_enable;
  logic signed [IN_W-1:0]  filter_in;
  logic                    ce_in, ce_out;
  logic signed [OUT_W-1:0] filter_out;
  logic [1:0]              hb_sat;

  int  checks, failures;
  int  nstep, nacc, nsat;
  bit  measuring;
  // DFT bins: index 0 is the tone, 2k-1 is k fs - f0, 2k is k fs + f0
  real fre [NF];
  real acc_c [NF];
  real acc_s [NF];

  initial clk = 1'b0;
  always #5 clk = ~clk;

  interp128 dut (
    .clk(clk), .rst(rst), .clk_enable(clk_enable), .filter_in(filter_in),
    .ce_in(ce_in), .filter_out(filter_out), .ce_out(ce_out), .hb_sat(hb_sat)
  );

  initial begin
    repeat (2 * ((NWARM + NPER + 4) * 128 + 100)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // accumulate the outputs of NOUT consecutive enabled cycles after the warm-up
  always @(posedge clk) begin
    if (!rst && measuring && ce_out && nacc < NOUT) begin
      real y, t;
      y = real'(filter_out) / 131072.0;        // Q3.17
      t = real'(nacc) / (FS * 128.0);
      for (int i = 0; i < NF; i++) begin
        acc_c[i] += y * $cos(2.0 * PI * fre[i] * t);
        acc_s[i] += y * $sin(2.0 * PI * fre[i] * t);
      end
      nacc++;
    end
    if (!rst && (hb_sat != 2'b00)) nsat++;
  end

  function automatic int tone(real f0, int k);
    return $rtoi($floor(AMP * 32767.0 * $sin(2.0 * PI * f0 * k / FS) + 0.5));
  endfunction

  function automatic real cic_droop_db(real f0);
    real a, b;
    a = $sin(PI * f0 * 32.0 / (FS * 128.0));
    b = 32.0 * $sin(PI * f0 / (FS * 128.0));
    return 5.0 * 20.0 * $log10(a / b);
  endfunction

  task automatic run_tone(input real f0);
    int  nin;
    real mag0, db, want, worst_hb, worst_cic, f_hb, f_cic;
    fre[0] = f0;
    for (int k = 1; k <= KMAX; k++) begin
      fre[2*k-1] = k * FS - f0;
      fre[2*k]   = k * FS + f0;
    end
    for (int i = 0; i < NF; i++) begin
      acc_c[i] = 0.0;
      acc_s[i] = 0.0;
    end
    nin = 0; nstep = 0; nacc = 0; measuring = 1'b0;
    rst = 1'b1; clk_enable = 1'b0; filter_in = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    clk_enable = 1'b1;
    filter_in = IN_W'(tone(f0, 0));
    #1;
    while (nacc < NOUT) begin
      // the design requests a sample on enabled cycles 0, 128, 256, ...
      if (ce_in != (nstep % 128 == 0)) begin
        failures++;
        $display("input request misplaced on enabled cycle %0d", nstep);
      end
      @(posedge clk); #1;
      nstep++;
      if (nstep % 128 == 0) begin
        nin++;
        filter_in = IN_W'(tone(f0, nin));
      end
      if (nstep == NWARM * 128) measuring = 1'b1;
    end
    measuring = 1'b0;
    checks++;    // the request pattern above

    mag0 = 2.0 * $sqrt(acc_c[0] ** 2 + acc_s[0] ** 2) / NOUT;
    db   = 20.0 * $log10(mag0 / (AMP * 32767.0 / 32768.0));
    want = cic_droop_db(f0);
    checks++;
    if (db > want + 0.01 || db < want - 0.01) begin
      failures++;
      $display("tone gain wrong");
    end
    $display("tone %0.0f Hz: gain %f dB, CIC droop alone %f dB", f0, db, want);
    worst_hb = -400.0; worst_cic = -400.0; f_hb = 0.0; f_cic = 0.0;
    for (int i = 1; i < NF; i++) begin
      int  k;
      real m;
      k  = (i + 1) / 2;
      m  = 2.0 * $sqrt(acc_c[i] ** 2 + acc_s[i] ** 2) / NOUT;
      db = 20.0 * $log10(m / mag0 + 1.0e-30);
      checks++;
      if (k % 4 == 0) begin
        if (db > worst_cic) begin worst_cic = db; f_cic = fre[i]; end
        if (db > -65.0) begin
          failures++;
          $display("image at %0.0f Hz: %f dB", fre[i], db);
        end
      end else begin
        if (db > worst_hb) begin worst_hb = db; f_hb = fre[i]; end
        if (db > -80.0) begin
          failures++;
          $display("image at %0.0f Hz: %f dB", fre[i], db);
        end
      end
    end
    $display("  worst image left by the half-band stages: %f dB at %0.0f Hz", worst_hb, f_hb);
    $display("  worst image around multiples of 4 fs (CIC): %f dB at %0.0f Hz", worst_cic, f_cic);
  endtask

  initial begin
    checks = 0; failures = 0; nsat = 0;
    run_tone(1000.0);
    run_tone(17000.0);
    // a half-scale tone must never clip
    checks++;
    if (nsat != 0) begin
      failures++;
      $display("clipping on a half-scale tone");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
