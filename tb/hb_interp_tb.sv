// hb_interp_tb -- self-checking test of the half-band interpolator by 2.
//
// The reference is the textbook definition, not the polyphase form of the design:
// the input is up-sampled by inserting a zero after every sample and convolved with
// the full 47-tap impulse response (zeros included, written out below), then rounded
// half up to 15 fraction bits and clipped to OUT_W bits. Inputs are random, followed
// by runs of the worst-case pattern (each sample's sign matching the tap it meets)
// that drive the FIR branch beyond the guard bit and must be clipped.
// Timing: an input every 8 enabled cycles, out_ce one and five enabled cycles after
// it, random cycles with en low in between; the test checks that each out_ce gives
// exactly one output, in the order y[2k], y[2k+1].
module hb_interp_tb;
  localparam int IN_W  = 16;
  localparam int OUT_W = 17;
  localparam int NS    = 400;           // input samples
  localparam int L     = 47;

  // full impulse response, scaled by 2, Q1.15; index 23 is the centre
  localparam int H [L] = '{
    -8, 0, 26, 0, -66, 0, 144, 0, -278, 0, 495, 0, -832, 0, 1348, 0,
    -2156, 0, 3543, 0, -6558, 0, 20726, 32768, 20726, 0, -6558, 0, 3543, 0,
    -2156, 0, 1348, 0, -832, 0, 495, 0, -278, 0, 144, 0, -66, 0, 26, 0, -8
  };

  logic clk = 1'b0;
  logic rst, en, in_valid, out_ce, out_valid, sat;
  logic signed [IN_W-1:0]  in_data;
  logic signed [OUT_W-1:0] out_data;

  int checks = 0, failures = 0;
  int x [NS];
  longint yref [2*NS];
  bit  clipref [2*NS];
  int  nout = 0, nsat = 0, nclip_ref = 0;

  always #5 clk = ~clk;

  hb_interp dut (   // default widths: 16 in, 17 out
    .clk(clk), .rst(rst), .en(en), .in_valid(in_valid), .in_data(in_data),
    .out_ce(out_ce), .out_valid(out_valid), .out_data(out_data), .sat(sat)
  );

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void make_ref();
    longint acc, q, maxv, minv;
    maxv = (longint'(1) <<< (OUT_W - 1)) - 1;
    minv = -(longint'(1) <<< (OUT_W - 1));
    for (int m = 0; m < 2*NS; m++) begin
      acc = 0;
      for (int n = 0; n < L; n++) begin
        int j;
        j = m - n;
        if (j >= 0 && (j % 2) == 0) acc += longint'(H[n]) * longint'(x[j/2]);
      end
      q = (acc + 16384) >>> 15;
      clipref[m] = (q > maxv) || (q < minv);
      if (q > maxv) q = maxv;
      if (q < minv) q = minv;
      yref[m] = q;
      if (clipref[m]) nclip_ref++;
    end
  endfunction

  // one enabled cycle, with a random number of stalled cycles before it
  task automatic step(input bit iv, input bit oc);
    int gaps;
    gaps = ($urandom % 4 == 0) ? int'($urandom % 3) : 0;
    repeat (gaps) begin
      en = 1'b0; in_valid = iv; out_ce = oc;      // strobes without en are ignored
      @(posedge clk); #1;
    end
    en = 1'b1; in_valid = iv; out_ce = oc;
    @(posedge clk); #1;
    en = 1'b0; in_valid = 1'b0; out_ce = 1'b0;
  endtask

  // collect outputs: out_valid is meaningful on enabled cycles
  always @(posedge clk) begin
    if (!rst && en && out_valid) begin
      checks++;
      if (nout >= 2*NS) begin
        failures++;
        $display("extra output");
      end else begin
        if (64'(out_data) != yref[nout] || sat != clipref[nout]) begin
          failures++;
          if (failures < 10)
            $display("y[%0d] = %0d sat %0b, expected %0d sat %0b", nout, out_data, sat,
                     yref[nout], clipref[nout]);
        end
        if (sat) nsat++;
      end
      nout++;
    end
  end

  initial begin
    // stimulus: random, then worst-case runs, then random again
    for (int k = 0; k < NS; k++) begin
      if (k >= 150 && k < 250) begin
        // sign pattern that aligns with the taps for y[2k] at k = 150+24*r+23
        int i;
        i = 23 - ((k - 150) % 24);
        x[k] = (H[2*i] >= 0) ? 32767 : -32768;
        if ((k / 24) % 2 == 1) x[k] = -x[k] - 1;
      end else begin
        x[k] = int'($signed(16'($urandom)));
      end
    end
    make_ref();
    rst = 1'b1; en = 1'b0; in_valid = 1'b0; out_ce = 1'b0; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    for (int k = 0; k < NS; k++) begin
      in_data = 16'(x[k]);
      step(1'b1, 1'b0);       // load x[k]
      step(1'b0, 1'b1);       // y[2k]
      step(1'b0, 1'b0);
      step(1'b0, 1'b0);
      step(1'b0, 1'b0);
      step(1'b0, 1'b1);       // y[2k+1]
      step(1'b0, 1'b0);
      step(1'b0, 1'b0);
    end
    step(1'b0, 1'b0);
    // every out_ce gave one output
    checks++;
    if (nout != 2*NS) begin
      failures++;
      $display("outputs %0d, expected %0d", nout, 2*NS);
    end
    // the clipping case was exercised
    checks++;
    if (nclip_ref == 0 || nsat != nclip_ref) begin
      failures++;
      $display("clipped outputs: reference %0d, design %0d", nclip_ref, nsat);
    end
    $display("outputs %0d, clipped %0d", nout, nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
