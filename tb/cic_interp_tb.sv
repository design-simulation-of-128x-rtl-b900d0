// cic_interp_tb -- self-checking test of the CIC interpolator (N = 5, R = 32, M = 1).
//
// The reference does not use integrators or combs: it builds the impulse response of
// ((1 - z^-R)/(1 - z^-1))^N, a box of R ones convolved with itself N times, and
// convolves it with the zero-stuffed input. Two instances run side by side: one with
// the full 38-bit output, compared exactly, and one with the default 20-bit output,
// compared with the top 20 bits of the reference. Inputs are random 18-bit words and a
// run of full-scale positive and negative steps (largest output magnitude). Each input
// is offered on a cycle with en low, followed by R enabled cycles mixed with random
// cycles with en low. The input taken on enabled cycle R*k enters the integrators on
// cycle R*k+1, so the output after enabled cycle n must be y[n - N], the latency
// given in the module header.
module cic_interp_tb;
  localparam int IN_W  = 18;
  localparam int N     = 5;
  localparam int R     = 32;
  localparam int W     = IN_W + 20;        // 38
  localparam int OUT_W = 20;
  localparam int NS    = 60;
  localparam int GL    = N * (R - 1) + 1;  // impulse response length
  localparam int NY    = NS * R;

  logic clk = 1'b0;
  logic rst, en, in_valid;
  logic signed [IN_W-1:0]  in_data;
  logic                    ov_full, ov_out;
  logic signed [W-1:0]     out_full;
  logic signed [OUT_W-1:0] out_dflt;

  int checks = 0, failures = 0;
  longint g [GL];
  longint x [NS];
  longint y [NY];
  int     nstep = 0;
  int     nzero_stuffed = 0;

  always #5 clk = ~clk;

  cic_interp #(.IN_W(IN_W), .N(N), .R(R), .M(1), .OUT_W(W)) dut_full (
    .clk(clk), .rst(rst), .en(en), .in_valid(in_valid), .in_data(in_data),
    .out_valid(ov_full), .out_data(out_full)
  );

  cic_interp dut_dflt (
    .clk(clk), .rst(rst), .en(en), .in_valid(in_valid), .in_data(in_data),
    .out_valid(ov_out), .out_data(out_dflt)
  );

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void make_ref();
    longint box [GL];
    longint t [GL];
    for (int i = 0; i < GL; i++) g[i] = (i < R) ? 1 : 0;
    for (int s = 1; s < N; s++) begin
      for (int i = 0; i < GL; i++) t[i] = 0;
      for (int i = 0; i < GL; i++)
        for (int j = 0; j < R; j++)
          if (i + j < GL) t[i+j] += g[i];
      for (int i = 0; i < GL; i++) g[i] = t[i];
    end
    for (int n = 0; n < NY; n++) begin
      y[n] = 0;
      for (int k = 0; k < NS; k++)
        if (n - R*k >= 0 && n - R*k < GL) y[n] += g[n - R*k] * x[k];
    end
  endfunction

  // check after each enabled cycle: the outputs seen on the next cycle
  always @(posedge clk) begin
    if (!rst && ov_full) begin
      longint e;
      int     idx;
      idx = nstep - 1 - N;
      e   = (idx >= 0 && idx < NY) ? y[idx] : 0;
      checks++;
      if (64'(out_full) != e || 64'(out_dflt) != (e >>> (W - OUT_W)) || !ov_out) begin
        failures++;
        if (failures < 10)
          $display("step %0d: out %0d / %0d, expected %0d / %0d", nstep - 1, out_full,
                   out_dflt, e, e >>> (W - OUT_W));
      end
      if (idx >= 0 && idx < NY && (idx % R) != 0 && dut_full.stuffed == 0) nzero_stuffed++;
    end
  end

  task automatic en_cycle();
    if ($urandom % 5 == 0) begin
      en = 1'b0;
      @(posedge clk); #1;
    end
    en = 1'b1;
    @(posedge clk); #1;
    nstep++;
    en = 1'b0;
  endtask

  initial begin
    for (int k = 0; k < NS; k++) begin
      if (k >= 20 && k < 40) x[k] = ((k / 8) % 2 == 0) ? (longint'(1) <<< (IN_W-1)) - 1
                                                       : -(longint'(1) <<< (IN_W-1));
      else x[k] = longint'($signed(IN_W'($urandom)));
    end
    make_ref();
    // DC gain of the impulse response: R^(N-1) per output phase summed over phases
    checks++;
    begin
      longint sum;
      sum = 0;
      for (int i = 0; i < GL; i++) sum += g[i];
      if (sum != 64'(R) ** N) begin
        failures++;
        $display("reference gain %0d", sum);
      end
    end
    rst = 1'b1; en = 1'b0; in_valid = 1'b0; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    for (int k = 0; k < NS; k++) begin
      in_data = IN_W'(x[k]); in_valid = 1'b1;
      @(posedge clk); #1;          // en low: ignored
      en = 1'b1;
      @(posedge clk); #1;          // taken on this enabled cycle, enabled cycle R*k
      in_valid = 1'b0; en = 1'b0;
      nstep++;
      for (int i = 0; i < R - 1; i++) en_cycle();
    end
    repeat (4) @(posedge clk);
    checks++;
    if (nzero_stuffed == 0) begin
      failures++;
      $display("zero-stuffed cycles never seen");
    end
    $display("steps %0d, zero-stuffed steps checked %0d", nstep, nzero_stuffed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
