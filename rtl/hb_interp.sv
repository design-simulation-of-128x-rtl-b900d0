// hb_interp -- half-band FIR interpolator by 2, polyphase form.
//
// A half-band low-pass of 47 taps has only 25 non-zero taps: the centre tap and the
// 24 taps at odd distances from it. Up-sampling by 2 and filtering therefore splits
// into two phases per input sample x[k]:
//   y[2k]   = sum_{i=0..23} h2[2i] * x[k-i]     (FIR branch, the interpolated point)
//   y[2k+1] = x[k-11]                          (centre tap = 1.0: the original sample)
// so one output in two is an input sample passed through unchanged and the other is
// the input filtered by the non-zero taps, as the paper describes. The taps are in
// interp_pkg. The 24 products are formed in parallel (24 multipliers per stage, 48
// for the two stages of the cascade) and summed at full precision.
//
// Interface and timing (one clock; en is the clock enable, and nothing changes on a
// cycle with en low, so the behaviour depends only on the count of enabled cycles):
//   in_valid   strobe, acted on when en is high: in_data is shifted into the 24-word
//              delay line. The phase pointer returns to the FIR branch.
//   out_ce     strobe, acted on when en is high, issued twice per input sample by the
//              rate controller, at least one enabled cycle after in_valid: the next
//              phase is computed and registered.
//   out_valid  high for the enabled cycle after out_ce (it holds through cycles with
//              en low), with out_data valid; out_data holds until the next out_ce.
//   sat        high together with out_valid when the FIR branch had to be clipped.
// Arithmetic: data are signed with HB_FRAC (15) fraction bits at input and output;
// OUT_W = IN_W + 1 gives one guard bit. The branch sum is rounded half up to 15
// fraction bits and saturated to OUT_W bits: the sum of |taps| is 2.21, so a
// worst-case input can exceed the guard bit. Widths, rounding and saturation are this
// design's choices; the paper does not give them. Reset is synchronous, active high,
// and clears the delay line and the output.
module hb_interp
  import interp_pkg::*;
#(
  parameter int IN_W  = 16,
  parameter int OUT_W = IN_W + 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data,
  input  logic                    out_ce,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data,
  output logic                    sat
);

  localparam int ACC_W = IN_W + HB_COEF_W + $clog2(HB_NTAP);

  logic signed [IN_W-1:0]  dly [HB_NTAP];   // dly[i] = x[k-i]
  hb_phase_e               phase;
  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] acc_rnd;
  logic signed [ACC_W-1:0] fir_q;           // branch sum with HB_FRAC fraction bits
  logic signed [OUT_W-1:0] fir_sat;
  logic                    fir_clip;

  localparam logic signed [ACC_W-1:0] MAX_OUT = ACC_W'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MIN_OUT = -ACC_W'(64'sd1 <<< (OUT_W - 1));

  // FIR branch: 24 parallel products, full-precision sum
  always_comb begin
    acc = '0;
    for (int i = 0; i < HB_NTAP; i++) begin
      acc += ACC_W'(dly[i]) * ACC_W'(hb_coef(i));
    end
    acc_rnd = acc + ACC_W'(64'sd1 <<< (HB_FRAC - 1));
    fir_q   = acc_rnd >>> HB_FRAC;
    fir_clip = 1'b0;
    if (fir_q > MAX_OUT) begin
      fir_sat  = MAX_OUT[OUT_W-1:0];
      fir_clip = 1'b1;
    end else if (fir_q < MIN_OUT) begin
      fir_sat  = MIN_OUT[OUT_W-1:0];
      fir_clip = 1'b1;
    end else begin
      fir_sat  = fir_q[OUT_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < HB_NTAP; i++) dly[i] <= '0;
      phase     <= PH_FIR;
      out_data  <= '0;
      out_valid <= 1'b0;
      sat       <= 1'b0;
    end else if (en) begin
      out_valid <= out_ce;
      sat       <= 1'b0;
      if (in_valid) begin
        dly[0] <= in_data;
        for (int i = 1; i < HB_NTAP; i++) dly[i] <= dly[i-1];
        phase <= PH_FIR;
      end else if (out_ce) begin
        if (phase == PH_FIR) begin
          out_data <= fir_sat;
          sat      <= fir_clip;
          phase    <= PH_ORIG;
        end else begin
          out_data <= OUT_W'(dly[HB_CDLY]);
          phase    <= PH_FIR;
        end
      end
    end
  end

  // The rate controller never issues both strobes in one cycle.
  a_no_overlap: assert property (@(posedge clk) disable iff (rst) !(en && in_valid && out_ce))
    else $error("hb_interp: in_valid and out_ce in the same cycle");

endmodule
