// interp128 -- 128x interpolation filter for a sigma-delta audio DAC.
//
// Takes 16-bit PCM at fs (44.1 kHz for CD/DVD audio) and delivers the same signal at
// 128 fs (5.6448 MHz), with the spectral images at fs, 2fs, .. 127fs suppressed, for a
// sigma-delta modulator that follows. The cascade is the paper's:
//   HBF1: half-band interpolator x2   (fs   -> 2fs,  80 dB target stop band)
//   HBF2: half-band interpolator x2   (2fs  -> 4fs,  same filter)
//   CIC : comb/sinc interpolator x32  (4fs  -> 128fs, 65 dB target)
// The two half-band stages do the sharp filtering at low rates; the multiplier-free
// CIC does the large rate increase, where only the images around multiples of 4fs
// remain to be removed.
//
// One clock runs at the output rate; clk_enable low stalls everything (no state
// changes, no strobes). rate_ctrl divides the enabled cycles into the stage rates.
// Ports:
//   filter_in  signed Q1.15, sampled on the cycle ce_in is high (once every 128
//              enabled cycles, the first one right after reset).
//   filter_out signed, OUT_W bits with OUT_FRAC = 17 fraction bits (Q3.17 by
//              default), a new value on each cycle ce_out is high (once per enabled
//              cycle). The overall DC gain is 1.
//   hb_sat     pulses when HBF1 (bit 0) or HBF2 (bit 1) clipped its output.
// Word lengths: HBF1 16 -> 17 bits, HBF2 17 -> 18 bits, each adding one guard bit at
// 15 fraction bits; the CIC carries 18 + 20 = 38 bits and the top 20 are output
// (value = filter_out / 2^17). The 20-bit output is this design's choice; it is
// consistent with the 40 bonded I/O pins the paper reports (16 in + 20 out + clock,
// reset, clock enable and output strobe), but the paper does not list its ports.
// Latency: counting enabled cycles from the ce_in cycle of the first sample, the
// output computed on enabled cycle n (presented with ce_out on the next clock) is
// sample n - 9 of the ideal cascade output at 128 fs: four cycles of strobe offsets
// and half-band output registers, five of CIC integrator registers. The filters'
// group delay (11.5 + 5.75 + 0.6 input periods) comes on top.
module interp128
  import interp_pkg::*;
#(
  parameter int IN_W  = 16,
  parameter int HB1_W = IN_W + 1,
  parameter int HB2_W = HB1_W + 1,
  parameter int CIC_N = 5,
  parameter int CIC_R = CIC_RATIO,
  parameter int CIC_M = 1,
  parameter int OUT_W = 20
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    clk_enable,
  input  logic signed [IN_W-1:0]  filter_in,
  output logic                    ce_in,
  output logic signed [OUT_W-1:0] filter_out,
  output logic                    ce_out,
  output logic [1:0]              hb_sat
);

  logic                    hb1_ce, hb2_ce;
  logic                    hb1_valid, hb2_valid;
  logic signed [HB1_W-1:0] hb1_data;
  logic signed [HB2_W-1:0] hb2_data;

  rate_ctrl #(
    .PERIOD (HB_RATIO * HB_RATIO * CIC_R)
  ) u_rate (
    .clk    (clk),
    .rst    (rst),
    .en     (clk_enable),
    .ce_in  (ce_in),
    .hb1_ce (hb1_ce),
    .hb2_ce (hb2_ce)
  );

  hb_interp #(
    .IN_W  (IN_W),
    .OUT_W (HB1_W)
  ) u_hbf1 (
    .clk       (clk),
    .rst       (rst),
    .en        (clk_enable),
    .in_valid  (ce_in),
    .in_data   (filter_in),
    .out_ce    (hb1_ce),
    .out_valid (hb1_valid),
    .out_data  (hb1_data),
    .sat       (hb_sat[0])
  );

  hb_interp #(
    .IN_W  (HB1_W),
    .OUT_W (HB2_W)
  ) u_hbf2 (
    .clk       (clk),
    .rst       (rst),
    .en        (clk_enable),
    .in_valid  (hb1_valid),
    .in_data   (hb1_data),
    .out_ce    (hb2_ce),
    .out_valid (hb2_valid),
    .out_data  (hb2_data),
    .sat       (hb_sat[1])
  );

  cic_interp #(
    .IN_W  (HB2_W),
    .N     (CIC_N),
    .R     (CIC_R),
    .M     (CIC_M),
    .OUT_W (OUT_W)
  ) u_cic (
    .clk       (clk),
    .rst       (rst),
    .en        (clk_enable),
    .in_valid  (hb2_valid),
    .in_data   (hb2_data),
    .out_valid (ce_out),
    .out_data  (filter_out)
  );

endmodule
