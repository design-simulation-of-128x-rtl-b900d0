// rate_ctrl -- single-clock timing of the three-stage interpolator.
//
// The whole cascade runs from one clock at the output rate (128 x 44.1 kHz =
// 5.6448 MHz in the paper's configuration). Each stage's lower rate is a strobe
// derived from a modulo-PERIOD counter that advances on every cycle with en high
// (clock enable; en low stalls the whole cascade):
//   ce_in   count == 0                   input rate fs: the next PCM word is taken
//   hb1_ce  count mod PERIOD/2 == 1      2 fs: half-band stage 1 emits a phase
//   hb2_ce  count mod PERIOD/4 == 3      4 fs: half-band stage 2 emits a phase
// The offsets of 1 and 3 cycles leave room for a stage's registered output to reach
// the next stage before that stage is asked for output. The CIC integrators run on
// every enabled cycle, so they need no strobe of their own. The stage rates are the
// paper's (Table I); the counter and the offsets are this design's choice. Strobes are
// combinational from the counter and en. Reset (synchronous, active high) clears the
// counter, so the first enabled cycle after reset takes an input sample.
module rate_ctrl #(
  parameter int PERIOD = 128          // overall interpolation ratio, a multiple of 4, >= 16
) (
  input  logic clk,
  input  logic rst,
  input  logic en,
  output logic ce_in,
  output logic hb1_ce,
  output logic hb2_ce
);

  localparam int CW = $clog2(PERIOD);

  if (PERIOD % 4 != 0 || PERIOD < 16) begin : g_bad_period
    $error("rate_ctrl: PERIOD must be a multiple of 4 and at least 16");
  end

  logic [CW-1:0] count;

  always_ff @(posedge clk) begin
    if (rst) begin
      count <= '0;
    end else if (en) begin
      count <= (count == CW'(PERIOD - 1)) ? '0 : count + 1'b1;
    end
  end

  always_comb begin
    ce_in  = en && (count == '0);
    hb1_ce = en && ((count % CW'(PERIOD / 2)) == CW'(1));
    hb2_ce = en && ((count % CW'(PERIOD / 4)) == CW'(3));
  end

endmodule
