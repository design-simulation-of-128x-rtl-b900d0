// cic_interp -- cascaded integrator-comb (CIC, sinc^N) interpolator by R.
//
// Transfer function (DC gain (RM)^N before zero-stuffing, R^(N-1) after):
//   H(z) = ((1 - z^-(RM)) / (1 - z^-1))^N
// built as in Hogenauer's structure: N comb sections y = x[k] - x[k-M] at the low
// (input) rate, a zero-stuffer that inserts R-1 zeros after each comb output, and N
// integrator sections y[n] = y[n-1] + x[n] at the high (output) rate. The paper fixes
// R = 32, the comb/integrator structure and a stop-band attenuation of 65 dB; N = 5
// sections is this design's choice, the fewest that reach 65 dB (about 13.26 dB of
// first-side-lobe attenuation per section, 5 x 13.26 = 66.3 dB). M = 1.
//
// All registers have the full output width W = IN_W + N*log2(RM) - log2(R). Two's
// complement wrap-around in the inner registers is harmless because the final
// output always fits in W bits (every output phase has a gain of R^(N-1) at most).
// out_data is the top OUT_W bits of the last integrator (truncation, no rounding).
//
// Interface and timing (one clock; en is the clock enable of the high rate and
// nothing changes on a cycle with en low):
//   in_valid  strobe at the low rate, acted on when en is high: in_data enters the
//             comb chain, which is combinational; its result is registered.
//   en        on every cycle with en high the integrators step. The enabled cycle
//             after a comb result feeds that result to the integrators and all other
//             enabled cycles feed zero (the zero-stuffer).
//   out_valid one-cycle pulse after each cycle with en high; out_data is then new.
// Latency: a sample taken on enabled cycle t enters the first integrator on enabled
// cycle t+1 and, as each integrator is a register, shows at the output after enabled
// cycle t+N.
// Reset (synchronous, active high) clears every register.
module cic_interp #(
  parameter int IN_W  = 18,
  parameter int N     = 5,      // number of comb and of integrator sections
  parameter int R     = 32,     // interpolation ratio, a power of 2
  parameter int M     = 1,      // differential delay of each comb
  parameter int OUT_W = 20,
  parameter int W     = IN_W + N * $clog2(R * M) - $clog2(R)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);

  logic signed [W-1:0] comb_dly [N][M];   // comb_dly[s][d] = input of comb s, d+1 samples ago
  logic signed [W-1:0] comb_in  [N+1];    // comb_in[s] = input of comb s; comb_in[N] = chain output
  logic signed [W-1:0] comb_out;          // registered comb-chain result
  logic                pend;              // comb_out not yet given to the integrators
  logic signed [W-1:0] stuffed;           // zero-stuffer output
  logic signed [W-1:0] integ [N];

  always_comb begin
    comb_in[0] = W'(in_data);
    for (int s = 0; s < N; s++) begin
      comb_in[s+1] = comb_in[s] - comb_dly[s][M-1];
    end
    stuffed = pend ? comb_out : '0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < N; s++) begin
        for (int d = 0; d < M; d++) comb_dly[s][d] <= '0;
        integ[s] <= '0;
      end
      comb_out  <= '0;
      pend      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= en;
      if (en) begin
        // comb sections, low rate
        if (in_valid) begin
          for (int s = 0; s < N; s++) begin
            comb_dly[s][0] <= comb_in[s];
            for (int d = 1; d < M; d++) comb_dly[s][d] <= comb_dly[s][d-1];
          end
          comb_out <= comb_in[N];
        end
        pend <= in_valid;
        // integrator sections, high rate
        integ[0] <= integ[0] + stuffed;
        for (int s = 1; s < N; s++) integ[s] <= integ[s] + integ[s-1];
      end
    end
  end

  assign out_data = integ[N-1][W-1 -: OUT_W];

  // The zero-stuffer needs at least one enabled cycle between comb inputs.
  a_rate: assert property (@(posedge clk) disable iff (rst) (en && in_valid) |-> !pend)
    else $error("cic_interp: comb inputs on consecutive enabled cycles");

endmodule
