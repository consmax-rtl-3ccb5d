// fp_mult -- combinational floating-point multiplier used throughout the ConSmax datapath.
//
// Operands and result share an 8-bit exponent (bias 127) and differ only in their fraction
// widths FA, FB and FO. The ConSmax hardware uses three shapes of it:
//   16b x 16b -> 24b  (FA=7,  FB=7, FO=15): merges the MSB-LUT and LSB-LUT values into e^S;
//                      exact, since the 16-bit significand product fits the 24b format.
//   24b x 16b -> 24b  (FA=15, FB=7, FO=15): applies the scaling constant C.
//   24b x 24b -> 24b  (FA=15, FB=15, FO=15): one link of the reduction multiplier chain.
// The significands (with hidden 1) are multiplied, the product is normalised by at most one
// place and rounded to FO fraction bits, round-to-nearest-even. Exponent 0 means zero (inputs
// and results; results below the normal range flush to zero). Exponent 255 is finite, and
// results above it saturate to the largest magnitude. The published design gives the widths
// but not the rounding or special-value rules; those are this design's choices.
//
// Interface: a, b in; p out, combinational (no clock).
module fp_mult #(
  parameter int unsigned FA = 7,
  parameter int unsigned FB = 7,
  parameter int unsigned FO = 15
) (
  input  logic [8+FA:0] a,
  input  logic [8+FB:0] b,
  output logic [8+FO:0] p
);

  localparam int unsigned PW = FA + FB + 2;                  // significand product width
  localparam int unsigned XW = (PW > FO + 3) ? PW : FO + 3;  // room for guard and sticky bits

  logic          sa, sb;
  logic [7:0]    ea, eb;
  logic [FA:0]   ma;
  logic [FB:0]   mb;
  logic [PW-1:0] prod;
  logic [PW-1:0] prod_n;
  logic [XW-1:0] x;
  logic [FO:0]   sig;
  logic          guard, sticky, rnd_up;
  logic [FO+1:0] sig_r;
  logic signed [10:0] e;

  always_comb begin
    sa = a[8+FA];
    sb = b[8+FB];
    ea = a[FA +: 8];
    eb = b[FB +: 8];
    ma = {1'b1, a[FA-1:0]};
    mb = {1'b1, b[FB-1:0]};
    prod = PW'(ma) * PW'(mb);

    // Normalise: the product of two significands in [1,2) lies in [1,4).
    e = 11'(signed'({3'b000, ea})) + 11'(signed'({3'b000, eb})) - 11'(consmax_pkg::BIAS);
    if (prod[PW-1]) begin
      prod_n = prod;
      e      = e + 11'sd1;
    end else begin
      prod_n = prod << 1;
    end

    // Keep FO+1 significand bits, round to nearest even on the rest.
    x      = XW'(prod_n) << (XW - PW);
    sig    = x[XW-1 -: FO+1];
    guard  = x[XW-FO-2];
    sticky = |x[XW-FO-3:0];
    rnd_up = guard & (sticky | sig[0]);
    sig_r  = {1'b0, sig} + (FO+2)'(rnd_up);
    if (sig_r[FO+1]) e = e + 11'sd1;   // rounded up to 2.0: fraction becomes zero

    p = '0;
    p[8+FO] = sa ^ sb;
    if (ea == 8'd0 || eb == 8'd0 || e <= 11'sd0) begin
      p[FO +: 8] = 8'd0;                 // zero operand or underflow: signed zero
    end else if (e > 11'sd255) begin
      p[FO +: 8]   = 8'hFF;              // overflow: largest magnitude
      p[FO-1:0]    = '1;
    end else begin
      p[FO +: 8]   = e[7:0];
      p[FO-1:0]    = sig_r[FO+1] ? '0 : sig_r[FO-1:0];
    end
  end

endmodule
