// fp_int_quant -- FP-to-INT quantiser at the end of each ConSmax output path.
//
// Converts a 24b floating-point value (1 sign / 8 exponent, bias 127 / 15 fraction bits) to
// a signed OUT_W-bit two's-complement integer: the value is rounded to the nearest integer,
// ties to even, and saturated to [-2^(OUT_W-1), 2^(OUT_W-1)-1]. Exponent 0 gives 0. Any
// fixed-point scaling of the probability (for example 2^F for F fraction bits) is folded into
// the scaling constant C upstream, so the quantiser itself has no scale input. The block
// and its place in both output paths are published; the rounding, saturation and signed
// output are this design's choices.
//
// Interface: f in, q out, combinational.
module fp_int_quant #(
  parameter int unsigned OUT_W = 8
) (
  input  logic [23:0]      f,
  output logic [OUT_W-1:0] q
);

  localparam int unsigned MW = OUT_W + 18;   // magnitude width with headroom

  logic          s;
  logic [7:0]    e;
  logic [15:0]   sig;
  int            sh;
  logic [MW-1:0] mag;
  logic [MW-1:0] lim;
  logic [16:0]   rem;
  logic [16:0]   half;
  logic          sat;

  always_comb begin
    s    = f[23];
    e    = f[22:15];
    sig  = {1'b1, f[14:0]};
    sh   = int'(e) - int'(consmax_pkg::BIAS) - 15;   // value = sig * 2^sh
    mag  = '0;
    sat  = 1'b0;
    rem  = '0;
    half = '0;
    lim  = s ? (MW'(1) << (OUT_W - 1)) : ((MW'(1) << (OUT_W - 1)) - MW'(1));

    if (e == 8'd0) begin
      mag = '0;
    end else if (sh >= 0) begin
      if (sh + 16 > OUT_W) sat = 1'b1;           // value >= 2^(15+sh) >= 2^OUT_W
      else                 mag = MW'(sig) << sh;
    end else if (sh >= -17) begin
      // Right shift by -sh with round-to-nearest-even.
      mag  = MW'(sig >> (-sh));
      rem  = 17'(sig) & ((17'd1 << (-sh)) - 17'd1);
      half = 17'd1 << (-sh - 1);
      if (rem > half || (rem == half && mag[0])) mag = mag + MW'(1);
    end

    if (sat || mag > lim) mag = lim;
    q = s ? OUT_W'(-mag) : OUT_W'(mag);
  end

endmodule
