// consmax_unit -- one bitwidth-split ConSmax unit (Level-1 of the ConSmax hardware).
//
// Computes ConSmax(S) = C * e^S for an IN_W-bit integer attention score S, where the host
// has merged the trained normalisation parameters into C = e^(-beta)/gamma. The score is
// split into its upper nibble m (signed) and lower nibble l (unsigned), so S = 16*m + l and
// e^(s*S) = e^(16*s*m) * e^(s*l) for the score step s. Two 16-entry LUTs return those two
// factors as bfloat16 values; a 16b x 16b multiplier merges them exactly into the 24b EXP
// REG; a 24b x 16b multiplier applies the Scaling REG (C); an FP-to-INT quantiser produces
// the OUT_W-bit result on Output Path-0. The structure (split LUTs, first multiplier, EXP
// REG, Scaling REG, second multiplier, FP-INT Quant) is the published one; the pipeline
// register placement, the configuration port and reset are this design's choices.
//
// EXP REG and the Scaling REG contents are also exported to the reduction unit, which
// combines several units for wider scores.
//
// Timing: a score accepted with in_valid at edge t is in EXP REG after edge t+1 and on
// out_q/out_valid after edge t+2 -- two cycles latency, one score per cycle, no stalls.
// Configuration: cfg_we with cfg_sel (MSB LUT, LSB LUT or scale), cfg_addr and cfg_data
// writes one register at the clock edge. Reset (synchronous, active high) clears the LUTs,
// the scale, the pipeline valids and the registers.
module consmax_unit
  import consmax_pkg::*;
#(
  parameter int unsigned IN_W  = 8,
  parameter int unsigned OUT_W = 8
) (
  input  logic             clk,
  input  logic             rst,
  // host configuration
  input  logic             cfg_we,
  input  cfg_sel_e         cfg_sel,
  input  logic [LUT_AW-1:0] cfg_addr,
  input  logic [15:0]      cfg_data,
  // score stream
  input  logic             in_valid,
  input  logic [IN_W-1:0]  in_score,
  // Output Path-0
  output logic             out_valid,
  output logic [OUT_W-1:0] out_q,
  // to the reduction unit
  output logic             exp_valid,
  output fp24_t            exp_reg,
  output fp16_t            scale_reg
);

  localparam int unsigned HALF = IN_W / 2;

  fp16_t lut_msb, lut_lsb;
  fp24_t exp_d;
  fp24_t scaled;
  logic [OUT_W-1:0] q_d;

  // Bitwidth-split LUTs: upper slice -> MSB-LUT, lower slice -> LSB-LUT.
  int_fp_lut #(.DEPTH(LUT_DEPTH), .WIDTH(16)) u_lut_msb (
    .clk, .rst,
    .wr_en  (cfg_we && cfg_sel == CFG_MSB_LUT),
    .wr_addr(cfg_addr),
    .wr_data(cfg_data),
    .rd_addr(in_score[IN_W-1 -: LUT_AW]),
    .rd_data(lut_msb)
  );

  int_fp_lut #(.DEPTH(LUT_DEPTH), .WIDTH(16)) u_lut_lsb (
    .clk, .rst,
    .wr_en  (cfg_we && cfg_sel == CFG_LSB_LUT),
    .wr_addr(cfg_addr),
    .wr_data(cfg_data),
    .rd_addr(in_score[HALF-1 -: LUT_AW]),
    .rd_data(lut_lsb)
  );

  // e^S = e^(16 m) * e^(l), exact in 24b.
  fp_mult #(.FA(FRAC16), .FB(FRAC16), .FO(FRAC24)) u_mul_exp (
    .a(lut_msb), .b(lut_lsb), .p(exp_d)
  );

  // Scaling REG: merged beta/gamma constant.
  always_ff @(posedge clk) begin
    if (rst)                                scale_reg <= '0;
    else if (cfg_we && cfg_sel == CFG_SCALE) scale_reg <= cfg_data;
  end

  // EXP REG (pipeline stage 1).
  always_ff @(posedge clk) begin
    if (rst) begin
      exp_valid <= 1'b0;
      exp_reg   <= '0;
    end else begin
      exp_valid <= in_valid;
      if (in_valid) exp_reg <= exp_d;
    end
  end

  // C * e^S, then FP-INT quantisation (pipeline stage 2).
  fp_mult #(.FA(FRAC24), .FB(FRAC16), .FO(FRAC24)) u_mul_scale (
    .a(exp_reg), .b(scale_reg), .p(scaled)
  );

  fp_int_quant #(.OUT_W(OUT_W)) u_quant (
    .f(scaled), .q(q_d)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_q     <= '0;
    end else begin
      out_valid <= exp_valid;
      if (exp_valid) out_q <= q_d;
    end
  end

  // The split relies on two 4-bit slices.
  initial assert (IN_W == 2 * LUT_AW) else $error("consmax_unit: IN_W must be 8");

endmodule
