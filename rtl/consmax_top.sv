// consmax_top -- the two-level ConSmax hardware.
//
// ConSmax replaces softmax in self-attention by P = C * e^S, with the trained constants beta
// and gamma merged into C = e^(-beta)/gamma. With no maximum search and no denominator sum,
// every score is normalised on its own as soon as the Q x K engine produces it, so the P x V
// engine can consume probabilities element by element.
//
// Level-1 holds N_UNITS bitwidth-split ConSmax units working in parallel, each taking one
// 8-bit score per cycle and returning an OUT0_W-bit probability on Output Path-0. Level-2,
// the reduction unit, combines groups of units for wider scores: in mode m a group of 2^m
// units takes one (8*2^m)-bit score, lane 0 of the group holding the least significant
// byte, and returns an OUT1_W-bit probability on Output Path-1 at the group's first lane.
// The two levels, the unit count shown in the published diagram (two), the 8-bit and 16-bit
// precisions and all bit widths follow the publication. The host configuration port, the
// mode encoding, the pipeline registers and reset are this design's choices.
//
// Interface
//   cfg_we/cfg_unit/cfg_sel/cfg_addr/cfg_data : write one LUT entry (cfg_sel = MSB or LSB
//       LUT, 4-bit address) or the scaling constant C (cfg_sel = SCALE) of unit cfg_unit;
//       all are bfloat16.
//   in_valid/mode/in_score : one score slice per lane per cycle; mode is sampled with it.
//   p0_valid/p0_q : Path-0 results, per lane, two cycles after the score (valid in any mode,
//       meaningful in mode 0).
//   p1_valid/p1_q : Path-1 results, at group-first lanes, two cycles after the score, only
//       when mode > 0.
// Reset is synchronous and active high.
module consmax_top
  import consmax_pkg::*;
#(
  parameter int unsigned N_UNITS = 2,
  parameter int unsigned OUT0_W  = 8,
  parameter int unsigned OUT1_W  = 16,
  localparam int unsigned MODE_W = ($clog2($clog2(N_UNITS) + 1) > 0) ? $clog2($clog2(N_UNITS) + 1) : 1,
  localparam int unsigned UW     = (N_UNITS > 1) ? $clog2(N_UNITS) : 1
) (
  input  logic                clk,
  input  logic                rst,
  // host configuration
  input  logic                cfg_we,
  input  logic [UW-1:0]       cfg_unit,
  input  cfg_sel_e            cfg_sel,
  input  logic [LUT_AW-1:0]   cfg_addr,
  input  logic [15:0]         cfg_data,
  // scores from the Q x K engine
  input  logic                in_valid,
  input  logic [MODE_W-1:0]   mode,
  input  logic [7:0]          in_score [N_UNITS],
  // Output Path-0 (per unit)
  output logic [N_UNITS-1:0]  p0_valid,
  output logic [OUT0_W-1:0]   p0_q     [N_UNITS],
  // Output Path-1 (reduction unit)
  output logic [N_UNITS-1:0]  p1_valid,
  output logic [OUT1_W-1:0]   p1_q     [N_UNITS]
);

  logic [N_UNITS-1:0] exp_valid;
  fp24_t              exp_reg   [N_UNITS];
  fp16_t              scale_reg [N_UNITS];
  logic [MODE_W-1:0]  mode_s1;     // mode travelling with the EXP REG contents

  for (genvar k = 0; k < N_UNITS; k++) begin : g_unit
    consmax_unit #(.IN_W(8), .OUT_W(OUT0_W)) u_unit (
      .clk, .rst,
      .cfg_we   (cfg_we && cfg_unit == UW'(k)),
      .cfg_sel,
      .cfg_addr,
      .cfg_data,
      .in_valid,
      .in_score (in_score[k]),
      .out_valid(p0_valid[k]),
      .out_q    (p0_q[k]),
      .exp_valid(exp_valid[k]),
      .exp_reg  (exp_reg[k]),
      .scale_reg(scale_reg[k])
    );
  end

  always_ff @(posedge clk) begin
    if (rst)           mode_s1 <= '0;
    else if (in_valid) mode_s1 <= mode;
  end

  reduction_unit #(.N_UNITS(N_UNITS), .OUT_W(OUT1_W)) u_reduce (
    .clk, .rst,
    .mode     (mode_s1),
    .exp_valid,
    .exp_reg,
    .scale_reg,
    .out_valid(p1_valid),
    .out_q    (p1_q)
  );

  // A mode may not group more units than exist.
  property p_mode_in_range;
    @(posedge clk) disable iff (rst) in_valid |-> (int'(mode) <= $clog2(N_UNITS));
  endproperty
  a_mode_in_range: assert property (p_mode_in_range);

endmodule
