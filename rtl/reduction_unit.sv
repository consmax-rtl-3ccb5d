// reduction_unit -- Level-2 of the ConSmax hardware: mixed-precision merge of several units.
//
// A score wider than 8 bits is cut into 8-bit slices, one per ConSmax unit, and each unit
// looks up the exponential of its own slice (its LUTs are loaded with the slice's weight,
// e.g. 2^8 for the high byte of a 16-bit score). Since e^(a+b) = e^a * e^b, the exponential
// of the whole score is the product of the units' EXP REG values. This block forms that
// product with a chain of 24b x 24b floating-point multipliers, running from the last unit
// of a group towards its first one (the direction printed in the published block diagram),
// multiplies by the first unit's scaling constant C and quantises to OUT_W bits on Output
// Path-1. The precision mode sets the chain length: mode m groups 2^m adjacent units, so
// m = 0 is the 8-bit mode (each unit stands alone, Path-1 idle) and, with two units, m = 1
// is the 16-bit mode. The mode encoding and the output register are this design's choices.
//
// Timing: combinational from the EXP REGs to one output register, so a Path-1 result
// appears one cycle after the EXP REGs load -- the same two-cycle latency as Path-0.
// Results are reported at the index of each group's first unit; out_valid marks them.
// Circuit note: the chain is a combinational path through up to N_UNITS-1 multipliers.
module reduction_unit
  import consmax_pkg::*;
#(
  parameter int unsigned N_UNITS = 2,
  parameter int unsigned OUT_W   = 16,
  localparam int unsigned MODE_W = ($clog2($clog2(N_UNITS) + 1) > 0) ? $clog2($clog2(N_UNITS) + 1) : 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [MODE_W-1:0]       mode,        // log2 of the group size, for the EXP REG contents
  input  logic [N_UNITS-1:0]      exp_valid,
  input  fp24_t                   exp_reg   [N_UNITS],
  input  fp16_t                   scale_reg [N_UNITS],
  output logic [N_UNITS-1:0]      out_valid,
  output logic [OUT_W-1:0]        out_q     [N_UNITS]
);

  logic [N_UNITS-1:0] last_in_grp;   // unit closes its group: the chain starts here
  logic [N_UNITS-1:0] first_in_grp;  // unit opens its group: the chain ends here
  fp24_t chain   [N_UNITS];          // product of EXP REGs from the group's last unit to k
  fp24_t linkp   [N_UNITS];
  fp24_t scaled  [N_UNITS];
  logic [OUT_W-1:0] q_d [N_UNITS];
  logic [$clog2(N_UNITS):0] gsize;

  assign gsize = ($clog2(N_UNITS)+1)'(1) << mode;

  always_comb begin
    for (int k = 0; k < N_UNITS; k++) begin
      last_in_grp[k]  = ((k + 1) % int'(gsize)) == 0;
      first_in_grp[k] = (k % int'(gsize)) == 0;
    end
  end

  for (genvar k = 0; k < N_UNITS; k++) begin : g_chain
    if (k == N_UNITS - 1) begin : g_end
      assign linkp[k] = exp_reg[k];
    end else begin : g_link
      fp_mult #(.FA(FRAC24), .FB(FRAC24), .FO(FRAC24)) u_link (
        .a(chain[k+1]), .b(exp_reg[k]), .p(linkp[k])
      );
    end
    assign chain[k] = last_in_grp[k] ? exp_reg[k] : linkp[k];

    fp_mult #(.FA(FRAC24), .FB(FRAC16), .FO(FRAC24)) u_scale (
      .a(chain[k]), .b(scale_reg[k]), .p(scaled[k])
    );
    fp_int_quant #(.OUT_W(OUT_W)) u_quant (
      .f(scaled[k]), .q(q_d[k])
    );

    always_ff @(posedge clk) begin
      if (rst) begin
        out_valid[k] <= 1'b0;
        out_q[k]     <= '0;
      end else begin
        out_valid[k] <= exp_valid[k] && first_in_grp[k] && (mode != '0);
        if (exp_valid[k] && first_in_grp[k]) out_q[k] <= q_d[k];
      end
    end
  end

endmodule
