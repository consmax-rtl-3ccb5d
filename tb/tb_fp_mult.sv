// tb_fp_mult -- self-checking test of the floating-point multiplier in its three shapes
// (16b x 16b -> 24b, 24b x 16b -> 24b, 24b x 24b -> 24b). Random operands and hand-picked
// corner cases (zero, underflow, overflow, rounding carry) are compared bit for bit with a
// double-precision reference; the 16b x 16b product is also checked to be exact.
module tb_fp_mult;
  import consmax_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [15:0] a16, b16;
  logic [23:0] a24, b24;
  logic [23:0] p_exp, p_scl, p_lnk;

  fp_mult #(.FA(7),  .FB(7),  .FO(15)) dut_exp (.a(a16), .b(b16), .p(p_exp));
  fp_mult #(.FA(15), .FB(7),  .FO(15)) dut_scl (.a(a24), .b(b16), .p(p_scl));
  fp_mult #(.FA(15), .FB(15), .FO(15)) dut_lnk (.a(a24), .b(b24), .p(p_lnk));

  task automatic check(input string what, input logic [23:0] got, input logic [23:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: a16=%h b16=%h a24=%h b24=%h got=%h exp=%h", what, a16, b16, a24, b24, got, exp);
    end
  endtask

  function automatic logic [15:0] rnd16(input int emin, input int emax);
    logic [15:0] v;
    v = 16'($urandom);
    v[14:7] = 8'(emin + int'($urandom_range(0, emax - emin)));
    return v;
  endfunction
  function automatic logic [23:0] rnd24(input int emin, input int emax);
    logic [23:0] v;
    v = 24'($urandom);
    v[22:15] = 8'(emin + int'($urandom_range(0, emax - emin)));
    return v;
  endfunction

  task automatic run_case();
    real ra16, rb16, ra24, rb24;
    #1;
    ra16 = fp_to_real(32'(a16), 7);  rb16 = fp_to_real(32'(b16), 7);
    ra24 = fp_to_real(32'(a24), 15); rb24 = fp_to_real(32'(b24), 15);
    check("16x16", p_exp, fp24(ra16 * rb16));
    check("24x16", p_scl, fp24(ra24 * rb16));
    check("24x24", p_lnk, fp24(ra24 * rb24));
    // The LUT merge must be lossless whenever the product is in range.
    if (p_exp[22:15] != 0 && p_exp[22:15] != 8'hFF) begin
      checks++;
      if (fp_to_real(32'(p_exp), 15) != ra16 * rb16) begin
        failures++;
        $display("FAIL exactness: a16=%h b16=%h", a16, b16);
      end
    end
  endtask

  initial begin
    // Corner cases.
    a16 = 16'h3F80; b16 = 16'h3F80; a24 = 24'h3F8000; b24 = 24'h3F8000; run_case();   // 1 x 1
    a16 = 16'h0000; b16 = 16'h4000; a24 = 24'h000000; b24 = 24'h400000; run_case();   // zero
    a16 = 16'h3FFF; b16 = 16'h3FFF; a24 = 24'h3FFFFF; b24 = 24'h3FFFFF; run_case();   // carry out of rounding
    a16 = 16'h7F00; b16 = 16'h7F00; a24 = 24'h7F0000; b24 = 24'h7F0000; run_case();   // overflow
    a16 = 16'h0080; b16 = 16'h0100; a24 = 24'h008000; b24 = 24'h010000; run_case();   // underflow
    a16 = 16'hBFC0; b16 = 16'h3FC0; a24 = 24'hBFC001; b24 = 24'hC0C001; run_case();   // signs
    // Random operands in the normal range, and across the full exponent range.
    repeat (3000) begin
      a16 = rnd16(100, 154); b16 = rnd16(100, 154);
      a24 = rnd24(100, 154); b24 = rnd24(100, 154);
      run_case();
    end
    repeat (1000) begin
      a16 = rnd16(0, 255); b16 = rnd16(0, 255);
      a24 = rnd24(0, 255); b24 = rnd24(0, 255);
      run_case();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
