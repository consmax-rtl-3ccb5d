// tb_fp_int_quant -- self-checking test of the FP-to-INT quantiser at 8 and 16 output bits:
// random values around the output range, exact halves (ties to even), values below one half,
// zero and saturation on both sides, against a double-precision reference.
module tb_fp_int_quant;
  import consmax_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [23:0] f;
  logic [7:0]  q8;
  logic [15:0] q16;

  fp_int_quant #(.OUT_W(8))  dut8  (.f(f), .q(q8));
  fp_int_quant #(.OUT_W(16)) dut16 (.f(f), .q(q16));

  task automatic run_val(input real r);
    real rv;
    f = fp24(r);
    #1;
    rv = fp_to_real(32'(f), 15);
    checks += 2;
    if (longint'($signed(q8)) != real_to_int(rv, 8)) begin
      failures++;
      if (failures < 20) $display("FAIL q8: f=%h (%f) got=%0d exp=%0d", f, rv, $signed(q8), real_to_int(rv, 8));
    end
    if (longint'($signed(q16)) != real_to_int(rv, 16)) begin
      failures++;
      if (failures < 20) $display("FAIL q16: f=%h (%f) got=%0d exp=%0d", f, rv, $signed(q16), real_to_int(rv, 16));
    end
  endtask

  initial begin
    run_val(0.0);
    run_val(0.5);  run_val(1.5);  run_val(2.5);  run_val(-0.5); run_val(-3.5);
    run_val(0.49); run_val(0.51); run_val(127.4); run_val(127.6); run_val(-128.6);
    run_val(1.0e-20); run_val(3.0e30); run_val(-3.0e30); run_val(32767.4); run_val(32767.6);
    run_val(-32768.0); run_val(-32768.7); run_val(65535.0);
    repeat (3000) run_val((real'($urandom_range(0, 2000000)) - 1000000.0) / 3000.0);
    repeat (3000) run_val((real'($urandom_range(0, 2000000)) - 1000000.0) / 15.0);
    repeat (1000) run_val(real'($urandom_range(0, 400)) / 2.0 - 100.0);   // exact halves
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
