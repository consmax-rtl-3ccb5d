// tb_reduction_unit -- self-checking test of the Level-2 reduction unit.
//
// Two instances are driven with random EXP REG and scaling-register contents: the default
// two-unit one (modes 0 and 1: 8-bit and 16-bit) and a four-unit one (modes 0, 1, 2). Each
// cycle the expected Path-1 result of every group is built in double precision: product of
// the group's EXP REG values from the last unit to the first, rounded to 24b after every
// link, times the first unit's C, rounded, then quantised to 16 bits. Results are checked one
// cycle after the inputs, at the first lane of each group only, and never in mode 0.
module tb_reduction_unit;
  import consmax_pkg::*;
  import consmax_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst;

  // Two-unit instance.
  logic [0:0]  mode2;
  logic [1:0]  ev2;
  fp24_t       er2 [2];
  fp16_t       sr2 [2];
  logic [1:0]  ov2;
  logic [15:0] oq2 [2];
  reduction_unit #(.N_UNITS(2), .OUT_W(16)) dut2 (
    .clk, .rst, .mode(mode2), .exp_valid(ev2), .exp_reg(er2), .scale_reg(sr2),
    .out_valid(ov2), .out_q(oq2));

  // Four-unit instance.
  logic [1:0]  mode4;
  logic [3:0]  ev4;
  fp24_t       er4 [4];
  fp16_t       sr4 [4];
  logic [3:0]  ov4;
  logic [15:0] oq4 [4];
  reduction_unit #(.N_UNITS(4), .OUT_W(16)) dut4 (
    .clk, .rst, .mode(mode4), .exp_valid(ev4), .exp_reg(er4), .scale_reg(sr4),
    .out_valid(ov4), .out_q(oq4));

  // Expected results, computed on the inputs of the previous cycle.
  longint exp2 [2]; logic [1:0] evld2;
  longint exp4 [4]; logic [3:0] evld4;
  int     n_p1 = 0;

  function automatic longint group_ref(input fp24_t er [], input fp16_t sr [], input int first, input int g);
    logic [23:0] c;
    c = er[first + g - 1];
    for (int k = first + g - 2; k >= first; k--)
      c = fp24(fp_to_real(32'(c), 15) * fp_to_real(32'(er[k]), 15));
    c = fp24(fp_to_real(32'(c), 15) * fp_to_real(32'(sr[first]), 7));
    return real_to_int(fp_to_real(32'(c), 15), 16);
  endfunction

  function automatic fp24_t rnd_exp();
    fp24_t v;
    v = 24'($urandom);
    v.sign = 1'b0;
    v.exp  = 8'(120 + $urandom_range(0, 14));
    return v;
  endfunction

  task automatic compute_expect();
    fp24_t a2 [] = new[2];
    fp16_t b2 [] = new[2];
    fp24_t a4 [] = new[4];
    fp16_t b4 [] = new[4];
    int g;
    foreach (a2[k]) begin a2[k] = er2[k]; b2[k] = sr2[k]; end
    foreach (a4[k]) begin a4[k] = er4[k]; b4[k] = sr4[k]; end
    g = 1 << mode2;
    for (int k = 0; k < 2; k++) begin
      evld2[k] = ev2[k] && (k % g == 0) && mode2 != 0;
      if (evld2[k]) exp2[k] = group_ref(a2, b2, k, g);
    end
    g = 1 << mode4;
    for (int k = 0; k < 4; k++) begin
      evld4[k] = ev4[k] && (k % g == 0) && mode4 != 0;
      if (evld4[k]) exp4[k] = group_ref(a4, b4, k, g);
    end
  endtask

  initial begin
    rst = 1; mode2 = 0; mode4 = 0; ev2 = 0; ev4 = 0;
    foreach (er2[k]) begin er2[k] = '0; sr2[k] = '0; end
    foreach (er4[k]) begin er4[k] = '0; sr4[k] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (3000) begin
      @(negedge clk);
      mode2 = 1'($urandom);
      mode4 = 2'($urandom_range(0, 2));
      ev2 = 2'($urandom) | 2'b01;
      ev4 = 4'($urandom) | 4'b0001;
      foreach (er2[k]) begin er2[k] = rnd_exp(); sr2[k] = bf16(real'($urandom_range(1, 4000)) / 64.0); end
      foreach (er4[k]) begin er4[k] = rnd_exp(); sr4[k] = bf16(real'($urandom_range(1, 4000)) / 512.0); end
      compute_expect();
      @(posedge clk); #1;
      for (int k = 0; k < 2; k++) begin
        checks++;
        if (ov2[k] !== evld2[k] || (evld2[k] && longint'($signed(oq2[k])) != exp2[k])) begin
          failures++;
          if (failures < 20) $display("FAIL n2 lane %0d mode %0d: v=%b q=%0d exp v=%b q=%0d", k, mode2, ov2[k], $signed(oq2[k]), evld2[k], exp2[k]);
        end
        if (ov2[k]) n_p1++;
      end
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (ov4[k] !== evld4[k] || (evld4[k] && longint'($signed(oq4[k])) != exp4[k])) begin
          failures++;
          if (failures < 20) $display("FAIL n4 lane %0d mode %0d: v=%b q=%0d exp v=%b q=%0d", k, mode4, ov4[k], $signed(oq4[k]), evld4[k], exp4[k]);
        end
      end
    end
    checks++;
    if (n_p1 == 0) begin failures++; $display("FAIL no Path-1 result seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
