// tb_consmax_unit -- self-checking test of one bitwidth-split ConSmax unit.
//
// The LUTs are loaded for a score step of 1/16 (MSB table e^m for the signed upper nibble m,
// LSB table e^(l/16) for the lower nibble l) and the scaling register with
// C = 16 * e^(-beta) / gamma, i.e. beta and gamma of one attention head and four fraction
// bits on the INT8 output. All 256 scores, then a random stream with idle cycles, are pushed
// through. Each result is compared bit-exactly with a reference built from the same bfloat16
// table entries in double precision, checked to lie within one LSB of the ideal
// 16 * e^(S/16 - beta) / gamma, and checked to appear exactly two cycles after its score.
// EXP REG is checked one cycle after the score. A second head (new beta, gamma) is then
// loaded and the stream repeated.
module tb_consmax_unit;
  import consmax_pkg::*;
  import consmax_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic             rst;
  logic             cfg_we;
  cfg_sel_e         cfg_sel;
  logic [3:0]       cfg_addr;
  logic [15:0]      cfg_data;
  logic             in_valid;
  logic [7:0]       in_score;
  logic             out_valid;
  logic [7:0]       out_q;
  logic             exp_valid;
  fp24_t            exp_reg;
  fp16_t            scale_reg;

  consmax_unit #(.IN_W(8), .OUT_W(8)) dut (.*);

  logic [15:0] msb_tab [16];
  logic [15:0] lsb_tab [16];
  logic [15:0] c_word;
  real         beta, gamma;
  longint      cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint t; logic [7:0] s; } sent_t;
  sent_t q_out[$];
  sent_t q_exp[$];

  task automatic cfg_write(input cfg_sel_e sel, input logic [3:0] a, input logic [15:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_addr = a; cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_head(input real b, input real g);
    beta = b; gamma = g;
    for (int i = 0; i < 16; i++) begin
      int m;
      m = (i >= 8) ? i - 16 : i;
      msb_tab[i] = bf16($exp(real'(m)));
      lsb_tab[i] = bf16($exp(real'(i) / 16.0));
      cfg_write(CFG_MSB_LUT, 4'(i), msb_tab[i]);
      cfg_write(CFG_LSB_LUT, 4'(i), lsb_tab[i]);
    end
    c_word = bf16(16.0 * $exp(-b) / g);
    cfg_write(CFG_SCALE, 4'd0, c_word);
  endtask

  function automatic logic [23:0] ref_exp(input logic [7:0] s);
    return fp24(fp_to_real(32'(msb_tab[s[7:4]]), 7) * fp_to_real(32'(lsb_tab[s[3:0]]), 7));
  endfunction
  function automatic longint ref_q(input logic [7:0] s);
    logic [23:0] e, p;
    e = ref_exp(s);
    p = fp24(fp_to_real(32'(e), 15) * fp_to_real(32'(c_word), 7));
    return real_to_int(fp_to_real(32'(p), 15), 8);
  endfunction

  // Monitors.
  always @(posedge clk) if (!rst) begin
    if (exp_valid) begin
      sent_t x;
      checks++;
      if (q_exp.size() == 0) begin failures++; $display("FAIL unexpected exp_valid"); end
      else begin
        x = q_exp.pop_front();
        if (exp_reg !== ref_exp(x.s) || cycle - x.t != 1) begin
          failures++;
          $display("FAIL exp_reg: score=%0d got=%h exp=%h dt=%0d", $signed(x.s), exp_reg, ref_exp(x.s), cycle - x.t);
        end
      end
    end
    if (out_valid) begin
      sent_t x;
      real ideal;
      checks += 2;
      if (q_out.size() == 0) begin failures++; $display("FAIL unexpected out_valid"); end
      else begin
        x = q_out.pop_front();
        if (longint'($signed(out_q)) != ref_q(x.s) || cycle - x.t != 2) begin
          failures++;
          $display("FAIL out: score=%0d got=%0d exp=%0d dt=%0d", $signed(x.s), $signed(out_q), ref_q(x.s), cycle - x.t);
        end
        ideal = 16.0 * $exp(real'($signed(x.s)) / 16.0 - beta) / gamma;
        if (ideal > 127.0) ideal = 127.0;
        if (real'($signed(out_q)) - ideal > 1.0 || ideal - real'($signed(out_q)) > 1.0) begin
          failures++;
          $display("FAIL accuracy: score=%0d got=%0d ideal=%f", $signed(x.s), $signed(out_q), ideal);
        end
      end
    end
  end

  task automatic send(input logic [7:0] s);
    @(negedge clk);
    in_valid = 1; in_score = s;
    @(posedge clk);
    q_out.push_back('{cycle, s});
    q_exp.push_back('{cycle, s});
    #1;
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 0; in_score = 8'($urandom);
  endtask

  task automatic stream();
    for (int i = 0; i < 256; i++) send(8'(i));
    repeat (300) begin
      if ($urandom_range(0, 3) == 0) idle();
      else send(8'($urandom));
    end
    idle();
    repeat (4) @(posedge clk);
  endtask

  initial begin
    rst = 1; cfg_we = 0; cfg_sel = CFG_MSB_LUT; cfg_addr = 0; cfg_data = 0; in_valid = 0; in_score = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    load_head(1.5, 100.0);
    checks++;
    if (scale_reg !== c_word) begin failures++; $display("FAIL scale_reg export"); end
    stream();
    load_head(0.5, 60.0);
    stream();
    checks++;
    if (q_out.size() != 0 || q_exp.size() != 0) begin failures++; $display("FAIL results missing"); end
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
