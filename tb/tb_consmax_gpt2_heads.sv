// tb_consmax_gpt2_heads -- the attention-normalisation workload of a small GPT-2 model
// (6 layers x 6 heads, 256-token context) on the default two-unit ConSmax hardware.
//
// Each of the 36 heads has its own trained beta (drawn from [0.5, 2.5]) and gamma (around
// 100). The LUTs are loaded once for an INT8 score step of 1/16; per head the host rewrites
// only the scaling constant C = 16 e^(-beta)/gamma of both units, then streams a 256-entry
// score vector, two scores per cycle, back to back. Every Path-0 result is compared
// bit-exactly with a double-precision reference of the datapath and to within rounding of
// the ideal 16 e^(S/16 - beta)/gamma (saturated to 127), and must arrive two cycles after its
// score. The test also checks that one head takes 128 cycles of streaming.
module tb_consmax_gpt2_heads;
  import consmax_pkg::*;
  import consmax_ref_pkg::*;

  localparam int LAYERS = 6;
  localparam int HEADS  = 6;
  localparam int TOKENS = 256;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        rst;
  logic        cfg_we;
  logic [0:0]  cfg_unit;
  cfg_sel_e    cfg_sel;
  logic [3:0]  cfg_addr;
  logic [15:0] cfg_data;
  logic        in_valid;
  logic [0:0]  mode;
  logic [7:0]  in_score [2];
  logic [1:0]  p0_valid;
  logic [7:0]  p0_q [2];
  logic [1:0]  p1_valid;
  logic [15:0] p1_q [2];

  consmax_top dut (.*);

  logic [15:0] msb_tab [16];
  logic [15:0] lsb_tab [16];
  logic [15:0] c_word;
  real         beta, gamma;
  longint      cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint t; longint q [2]; real ideal [2]; } exp_t;
  exp_t expq[$];
  int   n_results = 0, n_heads = 0;

  task automatic cfg_write(input int u, input cfg_sel_e sel, input int a, input logic [15:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_unit = 1'(u); cfg_sel = sel; cfg_addr = 4'(a); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic longint ref_q(input logic [7:0] s);
    logic [23:0] e, p;
    e = fp24(fp_to_real(32'(msb_tab[s[7:4]]), 7) * fp_to_real(32'(lsb_tab[s[3:0]]), 7));
    p = fp24(fp_to_real(32'(e), 15) * fp_to_real(32'(c_word), 7));
    return real_to_int(fp_to_real(32'(p), 15), 8);
  endfunction

  always @(posedge clk) if (!rst && p0_valid != 0) begin
    exp_t x;
    checks++;
    if (expq.size() == 0 || p0_valid != 2'b11 || p1_valid != 2'b00) begin
      failures++; $display("FAIL unexpected output valid=%b/%b", p0_valid, p1_valid);
    end else begin
      x = expq.pop_front();
      if (cycle - x.t != 2) begin failures++; $display("FAIL latency %0d", cycle - x.t); end
      for (int k = 0; k < 2; k++) begin
        real r, g;
        checks += 2;
        n_results++;
        g = real'($signed(p0_q[k]));
        if (longint'($signed(p0_q[k])) != x.q[k]) begin
          failures++; $display("FAIL lane %0d got=%0d exp=%0d", k, $signed(p0_q[k]), x.q[k]);
        end
        r = (x.ideal[k] > 127.0) ? 127.0 : x.ideal[k];
        if (g - r > 1.0 + 0.03 * r || r - g > 1.0 + 0.03 * r) begin
          failures++; $display("FAIL lane %0d accuracy got=%0d ideal=%f", k, $signed(p0_q[k]), x.ideal[k]);
        end
      end
    end
  end

  initial begin
    longint t0;
    rst = 1; cfg_we = 0; cfg_unit = 0; cfg_sel = CFG_MSB_LUT; cfg_addr = 0; cfg_data = 0;
    in_valid = 0; mode = 0; in_score[0] = 0; in_score[1] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int i = 0; i < 16; i++) begin
      msb_tab[i] = bf16($exp(real'((i >= 8) ? i - 16 : i)));
      lsb_tab[i] = bf16($exp(real'(i) / 16.0));
      for (int u = 0; u < 2; u++) begin
        cfg_write(u, CFG_MSB_LUT, i, msb_tab[i]);
        cfg_write(u, CFG_LSB_LUT, i, lsb_tab[i]);
      end
    end
    for (int l = 0; l < LAYERS; l++) begin
      for (int h = 0; h < HEADS; h++) begin
        beta   = 0.5 + 2.0 * real'($urandom_range(0, 1000)) / 1000.0;
        gamma  = 80.0 + real'($urandom_range(0, 40));
        c_word = bf16(16.0 * $exp(-beta) / gamma);
        cfg_write(0, CFG_SCALE, 0, c_word);
        cfg_write(1, CFG_SCALE, 0, c_word);
        @(negedge clk);
        t0 = cycle;
        for (int i = 0; i < TOKENS / 2; i++) begin
          exp_t x;
          logic [7:0] s [2];
          s[0] = 8'($urandom); s[1] = 8'($urandom);
          if (i == 0) begin s[0] = 8'd127; s[1] = 8'd128; end   // both extremes once per head
          in_valid = 1; in_score[0] = s[0]; in_score[1] = s[1];
          for (int k = 0; k < 2; k++) begin
            x.q[k]     = ref_q(s[k]);
            x.ideal[k] = 16.0 * $exp(real'($signed(s[k])) / 16.0 - beta) / gamma;
          end
          @(posedge clk);
          x.t = cycle;
          expq.push_back(x);
          @(negedge clk);
        end
        in_valid = 0;
        checks++;
        if (cycle - t0 != TOKENS / 2) begin failures++; $display("FAIL head took %0d cycles", cycle - t0); end
        repeat (3) @(posedge clk);
        n_heads++;
      end
    end
    checks += 2;
    if (expq.size() != 0) begin failures++; $display("FAIL results missing"); end
    if (n_results != LAYERS * HEADS * TOKENS) begin failures++; $display("FAIL %0d results", n_results); end
    $display("heads=%0d results=%0d", n_heads, n_results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
