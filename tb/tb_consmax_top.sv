// tb_consmax_top -- end-to-end test of the ConSmax hardware at its default size (two units).
//
// 1. Head A, 8-bit mode: the LUTs of both units are loaded for a score step of 1/16 and each
//    unit's scaling register with C = 16 e^(-beta)/gamma (beta = 1.5, gamma = 100). A score
//    vector of 256 tokens is streamed, two scores per cycle (one per unit), and each Path-0
//    result is checked.
// 2. Head B, 16-bit mode: the two units are reloaded so that together they cover a 16-bit
//    score with step 1/4096 -- unit 0 takes the low byte (tables e^(16 m/4096), e^(l/4096)),
//    unit 1 the high byte (tables e^m with signed m, e^(l/16)) -- and unit 0's C is
//    256 e^(-beta)/gamma. A 256-token vector of 16-bit scores is streamed, one per cycle,
//    and each Path-1 result is checked.
// 3. A random stream that switches mode from cycle to cycle, with idle cycles.
// Every result is compared bit-exactly with a double-precision reference built from the
// loaded table words, checked to arrive exactly two cycles after its score, and (Path-1 of
// head B, Path-0 of head A) checked against the ideal C e^S to within rounding of the
// bfloat16 tables. Counted mechanisms, each of which must occur: configuration writes,
// Path-0 results, Path-1 results, mode switches between consecutive scores, back-to-back
// scores, idle gaps, a change of head (scaling constant), and output saturation.
module tb_consmax_top;
  import consmax_pkg::*;
  import consmax_ref_pkg::*;

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

  // Model of the loaded configuration.
  logic [15:0] msb_tab [2][16];
  logic [15:0] lsb_tab [2][16];
  logic [15:0] c_tab   [2];

  // Mechanism counters.
  int n_cfg = 0, n_p0 = 0, n_p1 = 0, n_switch = 0, n_b2b = 0, n_gap = 0, n_head = 0, n_sat = 0;

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct {
    longint     t;
    logic [0:0] mode;
    logic [7:0] s [2];
    real        ideal0;   // ideal Path-0 value of lane 0 (head A), negative if not checked
    real        ideal1;   // ideal Path-1 value (head B), negative if not checked
  } sent_t;
  sent_t sent[$];

  task automatic cfg_write(input int u, input cfg_sel_e sel, input int a, input logic [15:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_unit = 1'(u); cfg_sel = sel; cfg_addr = 4'(a); cfg_data = d;
    case (sel)
      CFG_MSB_LUT: msb_tab[u][a] = d;
      CFG_LSB_LUT: lsb_tab[u][a] = d;
      default:     c_tab[u]      = d;
    endcase
    @(negedge clk);
    cfg_we = 0;
    n_cfg++;
  endtask

  // Reference for one lane: C * (MSB x LSB), rounded as the datapath rounds.
  function automatic logic [23:0] lane_exp(input int u, input logic [7:0] s);
    return fp24(fp_to_real(32'(msb_tab[u][s[7:4]]), 7) * fp_to_real(32'(lsb_tab[u][s[3:0]]), 7));
  endfunction
  function automatic longint ref_p0(input int u, input logic [7:0] s);
    logic [23:0] p;
    p = fp24(fp_to_real(32'(lane_exp(u, s)), 15) * fp_to_real(32'(c_tab[u]), 7));
    return real_to_int(fp_to_real(32'(p), 15), 8);
  endfunction
  function automatic longint ref_p1(input logic [7:0] s [2]);
    logic [23:0] c;
    c = fp24(fp_to_real(32'(lane_exp(1, s[1])), 15) * fp_to_real(32'(lane_exp(0, s[0])), 15));
    c = fp24(fp_to_real(32'(c), 15) * fp_to_real(32'(c_tab[0]), 7));
    return real_to_int(fp_to_real(32'(c), 15), 16);
  endfunction

  // Expected values are computed when the score is sent, against the configuration then.
  typedef struct { longint t; logic [0:0] mode; longint q0 [2]; longint q1; real ideal0; real ideal1; } exp_t;
  exp_t expq[$];
  logic       last_valid = 0;
  logic [0:0] last_mode = 0;

  task automatic send(input logic [0:0] m, input logic [7:0] s0, input logic [7:0] s1, input real i0, input real i1);
    exp_t x;
    logic [7:0] s [2];
    @(negedge clk);
    in_valid = 1; mode = m; in_score[0] = s0; in_score[1] = s1;
    s[0] = s0; s[1] = s1;
    x.mode = m; x.q0[0] = ref_p0(0, s0); x.q0[1] = ref_p0(1, s1); x.q1 = ref_p1(s);
    x.ideal0 = i0; x.ideal1 = i1;
    @(posedge clk);
    x.t = cycle;
    if (last_valid) begin
      n_b2b++;
      if (last_mode != m) n_switch++;
    end
    last_valid = 1; last_mode = m;
    expq.push_back(x);
    #1;
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 0; in_score[0] = 8'($urandom); in_score[1] = 8'($urandom); mode = 1'($urandom);
    @(posedge clk);
    if (last_valid) n_gap++;
    last_valid = 0;
    #1;
  endtask

  task automatic near(input string what, input longint got, input real ideal, input real rel, input int lim);
    real r;
    r = (ideal > real'(lim)) ? real'(lim) : ideal;
    checks++;
    if (real'(got) - r > 1.0 + rel * r || r - real'(got) > 1.0 + rel * r) begin
      failures++;
      $display("FAIL %s accuracy: got=%0d ideal=%f", what, got, ideal);
    end
  endtask

  // Output monitor.
  always @(posedge clk) if (!rst && (p0_valid != 0 || p1_valid != 0)) begin
    exp_t x;
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("FAIL result without a score");
    end else begin
      x = expq.pop_front();
      if (cycle - x.t != 2) begin failures++; $display("FAIL latency %0d", cycle - x.t); end
      checks += 3;
      for (int k = 0; k < 2; k++) begin
        if (!p0_valid[k] || longint'($signed(p0_q[k])) != x.q0[k]) begin
          failures++; $display("FAIL p0 lane %0d: got=%0d exp=%0d", k, $signed(p0_q[k]), x.q0[k]);
        end
        n_p0++;
        if ($signed(p0_q[k]) == 127) n_sat++;
      end
      if (p1_valid !== {1'b0, x.mode}) begin
        failures++; $display("FAIL p1_valid=%b mode=%0d", p1_valid, x.mode);
      end else if (x.mode == 1) begin
        n_p1++;
        checks++;
        if (longint'($signed(p1_q[0])) != x.q1) begin
          failures++; $display("FAIL p1: got=%0d exp=%0d", $signed(p1_q[0]), x.q1);
        end
        if (x.ideal1 >= 0.0) near("p1", longint'($signed(p1_q[0])), x.ideal1, 0.03, 32767);
      end
      if (x.ideal0 >= 0.0) near("p0", longint'($signed(p0_q[0])), x.ideal0, 0.03, 127);
    end
  end

  task automatic load_head_a(input real beta, input real gamma);
    for (int u = 0; u < 2; u++) begin
      for (int i = 0; i < 16; i++) begin
        cfg_write(u, CFG_MSB_LUT, i, bf16($exp(real'((i >= 8) ? i - 16 : i))));
        cfg_write(u, CFG_LSB_LUT, i, bf16($exp(real'(i) / 16.0)));
      end
      cfg_write(u, CFG_SCALE, 0, bf16(16.0 * $exp(-beta) / gamma));
    end
  endtask

  task automatic load_head_b(input real beta, input real gamma);
    for (int i = 0; i < 16; i++) begin
      cfg_write(0, CFG_MSB_LUT, i, bf16($exp(16.0 * real'(i) / 4096.0)));
      cfg_write(0, CFG_LSB_LUT, i, bf16($exp(real'(i) / 4096.0)));
      cfg_write(1, CFG_MSB_LUT, i, bf16($exp(real'((i >= 8) ? i - 16 : i))));
      cfg_write(1, CFG_LSB_LUT, i, bf16($exp(real'(i) / 16.0)));
    end
    cfg_write(0, CFG_SCALE, 0, bf16(256.0 * $exp(-beta) / gamma));
    cfg_write(1, CFG_SCALE, 0, bf16(16.0 * $exp(-beta) / gamma));
  endtask

  initial begin
    real beta, gamma;
    rst = 1; cfg_we = 0; cfg_unit = 0; cfg_sel = CFG_MSB_LUT; cfg_addr = 0; cfg_data = 0;
    in_valid = 0; mode = 0; in_score[0] = 0; in_score[1] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;

    // 1. Head A, 8-bit mode, 256 tokens over two lanes.
    beta = 1.5; gamma = 100.0;
    load_head_a(beta, gamma);
    for (int i = 0; i < 128; i++) begin
      logic [7:0] s0, s1;
      s0 = 8'(2 * i); s1 = 8'(2 * i + 1);
      send(1'b0, s0, s1, 16.0 * $exp(real'($signed(s0)) / 16.0 - beta) / gamma, -1.0);
    end
    idle();

    // A head whose constant drives large scores into saturation.
    beta = 0.0; gamma = 10.0;
    cfg_write(0, CFG_SCALE, 0, bf16(16.0 * $exp(-beta) / gamma));
    cfg_write(1, CFG_SCALE, 0, bf16(16.0 * $exp(-beta) / gamma));
    n_head++;
    for (int i = 0; i < 32; i++) begin
      logic [7:0] s0;
      s0 = 8'(64 + 2 * i);
      send(1'b0, s0, 8'($urandom), 16.0 * $exp(real'($signed(s0)) / 16.0 - beta) / gamma, -1.0);
    end
    idle();

    // 2. Head B, 16-bit mode, 256 tokens.
    beta = 1.5; gamma = 100.0;
    load_head_b(beta, gamma);
    n_head++;
    for (int i = 0; i < 256; i++) begin
      logic [15:0] s;
      s = 16'($urandom_range(0, 65535));
      if (i < 4) s = 16'(32767 - i);            // the largest scores
      send(1'b1, s[7:0], s[15:8], -1.0, 256.0 * $exp(real'($signed(s)) / 4096.0 - beta) / gamma);
    end

    // 3. Mode switching stream with gaps.
    repeat (400) begin
      if ($urandom_range(0, 4) == 0) idle();
      else send(1'($urandom), 8'($urandom), 8'($urandom), -1.0, -1.0);
    end
    idle(); idle(); idle();

    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    $display("mechanisms: cfg_writes=%0d path0=%0d path1=%0d mode_switches=%0d back_to_back=%0d gaps=%0d head_changes=%0d saturations=%0d",
             n_cfg, n_p0, n_p1, n_switch, n_b2b, n_gap, n_head, n_sat);
    checks += 8;
    if (n_cfg == 0)    begin failures++; $display("FAIL no configuration write"); end
    if (n_p0 == 0)     begin failures++; $display("FAIL no Path-0 result"); end
    if (n_p1 == 0)     begin failures++; $display("FAIL no Path-1 result"); end
    if (n_switch == 0) begin failures++; $display("FAIL no mode switch"); end
    if (n_b2b == 0)    begin failures++; $display("FAIL no back-to-back scores"); end
    if (n_gap == 0)    begin failures++; $display("FAIL no idle gap"); end
    if (n_head == 0)   begin failures++; $display("FAIL no head change"); end
    if (n_sat == 0)    begin failures++; $display("FAIL no saturation"); end
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
