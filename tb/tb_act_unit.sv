// tb_act_unit: self-checking test of the activation unit.
// Streams every 7th Q3.12 input code (and the extremes) through each mode,
// one per cycle, and compares the result with tanh, the logistic sigmoid,
// x/(1+|x|), max(0,x) and identity computed in real arithmetic. The allowed
// error is 0.0002, the bound the unit is designed to. Also checks the 3-cycle
// latency and that tags come back in order.
module tb_act_unit;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  act_e in_mode;
  logic signed [15:0] in_x, out_y;
  logic [15:0] in_tag, out_tag;

  act_unit #(.TAG_W(16)) dut (.*);

  int checks = 0, failures = 0;
  real max_err [5];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ref_f(act_e m, real x);
    case (m)
      ACT_TANH:     return $tanh(x);
      ACT_SIGMOID:  return 1.0 / (1.0 + $exp(-x));
      ACT_SOFTSIGN: return x / (1.0 + (x < 0 ? -x : x));
      ACT_RELU:     return x < 0 ? 0.0 : x;
      default:      return x;
    endcase
  endfunction

  // Input sequence: mode-major, every 7th code plus both extremes.
  int n_in;
  act_e   q_mode [$];
  int     q_code [$];
  int     q_cyc  [$];

  always @(posedge clk) begin
    if (in_valid) begin
      q_mode.push_back(in_mode);
      q_code.push_back(int'(in_x));
      q_cyc.push_back(cyc);
    end
    if (out_valid) begin
      act_e m; int code, c0; real e;
      m = q_mode.pop_front(); code = q_code.pop_front(); c0 = q_cyc.pop_front();
      checks++;
      e = real'(out_y) / 4096.0 - ref_f(m, real'(code) / 4096.0);
      if (e < 0) e = -e;
      if (e > max_err[m]) max_err[m] = e;
      if (e > 0.0002 || cyc - c0 != ACT_LAT || out_tag != 16'(code)) begin
        failures++;
        if (failures < 10)
          $display("mode %s x=%0d y=%0d err=%f lat=%0d", m.name(), code, out_y, e, cyc - c0);
      end
    end
  end

  initial begin
    act_e modes [5] = '{ACT_TANH, ACT_SIGMOID, ACT_SOFTSIGN, ACT_RELU, ACT_NONE};
    in_valid = 0; in_mode = ACT_NONE; in_x = 0; in_tag = 0;
    for (int i = 0; i < 5; i++) max_err[i] = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (modes[k]) begin
      for (int c = -32768; c <= 32767; c += 7) begin
        int code;
        code = (c + 7 > 32767) ? 32767 : c;
        @(negedge clk);
        in_valid = ($urandom_range(0, 7) != 0);
        in_mode  = modes[k];
        in_x     = 16'(code);
        in_tag   = 16'(code);
        if (!in_valid) c -= 7;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(posedge clk);
    if (q_code.size() != 0) begin
      failures++;
      $display("%0d results missing", q_code.size());
    end
    for (int i = 0; i < 5; i++) $display("max error mode %0d: %f", i, max_err[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
