// tb_mac_array: self-checking test of the MAC array.
// Runs back-to-back passes of random lengths in 8-bit and 16-bit weight mode
// with random inputs, weights, biases and shifts, and compares every output
// row with a sum computed here in plain integer arithmetic. Also checks that
// out_valid comes exactly 3 cycles after the last element.
module tb_mac_array;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w16;
  logic [4:0] shift;
  logic in_valid, in_first, in_last;
  logic signed [15:0] in_x;
  logic [N*8-1:0] in_w;
  logic [N*16-1:0] bias;
  logic out_valid;
  logic signed [15:0] out_y [N];

  mac_array #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  longint ref_acc [N];
  int cyc = 0, last_cyc = -1;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  task automatic run_pass(bit mode16, int len, int sh);
    for (int r = 0; r < N; r++) ref_acc[r] = 0;
    for (int r = 0; r < N; r++) bias[16*r +: 16] = 16'($urandom_range(0, 4095) - 2048);
    for (int e = 0; e < len; e++) begin
      @(negedge clk);
      w16 = mode16; shift = 5'(sh);
      in_valid = 1; in_first = (e == 0); in_last = (e == len - 1);
      in_x = 16'($urandom);
      in_w = {8{$urandom}};
      for (int r = 0; r < N; r++)
        if (!mode16) ref_acc[r] += longint'(in_x) * longint'($signed(in_w[8*r +: 8]));
        else if (r < N/2) ref_acc[r] += longint'(in_x) * longint'($signed(in_w[16*r +: 16]));
      if (in_last) last_cyc = cyc;
    end
    @(negedge clk);
    in_valid = 0; in_first = 0; in_last = 0;
  endtask

  task automatic check_result(bit mode16, int sh);
    while (!out_valid) @(posedge clk);
    checks++;
    if (cyc - last_cyc != 3) begin
      failures++;
      $display("latency %0d, expected 3", cyc - last_cyc);
    end
    #1;
    for (int r = 0; r < N; r++) begin
      longint t;
      int expv;
      if (mode16 && r >= N/2) t = 0;
      else t = ref_acc[r];
      t = t + (longint'($signed(bias[16*r +: 16])) <<< sh);
      if (sh > 0) t = t + (longint'(1) <<< (sh - 1));
      t = t >>> sh;
      expv = sat16(t);
      checks++;
      if (out_y[r] !== 16'(expv)) begin
        failures++;
        if (failures < 10) $display("row %0d: got %0d expected %0d", r, out_y[r], expv);
      end
    end
    @(posedge clk);
  endtask

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_x = 0; in_w = '0; bias = '0; w16 = 0; shift = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      bit m; int len, sh;
      m   = t % 2;
      len = $urandom_range(1, 60);
      sh  = (t % 3 == 0) ? 0 : (m ? $urandom_range(10, 16) : $urandom_range(4, 8));
      fork
        run_pass(m, len, sh);
        check_result(m, sh);
      join
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
