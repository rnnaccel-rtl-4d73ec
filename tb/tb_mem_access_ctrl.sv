// tb_mem_access_ctrl: self-checking test of the memory access controller.
// The weight port is served by a memory model with random stalls and
// latencies, the local-memory read port by an array with one-cycle latency,
// and compressed passes go through the decompressor. For every pass the test
// checks the captured biases, that each issued element carries the right
// input word (from the right segment) and the right weight vector, the first
// and last marks, and the number of elements. Fetching runs ahead across
// pass boundaries, so beats are counted per layer: exactly the layer's beats
// are read, consecutive from its base address, and at no point more than a
// FIFO's worth beyond the passes issued so far.
module tb_mem_access_ctrl;
  import rnn_pkg::*;
  localparam int N = 32, BW = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic layer_start, pass_start, busy, pass_done;
  logic [31:0] wt_base;
  logic [23:0] layer_beats;
  pass_desc_t pass;
  logic [N*16-1:0] bias;
  logic wt_req_valid, wt_req_ready, wt_rsp_valid;
  logic [31:0] wt_req_addr;
  logic [BW-1:0] wt_rsp_data;
  logic lm_re;
  logic [LM_AW-1:0] lm_raddr;
  logic [15:0] lm_rdata;
  logic dec_in_valid, dec_in_ready, dec_out_valid, dec_out_ready, dec_flush;
  logic [BW-1:0] dec_in_data;
  logic [N*8-1:0] dec_w;
  logic mac_valid, mac_first, mac_last;
  logic signed [15:0] mac_x;
  logic [BW-1:0] raw_w;

  mem_access_ctrl #(.N(N), .BUS_W(BW)) dut (.*);

  wt_mem_model #(.BUS_W(BW), .DEPTH(1024)) u_mem (
    .clk, .rst_n, .req_valid(wt_req_valid), .req_ready(wt_req_ready), .req_addr(wt_req_addr),
    .rsp_valid(wt_rsp_valid), .rsp_data(wt_rsp_data));

  logic [5:0] cb_addr = '0;
  decompressor #(.N(N), .BUS_W(BW)) u_dec (
    .clk, .rst_n, .mode(pass.cmp), .w16(pass.w16), .flush(dec_flush),
    .cb_we(1'b0), .cb_addr, .cb_wdata(16'h0),
    .in_valid(dec_in_valid), .in_ready(dec_in_ready), .in_data(dec_in_data),
    .out_valid(dec_out_valid), .out_ready(dec_out_ready), .out_w(dec_w));

  logic [15:0] lm [8192];
  always_ff @(posedge clk) if (lm_re) lm_rdata <= lm[lm_raddr];

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  // Beats handed to the decompressor, in order.
  logic [BW-1:0] dec_seen [$];
  always @(posedge clk) if (dec_in_valid && dec_in_ready) dec_seen.push_back(dec_in_data);

  int reads_l0, ptr_l0;   // reads and beat index at the layer's start

  function automatic int pass_beats(pass_desc_t p);
    int len;
    len = int'(p.seg0_len) + int'(p.seg1_len);
    if (p.cmp == CMP_OFF) return int'(p.nbias) + len;
    return int'(p.nbias) + (len * cmp_bits(p.cmp) * (p.w16 ? N/2 : N) + BW - 1) / BW;
  endfunction

  task automatic run_pass(pass_desc_t p, ref int beat_ptr);
    int len, el, nbeats;
    len = int'(p.seg0_len) + int'(p.seg1_len);
    dec_seen.delete();
    @(negedge clk);
    pass = p; pass_start = 1;
    @(negedge clk);
    pass_start = 0;
    el = 0;
    while (el < len) begin
      @(posedge clk);
      if (mac_valid) begin
        logic [15:0] ex;
        ex = (el < int'(p.seg0_len)) ? lm[int'(p.seg0_addr) + el]
                                     : lm[int'(p.seg1_addr) + el - int'(p.seg0_len)];
        chk(mac_x === ex, $sformatf("element %0d input %h exp %h", el, mac_x, ex));
        chk(mac_first == (el == 0) && mac_last == (el == len - 1), "first/last marks");
        if (p.cmp == CMP_OFF)
          chk(raw_w === u_mem.mem[beat_ptr + p.nbias + el], $sformatf("element %0d weights", el));
        el++;
      end
    end
    repeat (3) @(posedge clk);
    chk(!busy, "idle after the last element");
    for (int b = 0; b < p.nbias; b++)
      chk(bias[BW*b +: BW] === u_mem.mem[beat_ptr + b], $sformatf("bias beat %0d", b));
    if (p.cmp == CMP_OFF) nbeats = len;
    else nbeats = (len * cmp_bits(p.cmp) * (p.w16 ? N/2 : N) + BW - 1) / BW;
    // beats of later passes may already be fetched: check the total per layer
    chk(u_mem.reads - reads_l0 <= beat_ptr + p.nbias + nbeats - ptr_l0 + 8,
        "fetch runs no further ahead than the FIFO");
    if (p.cmp != CMP_OFF) begin
      chk(dec_seen.size() == nbeats, "beats to decompressor");
      foreach (dec_seen[i])
        chk(dec_seen[i] === u_mem.mem[beat_ptr + p.nbias + i], $sformatf("compressed beat %0d", i));
    end
    beat_ptr += p.nbias + nbeats;
  endtask

  initial begin
    int ptr;
    layer_start = 0; pass_start = 0; pass = '0; wt_base = 0; layer_beats = 0;
    for (int i = 0; i < 8192; i++) lm[i] = 16'($urandom);
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = {8{$urandom}};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int layer = 0; layer < 3; layer++) begin
      pass_desc_t ps [6];
      int total;
      total = 0;
      for (int t = 0; t < 6; t++) begin
        pass_desc_t p;
        p = '0;
        p.seg0_addr = LM_AW'($urandom_range(0, 4000));
        p.seg0_len  = LEN_W'($urandom_range(1, 12));
        p.seg1_addr = LM_AW'($urandom_range(4100, 8000));
        p.seg1_len  = LEN_W'((t % 2) ? $urandom_range(1, 12) : 0);
        p.w16       = (t % 3 == 2);
        p.nbias     = p.w16 ? 2'd1 : 2'd2;
        p.cmp       = cmp_e'(layer);
        ps[t] = p;
        total += pass_beats(p);
      end
      @(negedge clk);
      ptr = 40 * layer;
      ptr_l0 = ptr;
      reads_l0 = u_mem.reads;
      wt_base = 32'(ptr * BW / 8);
      layer_beats = 24'(total);
      layer_start = 1;
      @(negedge clk);
      layer_start = 0;
      for (int t = 0; t < 6; t++) run_pass(ps[t], ptr);
      repeat (4) @(posedge clk);
      chk(u_mem.reads - reads_l0 == total,
          $sformatf("layer %0d: beats read %0d exp %0d", layer, u_mem.reads - reads_l0, total));
    end
    chk(u_mem.bad_addr == 0, "addresses in range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
