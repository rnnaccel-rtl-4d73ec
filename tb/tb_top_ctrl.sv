// tb_top_ctrl: self-checking test of the register interface and sequencer.
//
// The Top Ctrl runs against stand-ins for its neighbours: a memory-access
// stand-in that takes each pass descriptor, stays busy for the pass length
// and presents the pass's input words one per cycle, then makes a MAC-array
// stand-in return 32 pseudo-random results that depend on the pass number;
// a local memory array; and the real activation unit. The test checks the
// register read-back, the exact sequence of pass descriptors for FC, GRU and
// LSTM layers (segments, lengths, bias beats, format), the tile count, the
// layer's total weight-beat count against the passes actually issued, and
// every value written to local memory against a reference that applies the
// same activation and gate arithmetic to the stand-in's results.
module tb_top_ctrl;
  import rnn_pkg::*;
  localparam int N = 32, TW = 1 + 2 + 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mmio_req, mmio_we, mmio_gnt, mmio_rvalid, irq;
  logic [15:0] mmio_addr;
  logic [31:0] mmio_wdata, mmio_rdata;
  layer_cfg_t cfg;
  logic cb_we;
  logic [5:0] cb_addr;
  logic [15:0] cb_wdata;
  logic layer_start, pass_start, mac_busy, mac_issue, arr_valid;
  logic [23:0] layer_beats;
  logic signed [15:0] mac_x;
  pass_desc_t pass;
  logic signed [15:0] arr_y [N];
  logic act_in_valid, act_out_valid;
  act_e act_in_mode;
  logic signed [15:0] act_in_x, act_out_y;
  logic [TW-1:0] act_in_tag, act_out_tag;
  logic lm_re;
  logic [LM_AW-1:0] lm_raddr;
  logic [15:0] lm_rdata;
  logic [1:0] lm_we;
  logic [LM_AW-1:0] lm_waddr [2];
  logic [15:0] lm_wdata [2];

  top_ctrl #(.N(N), .TAG_W(TW)) dut (.*);

  act_unit #(.TAG_W(TW)) u_act (
    .clk, .rst_n, .in_valid(act_in_valid), .in_mode(act_in_mode), .in_x(act_in_x),
    .in_tag(act_in_tag), .out_valid(act_out_valid), .out_y(act_out_y), .out_tag(act_out_tag));

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- local memory ----------------
  logic [15:0] lm [8192];
  always @(posedge clk) begin
    if (lm_re) lm_rdata <= lm[lm_raddr];
    for (int p = 0; p < 2; p++) if (lm_we[p]) lm[lm_waddr[p]] <= lm_wdata[p];
  end

  // ---------------- memory access + MAC array stand-ins ----------------
  pass_desc_t seen [$];
  int npass = 0;
  function automatic int fake_y(int pn, int lane);
    return int'($signed(16'((pn * 7919 + lane * 104729) % 16384 - 8192)));
  endfunction
  initial begin
    mac_busy = 0; mac_issue = 0; arr_valid = 0; mac_x = 0;
    forever begin
      @(posedge clk);
      if (pass_start) begin
        int len, pn;
        pass_desc_t q;
        q = pass;
        seen.push_back(pass);
        pn = npass++;
        len = int'(pass.seg0_len) + int'(pass.seg1_len);
        @(negedge clk);
        mac_busy = 1;
        for (int e = 0; e < len; e++) begin
          mac_issue = 1;
          mac_x = (e < int'(q.seg0_len)) ? lm[int'(q.seg0_addr) + e]
                                         : lm[int'(q.seg1_addr) + e - int'(q.seg0_len)];
          @(negedge clk);
        end
        mac_issue = 0; mac_busy = 0;
        fork
          begin
            repeat (3) @(negedge clk);
            for (int i = 0; i < N; i++) arr_y[i] = 16'(fake_y(pn, i));
            arr_valid = 1;
            @(negedge clk);
            arr_valid = 0;
          end
        join_none
      end
    end
  end

  // ---------------- host ----------------
  task automatic mmio_write(logic [15:0] a, logic [31:0] d);
    @(negedge clk);
    mmio_req = 1; mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(posedge clk);
    while (!mmio_gnt) @(posedge clk);
    @(negedge clk);
    mmio_req = 0; mmio_we = 0;
  endtask
  task automatic mmio_read(logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    mmio_req = 1; mmio_we = 0; mmio_addr = a;
    @(posedge clk);
    while (!mmio_gnt) @(posedge clk);
    @(negedge clk);
    mmio_req = 0;
    while (!mmio_rvalid) @(posedge clk);
    d = mmio_rdata;
  endtask

  // ---------------- reference ----------------
  typedef logic [16:0] tbl_t [513];
  function automatic tbl_t mk_tbl();
    tbl_t t;
    for (int k = 0; k <= 512; k++) t[k] = 17'($rtoi($tanh(real'(k) / 64.0) * 65536.0 + 0.5));
    return t;
  endfunction
  tbl_t TT = mk_tbl();
  function automatic int sat16(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction
  function automatic int ref_act(act_e m, int x);
    int mag, idx, fr, mm, f;
    if (m == ACT_NONE) return x;
    if (m == ACT_RELU) return x < 0 ? 0 : x;
    mag = x < 0 ? -x : x;
    if (mag > 32767) mag = 32767;
    if (m == ACT_SIGMOID) begin idx = mag >> 7; fr = mag & 127; end
    else begin idx = mag >> 6; fr = (mag & 63) << 1; end
    mm = TT[idx] + (((TT[idx+1] - TT[idx]) * fr) >>> 7);
    if (m == ACT_SIGMOID) f = x < 0 ? 32768 - (mm >> 1) : 32768 + (mm >> 1);
    else f = x < 0 ? -mm : mm;
    return (f + 8) >>> 4;
  endfunction

  task automatic run(net_e net, act_e act, bit w16, int I, int H, int x, int h, int ho, int c);
    logic [31:0] d;
    int lanes, tiles, np, p0;
    int expv [8192];
    bit touched [8192];
    lanes = w16 ? 16 : 32;
    tiles = (H + lanes - 1) / lanes;
    np = (net == NET_FC) ? 1 : 4;
    for (int i = 0; i < 8192; i++) begin lm[i] = 16'($urandom_range(0, 16383) - 8192); expv[i] = int'($signed(lm[i])); end
    mmio_write(REG_MODE, {19'd0, 5'd8, w16, CMP_8X, act, net});
    mmio_write(REG_INSIZE, I); mmio_write(REG_OUTSIZE, H);
    mmio_write(REG_XADDR, x); mmio_write(REG_HADDR, h); mmio_write(REG_HOADDR, ho); mmio_write(REG_CADDR, c);
    mmio_write(REG_WTBASE, 32'h1234_5600);
    mmio_read(REG_HOADDR, d); chk(d == 32'(ho), "HOADDR read-back");
    mmio_read(REG_WTBASE, d); chk(d == 32'h1234_5600, "WTBASE read-back");
    seen.delete();
    p0 = npass;
    mmio_write(REG_CTRL, 1);
    while (!irq) @(posedge clk);
    chk(seen.size() == tiles * np, $sformatf("%0d passes, expected %0d", seen.size(), tiles * np));
    begin
      int nb;
      nb = 0;
      foreach (seen[k])
        nb += int'(seen[k].nbias) +
              ((int'(seen[k].seg0_len) + int'(seen[k].seg1_len)) * 4 * lanes + 255) / 256;
      chk(layer_beats == 24'(nb), $sformatf("layer beats %0d, passes read %0d", layer_beats, nb));
    end
    for (int t = 0; t < tiles; t++) begin
      int g [4][32];
      for (int p = 0; p < np; p++) begin
        pass_desc_t q, e;
        act_e m;
        q = seen[t * np + p];
        e = '0;
        e.nbias = w16 ? 2'd1 : 2'd2; e.cmp = CMP_8X; e.w16 = w16;
        e.seg0_addr = LM_AW'(x); e.seg0_len = LEN_W'(I);
        if (net == NET_GRU && p == 3) begin e.seg0_addr = LM_AW'(h); e.seg0_len = LEN_W'(H); end
        else if (net == NET_LSTM || (net == NET_GRU && p < 2)) begin
          e.seg1_addr = LM_AW'(h); e.seg1_len = LEN_W'(H);
        end
        chk(q == e, $sformatf("tile %0d pass %0d descriptor", t, p));
        if (net == NET_FC) m = act;
        else if (net == NET_GRU) m = (p < 2) ? ACT_SIGMOID : ACT_NONE;
        else m = (p == 2) ? ACT_TANH : ACT_SIGMOID;
        for (int l = 0; l < lanes; l++) g[p][l] = ref_act(m, fake_y(p0 + t * np + p, l));
      end
      for (int l = 0; l < lanes && t * lanes + l < H; l++) begin
        int r;
        r = t * lanes + l;
        if (net == NET_FC) expv[ho + r] = g[0][l];
        else if (net == NET_GRU) begin
          int n;
          n = ref_act(ACT_TANH, sat16(longint'(g[2][l]) + ((g[1][l] * g[3][l]) >>> 12)));
          expv[ho + r] = sat16(longint'(n) + ((g[0][l] * (expv[h + r] - n)) >>> 12));
        end else begin
          int cn;
          cn = sat16((longint'(g[1][l]) * expv[c + r] + longint'(g[0][l]) * g[2][l]) >>> 12);
          expv[c + r] = cn;
          expv[ho + r] = sat16((g[3][l] * ref_act(ACT_TANH, cn)) >>> 12);
        end
        touched[ho + r] = 1;
        if (net == NET_LSTM) touched[c + r] = 1;
      end
    end
    for (int i = 0; i < 8192; i++)
      if (touched[i] || (i >= ho && i < ho + 64))
        chk(lm[i] == 16'(expv[i]), $sformatf("%s word %0d = %0d expected %0d", net.name(), i, $signed(lm[i]), expv[i]));
    mmio_read(REG_STATUS, d); chk(d[1:0] == 2'b10, "status done, not busy");
  endtask

  initial begin
    mmio_req = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(NET_FC,   ACT_RELU,    0, 20, 45, 0, 1024, 4096, 3072);
    run(NET_FC,   ACT_SIGMOID, 1, 40, 20, 0, 1024, 4096, 3072);
    run(NET_GRU,  ACT_NONE,    0, 10, 40, 0, 1024, 2048, 3072);
    run(NET_LSTM, ACT_NONE,    1, 12, 20, 0, 1024, 2048, 3072);
    run(NET_GRU,  ACT_NONE,    1, 3,  17, 0, 1024, 2048, 3072);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
