// tb_afib_bilstm: a bidirectional LSTM classifier run end to end.
//
// The network is the kind used for atrial-fibrillation detection on ECG
// features: per time step a 12-value feature vector, one LSTM layer of 64
// units in each direction, and a fully connected layer 128 -> 2 on the last
// hidden state of each direction. That is 2 x 4 x 64 x (12 + 64) weights plus
// biases and 258 FC parameters, about 40K in all. The sequence has 6 steps.
// All weights are 8x compressed (4-bit codebook indices).
//
// The host model loads the input sequence, zero state and the codebook, then
// runs 6 forward steps with one weight set, 6 backward steps with another
// (same weights for every step of a direction, as in a real network), and the
// FC layer, swapping the h addresses between steps. After every layer all
// outputs and cell states are read back and compared bit for bit with a
// reference model; the reference arithmetic is the same as in the end-to-end
// test of the accelerator. Cycle counts per LSTM step and for the whole
// sequence are reported. Timing: the clock period is 4 time units; the memory
// model refuses a quarter of weight requests and answers after 2-5 cycles.
module tb_afib_bilstm;
  import rnn_pkg::*;
  localparam int N = 32, BW = 256;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic mmio_req, mmio_we, mmio_gnt, mmio_rvalid, irq;
  logic [15:0] mmio_addr;
  logic [31:0] mmio_wdata, mmio_rdata;
  logic wt_req_valid, wt_req_ready, wt_rsp_valid;
  logic [31:0] wt_req_addr;
  logic [BW-1:0] wt_rsp_data;

  rnn_accel dut (.*);

  wt_mem_model #(.BUS_W(BW), .DEPTH(16384)) u_mem (
    .clk, .rst_n, .req_valid(wt_req_valid), .req_ready(wt_req_ready), .req_addr(wt_req_addr),
    .rsp_valid(wt_rsp_valid), .rsp_data(wt_rsp_data));

  int checks = 0, failures = 0;

  initial begin
    repeat (3000000) @(posedge clk);
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

  // ---------------- mechanism counters ----------------
  int n_net [3], n_act [5], n_cmp [4], n_w16, n_partial, n_stall, n_overlap, n_wait;
  always @(posedge clk) if (rst_n) begin
    if (wt_req_valid && !wt_req_ready) n_stall++;
    if (dut.u_top_ctrl.drain_issue && dut.mac_valid) n_overlap++;
    if (dut.u_top_ctrl.res_ready_q && dut.u_top_ctrl.res_out_q && !dut.u_top_ctrl.capture) n_wait++;
  end

  // ---------------- host MMIO ----------------
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

  // ---------------- reference arithmetic ----------------
  typedef logic [16:0] tbl_t [513];
  function automatic tbl_t mk_tbl(bit is_soft);
    tbl_t t;
    for (int k = 0; k <= 512; k++) begin
      real u;
      u = real'(k) / 64.0;
      t[k] = 17'($rtoi((is_soft ? u / (1.0 + u) : $tanh(u)) * 65536.0 + 0.5));
    end
    return t;
  endfunction
  tbl_t TT = mk_tbl(0), ST = mk_tbl(1);

  function automatic int sat16(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  function automatic int ref_act(act_e m, int x);
    int mag, idx, fr, lo, hi, mm, f;
    if (m == ACT_NONE) return x;
    if (m == ACT_RELU) return x < 0 ? 0 : x;
    mag = x < 0 ? -x : x;
    if (mag > 32767) mag = 32767;
    if (m == ACT_SIGMOID) begin idx = mag >> 7; fr = mag & 127; end
    else begin idx = mag >> 6; fr = (mag & 63) << 1; end
    lo = (m == ACT_SOFTSIGN) ? ST[idx] : TT[idx];
    hi = (m == ACT_SOFTSIGN) ? ST[idx+1] : TT[idx+1];
    mm = lo + (((hi - lo) * fr) >>> 7);
    if (m == ACT_SIGMOID) f = x < 0 ? 32768 - (mm >> 1) : 32768 + (mm >> 1);
    else f = x < 0 ? -mm : mm;
    return (f + 8) >>> 4;
  endfunction

  function automatic int requant(longint s, int b, int sh);
    longint t;
    t = s + (longint'(b) <<< sh);
    if (sh > 0) t += longint'(1) <<< (sh - 1);
    return sat16(t >>> sh);
  endfunction

  function automatic int qmul(int a, int b);   // Q3.12 product, floor
    return (a * b) >>> 12;
  endfunction

  // ---------------- layer description ----------------
  int lm_img [8192];              // model of local memory
  int W [4][][];                  // [pass][row][col] weights (integers)
  int B [4][];                    // [pass][row] biases (Q3.12)
  int cb [64];
  int stream_beats;

  typedef struct {
    net_e net; act_e act; cmp_e cmp; bit w16; int shift;
    int I, H, x, h, ho, c; int base;
  } layer_t;

  function automatic int npasses(net_e n);
    return n == NET_FC ? 1 : 4;
  endfunction

  // Input vector of a pass as (address) list.
  function automatic void pass_inputs(layer_t L, int p, ref int addr[$]);
    addr.delete();
    if (L.net == NET_FC || (L.net == NET_GRU && p == 2)) begin
      for (int i = 0; i < L.I; i++) addr.push_back(L.x + i);
    end else if (L.net == NET_GRU && p == 3) begin
      for (int i = 0; i < L.H; i++) addr.push_back(L.h + i);
    end else begin
      for (int i = 0; i < L.I; i++) addr.push_back(L.x + i);
      for (int i = 0; i < L.H; i++) addr.push_back(L.h + i);
    end
  endfunction

  // Random weights (codebook values when compressed) and biases.
  int widx [4][][];
  task automatic make_weights(layer_t L);
    int rows, cols;
    rows = L.H;
    for (int p = 0; p < npasses(L.net); p++) begin
      int a[$];
      pass_inputs(L, p, a);
      cols = a.size();
      W[p] = new[rows]; widx[p] = new[rows]; B[p] = new[rows];
      for (int r = 0; r < rows; r++) begin
        W[p][r] = new[cols]; widx[p][r] = new[cols];
        B[p][r] = $urandom_range(0, 4096) - 2048;
        for (int c = 0; c < cols; c++) begin
          int v;
          if (L.cmp != CMP_OFF) begin
            widx[p][r][c] = $urandom_range(0, (1 << cmp_bits(L.cmp)) - 1);
            v = cb[widx[p][r][c]];
          end else v = $urandom;
          W[p][r][c] = L.w16 ? int'($signed(16'(v))) : int'($signed(8'(v)));
        end
      end
    end
  endtask

  // Weight stream into the memory model.
  task automatic build_stream(layer_t L);
    int lanes, tiles, ptr, k;
    lanes = L.w16 ? N/2 : N;
    tiles = (L.H + lanes - 1) / lanes;
    ptr = L.base;
    k = cmp_bits(L.cmp);
    for (int t = 0; t < tiles; t++)
      for (int p = 0; p < npasses(L.net); p++) begin
        int a[$];
        logic [511:0] bb;
        logic [BW-1:0] beat;
        int nb;
        pass_inputs(L, p, a);
        bb = '0;
        for (int l = 0; l < lanes; l++)
          if (t * lanes + l < L.H) bb[16*l +: 16] = 16'(B[p][t*lanes+l]);
        nb = (lanes * 16 + BW - 1) / BW;
        for (int b = 0; b < nb; b++) u_mem.mem[ptr++] = bb[BW*b +: BW];
        if (L.cmp == CMP_OFF) begin
          for (int e = 0; e < a.size(); e++) begin
            beat = '0;
            for (int l = 0; l < lanes; l++)
              if (t * lanes + l < L.H) begin
                if (L.w16) beat[16*l +: 16] = 16'(W[p][t*lanes+l][e]);
                else       beat[8*l +: 8]   = 8'(W[p][t*lanes+l][e]);
              end
            u_mem.mem[ptr++] = beat;
          end
        end else begin
          int nbits;
          nbits = 0; beat = '0;
          for (int e = 0; e < a.size(); e++)
            for (int l = 0; l < lanes; l++) begin
              int ix;
              ix = (t * lanes + l < L.H) ? widx[p][t*lanes+l][e] : 0;
              for (int q = 0; q < k; q++) begin
                beat[nbits % BW] = ix[q];
                nbits++;
                if (nbits % BW == 0) begin u_mem.mem[ptr++] = beat; beat = '0; end
              end
            end
          if (nbits % BW != 0) u_mem.mem[ptr++] = beat;
        end
      end
    stream_beats = ptr - L.base;
  endtask

  // Reference result of one layer; updates lm_img.
  task automatic ref_layer(layer_t L);
    int g [4][];
    for (int p = 0; p < npasses(L.net); p++) begin
      int a[$];
      act_e m;
      pass_inputs(L, p, a);
      g[p] = new[L.H];
      if (L.net == NET_FC) m = L.act;
      else if (L.net == NET_GRU) m = (p < 2) ? ACT_SIGMOID : ACT_NONE;
      else m = (p == 2) ? ACT_TANH : ACT_SIGMOID;
      for (int r = 0; r < L.H; r++) begin
        longint s;
        s = 0;
        foreach (a[e]) s += longint'(lm_img[a[e]]) * longint'(W[p][r][e]);
        g[p][r] = ref_act(m, requant(s, B[p][r], L.shift));
      end
    end
    for (int r = 0; r < L.H; r++) begin
      if (L.net == NET_FC) lm_img[L.ho + r] = g[0][r];
      else if (L.net == NET_GRU) begin
        int n, pre;
        pre = sat16(longint'(g[2][r]) + qmul(g[1][r], g[3][r]));
        n = ref_act(ACT_TANH, pre);
        lm_img[L.ho + r] = sat16(longint'(n) + qmul(g[0][r], lm_img[L.h + r] - n));
      end else begin
        int cn;
        cn = sat16((longint'(g[1][r]) * lm_img[L.c + r] + longint'(g[0][r]) * g[2][r]) >>> 12);
        lm_img[L.c + r] = cn;
        lm_img[L.ho + r] = sat16(qmul(g[3][r], ref_act(ACT_TANH, cn)));
      end
    end
  endtask

  task automatic load_lm(int a, int n);
    for (int i = 0; i < n; i++) mmio_write(REG_LM_BASE + 16'(a + i), 32'(lm_img[a + i] & 16'hFFFF));
  endtask

  int last_cycles, last_macs;

  task automatic run_layer(layer_t L, string name, bit fresh);
    logic [31:0] d;
    int lanes;
    lanes = L.w16 ? N/2 : N;
    if (fresh) begin
      make_weights(L);
      build_stream(L);
    end
    mmio_write(REG_MODE, {19'd0, 5'(L.shift), L.w16, L.cmp, L.act, L.net});
    mmio_write(REG_INSIZE, 32'(L.I));
    mmio_write(REG_OUTSIZE, 32'(L.H));
    mmio_write(REG_XADDR, 32'(L.x));
    mmio_write(REG_HADDR, 32'(L.h));
    mmio_write(REG_HOADDR, 32'(L.ho));
    mmio_write(REG_CADDR, 32'(L.c));
    mmio_write(REG_WTBASE, 32'(L.base * BW / 8));
    mmio_read(REG_MODE, d);
    chk(d[12:0] == {5'(L.shift), L.w16, L.cmp, L.act, L.net}, "mode register read-back");
    mmio_write(REG_CTRL, 1);
    mmio_read(REG_STATUS, d);
    chk(d[0] == 1'b1, "busy after start");
    while (!irq) @(posedge clk);
    ref_layer(L);
    mmio_read(REG_CYCLES, d); last_cycles = int'(d);
    mmio_read(REG_MACS, d);   last_macs = int'(d);
    for (int r = 0; r < L.H; r++) begin
      mmio_read(REG_LM_BASE + 16'(L.ho + r), d);
      chk(d[15:0] == 16'(lm_img[L.ho + r]),
          $sformatf("%s: out[%0d] = %0d, expected %0d", name, r, $signed(d[15:0]), lm_img[L.ho + r]));
      if (L.net == NET_LSTM) begin
        mmio_read(REG_LM_BASE + 16'(L.c + r), d);
        chk(d[15:0] == 16'(lm_img[L.c + r]), $sformatf("%s: c[%0d]", name, r));
      end
    end
    chk(u_mem.reads == stream_beats, $sformatf("%s: %0d beats read, stream has %0d", name, u_mem.reads, stream_beats));
    u_mem.reads = 0;
    n_net[L.net]++; n_cmp[L.cmp]++;
    if (L.net == NET_FC) n_act[L.act]++;
    else begin n_act[ACT_SIGMOID]++; n_act[ACT_TANH]++; if (L.net == NET_GRU) n_act[ACT_NONE]++; end
    if (L.w16) n_w16++;
    if (L.H % lanes != 0) n_partial++;
    $display("%-28s cycles=%0d mac-issue=%0d utilisation=%0d%%", name, last_cycles, last_macs,
             (100 * last_macs) / (last_cycles > 0 ? last_cycles : 1));
  endtask

  function automatic void rand_vec(int a, int n, int range);
    for (int i = 0; i < n; i++) lm_img[a + i] = $urandom_range(0, 2 * range) - range;
  endfunction

  // Network: 12 inputs per time step, one LSTM of 64 units per direction,
  // FC 128 -> 2 on the two directions' last hidden states.
  localparam int NI = 12, NH = 64, T = 6, NO = 2;
  // Bank map: input sequence in bank 0; h ping/pong in banks 1 and 2 (forward
  // at +0, backward at +NH, so the two last states end up side by side);
  // c in bank 3; FC outputs in bank 4.
  localparam int XA = 0, HA = 1024, HB = 2048, CA = 3072, OA = 4096;

  initial begin
    layer_t L;
    int step_cycles, step_macs, total_cycles;
    mmio_req = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      cb[i] = $urandom;
      mmio_write(REG_CB_BASE + 16'(i), 32'(cb[i] & 16'hFFFF));
    end
    for (int i = 0; i < 8192; i++) lm_img[i] = 0;
    rand_vec(XA, NI * T, 8192);
    load_lm(XA, NI * T);
    load_lm(HA, 2 * NH);
    load_lm(HB, 2 * NH);
    load_lm(CA, 2 * NH);
    step_cycles = 0; step_macs = 0; total_cycles = 0;
    // dir 0 runs t = 0 .. T-1, dir 1 runs t = T-1 .. 0, each with its own
    // weights, kept for all of its time steps
    for (int dir = 0; dir < 2; dir++)
      for (int s = 0; s < T; s++) begin
        int t, hin, hout;
        t = dir ? T - 1 - s : s;
        hin  = ((s % 2) ? HB : HA) + dir * NH;
        hout = ((s % 2) ? HA : HB) + dir * NH;
        L = '{net: NET_LSTM, act: ACT_NONE, cmp: CMP_8X, w16: 0, shift: 8,
              I: NI, H: NH, x: XA + NI * t, h: hin, ho: hout, c: CA + dir * NH, base: 0};
        run_layer(L, $sformatf("LSTM dir %0d t=%0d", dir, t), s == 0);
        step_cycles += last_cycles; step_macs += last_macs;
      end
    total_cycles = step_cycles;
    // T even: both directions' last states are in HA and HA + NH
    L = '{net: NET_FC, act: ACT_NONE, cmp: CMP_8X, w16: 0, shift: 8,
          I: 2 * NH, H: NO, x: HA, h: HB, ho: OA, c: CA, base: 0};
    run_layer(L, "FC 128->2", 1);
    total_cycles += last_cycles;
    $display("Bi-LSTM: %0d LSTM steps, %0d cycles per step, MAC array busy %0d%%",
             2 * T, step_cycles / (2 * T), (100 * step_macs) / step_cycles);
    $display("Bi-LSTM: %0d time steps + FC = %0d cycles = %0d sequences/s at 250 MHz",
             T, total_cycles, 250000000 / total_cycles);
    chk(n_stall > 0, "weight port stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
