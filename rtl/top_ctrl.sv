// top_ctrl: processor interface and layer sequencer.
//
// The host programs one layer through memory-mapped registers (layer type,
// activation type, weight format, sizes, local-memory addresses, weight base
// address), loads the weight codebook and the local memory through the same
// port, writes CTRL.start and waits for STATUS.done (also the irq output).
// One start runs one FC layer, or one time step of a GRU or LSTM layer; the
// host chains layers and time steps by swapping addresses.
//
// A layer is computed in tiles of L output rows (L = 32, or 16 with 16-bit
// weights). Per tile the sequencer issues matrix-vector passes to the memory
// access controller:
//   FC   : y = act(W x + b)                               1 pass
//   GRU  : z, r = sigmoid([x;h]);  a = Wn x + bn;  u = Un h + bu
//   LSTM : i, f, o = sigmoid([x;h]);  g = tanh([x;h])      4 passes
// A pass's 32 results are captured from the MAC array into a drain buffer and
// sent one per cycle through the activation unit, while the next pass already
// runs in the MAC array. FC results go to local memory; GRU/LSTM results go
// to a 4 x L gate buffer. When the last pass of a tile has drained, a combine
// stage works through the tile one row per cycle, using the activation unit
// for the inner tanh, while the passes of the next tile already run:
//   GRU : n = tanh(a + r*u);  h' = n + z*(h - n)
//   LSTM: c' = f*c + i*g;  h' = o*tanh(c')     (c' written in place)
// For the GRU, the tile's h values are not read back from local memory: they
// are captured from the MAC array's input stream while the U_n*h pass runs.
// The next tile's gate passes wait only until the combine has freed the gate
// buffer. Products of Q3.12 words are shifted right by 12 (floor) and
// saturated.
// Bank rule for LSTM: c is read by the combine stage while the MAC array
// reads x and h, and c' and h' are written in the same cycle, so c must lie
// in a bank of its own, apart from x, h and h'.
// Timing: one start takes about (passes x elements + a few cycles per pass)
// cycles per tile; see the README for the measured figures. Codebook writes
// are decoded here (cb_we), while cb_addr and cb_wdata are the MMIO address
// and data passed straight through.
//
// From the paper: the Top Ctrl interfaces the processor (MMIO), and issues
// memory access enable, network type and activation type; the accelerator
// supports LSTM, GRU and FC layers. The register map, tiling, pass order,
// GRU/LSTM equations' scheduling, the combine stage and its overlap with the
// next tile are this design's.
module top_ctrl
  import rnn_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned BUS_W = 256,
  parameter int unsigned TAG_W = 1 + 2 + $clog2(N)
) (
  input  logic               clk,
  input  logic               rst_n,
  // MMIO slave
  input  logic               mmio_req,
  input  logic               mmio_we,
  input  logic [15:0]        mmio_addr,
  input  logic [31:0]        mmio_wdata,
  output logic               mmio_gnt,
  output logic               mmio_rvalid,
  output logic [31:0]        mmio_rdata,
  output logic               irq,
  // layer configuration to the datapath
  output layer_cfg_t         cfg,
  output logic               cb_we,
  output logic [5:0]         cb_addr,
  output logic [CB_W-1:0]    cb_wdata,
  // memory access controller
  output logic               layer_start,
  output logic [23:0]        layer_beats,   // weight beats the layer reads in all
  output logic               pass_start,
  output pass_desc_t         pass,
  input  logic               mac_busy,
  input  logic               mac_issue,     // one element issued this cycle
  input  logic signed [15:0] mac_x,         // the element issued
  // MAC array results
  input  logic               arr_valid,
  input  logic signed [15:0] arr_y [N],
  // activation unit
  output logic               act_in_valid,
  output act_e               act_in_mode,
  output logic signed [15:0] act_in_x,
  output logic [TAG_W-1:0]   act_in_tag,
  input  logic               act_out_valid,
  input  logic signed [15:0] act_out_y,
  input  logic [TAG_W-1:0]   act_out_tag,
  // local memory: one read port, two write ports
  output logic               lm_re,
  output logic [LM_AW-1:0]   lm_raddr,
  input  logic [15:0]        lm_rdata,
  output logic [1:0]         lm_we,
  output logic [LM_AW-1:0]   lm_waddr [2],
  output logic [15:0]        lm_wdata [2]
);
  localparam int unsigned LW = $clog2(N);

  typedef enum logic [1:0] {T_IDLE, T_ISSUE, T_WAIT, T_DONE} tstate_e;
  tstate_e st_q;

  // ---------------- registers ----------------
  logic        busy_q, done_q;
  logic        lm_rd_q;        // the pending read is a local-memory read
  logic [31:0] reg_rdata_q;
  logic [31:0] cycles_q, macs_q;

  // ---------------- derived layer values ----------------
  logic [LW:0]      lanes;
  logic [1:0]       npass_m1;
  logic [1:0]       nbias;
  assign lanes    = cfg.w16 ? (LW+1)'(N / 2) : (LW+1)'(N);
  assign npass_m1 = (cfg.net == NET_FC) ? 2'd0 : 2'd3;
  assign nbias    = 2'((32'(lanes) * 16 + BUS_W - 1) / BUS_W);

  logic [LEN_W-1:0] tile_base_q;   // first row of the current tile
  logic [1:0]       pidx_q;        // pass index within the tile
  logic [LEN_W-1:0] comb_base_q;   // first row of the tile being combined
  logic [LW:0]      comb_rows;     // rows of that tile that exist
  always_comb begin
    logic [LEN_W-1:0] rem;
    rem = cfg.out_size - comb_base_q;
    comb_rows = (32'(rem) < 32'(lanes)) ? (LW+1)'(rem) : lanes;
  end

  // Weight beats of one layer start: per tile, each pass reads its bias beats
  // and then one raw beat per element, or the pass's packed indices.
  function automatic logic [23:0] len_beats(logic [LEN_W:0] len);
    if (cfg.cmp == CMP_OFF) return 24'(len);
    return 24'((32'(len) * cmp_bits(cfg.cmp) * 32'(lanes) + BUS_W - 1) / BUS_W);
  endfunction
  always_comb begin
    logic [LEN_W:0] xi, xh;
    logic [23:0]    per_tile;
    logic [LEN_W:0] tiles;
    xi = (LEN_W+1)'(cfg.in_size);
    xh = (LEN_W+1)'(cfg.in_size) + (LEN_W+1)'(cfg.out_size);
    case (cfg.net)
      NET_GRU:  per_tile = 24'(nbias) * 4 + len_beats(xh) * 2 + len_beats(xi) +
                           len_beats((LEN_W+1)'(cfg.out_size));
      NET_LSTM: per_tile = (24'(nbias) + len_beats(xh)) * 4;
      default:  per_tile = 24'(nbias) + len_beats(xi);
    endcase
    tiles = cfg.w16 ? ((LEN_W+1)'(cfg.out_size) + (LEN_W+1)'(N / 2 - 1)) >> (LW - 1)
                    : ((LEN_W+1)'(cfg.out_size) + (LEN_W+1)'(N - 1)) >> LW;
    layer_beats = 24'(32'(per_tile) * 32'(tiles));
  end

  function automatic act_e pass_act(net_e n, act_e a, logic [1:0] p);
    if (n == NET_FC) return a;
    if (n == NET_GRU) return (p < 2) ? ACT_SIGMOID : ACT_NONE;
    return (p == 2) ? ACT_TANH : ACT_SIGMOID;
  endfunction

  always_comb begin
    pass = '0;
    pass.nbias = nbias;
    pass.cmp   = cfg.cmp;
    pass.w16   = cfg.w16;
    pass.seg0_addr = cfg.x_addr;
    pass.seg0_len  = cfg.in_size;
    if (cfg.net == NET_GRU && pidx_q == 2'd3) begin
      pass.seg0_addr = cfg.h_addr;
      pass.seg0_len  = cfg.out_size;
    end else if (cfg.net == NET_LSTM || (cfg.net == NET_GRU && pidx_q < 2'd2)) begin
      pass.seg1_addr = cfg.h_addr;
      pass.seg1_len  = cfg.out_size;
    end
  end

  // ---------------- pass issue / result capture / drain ----------------
  logic             res_out_q;     // a pass was issued whose result is not captured
  logic [1:0]       res_pass_q;    // its pass index
  logic [LEN_W-1:0] res_base_q;    // its tile base
  logic             can_issue;
  logic             drain_busy_q;  // drain buffer holds results not yet sent
  logic [LW:0]      dsent_q, dret_q;
  logic             dflight_q;     // drain outputs still returning
  logic [1:0]       dpass_q;
  logic [LEN_W-1:0] dbase_q;
  logic signed [15:0] dbuf [N];
  logic             capture;
  logic             res_ready_q;   // result waiting in the MAC array
  logic             comb_busy_q;   // combine stage working on a tile
  logic             comb_pend_q;   // a tile's gates are complete, combine not yet started
  logic [LEN_W-1:0] pend_base_q;   // that tile's first row
  logic             direct;        // result needs no activation: straight to the gate buffer
  // issue-side view of the pass in the MAC array, for the GRU h snapshot
  logic [1:0]       cur_pass_q;
  logic [LEN_W-1:0] cur_base_q;
  logic [LEN_W-1:0] el_cnt_q;
  logic signed [15:0] hsnap [N];   // h of the tile's rows, taken from pass 3's input

  // the next pass may start in the cycle the previous result is captured
  assign can_issue = !mac_busy && (!res_out_q || capture);
  assign pass_start = (st_q == T_ISSUE) && can_issue;
  assign direct     = (cfg.net == NET_GRU) && res_pass_q[1];
  assign capture    = res_out_q && (arr_valid || res_ready_q) && !comb_busy_q && !comb_pend_q &&
                      (direct || (!drain_busy_q && !dflight_q));

  logic signed [15:0] gbuf [4][N];
  logic signed [15:0] side [N];

  // combine issue
  logic [LW:0] cl_q;               // next combine lane to read
  logic        crd_v_q;
  logic [LW-1:0] crd_lane_q;
  logic [LW:0] cret_q;

  // activation input mux: drain or combine
  logic signed [15:0] comb_pre;
  always_comb begin
    logic signed [31:0] t;
    logic [LW-1:0] l;
    l = crd_lane_q;
    if (cfg.net == NET_GRU)
      t = 32'(gbuf[2][l]) + ((32'(gbuf[1][l]) * 32'(gbuf[3][l])) >>> FRAC);
    else
      t = (32'(gbuf[1][l]) * 32'($signed(lm_rdata)) + 32'(gbuf[0][l]) * 32'(gbuf[2][l])) >>> FRAC;
    comb_pre = sat16(t);
  end

  function automatic logic signed [15:0] sat16(logic signed [31:0] v);
    if (v > 32'sd32767)  return 16'sd32767;
    if (v < -32'sd32768) return -16'sd32768;
    return v[15:0];
  endfunction

  logic drain_issue;
  assign drain_issue = drain_busy_q && (dsent_q < lanes);
  always_comb begin
    act_in_valid = 1'b0;
    act_in_mode  = ACT_NONE;
    act_in_x     = '0;
    act_in_tag   = '0;
    if (drain_issue) begin
      act_in_valid = 1'b1;
      act_in_mode  = pass_act(cfg.net, cfg.act, dpass_q);
      act_in_x     = dbuf[dsent_q[LW-1:0]];
      act_in_tag   = {1'b0, dpass_q, dsent_q[LW-1:0]};
    end else if (crd_v_q) begin
      act_in_valid = 1'b1;
      act_in_mode  = ACT_TANH;
      act_in_x     = comb_pre;
      act_in_tag   = {1'b1, 2'b00, crd_lane_q};
    end
  end

  // ---------------- local memory ports ----------------
  logic          out_kind;
  logic [1:0]    out_pass;
  logic [LW-1:0] out_lane;
  assign {out_kind, out_pass, out_lane} = act_out_tag;

  logic          host_lm_rd, host_lm_wr, host_cb_wr, host_reg;
  assign host_reg   = mmio_req && (mmio_addr < REG_CB_BASE);
  assign host_cb_wr = mmio_req && mmio_we && (mmio_addr >= REG_CB_BASE) &&
                      (mmio_addr < REG_CB_BASE + 16'(CB_N));
  assign host_lm_rd = mmio_req && !mmio_we && (mmio_addr >= REG_LM_BASE) && !busy_q;
  assign host_lm_wr = mmio_req &&  mmio_we && (mmio_addr >= REG_LM_BASE) && !busy_q;
  assign mmio_gnt   = host_reg || (mmio_req && mmio_addr >= REG_CB_BASE &&
                                   mmio_addr < REG_LM_BASE) ||
                      host_lm_rd || host_lm_wr;

  logic comb_rd;
  assign comb_rd = comb_busy_q && (cl_q < comb_rows);

  always_comb begin
    lm_re    = 1'b0;
    lm_raddr = '0;
    if (comb_rd && cfg.net == NET_LSTM) begin
      lm_re    = 1'b1;
      lm_raddr = cfg.c_addr + LM_AW'(comb_base_q) + LM_AW'(cl_q);
    end else if (host_lm_rd) begin
      lm_re    = 1'b1;
      lm_raddr = LM_AW'(mmio_addr - REG_LM_BASE);
    end
  end

  always_comb begin
    logic signed [15:0] n, hnew;
    lm_we       = '0;
    lm_waddr[0] = '0; lm_wdata[0] = '0;
    lm_waddr[1] = '0; lm_wdata[1] = '0;
    n    = act_out_y;
    hnew = '0;
    if (act_out_valid && !out_kind && cfg.net == NET_FC &&
        32'(dbase_q) + 32'(out_lane) < 32'(cfg.out_size)) begin
      lm_we[0]    = 1'b1;
      lm_waddr[0] = cfg.ho_addr + LM_AW'(dbase_q) + LM_AW'(out_lane);
      lm_wdata[0] = act_out_y;
    end else if (act_out_valid && out_kind) begin
      if (cfg.net == NET_GRU)
        hnew = sat16(32'(n) + ((32'(gbuf[0][out_lane]) * (32'(hsnap[out_lane]) - 32'(n))) >>> FRAC));
      else
        hnew = sat16((32'(gbuf[3][out_lane]) * 32'(n)) >>> FRAC);
      lm_we[0]    = 1'b1;
      lm_waddr[0] = cfg.ho_addr + LM_AW'(comb_base_q) + LM_AW'(out_lane);
      lm_wdata[0] = hnew;
      if (cfg.net == NET_LSTM) begin
        lm_we[1]    = 1'b1;
        lm_waddr[1] = cfg.c_addr + LM_AW'(comb_base_q) + LM_AW'(out_lane);
        lm_wdata[1] = side[out_lane];
      end
    end else if (host_lm_wr) begin
      lm_we[0]    = 1'b1;
      lm_waddr[0] = LM_AW'(mmio_addr - REG_LM_BASE);
      lm_wdata[0] = mmio_wdata[15:0];
    end
  end

  assign mmio_rdata = lm_rd_q ? 32'(lm_rdata) : reg_rdata_q;
  assign cb_we    = host_cb_wr;
  assign cb_addr  = 6'(mmio_addr - REG_CB_BASE);
  assign cb_wdata = mmio_wdata[CB_W-1:0];
  assign irq      = done_q;
  assign layer_start = (st_q == T_IDLE) && busy_q;

  // ---------------- sequential ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0; busy_q <= 1'b0; done_q <= 1'b0; cycles_q <= '0; macs_q <= '0;
      mmio_rvalid <= 1'b0; reg_rdata_q <= '0; lm_rd_q <= 1'b0;
      st_q <= T_IDLE; tile_base_q <= '0; pidx_q <= '0;
      res_out_q <= 1'b0; res_ready_q <= 1'b0; res_pass_q <= '0; res_base_q <= '0;
      drain_busy_q <= 1'b0; dsent_q <= '0; dret_q <= '0; dflight_q <= 1'b0;
      dpass_q <= '0; dbase_q <= '0;
      cl_q <= '0; crd_v_q <= 1'b0; crd_lane_q <= '0; cret_q <= '0;
      comb_busy_q <= 1'b0; comb_base_q <= '0; comb_pend_q <= 1'b0; pend_base_q <= '0;
      cur_pass_q <= '0; cur_base_q <= '0; el_cnt_q <= '0;
      for (int i = 0; i < N; i++) begin
        dbuf[i] <= '0; side[i] <= '0; hsnap[i] <= '0;
        for (int g = 0; g < 4; g++) gbuf[g][i] <= '0;
      end
    end else begin
      // ---- MMIO ----
      mmio_rvalid <= mmio_req && mmio_gnt && !mmio_we;
      lm_rd_q     <= host_lm_rd;
      if (mmio_req && mmio_gnt && !mmio_we && host_reg) begin
        case (mmio_addr)
          REG_STATUS:  reg_rdata_q <= {30'd0, done_q, busy_q};
          REG_MODE:    reg_rdata_q <= {19'd0, cfg.shift, cfg.w16, cfg.cmp, cfg.act, cfg.net};
          REG_INSIZE:  reg_rdata_q <= 32'(cfg.in_size);
          REG_OUTSIZE: reg_rdata_q <= 32'(cfg.out_size);
          REG_XADDR:   reg_rdata_q <= 32'(cfg.x_addr);
          REG_HADDR:   reg_rdata_q <= 32'(cfg.h_addr);
          REG_HOADDR:  reg_rdata_q <= 32'(cfg.ho_addr);
          REG_CADDR:   reg_rdata_q <= 32'(cfg.c_addr);
          REG_WTBASE:  reg_rdata_q <= cfg.wt_base;
          REG_CYCLES:  reg_rdata_q <= cycles_q;
          REG_MACS:    reg_rdata_q <= macs_q;
          default:     reg_rdata_q <= '0;
        endcase
      end
      if (mmio_req && mmio_we && host_reg && !busy_q) begin
        case (mmio_addr)
          REG_CTRL: if (mmio_wdata[0]) begin
            busy_q <= 1'b1; done_q <= 1'b0; cycles_q <= '0; macs_q <= '0;
          end
          REG_MODE: begin
            cfg.net   <= net_e'(mmio_wdata[1:0]);
            cfg.act   <= act_e'(mmio_wdata[4:2]);
            cfg.cmp   <= cmp_e'(mmio_wdata[6:5]);
            cfg.w16   <= mmio_wdata[7];
            cfg.shift <= mmio_wdata[12:8];
          end
          REG_INSIZE:  cfg.in_size  <= mmio_wdata[LEN_W-1:0];
          REG_OUTSIZE: cfg.out_size <= mmio_wdata[LEN_W-1:0];
          REG_XADDR:   cfg.x_addr   <= mmio_wdata[LM_AW-1:0];
          REG_HADDR:   cfg.h_addr   <= mmio_wdata[LM_AW-1:0];
          REG_HOADDR:  cfg.ho_addr  <= mmio_wdata[LM_AW-1:0];
          REG_CADDR:   cfg.c_addr   <= mmio_wdata[LM_AW-1:0];
          REG_WTBASE:  cfg.wt_base  <= mmio_wdata;
          default: ;
        endcase
      end
      if (busy_q) cycles_q <= cycles_q + 1;
      if (mac_issue) macs_q <= macs_q + 1;

      // ---- result capture into the drain buffer ----
      if (arr_valid) res_ready_q <= 1'b1;
      if (capture && direct) begin
        // GRU W_n x and U_n h: raw sums, all lanes written at once
        for (int i = 0; i < N; i++) gbuf[res_pass_q][i] <= arr_y[i];
        res_out_q   <= 1'b0;
        res_ready_q <= 1'b0;
        if (res_pass_q == npass_m1) begin
          comb_pend_q <= 1'b1;
          pend_base_q <= res_base_q;
        end
      end else if (capture) begin
        for (int i = 0; i < N; i++) dbuf[i] <= arr_y[i];
        res_out_q    <= 1'b0;
        res_ready_q  <= 1'b0;
        drain_busy_q <= 1'b1;
        dflight_q    <= 1'b1;
        dsent_q      <= '0;
        dret_q       <= '0;
        dpass_q      <= res_pass_q;
        dbase_q      <= res_base_q;
      end
      if (drain_issue) begin
        dsent_q <= dsent_q + 1;
        if (dsent_q == lanes - 1) drain_busy_q <= 1'b0;
      end
      if (act_out_valid && !out_kind) begin
        if (cfg.net != NET_FC) gbuf[out_pass][out_lane] <= act_out_y;
        dret_q <= dret_q + 1;
        if (dret_q == lanes - 1) begin
          dflight_q <= 1'b0;
          // the tile's last pass has drained: combine it
          if (cfg.net != NET_FC && dpass_q == npass_m1) begin
            comb_pend_q <= 1'b1;
            pend_base_q <= dbase_q;
          end
        end
      end

      // ---- GRU: snapshot of the tile's h rows as pass 3 streams h ----
      if (pass_start) begin
        cur_pass_q <= pidx_q;
        cur_base_q <= tile_base_q;
        el_cnt_q   <= '0;
      end else if (mac_issue) begin
        el_cnt_q <= el_cnt_q + 1;
        if (cur_pass_q == 2'd3 && el_cnt_q >= cur_base_q &&
            32'(el_cnt_q) < 32'(cur_base_q) + 32'(lanes))
          hsnap[LW'(el_cnt_q - cur_base_q)] <= mac_x;
      end

      // ---- combine pipeline ----
      // starts once every drain through the activation unit is finished
      if (comb_pend_q && !drain_busy_q && !dflight_q && !comb_busy_q) begin
        comb_pend_q <= 1'b0;
        comb_busy_q <= 1'b1;
        comb_base_q <= pend_base_q;
        cl_q        <= '0;
        cret_q      <= '0;
      end
      crd_v_q    <= comb_rd;
      crd_lane_q <= cl_q[LW-1:0];
      if (comb_rd) cl_q <= cl_q + 1;
      if (crd_v_q) side[crd_lane_q] <= comb_pre;
      if (act_out_valid && out_kind) begin
        cret_q <= cret_q + 1;
        if (cret_q == comb_rows - 1) comb_busy_q <= 1'b0;
      end

      // ---- sequencer ----
      case (st_q)
        T_IDLE: if (busy_q) begin
          st_q <= T_ISSUE; tile_base_q <= '0; pidx_q <= '0;
        end
        T_ISSUE: if (can_issue) begin
          res_out_q  <= 1'b1;
          res_pass_q <= pidx_q;
          res_base_q <= tile_base_q;
          if (pidx_q == npass_m1) begin
            pidx_q <= '0;
            if (32'(tile_base_q) + 32'(lanes) >= 32'(cfg.out_size)) st_q <= T_WAIT;
            else tile_base_q <= tile_base_q + LEN_W'(lanes);
          end else pidx_q <= pidx_q + 1;
        end
        T_WAIT: if (!mac_busy && !res_out_q && !drain_busy_q && !dflight_q && !comb_busy_q &&
                    !comb_pend_q && !crd_v_q)
          st_q <= T_DONE;
        T_DONE: begin
          busy_q <= 1'b0; done_q <= 1'b1; st_q <= T_IDLE;
        end
        default: st_q <= T_IDLE;
      endcase
    end
  end

  // A drain and a combine never share the activation unit.
  assert property (@(posedge clk) disable iff (!rst_n) !(drain_issue && crd_v_q))
    else $error("activation unit claimed twice");
endmodule
