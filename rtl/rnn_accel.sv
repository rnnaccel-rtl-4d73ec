// rnn_accel: top level of the RNN accelerator.
//
// Connects the six units of the design: the Top Ctrl (processor registers
// and layer sequencer), the Memory Access Ctrl (weight fetch from system
// memory, input fetch from local memory), the Decompression unit (codebook
// decoding of 6/4/2-bit weight indices), the configurable MAC Array (32 MACs
// of 16 x 8 bits, pairable into 16 x 16), the High-precision Activation unit
// and the Local Memory Pool (6 banks, 12 KB).
// Ports: an MMIO slave for the host processor (32-bit data, 16-bit word
// addresses, one-cycle read latency), an interrupt that is high while the
// last started layer is done, and a read-only weight port towards system
// memory (request valid/ready with a byte address; one BUS_W-bit response per
// request, in order, that must not arrive before the request is accepted).
// The weight path follows the paper's block diagram: weights go from the
// Memory Access Ctrl either straight to the MAC array or through the
// decompressor; activation results return to the local memory pool.
module rnn_accel
  import rnn_pkg::*;
#(
  parameter int unsigned N          = N_MAC,
  parameter int unsigned BUS_W      = 256,
  parameter int unsigned NBANK      = 6,
  parameter int unsigned BANK_DEPTH = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  // host processor
  input  logic             mmio_req,
  input  logic             mmio_we,
  input  logic [15:0]      mmio_addr,
  input  logic [31:0]      mmio_wdata,
  output logic             mmio_gnt,
  output logic             mmio_rvalid,
  output logic [31:0]      mmio_rdata,
  output logic             irq,
  // weight reads from system memory
  output logic             wt_req_valid,
  input  logic             wt_req_ready,
  output logic [31:0]      wt_req_addr,
  input  logic             wt_rsp_valid,
  input  logic [BUS_W-1:0] wt_rsp_data
);
  localparam int unsigned TAG_W = 1 + 2 + $clog2(N);

  layer_cfg_t cfg;
  logic       cb_we;
  logic [5:0] cb_addr;
  logic [CB_W-1:0] cb_wdata;
  logic       layer_start, pass_start, mac_busy, pass_done;
  logic [23:0] layer_beats;
  pass_desc_t pass;
  logic [N*16-1:0] bias;

  logic             lm_re [2];
  logic [1:0]       lm_re_v;
  logic [LM_AW-1:0] lm_raddr [2];
  logic [15:0]      lm_rdata [2];
  logic [1:0]       lm_we;
  logic [LM_AW-1:0] lm_waddr [2];
  logic [15:0]      lm_wdata [2];

  logic             dec_in_valid, dec_in_ready, dec_out_valid, dec_out_ready, dec_flush;
  logic [BUS_W-1:0] dec_in_data;
  logic [N*8-1:0]   dec_w;

  logic               mac_valid, mac_first, mac_last;
  logic signed [15:0] mac_x;
  logic [BUS_W-1:0]   raw_w;
  logic [N*8-1:0]     arr_w;
  logic               arr_valid;
  logic signed [15:0] arr_y [N];

  logic               act_in_valid, act_out_valid;
  act_e               act_in_mode;
  logic signed [15:0] act_in_x, act_out_y;
  logic [TAG_W-1:0]   act_in_tag, act_out_tag;

  top_ctrl #(.N(N), .BUS_W(BUS_W), .TAG_W(TAG_W)) u_top_ctrl (
    .clk, .rst_n,
    .mmio_req, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_gnt, .mmio_rvalid, .mmio_rdata, .irq,
    .cfg, .cb_we, .cb_addr, .cb_wdata,
    .layer_start, .layer_beats, .pass_start, .pass, .mac_busy, .mac_issue(mac_valid), .mac_x,
    .arr_valid, .arr_y,
    .act_in_valid, .act_in_mode, .act_in_x, .act_in_tag,
    .act_out_valid, .act_out_y, .act_out_tag,
    .lm_re(lm_re[1]), .lm_raddr(lm_raddr[1]), .lm_rdata(lm_rdata[1]),
    .lm_we, .lm_waddr, .lm_wdata
  );

  mem_access_ctrl #(.N(N), .BUS_W(BUS_W)) u_mem_access_ctrl (
    .clk, .rst_n,
    .layer_start, .wt_base(cfg.wt_base), .layer_beats, .pass_start, .pass,
    .busy(mac_busy), .pass_done, .bias,
    .wt_req_valid, .wt_req_ready, .wt_req_addr, .wt_rsp_valid, .wt_rsp_data,
    .lm_re(lm_re[0]), .lm_raddr(lm_raddr[0]), .lm_rdata(lm_rdata[0]),
    .dec_in_valid, .dec_in_ready, .dec_in_data, .dec_out_valid, .dec_out_ready, .dec_flush,
    .mac_valid, .mac_first, .mac_last, .mac_x, .raw_w
  );

  decompressor #(.N(N), .BUS_W(BUS_W)) u_decompressor (
    .clk, .rst_n,
    .mode(cfg.cmp), .w16(cfg.w16), .flush(dec_flush),
    .cb_we, .cb_addr, .cb_wdata,
    .in_valid(dec_in_valid), .in_ready(dec_in_ready), .in_data(dec_in_data),
    .out_valid(dec_out_valid), .out_ready(dec_out_ready), .out_w(dec_w)
  );

  assign arr_w = (cfg.cmp != CMP_OFF) ? dec_w : raw_w[N*8-1:0];

  mac_array #(.N(N)) u_mac_array (
    .clk, .rst_n,
    .w16(cfg.w16), .shift(cfg.shift),
    .in_valid(mac_valid), .in_first(mac_first), .in_last(mac_last),
    .in_x(mac_x), .in_w(arr_w), .bias,
    .out_valid(arr_valid), .out_y(arr_y)
  );

  act_unit #(.TAG_W(TAG_W)) u_act_unit (
    .clk, .rst_n,
    .in_valid(act_in_valid), .in_mode(act_in_mode), .in_x(act_in_x), .in_tag(act_in_tag),
    .out_valid(act_out_valid), .out_y(act_out_y), .out_tag(act_out_tag)
  );

  assign lm_re_v = {lm_re[1], lm_re[0]};

  local_mem_pool #(.NBANK(NBANK), .DEPTH(BANK_DEPTH), .DW(16), .NR(2), .NW(2), .AW(LM_AW))
  u_local_mem_pool (
    .clk, .rst_n,
    .re(lm_re_v), .raddr(lm_raddr), .rdata(lm_rdata),
    .we(lm_we), .waddr(lm_waddr), .wdata(lm_wdata)
  );
endmodule
