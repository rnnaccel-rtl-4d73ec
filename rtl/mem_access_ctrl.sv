// mem_access_ctrl: feeds one matrix-vector pass to the MAC array.
//
// For each pass the sequencer hands over a pass descriptor: the input vector
// as two local-memory segments (for example x, then h), the number of bias
// beats and the weight format. The controller then
//  * fetches weight beats from system memory through a simple
//    request/response read port (byte addresses, BUS_W/8 bytes per beat,
//    at most FIFO_D beats outstanding or buffered, responses in order).
//    The passes of a layer read consecutive beats from its base address, so
//    fetching is not tied to passes: from layer_start it runs ahead through
//    the layer's layer_beats beats as far as the FIFO allows, and the next
//    pass's bias and first weights are already waiting when it starts;
//  * captures the first nbias beats as the row biases (16 biases per beat);
//  * sends the remaining beats either straight to the MAC array (one weight
//    vector per beat) or, with compression on, to the decompressor, whose
//    vectors come back to be paired with inputs;
//  * reads the input vector from local memory ahead of use (a 4-entry queue,
//    filled from the first bias beat on)
//    and issues one (input element, weight vector) pair to the MAC array per
//    cycle whenever both are ready, marking the first and last element.
// pass_done pulses in the cycle the last element is issued; a new pass may
// start in the next cycle. The MAC array's weights come from raw_w when
// compression is off and from the decompressor otherwise (selected outside).
// From the paper: this unit reads inputs and weights, sends weights directly
// to the MAC array when compression is off and through the decompressor
// otherwise. The stream layout, queue sizes and handshakes are this design's.
module mem_access_ctrl
  import rnn_pkg::*;
#(
  parameter int unsigned N      = 32,
  parameter int unsigned BUS_W  = 256,
  parameter int unsigned FIFO_D = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the sequencer
  input  logic               layer_start,
  input  logic [31:0]        wt_base,
  input  logic [23:0]        layer_beats,   // weight beats of the whole layer
  input  logic               pass_start,
  input  pass_desc_t         pass,
  output logic               busy,
  output logic               pass_done,
  output logic [N*16-1:0]    bias,
  // weight read port to system memory
  output logic               wt_req_valid,
  input  logic               wt_req_ready,
  output logic [31:0]        wt_req_addr,
  input  logic               wt_rsp_valid,
  input  logic [BUS_W-1:0]   wt_rsp_data,
  // local memory read port (1-cycle latency)
  output logic               lm_re,
  output logic [LM_AW-1:0]   lm_raddr,
  input  logic [15:0]        lm_rdata,
  // decompressor
  output logic               dec_in_valid,
  input  logic               dec_in_ready,
  output logic [BUS_W-1:0]   dec_in_data,
  input  logic               dec_out_valid,
  output logic               dec_out_ready,
  output logic               dec_flush,
  // MAC array
  output logic               mac_valid,
  output logic               mac_first,
  output logic               mac_last,
  output logic signed [15:0] mac_x,
  output logic [BUS_W-1:0]   raw_w
);
  localparam int unsigned FW = $clog2(FIFO_D + 1);
  localparam int unsigned PW = $clog2(FIFO_D);
  localparam int unsigned XQ = 4;

  typedef enum logic [1:0] {S_IDLE, S_BIAS, S_STREAM, S_FLUSH} state_e;
  state_e state_q;

  pass_desc_t        p_q;
  logic [LEN_W:0]    len_q;        // elements in the pass
  logic [23:0]       cbeats_q;     // compressed beats for the decompressor
  logic [23:0]       left_q;       // beats of the layer not yet requested
  logic [23:0]       dec_cnt_q;
  logic [1:0]        bias_cnt_q;
  logic [31:0]       addr_q;

  // ---------------- pass set-up ----------------
  logic [LEN_W:0] len_d;
  logic [23:0]    cbeats_d;
  always_comb begin
    int unsigned lanes, bits;
    len_d = (LEN_W+1)'(pass.seg0_len) + (LEN_W+1)'(pass.seg1_len);
    lanes = pass.w16 ? N / 2 : N;
    bits  = 32'(len_d) * cmp_bits(pass.cmp) * lanes;
    cbeats_d = 24'((bits + BUS_W - 1) / BUS_W);
  end

  // ---------------- weight beat FIFO and fetch ----------------
  logic [BUS_W-1:0] fifo [FIFO_D];
  logic [PW-1:0]    wp_q, rp_q;
  logic [FW-1:0]    fcnt_q, outst_q;
  logic             f_pop, req_fire;

  assign wt_req_addr  = addr_q;
  assign wt_req_valid = (left_q != 0) && (32'(fcnt_q) + 32'(outst_q) < FIFO_D);
  assign req_fire     = wt_req_valid && wt_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q <= '0; rp_q <= '0; fcnt_q <= '0; outst_q <= '0; addr_q <= '0; left_q <= '0;
    end else begin
      if (layer_start) begin
        addr_q <= wt_base;
        left_q <= layer_beats;
      end else if (req_fire) begin
        addr_q <= addr_q + 32'(BUS_W / 8);
        left_q <= left_q - 1;
      end
      if (wt_rsp_valid) begin
        fifo[wp_q] <= wt_rsp_data;
        wp_q <= PW'((32'(wp_q) + 1) % FIFO_D);
      end
      if (f_pop) rp_q <= PW'((32'(rp_q) + 1) % FIFO_D);
      fcnt_q  <= fcnt_q + FW'(wt_rsp_valid) - FW'(f_pop);
      outst_q <= outst_q + FW'(req_fire) - FW'(wt_rsp_valid);
    end
  end

  logic             f_valid;
  logic [BUS_W-1:0] f_head;
  assign f_valid = fcnt_q != 0;
  assign f_head  = fifo[rp_q];

  // ---------------- input queue ----------------
  logic [15:0]    xq [XQ];
  logic [1:0]     xwp_q, xrp_q;
  logic [2:0]     xcnt_q;
  logic           xinfl_q;
  logic [LEN_W:0] rd_idx_q, el_q;

  // inputs are read from the start of the bias beats on
  assign lm_re    = (state_q == S_BIAS || state_q == S_STREAM) && (rd_idx_q < len_q) &&
                    (32'(xcnt_q) + 32'(xinfl_q) < XQ);
  assign lm_raddr = (rd_idx_q < (LEN_W+1)'(p_q.seg0_len))
                    ? p_q.seg0_addr + LM_AW'(rd_idx_q)
                    : p_q.seg1_addr + LM_AW'(rd_idx_q - (LEN_W+1)'(p_q.seg0_len));

  // ---------------- issue ----------------
  logic cmp_on, w_valid, fire;
  assign cmp_on  = p_q.cmp != CMP_OFF;
  assign w_valid = cmp_on ? dec_out_valid : f_valid;
  assign fire    = (state_q == S_STREAM) && (xcnt_q != 0) && w_valid;

  assign dec_in_data   = f_head;
  assign dec_in_valid  = (state_q == S_STREAM) && cmp_on && f_valid && (dec_cnt_q < cbeats_q);
  assign dec_out_ready = fire && cmp_on;
  assign dec_flush     = state_q == S_FLUSH;

  assign f_pop = ((state_q == S_BIAS) && f_valid) ||
                 (fire && !cmp_on) ||
                 (dec_in_valid && dec_in_ready);

  assign mac_valid = fire;
  assign mac_first = fire && (el_q == 0);
  assign mac_last  = fire && (el_q == len_q - 1);
  assign mac_x     = xq[xrp_q];
  assign raw_w     = f_head;
  assign pass_done = mac_last;
  assign busy      = state_q != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; p_q <= '0; len_q <= '0; cbeats_q <= '0;
      dec_cnt_q <= '0; bias_cnt_q <= '0; bias <= '0;
      xwp_q <= '0; xrp_q <= '0; xcnt_q <= '0; xinfl_q <= 1'b0;
      rd_idx_q <= '0; el_q <= '0;
    end else begin
      if (dec_in_valid && dec_in_ready) dec_cnt_q <= dec_cnt_q + 1;

      // input queue
      xinfl_q <= lm_re;
      if (lm_re) rd_idx_q <= rd_idx_q + 1;
      if (xinfl_q) begin
        xq[xwp_q] <= lm_rdata;
        xwp_q <= xwp_q + 1;
      end
      if (fire) begin
        xrp_q <= xrp_q + 1;
        el_q  <= el_q + 1;
      end
      xcnt_q <= xcnt_q + 3'(xinfl_q) - 3'(fire);

      case (state_q)
        S_IDLE: if (pass_start) begin
          p_q        <= pass;
          len_q      <= len_d;
          cbeats_q   <= cbeats_d;
          dec_cnt_q  <= '0;
          bias_cnt_q <= '0;
          rd_idx_q   <= '0;
          el_q       <= '0;
          state_q    <= (pass.nbias != 0) ? S_BIAS : S_STREAM;
        end
        S_BIAS: if (f_valid) begin
          for (int b = 0; b < (N * 16) / BUS_W; b++)
            if (b == 32'(bias_cnt_q)) bias[BUS_W*b +: BUS_W] <= f_head;
          bias_cnt_q <= bias_cnt_q + 1;
          if (bias_cnt_q == p_q.nbias - 1) state_q <= S_STREAM;
        end
        S_STREAM: if (mac_last) state_q <= cmp_on ? S_FLUSH : S_IDLE;
        default:  state_q <= S_IDLE;
      endcase
    end
  end

  // Handshake rules.
  assert property (@(posedge clk) disable iff (!rst_n)
                   wt_req_valid && !wt_req_ready |=> wt_req_valid && $stable(wt_req_addr))
    else $error("weight request withdrawn before it was accepted");
  assert property (@(posedge clk) disable iff (!rst_n)
                   wt_rsp_valid |-> outst_q != 0)
    else $error("weight response without a request");
  assert property (@(posedge clk) disable iff (!rst_n)
                   pass_start |-> state_q == S_IDLE)
    else $error("pass started while busy");
  assert property (@(posedge clk) disable iff (!rst_n)
                   layer_start |-> left_q == 0 && outst_q == 0 && fcnt_q == 0)
    else $error("layer started before the previous layer's weights were used");
endmodule
