// decompressor: on-line weight decompression at a fixed ratio.
//
// Compressed weights arrive as a packed stream of k-bit codebook indices,
// k = 6, 4 or 2 (the 5.3x, 8x and 16x rates against 32-bit weights), least
// significant bit first, in BUS_W-bit beats. Each index selects a 16-bit
// entry of a 64-entry codebook that the host loads beforehand. Every output
// vector holds N 8-bit weights (the low codebook byte) or, in 16-bit weight
// mode (w16), N/2 16-bit weights, i.e. N or N/2 indices.
// A bit buffer of 2*BUS_W bits decouples the beat rate from the vector rate:
// a beat is accepted while the buffer holds at most BUS_W bits, and a vector
// is offered while it holds at least the bits of one vector. 'flush' drops
// the bits left over at the end of a pass, so each pass starts beat-aligned.
// Interfaces are valid/ready; out_w is combinational from the buffer.
// From the paper: a fixed, user-chosen ratio of 5.3x, 8x or 16x and a simple
// on-line decompressor. The paper does not give its algorithm: the codebook
// (weight-sharing) decoding here is this design's choice.
module decompressor
  import rnn_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned BUS_W = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cmp_e               mode,
  input  logic               w16,
  input  logic               flush,
  input  logic               cb_we,
  input  logic [5:0]         cb_addr,
  input  logic [CB_W-1:0]    cb_wdata,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [BUS_W-1:0]   in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [N*8-1:0]     out_w
);
  localparam int unsigned BUF_W = 2 * BUS_W;
  localparam int unsigned CW    = $clog2(BUF_W + 1);

  logic [CB_W-1:0]  cb [CB_N];
  logic [BUF_W-1:0] bits_q;
  logic [CW-1:0]    cnt_q;
  logic [CW-1:0]    need;

  always_comb begin
    int unsigned k;
    k = cmp_bits(mode);
    need = CW'(k * (w16 ? N / 2 : N));
  end

  assign in_ready  = !flush && (cnt_q <= CW'(BUS_W));
  assign out_valid = !flush && (need != 0) && (cnt_q >= need);

  // Index extraction for each index width, then codebook look-up.
  always_comb begin
    out_w = '0;
    for (int l = 0; l < N; l++) begin
      logic [5:0] idx;
      case (mode)
        CMP_5X3: idx = bits_q[6*l +: 6];
        CMP_8X:  idx = {2'b00, bits_q[4*l +: 4]};
        default: idx = {4'b0000, bits_q[2*l +: 2]};
      endcase
      if (!w16)
        out_w[8*l +: 8] = cb[idx][7:0];
      else if (l < N / 2)
        out_w[16*l +: 16] = cb[idx];
    end
  end

  logic [BUF_W-1:0] bits_d;
  logic [CW-1:0]    cnt_d;
  always_comb begin
    bits_d = bits_q;
    cnt_d  = cnt_q;
    if (out_valid && out_ready) begin
      bits_d = bits_d >> need;
      cnt_d  = cnt_d - need;
    end
    if (in_valid && in_ready) begin
      bits_d = bits_d | (BUF_W'(in_data) << cnt_d);
      cnt_d  = cnt_d + CW'(BUS_W);
    end
    if (flush) begin
      bits_d = '0;
      cnt_d  = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits_q <= '0;
      cnt_q  <= '0;
    end else begin
      bits_q <= bits_d;
      cnt_q  <= cnt_d;
    end
  end

  always_ff @(posedge clk) begin
    if (cb_we) cb[cb_addr] <= cb_wdata;
  end

  // A beat offered during a flush would be lost.
  assert property (@(posedge clk) disable iff (!rst_n) flush |-> !in_valid)
    else $error("decompressor: beat offered during flush");
endmodule
