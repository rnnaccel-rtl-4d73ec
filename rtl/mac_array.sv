// mac_array: configurable MAC array that computes matrix-vector products.
//
// N cells (32 by default) each own one output row. Every cycle one element of
// the input vector (signed 16-bit, broadcast to all cells) arrives with one
// weight vector: N 8-bit weights, lane i in in_w[8i +: 8]. In 16-bit weight
// mode (w16) cells 2j and 2j+1 form one 16 x 16 MAC for row j: lane 2j carries
// the low weight byte (unsigned) and lane 2j+1 the high byte (signed), so row
// j's weight is in_w[16j +: 16] and N/2 rows are computed.
// in_first/in_last mark the first and last element of a pass. After the last
// element the array adds each row's bias, shifted left by 'shift', rounds,
// shifts the sum right by 'shift' and saturates it to 16 bits:
//   y = sat16((acc + (bias << shift) + 2^(shift-1)) >>> shift)
// so 'shift' is the number of fraction bits of the weights when biases and
// outputs share the activations' format.
// Timing: out_valid pulses 3 cycles after the in_last element; out_y is held
// until the next pass ends. Passes may follow each other back to back.
// From the paper: 32 MACs, 16 x 8 bits, two combine into 16 x 16, array size
// scalable (parameter N). The row-per-cell dataflow, the bias/rounding output
// stage and the accumulator width are this design's choices.
module mac_array #(
  parameter int unsigned N     = 32,
  parameter int unsigned XW    = 16,
  parameter int unsigned WW    = 8,
  parameter int unsigned ACC_W = 40
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w16,
  input  logic [4:0]           shift,
  input  logic                 in_valid,
  input  logic                 in_first,
  input  logic                 in_last,
  input  logic signed [XW-1:0] in_x,
  input  logic [N*WW-1:0]      in_w,
  input  logic [N*XW-1:0]      bias,     // row r at bias[XW*r +: XW]
  output logic                 out_valid,
  output logic signed [XW-1:0] out_y [N]
);
  localparam int unsigned SW = ACC_W + WW + 2;

  logic signed [ACC_W-1:0] acc [N];
  logic [N-1:0]            acc_v;

  for (genvar i = 0; i < N; i++) begin : g_mac
    mac_unit #(.XW(XW), .WW(WW), .ACC_W(ACC_W)) u_mac (
      .clk, .rst_n,
      .in_valid, .in_first, .in_last, .in_x,
      .in_w     (in_w[WW*i +: WW]),
      .w_uns    (w16 && (i % 2 == 0)),
      .acc_valid(acc_v[i]),
      .acc_out  (acc[i])
    );
  end

  function automatic logic signed [XW-1:0] requant(logic signed [SW-1:0] s,
                                                   logic signed [XW-1:0] b,
                                                   logic [4:0] sh);
    logic signed [SW-1:0] t;
    t = s + (SW'(b) <<< sh);
    if (sh != 0) t = t + (SW'(1) <<< (sh - 1));
    t = t >>> sh;
    if (t > SW'(2**(XW-1) - 1))  return XW'(2**(XW-1) - 1);
    if (t < -SW'(2**(XW-1)))     return XW'(-(2**(XW-1)));
    return t[XW-1:0];
  endfunction

  logic w16_q;
  logic [4:0] shift_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      w16_q <= 1'b0; shift_q <= '0;
    end else if (in_valid && in_last) begin
      w16_q <= w16; shift_q <= shift;
    end

  logic signed [XW-1:0] y_d [N];
  always_comb begin
    for (int r = 0; r < N; r++) begin
      logic signed [SW-1:0] s;
      if (!w16_q)
        s = SW'(acc[r]);
      else if (r < N / 2)
        s = (SW'(acc[2*r+1]) <<< WW) + SW'(acc[2*r]);
      else
        s = '0;
      y_d[r] = requant(s, bias[XW*r +: XW], shift_q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int r = 0; r < N; r++) out_y[r] <= '0;
    end else begin
      out_valid <= acc_v[0];
      if (acc_v[0]) out_y <= y_d;
    end
  end
endmodule
