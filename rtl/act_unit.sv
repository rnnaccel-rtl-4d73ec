// act_unit: pipelined multi-mode activation unit.
//
// Computes one activation per cycle on a signed Q3.12 input and returns a
// signed Q3.12 result: tanh, sigmoid, softsign, relu, or the input unchanged.
// tanh and softsign are odd functions, so only their positive half is stored:
// the unit takes |x|, interpolates linearly between table points spaced 1/64
// apart over [0, 8), and restores the sign. Sigmoid reuses the tanh table
// through sigmoid(x) = 1/2 + tanh(x/2)/2; halving x only moves the split
// between table index and interpolation fraction by one bit. Tables hold
// 17-bit Q1.16 values and are computed at elaboration from $tanh and
// x/(1+x), so no data file is needed. The interpolation error is below 6e-5
// and the output rounding to 12 fraction bits adds at most 1.2e-4.
// Timing: in_valid at cycle t gives out_valid at t+3 (ACT_LAT); a tag of
// TAG_W bits travels alongside for the caller's bookkeeping.
// From the paper: pipelined, multi-mode, these four functions, piecewise
// linear, symmetry used to halve the tables, tanh and sigmoid shared, error
// below 0.0002. The segment spacing, table format and pipeline depth are this
// design's choices.
module act_unit
  import rnn_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  act_e                 in_mode,
  input  logic signed [15:0]   in_x,
  input  logic [TAG_W-1:0]     in_tag,
  output logic                 out_valid,
  output logic signed [15:0]   out_y,
  output logic [TAG_W-1:0]     out_tag
);
  localparam int unsigned NSEG = 512;           // segments over [0, 8)
  typedef logic [16:0] tbl_t [NSEG+1];

  function automatic tbl_t gen_tbl(bit softsign);
    tbl_t t;
    for (int k = 0; k <= NSEG; k++) begin
      real u, f;
      u = real'(k) / 64.0;
      f = softsign ? u / (1.0 + u) : $tanh(u);
      t[k] = 17'($rtoi(f * 65536.0 + 0.5));
    end
    return t;
  endfunction

  localparam tbl_t TANH_TBL = gen_tbl(1'b0);
  localparam tbl_t SOFT_TBL = gen_tbl(1'b1);

  // Stage 1: magnitude, table index and interpolation fraction.
  logic [15:0] mag;
  logic [8:0]  idx_d;
  logic [6:0]  fr_d;
  always_comb begin
    mag = in_x[15] ? 16'(-in_x) : 16'(in_x);
    if (mag > 16'h7FFF) mag = 16'h7FFF;
    if (in_mode == ACT_SIGMOID) begin
      idx_d = {1'b0, mag[14:7]};        // |x|/2 in 1/64 steps
      fr_d  = mag[6:0];
    end else begin
      idx_d = mag[14:6];
      fr_d  = {mag[5:0], 1'b0};
    end
  end

  logic               v1, v2;
  act_e               mode1, mode2;
  logic               neg1, neg2;
  logic [8:0]         idx1;
  logic [6:0]         fr1, fr2;
  logic signed [15:0] x1, x2;
  logic [TAG_W-1:0]   tag1, tag2;
  logic [16:0]        lo2, hi2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; mode1 <= ACT_NONE; neg1 <= 1'b0; idx1 <= '0; fr1 <= '0;
      x1 <= '0; tag1 <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        mode1 <= in_mode; neg1 <= in_x[15]; idx1 <= idx_d; fr1 <= fr_d;
        x1 <= in_x; tag1 <= in_tag;
      end
    end
  end

  // Stage 2: table look-up of both segment end points.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; mode2 <= ACT_NONE; neg2 <= 1'b0; fr2 <= '0; x2 <= '0;
      tag2 <= '0; lo2 <= '0; hi2 <= '0;
    end else begin
      v2 <= v1;
      if (v1) begin
        mode2 <= mode1; neg2 <= neg1; fr2 <= fr1; x2 <= x1; tag2 <= tag1;
        if (mode1 == ACT_SOFTSIGN) begin
          lo2 <= SOFT_TBL[{1'b0, idx1}];
          hi2 <= SOFT_TBL[{1'b0, idx1} + 10'd1];
        end else begin
          lo2 <= TANH_TBL[{1'b0, idx1}];
          hi2 <= TANH_TBL[{1'b0, idx1} + 10'd1];
        end
      end
    end
  end

  // Stage 3: interpolation, symmetry, sigmoid transform, rounding to Q3.12.
  logic [16:0]        m16;     // |f| in Q1.16
  logic signed [18:0] f16;     // result in Q2.16
  logic signed [15:0] y_d;
  always_comb begin
    m16 = lo2 + 17'(((24'(hi2) - 24'(lo2)) * 24'(fr2)) >> 7);
    case (mode2)
      ACT_SIGMOID: f16 = neg2 ? 19'sd32768 - 19'(m16 >> 1) : 19'sd32768 + 19'(m16 >> 1);
      default:     f16 = neg2 ? -19'(m16) : 19'(m16);
    endcase
    case (mode2)
      ACT_RELU: y_d = x2[15] ? 16'sd0 : x2;
      ACT_NONE: y_d = x2;
      default:  y_d = 16'((f16 + 19'sd8) >>> 4);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_y <= '0; out_tag <= '0;
    end else begin
      out_valid <= v2;
      if (v2) begin
        out_y <= y_d; out_tag <= tag2;
      end
    end
  end
endmodule
