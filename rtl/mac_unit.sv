// mac_unit: one multiply-accumulate cell of the MAC array.
//
// Multiplies a signed 16-bit activation by an 8-bit weight and accumulates.
// The weight is signed, or unsigned when w_uns is set: an unsigned low byte
// lets two cells act together as one 16-bit x 16-bit MAC (the array adds the
// high cell's sum, shifted left by 8, to the low cell's sum).
// Two pipeline stages: the product is registered, then added to the
// accumulator. 'first' restarts the sum with the product; 'last' makes
// acc_valid pulse with the finished sum one cycle after the add, held in
// acc_out until the next 'last'.
module mac_unit #(
  parameter int unsigned XW    = 16,
  parameter int unsigned WW    = 8,
  parameter int unsigned ACC_W = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic signed [XW-1:0]    in_x,
  input  logic [WW-1:0]           in_w,
  input  logic                    w_uns,
  output logic                    acc_valid,
  output logic signed [ACC_W-1:0] acc_out
);
  localparam int unsigned PW = XW + WW + 1;

  logic signed [WW:0]    w_ext;
  logic signed [PW-1:0]  prod_q;
  logic                  v_q, first_q, last_q;
  logic signed [ACC_W-1:0] acc_q;

  assign w_ext = w_uns ? $signed({1'b0, in_w}) : $signed({in_w[WW-1], in_w});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod_q  <= '0;
      v_q     <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
    end else begin
      v_q     <= in_valid;
      first_q <= in_first;
      last_q  <= in_last;
      if (in_valid) prod_q <= in_x * w_ext;
    end
  end

  logic signed [ACC_W-1:0] sum;
  assign sum = (first_q ? ACC_W'(0) : acc_q) + ACC_W'(prod_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      acc_out   <= '0;
      acc_valid <= 1'b0;
    end else begin
      acc_valid <= v_q && last_q;
      if (v_q) begin
        acc_q <= sum;
        if (last_q) acc_out <= sum;
      end
    end
  end
endmodule
