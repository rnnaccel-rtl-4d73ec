// local_mem_pool: banked on-chip memory for inputs, hidden state, cell state,
// gate values and results.
//
// NBANK banks of DEPTH 16-bit words (6 x 1024 x 16 bit = 12 KB by default).
// Word address bits above log2(DEPTH) select the bank. Each bank reads one
// word and writes one word per cycle. The pool has NR read ports and NW write
// ports routed to the banks by address, so accesses to different banks run
// in parallel. Two ports aimed at the same bank in one cycle are a usage
// error (flagged by an assertion); the lower-numbered port is served.
// Read data is valid one cycle after the request.
// From the paper: several banks, bank count configurable, 12 KB of local
// SRAM. Bank geometry, port count and the address map are this design's.
module local_mem_pool #(
  parameter int unsigned NBANK = 6,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned DW    = 16,
  parameter int unsigned NR    = 2,
  parameter int unsigned NW    = 2,
  parameter int unsigned AW    = 13
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NR-1:0] re,
  input  logic [AW-1:0] raddr [NR],
  output logic [DW-1:0] rdata [NR],
  input  logic [NW-1:0] we,
  input  logic [AW-1:0] waddr [NW],
  input  logic [DW-1:0] wdata [NW]
);
  localparam int unsigned IW = $clog2(DEPTH);
  localparam int unsigned BW = (NBANK > 1) ? $clog2(NBANK) : 1;

  logic [NBANK-1:0] b_re, b_we;
  logic [IW-1:0]    b_raddr [NBANK];
  logic [IW-1:0]    b_waddr [NBANK];
  logic [DW-1:0]    b_wdata [NBANK];
  logic [DW-1:0]    b_rdata [NBANK];
  logic [BW-1:0]    rsel_q  [NR];

  function automatic logic [BW-1:0] bank_of(logic [AW-1:0] a);
    return BW'(a >> IW);
  endfunction

  always_comb begin
    b_re = '0;
    b_we = '0;
    for (int b = 0; b < NBANK; b++) begin
      b_raddr[b] = '0;
      b_waddr[b] = '0;
      b_wdata[b] = '0;
    end
    for (int p = NR - 1; p >= 0; p--)
      if (re[p]) begin
        b_re[bank_of(raddr[p])]    = 1'b1;
        b_raddr[bank_of(raddr[p])] = raddr[p][IW-1:0];
      end
    for (int p = NW - 1; p >= 0; p--)
      if (we[p]) begin
        b_we[bank_of(waddr[p])]    = 1'b1;
        b_waddr[bank_of(waddr[p])] = waddr[p][IW-1:0];
        b_wdata[bank_of(waddr[p])] = wdata[p];
      end
  end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    sram_bank #(.DEPTH(DEPTH), .DW(DW)) u_bank (
      .clk,
      .re   (b_re[b]),
      .raddr(b_raddr[b]),
      .rdata(b_rdata[b]),
      .we   (b_we[b]),
      .waddr(b_waddr[b]),
      .wdata(b_wdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int p = 0; p < NR; p++) rsel_q[p] <= '0;
    end else begin
      for (int p = 0; p < NR; p++) if (re[p]) rsel_q[p] <= bank_of(raddr[p]);
    end

  always_comb
    for (int p = 0; p < NR; p++) rdata[p] = b_rdata[rsel_q[p]];

  // Usage rules: addresses in range, no two ports on one bank in a cycle.
  always_ff @(posedge clk) begin
    for (int p = 0; p < NR; p++) begin
      if (rst_n && re[p])
        assert (32'(raddr[p]) < NBANK * DEPTH) else $error("read address out of range");
      for (int q = p + 1; q < NR; q++)
        if (rst_n && re[p] && re[q])
          assert (bank_of(raddr[p]) != bank_of(raddr[q])) else $error("read bank conflict");
    end
    for (int p = 0; p < NW; p++) begin
      if (rst_n && we[p])
        assert (32'(waddr[p]) < NBANK * DEPTH) else $error("write address out of range");
      for (int q = p + 1; q < NW; q++)
        if (rst_n && we[p] && we[q])
          assert (bank_of(waddr[p]) != bank_of(waddr[q])) else $error("write bank conflict");
    end
  end
endmodule
