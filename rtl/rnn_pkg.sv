// rnn_pkg: types and constants shared by the RNN accelerator.
//
// Numbers that follow the paper: 32 MACs of 16-bit x 8-bit, 12 KB of local
// SRAM, three fixed compression rates (5.3x, 8x, 16x, i.e. 6, 4 and 2 bits per
// weight against 32-bit floating-point weights), four activation functions
// (tanh, sigmoid, softsign, relu) and three layer types (FC, GRU, LSTM).
// Everything else here is this design's choice: 16-bit Q3.12 activations,
// a 256-bit weight bus (one 32 x 8-bit weight vector per beat), six 1024 x
// 16-bit memory banks, a 64-entry weight codebook and the register map.
package rnn_pkg;

  localparam int unsigned N_MAC      = 32;   // MACs in the array
  localparam int unsigned XW         = 16;   // activation / data word width
  localparam int unsigned WW         = 8;    // weight width of one MAC
  localparam int unsigned ACC_W      = 40;   // accumulator width of one MAC
  localparam int unsigned FRAC       = 12;   // fraction bits of data words (Q3.12)
  localparam int unsigned BUS_W      = 256;  // weight bus width (bits per beat)
  localparam int unsigned NBANK      = 6;    // local memory banks
  localparam int unsigned BANK_DEPTH = 1024; // 16-bit words per bank
  localparam int unsigned LM_AW      = 13;   // local memory word address width
  localparam int unsigned CB_N       = 64;   // codebook entries (2^6)
  localparam int unsigned CB_W       = 16;   // codebook entry width
  localparam int unsigned LEN_W      = 12;   // vector length field width
  localparam int unsigned ACT_LAT    = 3;    // activation unit latency (cycles)

  typedef enum logic [1:0] {
    NET_FC   = 2'd0,
    NET_GRU  = 2'd1,
    NET_LSTM = 2'd2
  } net_e;

  typedef enum logic [2:0] {
    ACT_NONE     = 3'd0,
    ACT_SIGMOID  = 3'd1,
    ACT_TANH     = 3'd2,
    ACT_SOFTSIGN = 3'd3,
    ACT_RELU     = 3'd4
  } act_e;

  // Compression setting: index bits per weight 0 (off), 6, 4, 2.
  typedef enum logic [1:0] {
    CMP_OFF = 2'd0,
    CMP_5X3 = 2'd1,
    CMP_8X  = 2'd2,
    CMP_16X = 2'd3
  } cmp_e;

  function automatic int unsigned cmp_bits(cmp_e m);
    case (m)
      CMP_5X3: return 6;
      CMP_8X:  return 4;
      CMP_16X: return 2;
      default: return 0;
    endcase
  endfunction

  // One matrix-vector pass as the sequencer hands it to the memory access
  // controller: the input vector is the concatenation of two local-memory
  // segments (for example x then h), preceded in the weight stream by
  // nbias raw bias beats.
  typedef struct packed {
    logic [LM_AW-1:0] seg0_addr;
    logic [LEN_W-1:0] seg0_len;
    logic [LM_AW-1:0] seg1_addr;
    logic [LEN_W-1:0] seg1_len;
    logic [1:0]       nbias;
    cmp_e             cmp;
    logic             w16;
  } pass_desc_t;

  // Layer configuration written by the host through MMIO.
  typedef struct packed {
    net_e             net;
    act_e             act;
    cmp_e             cmp;
    logic             w16;
    logic [4:0]       shift;
    logic [LEN_W-1:0] in_size;
    logic [LEN_W-1:0] out_size;
    logic [LM_AW-1:0] x_addr;
    logic [LM_AW-1:0] h_addr;
    logic [LM_AW-1:0] ho_addr;
    logic [LM_AW-1:0] c_addr;
    logic [31:0]      wt_base;
  } layer_cfg_t;

  // MMIO register word addresses.
  localparam logic [15:0] REG_CTRL    = 16'h0000;
  localparam logic [15:0] REG_STATUS  = 16'h0001;
  localparam logic [15:0] REG_MODE    = 16'h0002;
  localparam logic [15:0] REG_INSIZE  = 16'h0003;
  localparam logic [15:0] REG_OUTSIZE = 16'h0004;
  localparam logic [15:0] REG_XADDR   = 16'h0005;
  localparam logic [15:0] REG_HADDR   = 16'h0006;
  localparam logic [15:0] REG_HOADDR  = 16'h0007;
  localparam logic [15:0] REG_CADDR   = 16'h0008;
  localparam logic [15:0] REG_WTBASE  = 16'h0009;
  localparam logic [15:0] REG_CYCLES  = 16'h000A;
  localparam logic [15:0] REG_MACS    = 16'h000B;
  localparam logic [15:0] REG_CB_BASE = 16'h0040;  // 64 codebook entries
  localparam logic [15:0] REG_LM_BASE = 16'h2000;  // local memory window

endpackage
