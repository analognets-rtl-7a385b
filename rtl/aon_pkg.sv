// aon_pkg: types and constants shared by the AON-CiM accelerator.
//
// The accelerator runs a neural network one layer at a time on a single
// 1024-row x 512-column analog compute-in-memory (CiM) array. Activations
// circulate SRAM -> IM2COL -> DACs -> array -> ADCs -> activation
// processing -> SRAM. This package holds the array geometry, the datapath
// widths, the activation-precision modes and the layer descriptor that the
// layer sequencer walks through.
//
// Taken from the paper: array size (1024 x 512), 4:1 bitline mux (so 128
// ADCs), 8/6/4-bit activation modes, the CiM cycle times (130/34/10 ns), the
// 1.25 ns digital clock, 128 KB of activation SRAM in two banks. Own choices:
// 8-bit signed activation codes held one per SRAM byte, 8-bit signed weight
// codes, 16 byte lanes in the datapath (128 words in 8 clocks of the 4-bit
// CiM cycle), the scale-factor format and the descriptor fields.
// Some constants (ROWS, NADC, LANES, BANK_BYTES, MAX_LAYERS) are used only
// as module parameter defaults and by testbenches, so a lint run on the
// package alone reports them as unused.
package aon_pkg;

  // ---- analog array geometry -------------------------------------------
  localparam int unsigned ROWS       = 1024;           // source lines / DACs
  localparam int unsigned COLS       = 512;            // differential bitlines
  localparam int unsigned MUX        = 4;              // bitline mux inputs per ADC
  localparam int unsigned NADC       = COLS / MUX;     // 128 ADCs

  // ---- digital datapath --------------------------------------------------
  localparam int unsigned ACT_W      = 8;              // activation code width
  localparam int unsigned W_W        = 8;              // signed weight code width
  localparam int unsigned LANES      = 16;             // bytes per SRAM access / act-proc lanes
  localparam int unsigned BANK_BYTES = 64 * 1024;      // two banks = 128 KB
  localparam int unsigned ADDR_W     = 16;             // byte address inside a bank
  localparam int unsigned MAX_LAYERS = 32;

  // CiM cycle in 1.25 ns digital clocks: ceil(130/1.25), ceil(34/1.25), 10/1.25
  localparam int unsigned TCIM_8B    = 104;
  localparam int unsigned TCIM_6B    = 28;
  localparam int unsigned TCIM_4B    = 8;

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [W_W-1:0]   wcode_t;

  // Activation precision mode (DAC/ADC resolution).
  typedef enum logic [1:0] {
    MODE_8B = 2'd0,
    MODE_6B = 2'd1,
    MODE_4B = 2'd2
  } act_mode_e;

  // Scale factor: value = mant * 2^-shift (a float with a per-constant
  // exponent, applied to integer data).
  typedef struct packed {
    logic signed [15:0] mant;
    logic        [4:0]  shift;
  } scale_t;

  // Kind of entry in the layer program.
  typedef enum logic [1:0] {
    LT_CIM  = 2'd0,   // convolution / fully connected on the CiM array
    LT_END  = 2'd1    // end of program
  } layer_type_e;

  // One entry of the layer program. Activations are stored HWC, unpadded:
  // byte address of (y, x, c) is base + (y*W + x)*C + c.
  typedef struct packed {
    layer_type_e        ltype;
    act_mode_e          mode;
    logic [ADDR_W-1:0]  in_base;    // input tensor, read bank
    logic [ADDR_W-1:0]  out_base;   // output tensor, write bank
    logic [ADDR_W-1:0]  res_base;   // residual tensor, write bank
    logic [7:0]         in_h, in_w;
    logic [9:0]         in_c;
    logic [3:0]         k_h, k_w;
    logic [1:0]         stride;
    logic [2:0]         pad_t;      // top padding rows
    logic [2:0]         pad_l;      // left padding columns
    logic [7:0]         out_h, out_w;
    logic [9:0]         row0;       // first array row of the layer's weights
    logic [10:0]        rows;       // k_h*k_w*in_c
    logic [9:0]         col0;       // first array column
    logic [9:0]         cols;       // output channels
    logic               relu;
    logic               residual;   // add tensor at res_base before ReLU
    logic               pool;       // global average pool of the output
    scale_t             s_layer;    // first scaling: per layer (ADC / drift)
    scale_t             s_pool;     // 1/(H*W) for the average pool
  } layer_desc_t;

  // Per-column second scaling and bias (batch norm folded in).
  typedef struct packed {
    scale_t             s_ch;
    logic signed [15:0] bias;
  } chan_par_t;

  function automatic int unsigned tcim_cycles(act_mode_e m);
    case (m)
      MODE_8B: return TCIM_8B;
      MODE_6B: return TCIM_6B;
      default: return TCIM_4B;
    endcase
  endfunction

  // Largest code magnitude of the symmetric quantizer in each mode.
  function automatic int qmax(act_mode_e m);
    case (m)
      MODE_8B: return 127;
      MODE_6B: return 31;
      default: return 7;
    endcase
  endfunction

  // Round-half-up arithmetic right shift.
  function automatic longint rshift_round(longint v, int unsigned sh);
    if (sh == 0) return v;
    return (v + (64'sd1 <<< (sh - 1))) >>> sh;
  endfunction

  function automatic int clip_sym(longint v, int m);
    if (v > longint'(m))  return m;
    if (v < -longint'(m)) return -m;
    return int'(v);
  endfunction

endpackage
