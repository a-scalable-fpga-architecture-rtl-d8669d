// accel_pkg: types and constants shared by the GEMM processing unit (PU) and the
// multi-PU top. The PU is configured per layer by a decoded instruction
// (layer_cfg_t); weights and biases are loaded by separate commands (wl_cmd_t).
// Field widths are this design's own choice; the paper gives none.
package accel_pkg;
  localparam int unsigned ADDR_W = 34;   // HBM byte address (U50 has 8 GB)
  localparam int unsigned LEN_W  = 16;   // ADM command length in bytes
  localparam int unsigned AXI_W  = 256;  // AXI data width of both PU ports

  // Layer instruction. The weight matrix is N x M, the activation matrix M x P.
  typedef struct packed {
    logic              im2col;     // 1: generate IM2COL patch commands, 0: linear columns
    logic [ADDR_W-1:0] in_base;    // HBM byte address of the input (HWC or GEMM columns)
    logic [ADDR_W-1:0] zero_base;  // HBM address of a zero-filled region used for padding
    logic [15:0]       m_bytes;    // M, a multiple of 32 (ADM alignment)
    logic [15:0]       p_cols;     // P, number of activation columns
    logic [7:0]        b_w;        // B_W = ceil(N / R_SA) depth-wise weight sections
    logic [15:0]       w_base;     // first URAM entry of the layer's weights
    logic [11:0]       hi, wi;     // input feature map height, width
    logic [15:0]       ci;         // input channels (multiple of 32 in IM2COL mode)
    logic [11:0]       ho, wo;     // output feature map height, width
    logic [3:0]        k;          // kernel size
    logic [2:0]        s;          // stride
    logic [2:0]        pad;        // padding
    logic [5:0]        out_shift;  // power-of-two output scale (arithmetic right shift)
    logic [5:0]        bias_shift; // power-of-two bias scale (left shift)
    logic              relu1;      // ReLU before the residual addition
    logic              res_en;     // add the residual stream
    logic              relu2;      // ReLU after the residual addition
  } layer_cfg_t;

  // Weight / bias load command for the URAM column (addresses are URAM words).
  typedef struct packed {
    logic [15:0] base_word;
    logic [15:0] n_words;
    logic        is_bias;    // 1: write only the spare (ninth) byte of each word
  } wl_cmd_t;

  function automatic logic signed [7:0] sat8(input logic signed [47:0] v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return -8'sd128;
    else               return v[7:0];
  endfunction

  // 8 x 8 signed product at full 16-bit width (one DSP multiplier)
  function automatic logic signed [15:0] mul8(input logic signed [7:0] a, input logic signed [7:0] b);
    logic signed [15:0] x, y;
    x = 16'(a);
    y = 16'(b);
    return x * y;
  endfunction
endpackage
