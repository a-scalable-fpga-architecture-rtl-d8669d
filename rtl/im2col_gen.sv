// im2col_gen: IM2COL address/length generator for the ADM I/O command queue.
// Instead of rearranging data on chip, it issues one read command per kernel
// position so that the HWC-ordered input feature map arrives at the activation
// buffer already laid out as IM2COL columns (one column per output pixel,
// elements in kh, kw, c order, which is contiguous per kernel position in HWC).
//   im2col = 1: for ho, wo (column order), kh, kw: ih = ho*s + kh - pad,
//               iw = wo*s + kw - pad; in range -> addr = in_base + (ih*wi + iw)*ci,
//               otherwise addr = zero_base (a zero-filled HBM region); len = ci.
//   im2col = 0: linear GEMM / FC columns: addr = in_base + col*m_bytes, len = m_bytes.
// One command is offered per cycle (cmd_valid/cmd_ready); `start` loads the layer.
// The paper gives the function (address/length bundles from the IFM and
// convolution parameters); the loop order, one command per kernel position and
// padding by reading a zero region are this design's choices.
module im2col_gen
  import accel_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              cmd_valid,
  output logic [ADDR_W-1:0] cmd_addr,
  output logic [LEN_W-1:0]  cmd_len,
  input  logic              cmd_ready,
  output logic              busy
);
  layer_cfg_t  c;
  logic [11:0] ho, wo;
  logic [3:0]  kh, kw;
  logic [15:0] col;
  logic signed [15:0] ih, iw;
  logic        in_map;

  always_comb begin
    ih     = $signed({4'd0, ho}) * $signed({13'd0, c.s}) + $signed({12'd0, kh}) - $signed({13'd0, c.pad});
    iw     = $signed({4'd0, wo}) * $signed({13'd0, c.s}) + $signed({12'd0, kw}) - $signed({13'd0, c.pad});
    in_map = (ih >= 0) && (iw >= 0) && (ih < $signed({4'd0, c.hi})) && (iw < $signed({4'd0, c.wi}));
    if (!c.im2col) begin
      cmd_addr = c.in_base + ADDR_W'(col) * ADDR_W'(c.m_bytes);
      cmd_len  = c.m_bytes;
    end else begin
      cmd_addr = in_map ? c.in_base + (ADDR_W'(ih) * ADDR_W'(c.wi) + ADDR_W'(iw)) * ADDR_W'(c.ci)
                        : c.zero_base;
      cmd_len  = c.ci;
    end
  end
  assign cmd_valid = busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; c <= '0; ho <= '0; wo <= '0; kh <= '0; kw <= '0; col <= '0;
    end else if (start) begin
      busy <= (cfg.p_cols != 0); c <= cfg; ho <= '0; wo <= '0; kh <= '0; kw <= '0; col <= '0;
    end else if (busy && cmd_ready) begin
      if (!c.im2col) begin
        col <= col + 1'b1;
        if (col == c.p_cols - 1'b1) busy <= 1'b0;
      end else if (kw != c.k - 1'b1) kw <= kw + 1'b1;
      else begin
        kw <= '0;
        if (kh != c.k - 1'b1) kh <= kh + 1'b1;
        else begin
          kh <= '0;
          if (wo != c.wo - 1'b1) wo <= wo + 1'b1;
          else begin
            wo <= '0;
            if (ho != c.ho - 1'b1) ho <= ho + 1'b1;
            else busy <= 1'b0;
          end
        end
      end
    end
  end
endmodule
