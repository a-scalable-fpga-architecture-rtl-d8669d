// uram_weights: the URAM column holding weights and biases, one URAM block per
// systolic-array row (R_SA blocks, each URAM_DEPTH x 72 bits).
// Write side (params path): the column is split into two write cascades of
// R_SA/2 blocks each. Every 128-bit fast-clock word from the stream adjuster
// carries 64 bits for row j of the lower cascade (bits 63:0) and 64 bits for
// row j of the upper cascade (bits 127:64); for each URAM word of a load command
// the rows are visited j = 0 .. R_SA/2-1. The write (address, row, data, bias
// flag) travels up each cascade one register per block and is captured by the
// block whose row matches, as the URAM cascade ports do. A bias command writes
// only the spare ninth byte (bits 71:64) from data bits 7:0.
// Read side: one read port per row. The entry address enters at row 0 and moves
// up one row per cycle, so row r reads one cycle after row r-1 (the systolic
// alignment); data appear one cycle after the read. An entry is C_SA bytes: with
// C_SA = 8 it is a whole 64-bit word, with C_SA = 4 (PU1x) every URAM word holds
// two entries (two sub-regions). rd_bias is the spare byte of the word read.
// Loads and reads may overlap (separate ports), which is what lets the next
// tile be loaded while the current one is computed.
// Paper: cascade write, R_SA/2 cascade length, 128-bit adjusted width, bias in
// the spare byte, independent systolically enabled read ports. This design's
// choices: the word/row order of the params stream and the read latency of 1.
module uram_weights
  import accel_pkg::*;
#(
  parameter int unsigned R_SA       = 64,
  parameter int unsigned C_SA       = 8,
  parameter int unsigned URAM_DEPTH = 4096,
  parameter int unsigned EW         = $clog2(URAM_DEPTH * 8 / C_SA)  // entry address width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // load command and data
  input  logic                 wl_valid,
  input  wl_cmd_t              wl_cmd,
  output logic                 wl_ready,
  input  logic                 d_valid,
  input  logic [127:0]         d_data,
  output logic                 d_ready,
  output logic                 ld_busy,
  // systolic read
  input  logic                 rd_en,
  input  logic [EW-1:0]        rd_entry,
  output logic [C_SA*8-1:0]    rd_w    [R_SA],
  output logic [7:0]           rd_bias [R_SA]
);
  localparam int unsigned HALF = R_SA / 2;
  localparam int unsigned DA   = $clog2(URAM_DEPTH);
  localparam int unsigned SUB  = 8 / C_SA;               // entries per URAM word
  localparam int unsigned SW   = (SUB > 1) ? $clog2(SUB) : 1;
  localparam int unsigned RW   = (HALF > 1) ? $clog2(HALF) : 1;

  typedef struct packed {
    logic          v;
    logic          bias;
    logic [RW-1:0] row;
    logic [DA-1:0] addr;
    logic [63:0]   data;
  } cas_t;

  // ---------------- loader ----------------
  logic          active, is_bias;
  logic [15:0]   word, n_words, base;
  logic [RW-1:0] j;
  cas_t          cas_lo [HALF];
  cas_t          cas_hi [HALF];
  logic          inject;

  assign wl_ready = !active;
  assign d_ready  = active;
  assign inject   = active && d_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0; word <= '0; j <= '0; n_words <= '0; base <= '0; is_bias <= 1'b0;
    end else if (!active) begin
      if (wl_valid && wl_cmd.n_words != 0) begin
        active <= 1'b1; word <= '0; j <= '0;
        n_words <= wl_cmd.n_words; base <= wl_cmd.base_word; is_bias <= wl_cmd.is_bias;
      end
    end else if (inject) begin
      if (j == RW'(HALF - 1)) begin
        j <= '0;
        word <= word + 1'b1;
        if (word == n_words - 1'b1) active <= 1'b0;
      end else j <= j + 1'b1;
    end
  end

  // ---------------- write cascades ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < HALF; i++) begin cas_lo[i].v <= 1'b0; cas_hi[i].v <= 1'b0; end
    end else begin
      cas_lo[0] <= '{v: inject, bias: is_bias, row: j, addr: DA'(base + word), data: d_data[63:0]};
      cas_hi[0] <= '{v: inject, bias: is_bias, row: j, addr: DA'(base + word), data: d_data[127:64]};
      for (int i = 1; i < HALF; i++) begin
        cas_lo[i] <= cas_lo[i-1];
        cas_hi[i] <= cas_hi[i-1];
      end
    end
  end

  always_comb begin
    ld_busy = active;
    for (int i = 0; i < HALF; i++) ld_busy = ld_busy | cas_lo[i].v;
  end

  // ---------------- read address chain ----------------
  logic [EW-1:0] ra   [R_SA];
  logic          ren  [R_SA];
  always_comb begin
    ra[0] = rd_entry; ren[0] = rd_en;
  end
  always_ff @(posedge clk) begin
    for (int r = 1; r < R_SA; r++) begin
      ra[r]  <= ra[r-1];
      ren[r] <= rst_n ? ren[r-1] : 1'b0;
    end
  end

  // ---------------- URAM blocks ----------------
  for (genvar r = 0; r < R_SA; r++) begin : g_row
    localparam int unsigned CI = r % HALF;
    logic [71:0]   mem [URAM_DEPTH];
    logic [71:0]   q;
    logic [SW-1:0] sub_q;
    cas_t          cw;
    assign cw = (r < HALF) ? cas_lo[CI] : cas_hi[CI];

    always_ff @(posedge clk) begin
      if (cw.v && cw.row == RW'(CI)) begin
        if (cw.bias) mem[cw.addr][71:64] <= cw.data[7:0];
        else         mem[cw.addr][63:0]  <= cw.data;
      end
      if (ren[r]) begin
        q     <= mem[DA'(ra[r] >> SW'(SUB > 1 ? SW : 0))];
        sub_q <= (SUB > 1) ? SW'(ra[r]) : '0;
      end
    end
    assign rd_w[r]    = q[sub_q*C_SA*8 +: C_SA*8];
    assign rd_bias[r] = q[71:64];
  end
endmodule
