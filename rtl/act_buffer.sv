// act_buffer: ping-pong activation buffer (BufA / BufB, block RAM in the paper).
// Write side: the ADM I/O stream delivers one 32-byte AXI beat per system-clock
// edge (in_valid & in_ready & sys_ce). A column of m_bytes/32 beats fills the
// buffer selected by the write pointer; the buffer is then marked full and the
// writer switches to the other one, provided it has been released.
// Read side: one C_SA-byte entry per fast cycle from the buffer selected by the
// read pointer (rd_en, rd_entry -> rd_data one cycle later). `rd_release` frees
// the current read buffer and flips the read pointer. `rd_avail` says the read
// buffer holds a complete column. `start` arms the writer for p_cols columns.
// Follows the paper's ping-pong scheme and widths; depth is this design's choice.
module act_buffer #(
  parameter int unsigned C_SA      = 8,
  parameter int unsigned ACT_WORDS = 256,   // 256 x 32 B = 8 KB per buffer
  parameter int unsigned AXI_W     = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       sys_ce,
  input  logic                       start,
  input  logic [15:0]                m_bytes,
  input  logic [15:0]                p_cols,
  input  logic                       in_valid,
  input  logic [AXI_W-1:0]           in_data,
  output logic                       in_ready,
  output logic                       rd_avail,
  input  logic                       rd_en,
  input  logic [15:0]                rd_entry,
  input  logic                       rd_release,
  output logic [C_SA*8-1:0]          rd_data
);
  localparam int unsigned PER_WORD = AXI_W / (8 * C_SA);   // entries per beat
  localparam int unsigned WA       = $clog2(ACT_WORDS);
  localparam int unsigned LW       = (PER_WORD > 1) ? $clog2(PER_WORD) : 1;

  logic [AXI_W-1:0] buf_a [ACT_WORDS];
  logic [AXI_W-1:0] buf_b [ACT_WORDS];
  logic [1:0]  full;
  logic        wsel, rsel;
  logic [15:0] wbeat, wcols, beats;
  logic [WA-1:0] rword;
  logic [LW-1:0] rlane;
  logic        wfire;

  assign beats    = m_bytes / 16'(AXI_W / 8);
  assign in_ready = !full[wsel] && (wcols < p_cols);
  assign wfire    = in_valid && in_ready && sys_ce;
  assign rd_avail = full[rsel];
  assign rword    = WA'(rd_entry / 16'(PER_WORD));
  assign rlane    = LW'(rd_entry % 16'(PER_WORD));

  always_ff @(posedge clk) begin
    if (wfire && !wsel) buf_a[wbeat[WA-1:0]] <= in_data;
    if (wfire &&  wsel) buf_b[wbeat[WA-1:0]] <= in_data;
  end

  logic [AXI_W-1:0] rword_data;
  always_ff @(posedge clk) begin
    if (rd_en) rword_data <= rsel ? buf_b[rword] : buf_a[rword];
  end
  logic [LW-1:0] rlane_q;
  always_ff @(posedge clk) if (rd_en) rlane_q <= rlane;
  assign rd_data = rword_data[rlane_q*C_SA*8 +: C_SA*8];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full <= '0; wsel <= 1'b0; rsel <= 1'b0; wbeat <= '0; wcols <= '0;
    end else begin
      if (start) begin
        wcols <= '0; wbeat <= '0;
      end else if (wfire) begin
        if (wbeat == beats - 1'b1) begin
          wbeat <= '0; wcols <= wcols + 1'b1; wsel <= !wsel;
          full[wsel] <= 1'b1;
        end else wbeat <= wbeat + 1'b1;
      end
      if (rd_release) begin
        full[rsel] <= 1'b0; rsel <= !rsel;
      end
    end
  end

  a_release_full: assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> full[rsel]);
endmodule
