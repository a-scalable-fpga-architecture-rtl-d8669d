// pu: one GEMM processing unit. It multiplies an N x M INT8 weight matrix, held
// in the URAM column, by an M x P activation matrix streamed from HBM, column
// by column, producing N x P INT8 results written back as a stream.
//   (a) pre-processing: im2col_gen turns the layer into ADM I/O read commands;
//       the returned 256-bit beats fill the ping-pong act_buffer. The params
//       stream (weights, biases) is split 256 -> 128 bits by a stream adjuster
//       and written into the URAM column; the residual stream is split
//       256 -> R_G*8 bits into the residual FIFO.
//   (b) pu_ctrl issues one round per fast cycle: buffer entry and URAM entry for
//       the systolic_array; finished rows are scaled and merged into R_G-byte
//       chunks (scale_merge), queued per row-block and funnelled by the
//       aggregator into the wave reorder buffer (wrb).
//   (c) post-processing in wave order: act_func (ReLU), residual_add, act_func,
//       then stream_width_up packs R_G-byte chunks into 256-bit output beats.
// Clocking: one fast clock `clk`; the AXI-side system clock at half rate is
// modelled by `sys_ce`, high on every other cycle; the 256-bit ports transfer
// only on sys_ce cycles. A layer starts with cfg_valid & cfg_ready and ends
// with a `done` pulse after its last output beat. Weight loads (wl_*) are
// independent of layers and may run while a layer computes, into other URAM
// entries. Outputs leave in column order, N bytes per column, row 0 first.
// Structure and sizes follow the paper (R_SA=64, C_SA=8 or 4, R_g=8, 256-bit
// ports); depths of buffers and the command/handshake formats are this design's.
module pu
  import accel_pkg::*;
#(
  parameter int unsigned R_SA       = 64,
  parameter int unsigned C_SA       = 8,
  parameter int unsigned R_G        = 8,
  parameter int unsigned URAM_DEPTH = 4096,
  parameter int unsigned ACT_WORDS  = 256,
  parameter int unsigned WRB_WAVES  = 4,
  parameter int unsigned ACC_W      = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sys_ce,
  // layer instruction
  input  logic              cfg_valid,
  input  layer_cfg_t        cfg,
  output logic              cfg_ready,
  output logic              done,
  // ADM I/O: read commands, input stream, output stream
  output logic              io_cmd_valid,
  output logic [ADDR_W-1:0] io_cmd_addr,
  output logic [LEN_W-1:0]  io_cmd_len,
  input  logic              io_cmd_ready,
  input  logic              inp_tvalid,
  input  logic [AXI_W-1:0]  inp_tdata,
  output logic              inp_tready,
  output logic              out_tvalid,
  output logic [AXI_W-1:0]  out_tdata,
  input  logic              out_tready,
  // ADM params: weight/bias load commands and streams
  input  logic              wl_valid,
  input  wl_cmd_t           wl_cmd,
  output logic              wl_ready,
  output logic              wl_busy,
  input  logic              prm_tvalid,
  input  logic [AXI_W-1:0]  prm_tdata,
  output logic              prm_tready,
  input  logic              ra_tvalid,
  input  logic [AXI_W-1:0]  ra_tdata,
  output logic              ra_tready
);
  localparam int unsigned NB     = R_SA / R_G;
  localparam int unsigned WAVE_W = $clog2(WRB_WAVES);
  localparam int unsigned EW     = $clog2(URAM_DEPTH * 8 / C_SA);
  localparam int unsigned CW     = R_G * 8;

  // ---------------- layer start ----------------
  layer_cfg_t lc;
  logic busy, start, start_q, im_busy;
  assign cfg_ready = !busy && !start_q;
  assign start     = cfg_valid && cfg_ready;
  always_ff @(posedge clk) begin
    if (!rst_n) begin lc <= '0; start_q <= 1'b0; end
    else begin
      start_q <= start;
      if (start) lc <= cfg;
    end
  end

  // ---------------- (a) pre-processing ----------------
  im2col_gen u_im2col (
    .clk, .rst_n, .start(start_q), .cfg(lc),
    .cmd_valid(io_cmd_valid), .cmd_addr(io_cmd_addr), .cmd_len(io_cmd_len),
    .cmd_ready(io_cmd_ready), .busy(im_busy));

  logic              buf_avail, iss_valid, iss_first, iss_last, release_buf, credit_stall;
  logic [15:0]       iss_act, iss_w;
  logic [WAVE_W-1:0] iss_wave;
  logic [C_SA*8-1:0] act_rd;

  act_buffer #(.C_SA(C_SA), .ACT_WORDS(ACT_WORDS), .AXI_W(AXI_W)) u_actbuf (
    .clk, .rst_n, .sys_ce, .start(start_q), .m_bytes(lc.m_bytes), .p_cols(lc.p_cols),
    .in_valid(inp_tvalid), .in_data(inp_tdata), .in_ready(inp_tready),
    .rd_avail(buf_avail), .rd_en(iss_valid), .rd_entry(iss_act), .rd_release(release_buf),
    .rd_data(act_rd));

  logic         pd_valid, pd_ready;
  logic [127:0] pd_data;
  stream_width_down #(.IN_W(AXI_W), .OUT_W(128)) u_prm_adj (
    .clk, .rst_n, .sys_ce, .in_valid(prm_tvalid), .in_data(prm_tdata), .in_ready(prm_tready),
    .out_valid(pd_valid), .out_data(pd_data), .out_ready(pd_ready));

  // ---------------- (b) URAM column and systolic array ----------------
  logic [C_SA*8-1:0] w_row    [R_SA];
  logic [7:0]        bias_row [R_SA];
  uram_weights #(.R_SA(R_SA), .C_SA(C_SA), .URAM_DEPTH(URAM_DEPTH)) u_uram (
    .clk, .rst_n, .wl_valid, .wl_cmd, .wl_ready, .d_valid(pd_valid), .d_data(pd_data),
    .d_ready(pd_ready), .ld_busy(wl_busy), .rd_en(iss_valid), .rd_entry(EW'(iss_w)),
    .rd_w(w_row), .rd_bias(bias_row));

  logic              wave_free, out_fire, ooo;
  pu_ctrl #(.R_SA(R_SA), .C_SA(C_SA), .WAVES(WRB_WAVES), .OUT_W(AXI_W)) u_ctrl (
    .clk, .rst_n, .start(start_q), .m_bytes(lc.m_bytes), .p_cols(lc.p_cols), .b_w(lc.b_w),
    .w_base(lc.w_base), .buf_avail, .wave_free, .out_fire,
    .iss_valid, .iss_act, .iss_w, .iss_first, .iss_last, .iss_wave, .release_buf,
    .busy, .done, .credit_stall);

  // flags meet the buffer data one cycle after the issue
  logic              sa_v, sa_first, sa_last;
  logic [WAVE_W-1:0] sa_wave;
  always_ff @(posedge clk) begin
    if (!rst_n) begin sa_v <= 1'b0; sa_first <= 1'b0; sa_last <= 1'b0; sa_wave <= '0; end
    else begin sa_v <= iss_valid; sa_first <= iss_first; sa_last <= iss_last; sa_wave <= iss_wave; end
  end

  logic                    res_valid [R_SA];
  logic [WAVE_W-1:0]       res_wave  [R_SA];
  logic signed [ACC_W-1:0] res_acc   [R_SA];
  systolic_array #(.R_SA(R_SA), .C_SA(C_SA), .ACC_W(ACC_W), .WAVE_W(WAVE_W)) u_sa (
    .clk, .rst_n, .in_valid(sa_v), .in_first(sa_first), .in_last(sa_last), .in_wave(sa_wave),
    .act_in(act_rd), .w_row, .bias_row, .bias_shift(lc.bias_shift),
    .res_valid, .res_wave, .res_acc);

  logic              ch_valid [NB];
  logic [WAVE_W-1:0] ch_wave  [NB];
  logic [CW-1:0]     ch_data  [NB];
  scale_merge #(.R_SA(R_SA), .R_G(R_G), .ACC_W(ACC_W), .WAVE_W(WAVE_W)) u_scale (
    .clk, .rst_n, .shift(lc.out_shift), .res_valid, .res_wave, .res_acc,
    .ch_valid, .ch_wave, .ch_data);

  logic                  ag_valid;
  logic [WAVE_W-1:0]     ag_wave;
  logic [$clog2(NB)-1:0] ag_blk;
  logic [CW-1:0]         ag_data;
  aggregator #(.NB(NB), .R_G(R_G), .WAVE_W(WAVE_W), .FIFO_DEPTH(WRB_WAVES)) u_agg (
    .clk, .rst_n, .in_valid(ch_valid), .in_wave(ch_wave), .in_data(ch_data),
    .out_valid(ag_valid), .out_wave(ag_wave), .out_blk(ag_blk), .out_data(ag_data),
    .out_ready(1'b1));

  // ---------------- (c) post-processing ----------------
  logic          wr_valid, wr_ready, a1_valid, a1_ready, rs_valid, rs_ready;
  logic          a2_valid, a2_ready, ra_valid, ra_ready, rq_valid, rq_ready;
  logic [CW-1:0] wr_data, a1_data, rs_data, a2_data, ra_data, rq_data;

  wrb #(.NB(NB), .R_G(R_G), .WAVES(WRB_WAVES)) u_wrb (
    .clk, .rst_n, .w_valid(ag_valid), .w_wave(ag_wave), .w_blk(ag_blk), .w_data(ag_data),
    .r_valid(wr_valid), .r_data(wr_data), .r_ready(wr_ready), .wave_free, .ooo);

  act_func #(.R_G(R_G)) u_act1 (
    .clk, .rst_n, .relu_en(lc.relu1), .in_valid(wr_valid), .in_data(wr_data), .in_ready(wr_ready),
    .out_valid(a1_valid), .out_data(a1_data), .out_ready(a1_ready));

  // residual path: 256-bit beats -> R_G-byte chunks -> residual FIFO
  stream_width_down #(.IN_W(AXI_W), .OUT_W(CW)) u_ra_adj (
    .clk, .rst_n, .sys_ce, .in_valid(ra_tvalid), .in_data(ra_tdata), .in_ready(ra_tready),
    .out_valid(ra_valid), .out_data(ra_data), .out_ready(ra_ready));
  logic rq_full, rq_empty;
  logic [4:0] rq_cnt;
  sync_fifo #(.W(CW), .DEPTH(16)) u_ra_fifo (
    .clk, .rst_n, .push(ra_valid && ra_ready), .din(ra_data), .pop(rq_valid && rq_ready),
    .dout(rq_data), .full(rq_full), .empty(rq_empty), .count(rq_cnt));
  assign ra_ready = !rq_full;
  assign rq_valid = !rq_empty;

  residual_add #(.R_G(R_G)) u_res (
    .clk, .rst_n, .res_en(lc.res_en), .in_valid(a1_valid), .in_data(a1_data), .in_ready(a1_ready),
    .ra_valid(rq_valid), .ra_data(rq_data), .ra_ready(rq_ready),
    .out_valid(rs_valid), .out_data(rs_data), .out_ready(rs_ready));

  act_func #(.R_G(R_G)) u_act2 (
    .clk, .rst_n, .relu_en(lc.relu2), .in_valid(rs_valid), .in_data(rs_data), .in_ready(rs_ready),
    .out_valid(a2_valid), .out_data(a2_data), .out_ready(a2_ready));

  stream_width_up #(.IN_W(CW), .OUT_W(AXI_W)) u_out_adj (
    .clk, .rst_n, .sys_ce, .in_valid(a2_valid), .in_data(a2_data), .in_ready(a2_ready),
    .out_valid(out_tvalid), .out_data(out_tdata), .out_ready(out_tready));
  assign out_fire = out_tvalid && out_tready && sys_ce;
endmodule
