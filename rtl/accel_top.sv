// accel_top: the multi-PU accelerator of one Alveo U50 style device. Ten PUs
// share one fast clock; PUs 0-2 (PU2x, C_SA = 8) and 3-4 (PU1x, C_SA = 4) sit in
// the upper SLR, PUs 5-7 (PU1x) and 8-9 (PU2x) in the lower SLR next to PCIe.
// Every PU has R_SA = 64 rows, R_g = 8 and a 64-block URAM column. A
// coordination bus (coord_bus) delivers layer instructions into each PU's
// queue, through SLR crossing registers for the upper SLR, and returns done
// flags. The half-rate system clock of the AXI side is a clock enable (sys_ce)
// generated here. Each PU's two AXI ports appear as plain arrays of command and
// stream signals: the AXI DataMovers, AXI interconnect, HBM and PCIe are vendor
// blocks outside this RTL. PUs work independently (each processes its own frame).
// Placement counts follow the paper; port formats are this design's.
module accel_top
  import accel_pkg::*;
#(
  parameter int unsigned N_PU2X_SLR1 = 3,
  parameter int unsigned N_PU1X_SLR1 = 2,
  parameter int unsigned N_PU1X_SLR0 = 3,
  parameter int unsigned N_PU2X_SLR0 = 2,
  parameter int unsigned R_SA        = 64,
  parameter int unsigned R_G         = 8,
  parameter int unsigned C_SA_2X     = 8,
  parameter int unsigned C_SA_1X     = 4,
  parameter int unsigned URAM_DEPTH  = 4096,
  parameter int unsigned N_PU        = N_PU2X_SLR1 + N_PU1X_SLR1 + N_PU1X_SLR0 + N_PU2X_SLR0,
  parameter int unsigned PW          = $clog2(N_PU)
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              sys_ce,
  // coordination bus (host side)
  input  logic              instr_valid,
  input  logic [PW-1:0]     instr_pu,
  input  layer_cfg_t        instr,
  output logic              instr_ready,
  output logic              pu_done    [N_PU],
  // per-PU ADM I/O side
  output logic              io_cmd_valid [N_PU],
  output logic [ADDR_W-1:0] io_cmd_addr  [N_PU],
  output logic [LEN_W-1:0]  io_cmd_len   [N_PU],
  input  logic              io_cmd_ready [N_PU],
  input  logic              inp_tvalid   [N_PU],
  input  logic [AXI_W-1:0]  inp_tdata    [N_PU],
  output logic              inp_tready   [N_PU],
  output logic              out_tvalid   [N_PU],
  output logic [AXI_W-1:0]  out_tdata    [N_PU],
  input  logic              out_tready   [N_PU],
  // per-PU ADM params side
  input  logic              wl_valid     [N_PU],
  input  wl_cmd_t           wl_cmd       [N_PU],
  output logic              wl_ready     [N_PU],
  output logic              wl_busy      [N_PU],
  input  logic              prm_tvalid   [N_PU],
  input  logic [AXI_W-1:0]  prm_tdata    [N_PU],
  output logic              prm_tready   [N_PU],
  input  logic              ra_tvalid    [N_PU],
  input  logic [AXI_W-1:0]  ra_tdata     [N_PU],
  output logic              ra_tready    [N_PU]
);
  localparam int unsigned N_SLR1 = N_PU2X_SLR1 + N_PU1X_SLR1;
  localparam logic [N_PU-1:0] SLR1_MASK = N_PU'((64'd1 << N_SLR1) - 64'd1);

  // half-rate system clock as an enable of the fast clock
  always_ff @(posedge clk) sys_ce <= rst_n ? !sys_ce : 1'b0;

  logic       q_valid [N_PU];
  layer_cfg_t q_instr [N_PU];
  logic       q_ready [N_PU];
  logic       done    [N_PU];

  coord_bus #(.N_PU(N_PU), .SLR1_MASK(SLR1_MASK)) u_bus (
    .clk, .rst_n, .in_valid(instr_valid), .in_pu(instr_pu), .in_instr(instr),
    .in_ready(instr_ready), .q_valid, .q_instr, .q_ready, .done_in(done), .done_out(pu_done));

  for (genvar i = 0; i < N_PU; i++) begin : g_pu
    localparam bit IS_2X = (i < N_PU2X_SLR1) || (i >= N_SLR1 + N_PU1X_SLR0);
    pu #(.R_SA(R_SA), .C_SA(IS_2X ? C_SA_2X : C_SA_1X), .R_G(R_G), .URAM_DEPTH(URAM_DEPTH)) u_pu (
      .clk, .rst_n, .sys_ce,
      .cfg_valid(q_valid[i]), .cfg(q_instr[i]), .cfg_ready(q_ready[i]), .done(done[i]),
      .io_cmd_valid(io_cmd_valid[i]), .io_cmd_addr(io_cmd_addr[i]), .io_cmd_len(io_cmd_len[i]),
      .io_cmd_ready(io_cmd_ready[i]),
      .inp_tvalid(inp_tvalid[i]), .inp_tdata(inp_tdata[i]), .inp_tready(inp_tready[i]),
      .out_tvalid(out_tvalid[i]), .out_tdata(out_tdata[i]), .out_tready(out_tready[i]),
      .wl_valid(wl_valid[i]), .wl_cmd(wl_cmd[i]), .wl_ready(wl_ready[i]), .wl_busy(wl_busy[i]),
      .prm_tvalid(prm_tvalid[i]), .prm_tdata(prm_tdata[i]), .prm_tready(prm_tready[i]),
      .ra_tvalid(ra_tvalid[i]), .ra_tdata(ra_tdata[i]), .ra_tready(ra_tready[i]));
  end
endmodule
