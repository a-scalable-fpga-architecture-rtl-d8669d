// tb_accel_top_full: end-to-end test of the whole ten-PU accelerator at its
// default parameters (five PU2x with C_SA = 8, five PU1x with C_SA = 4,
// R_SA = 64, R_g = 8, 4096-word URAMs). Each PU gets its own pu_driver (HBM/DataMover
// model, stimulus and reference), running a GEMM layer and a padded 3x3
// convolution with residual addition; layer instructions travel over the
// coordination bus, through the SLR crossing registers for the upper-SLR PUs.
// Every output byte of every PU is checked, and the bench counts, per
// mechanism, how often it happened: ping-pong swaps, WRB out-of-order writes,
// WRB credit stalls, IM2COL zero-padding commands, weight loads overlapping
// computation, output backpressure, residual additions, instructions crossing
// the SLR registers, and layers finished by PU1x and by PU2x units.
module tb_accel_top_full;
  import accel_pkg::*;
  localparam int N2S1 = 3, N1S1 = 2, N1S0 = 3, N2S0 = 2, RSA = 64;
  localparam int N = N2S1 + N1S1 + N1S0 + N2S0, NSLR1 = N2S1 + N1S1, N2X = N2S1 + N2S0;
  logic clk = 1'b0, rst_n = 1'b0, sys_ce;
  always #5 clk = !clk;

  logic instr_valid, instr_ready;
  logic [$clog2(N)-1:0] instr_pu;
  layer_cfg_t instr;
  logic pu_done [N];
  logic io_cmd_valid [N], io_cmd_ready [N], inp_tvalid [N], inp_tready [N];
  logic [ADDR_W-1:0] io_cmd_addr [N];
  logic [LEN_W-1:0]  io_cmd_len [N];
  logic [AXI_W-1:0]  inp_tdata [N], out_tdata [N], prm_tdata [N], ra_tdata [N];
  logic out_tvalid [N], out_tready [N], wl_valid [N], wl_ready [N], wl_busy [N];
  wl_cmd_t wl_cmd [N];
  logic prm_tvalid [N], prm_tready [N], ra_tvalid [N], ra_tready [N];

  accel_top dut (.*);

  logic       d_cfg_valid [N];
  layer_cfg_t d_cfg [N];
  logic       d_cfg_ready [N];
  logic       fin [N];
  int         dchk [N], dfail [N];

  for (genvar i = 0; i < N; i++) begin : g_drv
    localparam int CS = (i < N2S1 || i >= NSLR1 + N1S0) ? 8 : 4;
    pu_driver #(.C_SA(CS), .R_SA(RSA), .SEED(100 + i)) drv (
      .clk, .sys_ce, .rst_n, .cfg_valid(d_cfg_valid[i]), .cfg(d_cfg[i]), .cfg_ready(d_cfg_ready[i]),
      .done(pu_done[i]), .io_cmd_valid(io_cmd_valid[i]), .io_cmd_addr(io_cmd_addr[i]),
      .io_cmd_len(io_cmd_len[i]), .io_cmd_ready(io_cmd_ready[i]), .inp_tvalid(inp_tvalid[i]),
      .inp_tdata(inp_tdata[i]), .inp_tready(inp_tready[i]), .out_tvalid(out_tvalid[i]),
      .out_tdata(out_tdata[i]), .out_tready(out_tready[i]), .wl_valid(wl_valid[i]), .wl_cmd(wl_cmd[i]),
      .wl_ready(wl_ready[i]), .wl_busy(wl_busy[i]), .prm_tvalid(prm_tvalid[i]), .prm_tdata(prm_tdata[i]),
      .prm_tready(prm_tready[i]), .ra_tvalid(ra_tvalid[i]), .ra_tdata(ra_tdata[i]),
      .ra_tready(ra_tready[i]), .finished(fin[i]), .checks(dchk[i]), .failures(dfail[i]));
  end

  // host side of the coordination bus: lowest requesting driver first
  always_comb begin
    instr_valid = 1'b0; instr_pu = '0; instr = '0;
    for (int i = N - 1; i >= 0; i--)
      if (d_cfg_valid[i]) begin instr_valid = 1'b1; instr_pu = ($clog2(N))'(i); instr = d_cfg[i]; end
    for (int i = 0; i < N; i++) d_cfg_ready[i] = instr_valid && instr_ready && instr_pu == ($clog2(N))'(i);
  end

  int checks = 0, failures = 0;
  int n_swap = 0, n_ooo = 0, n_credit = 0, n_zero = 0, n_overlap = 0, n_bp = 0, n_res = 0;
  int n_slr = 0, n_done1x = 0, n_done2x = 0;
  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(posedge clk) begin
      if (dut.g_pu[i].u_pu.u_ctrl.release_buf) n_swap++;
      if (dut.g_pu[i].u_pu.u_wrb.ooo) n_ooo++;
      if (dut.g_pu[i].u_pu.u_ctrl.credit_stall) n_credit++;
      if (io_cmd_valid[i] && io_cmd_ready[i] && dut.g_pu[i].u_pu.lc.im2col
          && io_cmd_addr[i] == dut.g_pu[i].u_pu.lc.zero_base) n_zero++;
      if (wl_busy[i] && dut.g_pu[i].u_pu.u_ctrl.busy) n_overlap++;
      if (out_tvalid[i] && !out_tready[i]) n_bp++;
      if (dut.g_pu[i].u_pu.lc.res_en && dut.g_pu[i].u_pu.u_res.go) n_res++;
      if (pu_done[i] && rst_n) begin if (i < N2S1 || i >= NSLR1 + N1S0) n_done2x++; else n_done1x++; end
    end
  end
  always @(posedge clk) if (rst_n && dut.u_bus.pipe[2].v && dut.u_bus.pipe[2].pu < NSLR1) n_slr++;

  task automatic expect_seen(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", what); end
    else $display("%s: %0d", what, n);
  endtask

  initial begin
    bit all;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    do begin
      @(posedge clk);
      all = 1'b1;
      for (int i = 0; i < N; i++) all &= fin[i];
    end while (!all);
    for (int i = 0; i < N; i++) begin checks += dchk[i]; failures += dfail[i]; end
    expect_seen("ping-pong swaps", n_swap);
    expect_seen("WRB out-of-order writes", n_ooo);
    expect_seen("WRB credit stalls", n_credit);
    expect_seen("zero-padding commands", n_zero);
    expect_seen("weight load during compute", n_overlap);
    expect_seen("output backpressure", n_bp);
    expect_seen("residual additions", n_res);
    expect_seen("instructions through SLR crossing", n_slr);
    checks++;
    if (n_done1x != 2 * (N - N2X) || n_done2x != 2 * N2X) begin
      failures++; $display("layers done: 1x %0d 2x %0d", n_done1x, n_done2x);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
