// tb_pu: end-to-end test of one processing unit at its default size
// (R_SA = 64, C_SA = 8, R_g = 8). pu_driver runs a GEMM layer and a 3x3
// convolution with residual addition and checks every output byte. The bench
// also counts the PU's mechanisms: ping-pong buffer swaps, WRB out-of-order
// writes, waves held back for lack of WRB credit, zero-padding commands,
// weight loading overlapping computation and output backpressure, and checks
// the steady issue rate of one round per cycle in the convolution.
module tb_pu;
  import accel_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, sys_ce;
  always #5 clk = !clk;
  always_ff @(posedge clk) sys_ce <= rst_n ? !sys_ce : 1'b0;

  logic cfg_valid, cfg_ready, done, io_cmd_valid, io_cmd_ready, inp_tvalid, inp_tready;
  logic out_tvalid, out_tready, wl_valid, wl_ready, wl_busy, prm_tvalid, prm_tready, ra_tvalid, ra_tready;
  layer_cfg_t cfg; wl_cmd_t wl_cmd;
  logic [ADDR_W-1:0] io_cmd_addr; logic [LEN_W-1:0] io_cmd_len;
  logic [AXI_W-1:0] inp_tdata, out_tdata, prm_tdata, ra_tdata;
  logic finished; int dchecks, dfail;

  pu dut (.*);
  pu_driver #(.C_SA(8), .SEED(7)) drv (.*, .checks(dchecks), .failures(dfail));

  int checks = 0, failures = 0;
  int n_swap = 0, n_ooo = 0, n_credit = 0, n_zero = 0, n_overlap = 0, n_bp = 0;
  int iss_first_cyc = -1, iss_last_cyc = 0, n_iss_b = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.u_ctrl.release_buf) n_swap++;
    if (dut.u_wrb.ooo) n_ooo++;
    if (dut.u_ctrl.credit_stall) n_credit++;
    if (io_cmd_valid && io_cmd_ready && dut.lc.im2col && io_cmd_addr == dut.lc.zero_base) n_zero++;
    if (wl_busy && dut.u_ctrl.busy) n_overlap++;
    if (out_tvalid && !out_tready) n_bp++;
    if (dut.lc.im2col && dut.u_ctrl.iss_valid) begin
      if (iss_first_cyc < 0) iss_first_cyc = cyc;
      iss_last_cyc = cyc; n_iss_b++;
    end
  end

  task automatic expect_seen(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", what); end
    else $display("%s: %0d", what, n);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (finished === 1'b1);
    checks += dchecks; failures += dfail;
    expect_seen("ping-pong swaps", n_swap);
    expect_seen("WRB out-of-order writes", n_ooo);
    expect_seen("WRB credit stalls", n_credit);
    expect_seen("zero-padding commands", n_zero);
    expect_seen("weight load during compute", n_overlap);
    expect_seen("output backpressure", n_bp);
    // convolution: M = 288, C_SA = 8 -> 36 rounds per wave, 16 columns, one round per cycle
    checks++;
    if (n_iss_b != 16 * 36) begin failures++; $display("issue count %0d", n_iss_b); end
    $display("conv issue span %0d cycles for %0d rounds", iss_last_cyc - iss_first_cyc + 1, n_iss_b);
    checks++;
    if (iss_last_cyc - iss_first_cyc + 1 > 16 * 36 + 40) begin
      failures++; $display("conv issue not sustained");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
