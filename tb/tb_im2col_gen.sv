// tb_im2col_gen: runs the command generator for a padded, strided 3x3
// convolution (5x4x32 input, stride 2, padding 1 -> 3x2 output), a 1x1 stride-2
// convolution and a linear GEMM layer, with random command backpressure, and
// compares every (address, length) pair with a reference loop nest.
module tb_im2col_gen;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = !clk;
  logic start, cmd_valid, cmd_ready, busy;
  layer_cfg_t cfg; logic [ADDR_W-1:0] cmd_addr; logic [LEN_W-1:0] cmd_len;
  im2col_gen dut (.*);
  int checks = 0, failures = 0;
  longint ea[$]; int el[$];
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) begin
    checks++;
    if (ea.size() == 0 || cmd_addr !== ADDR_W'(ea.pop_front()) || cmd_len !== LEN_W'(el.pop_front())) failures++;
  end
  task automatic run(input layer_cfg_t c);
    ea.delete(); el.delete();
    if (c.im2col) begin
      for (int ho = 0; ho < c.ho; ho++) for (int wo = 0; wo < c.wo; wo++)
        for (int kh = 0; kh < c.k; kh++) for (int kw = 0; kw < c.k; kw++) begin
          int ih, iw; ih = ho * c.s + kh - c.pad; iw = wo * c.s + kw - c.pad;
          if (ih >= 0 && iw >= 0 && ih < c.hi && iw < c.wi) ea.push_back(longint'(c.in_base) + (ih * c.wi + iw) * c.ci);
          else ea.push_back(longint'(c.zero_base));
          el.push_back(c.ci);
        end
    end else for (int p = 0; p < c.p_cols; p++) begin ea.push_back(longint'(c.in_base) + p * c.m_bytes); el.push_back(c.m_bytes); end
    @(negedge clk); cfg = c; start = 1; @(negedge clk); start = 0;
    while (busy) begin cmd_ready = $urandom_range(0, 2) != 0; @(negedge clk); end
    checks++; if (ea.size() != 0) failures++;
  endtask
  initial begin
    layer_cfg_t c;
    start = 0; cfg = '0; cmd_ready = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    c = '0; c.im2col = 1; c.in_base = 34'h1_0000_0000; c.zero_base = 34'h3000; c.hi = 5; c.wi = 4; c.ci = 32;
    c.k = 3; c.s = 2; c.pad = 1; c.ho = 3; c.wo = 2; c.m_bytes = 288; c.p_cols = 6;
    run(c);
    c.k = 1; c.pad = 0; c.s = 2; c.ho = 3; c.wo = 2; c.ci = 64; c.m_bytes = 64;
    run(c);
    c = '0; c.im2col = 0; c.in_base = 34'h4000; c.m_bytes = 160; c.p_cols = 9;
    run(c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
