// tb_act_func: drives random chunks through the ReLU stage with random output
// backpressure, with ReLU on and off, and checks every chunk, its order and the
// one-cycle latency.
module tb_act_func;
  logic clk = 0, rst_n = 0; always #5 clk = !clk;
  logic relu_en, in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data, out_data;
  act_func #(.R_G(8)) dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] exp_q[$];
  function automatic logic [63:0] ref_relu(input logic [63:0] d, input logic en);
    for (int j = 0; j < 8; j++) if (en && d[j*8+7]) d[j*8 +: 8] = 0;
    return d;
  endfunction
  int sent = 0, got = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++; got++;
      if (out_data !== exp_q.pop_front()) failures++;
    end
    if (in_valid && in_ready) begin exp_q.push_back(ref_relu(in_data, relu_en)); sent++; end
  end
  initial begin
    relu_en = 1; in_valid = 0; in_data = 0; out_ready = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    // latency: a chunk presented now is visible one cycle later
    @(negedge clk); in_valid = 1; in_data = 64'h80_7f_01_ff_00_81_40_c0;
    @(negedge clk); in_valid = 0;
    checks++; if (!(out_valid && out_data == 64'h00_7f_01_00_00_00_40_00)) failures++;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = $urandom_range(0, 3) != 0; in_data = {$urandom, $urandom};
        if (i == 200) relu_en = 0;
      end
      out_ready = $urandom_range(0, 3) != 0;
    end
    in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++; if (got != sent || got < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
