// tb_residual_add: random main and residual chunks with random valid gaps and
// backpressure. With res_en set each output byte must be sat8(x + r) and both
// streams advance together; with res_en clear the main data pass unchanged and
// no residual is consumed.
module tb_residual_add;
  logic clk = 0, rst_n = 0; always #5 clk = !clk;
  logic res_en, in_valid, in_ready, ra_valid, ra_ready, out_valid, out_ready;
  logic [63:0] in_data, ra_data, out_data;
  residual_add #(.R_G(8)) dut (.*);
  int checks = 0, failures = 0, n_ra = 0, n_out = 0;
  logic [63:0] mq[$], rq[$];
  logic enq[$];
  function automatic logic [63:0] ref_add(input logic [63:0] a, input logic [63:0] b, input logic en);
    logic [63:0] y;
    for (int j = 0; j < 8; j++) begin
      int s; s = int'($signed(a[j*8 +: 8])) + (en ? int'($signed(b[j*8 +: 8])) : 0);
      y[j*8 +: 8] = (s > 127) ? 8'h7f : (s < -128) ? 8'h80 : 8'(s);
    end
    return y;
  endfunction
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin mq.push_back(in_data); enq.push_back(res_en); end
    if (ra_valid && ra_ready) begin rq.push_back(ra_data); n_ra++; end
    if (out_valid && out_ready) begin
      logic [63:0] a, b; logic e;
      a = mq.pop_front(); e = enq.pop_front(); b = e ? rq.pop_front() : 64'd0;
      checks++; n_out++;
      if (out_data !== ref_add(a, b, e)) failures++;
    end
  end
  initial begin
    res_en = 1; in_valid = 0; ra_valid = 0; out_ready = 1; in_data = 0; ra_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin in_valid = $urandom_range(0, 2) != 0; in_data = {$urandom, $urandom}; end
      if (!ra_valid || ra_ready) begin ra_valid = $urandom_range(0, 2) != 0; ra_data = {$urandom, $urandom}; end
      out_ready = $urandom_range(0, 3) != 0;
      if (i == 300) begin
        in_valid = 0; ra_valid = 0; out_ready = 1;
        repeat (3) @(negedge clk);
        res_en = 0;
      end
    end
    in_valid = 0; ra_valid = 0; out_ready = 1;
    repeat (4) @(negedge clk);
    checks++; if (n_out < 200 || n_ra < 50) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
