// tb_stream_width_up: 64-bit chunks are packed four to a 256-bit word, first
// chunk in the low bits, and words leave only on system-clock edges. Checks
// data and order under random input gaps and output backpressure, and that no
// word leaves on a cycle without sys_ce.
module tb_stream_width_up;
  logic clk = 0, rst_n = 0, sys_ce; always #5 clk = !clk;
  always_ff @(posedge clk) sys_ce <= rst_n ? !sys_ce : 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data; logic [255:0] out_data;
  stream_width_up #(.IN_W(64), .OUT_W(256)) dut (.*);
  int checks = 0, failures = 0, nout = 0;
  logic [63:0] q[$];
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) q.push_back(in_data);
    if (out_valid && out_ready && sys_ce) begin
      logic [255:0] e;
      for (int k = 0; k < 4; k++) e[k*64 +: 64] = q.pop_front();
      checks++; nout++;
      if (out_data !== e) failures++;
    end
  end
  initial begin
    in_valid = 0; in_data = 0; out_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 800; i++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = (i < 700) && ($urandom_range(0, 3) != 0); in_data = {$urandom, $urandom};
      end
      out_ready = $urandom_range(0, 3) != 0;
    end
    out_ready = 1; in_valid = 0;
    repeat (10) @(negedge clk);
    checks++; if (nout < 50 || q.size() >= 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
