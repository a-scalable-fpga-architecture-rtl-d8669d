// tb_stream_width_down: 256-bit words offered on system-clock edges are split
// into 128-bit words, low half first. Checks data, order, and that a steady
// input stream yields one output word on every fast cycle (full bandwidth).
module tb_stream_width_down;
  logic clk = 0, rst_n = 0, sys_ce; always #5 clk = !clk;
  always_ff @(posedge clk) sys_ce <= rst_n ? !sys_ce : 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [255:0] in_data; logic [127:0] out_data;
  stream_width_down #(.IN_W(256), .OUT_W(128)) dut (.*);
  int checks = 0, failures = 0, nout = 0, first_c = -1, last_c = 0, cyc = 0;
  logic [127:0] q[$];
  always @(posedge clk) begin
    cyc++;
    if (rst_n && sys_ce && in_valid && in_ready) begin q.push_back(in_data[127:0]); q.push_back(in_data[255:128]); end
    if (rst_n && out_valid && out_ready) begin
      checks++; nout++; if (first_c < 0) first_c = cyc; last_c = cyc;
      if (out_data !== q.pop_front()) failures++;
    end
  end
  initial begin
    in_valid = 0; in_data = 0; out_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    // phase 1: continuous stream of 50 words
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); in_valid = 1; in_data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      #1; while (!(sys_ce && in_ready)) begin @(negedge clk); #1; end
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++; if (nout != 100 || last_c - first_c + 1 > 104) begin failures++; $display("rate %0d outputs in %0d cycles", nout, last_c - first_c + 1); end
    // phase 2: random backpressure
    fork
      for (int i = 0; i < 50; i++) begin
        @(negedge clk); in_valid = 1; in_data = {8{$urandom}};
        #1; while (!(sys_ce && in_ready)) begin @(negedge clk); #1; end
        @(posedge clk); #1; in_valid = 0;
      end
      repeat (400) begin @(negedge clk); out_ready = $urandom_range(0, 2) != 0; end
    join
    out_ready = 1; repeat (10) @(negedge clk);
    checks++; if (nout != 200) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
