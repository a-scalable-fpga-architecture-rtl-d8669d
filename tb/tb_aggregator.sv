// tb_aggregator: random chunk arrivals on every row-block lane (at most
// FIFO_DEPTH outstanding per lane, as the PU's credits guarantee) and random
// output backpressure. Checks that every chunk leaves exactly once, tagged with
// the lane it entered on, in arrival order per lane, with its wave tag and data.
module tb_aggregator;
  localparam int NB = 4, RG = 2;
  logic clk = 0, rst_n = 0; always #5 clk = !clk;
  logic in_valid [NB]; logic [1:0] in_wave [NB]; logic [15:0] in_data [NB];
  logic out_valid, out_ready; logic [1:0] out_wave, out_blk; logic [15:0] out_data;
  aggregator #(.NB(NB), .R_G(RG), .WAVE_W(2), .FIFO_DEPTH(4)) dut (.*);
  int checks = 0, failures = 0, sent = 0, got = 0;
  logic [17:0] q [NB][$];
  int outst [NB];
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NB; i++) if (in_valid[i]) q[i].push_back({in_wave[i], in_data[i]});
    if (out_valid && out_ready) begin
      checks++; got++;
      if (q[out_blk].size() == 0 || {out_wave, out_data} !== q[out_blk].pop_front()) failures++;
      outst[out_blk]--;
    end
  end
  initial begin
    for (int i = 0; i < NB; i++) begin in_valid[i] = 0; in_wave[i] = 0; in_data[i] = 0; outst[i] = 0; end
    out_ready = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 1000; c++) begin
      @(negedge clk);
      for (int i = 0; i < NB; i++) begin
        in_valid[i] = (c < 900) && outst[i] < 4 && $urandom_range(0, 2) == 0;
        in_wave[i] = 2'($urandom); in_data[i] = 16'($urandom);
        if (in_valid[i]) begin outst[i]++; sent++; end
      end
      out_ready = $urandom_range(0, 3) != 0;
    end
    for (int i = 0; i < NB; i++) in_valid[i] = 0;
    out_ready = 1; repeat (20) @(negedge clk);
    checks++; if (got != sent || sent < 500) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
