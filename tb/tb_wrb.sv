// tb_wrb: writes the NB chunks of each wave in a random order, interleaving up
// to WAVES waves (the same credit rule the PU applies), with random read-side
// backpressure. Checks that chunks are read strictly in wave / block order with
// the right data, that wave_free pulses once per wave and that out-of-order
// writes actually occurred.
module tb_wrb;
  localparam int NB = 4, RG = 2, WAVES = 4, TOTAL = 60;
  logic clk = 0, rst_n = 0; always #5 clk = !clk;
  logic w_valid, r_valid, r_ready, wave_free, ooo;
  logic [1:0] w_wave, w_blk;
  logic [15:0] w_data, r_data;
  wrb #(.NB(NB), .R_G(RG), .WAVES(WAVES)) dut (.*);
  int checks = 0, failures = 0, n_free = 0, n_ooo = 0, rd_idx = 0;
  int started = 0, freed = 0;
  int pend_w[$], pend_b[$];
  function automatic logic [15:0] dat(input int w, input int b); return 16'(w * 37 + b * 11 + 5); endfunction
  always @(posedge clk) if (rst_n) begin
    if (wave_free) begin n_free++; freed++; end
    if (ooo) n_ooo++;
    if (r_valid && r_ready) begin
      checks++;
      if (r_data !== dat(rd_idx / NB, rd_idx % NB)) failures++;
      rd_idx++;
    end
  end
  initial begin
    w_valid = 0; w_wave = 0; w_blk = 0; w_data = 0; r_ready = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    while (rd_idx < TOTAL * NB) begin
      @(negedge clk);
      w_valid = 0;
      if (started < TOTAL && started - freed < WAVES && $urandom_range(0, 1)) begin
        for (int b = 0; b < NB; b++) begin pend_w.push_back(started); pend_b.push_back(b); end
        started++;
      end
      if (pend_w.size() != 0 && $urandom_range(0, 3) != 0) begin
        int k; k = $urandom_range(0, pend_w.size() - 1);
        w_valid = 1; w_wave = 2'(pend_w[k] % WAVES); w_blk = 2'(pend_b[k]); w_data = dat(pend_w[k], pend_b[k]);
        pend_w.delete(k); pend_b.delete(k);
      end
      r_ready = $urandom_range(0, 3) != 0;
    end
    checks++; if (n_free != TOTAL) failures++;
    checks++; if (n_ooo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
