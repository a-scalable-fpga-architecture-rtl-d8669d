// tb_pu_ctrl: runs the sequencer for P = 3 columns, B_W = 2 sections and
// M / C_SA = 4 rounds, with a buffer model that becomes ready some cycles after
// each release and a WRB model that returns wave credits after a random delay.
// Checks the issued buffer entry, URAM entry (w_base + section*RM + round),
// first/last flags and wave IDs in loop-nest order, that no more than WAVES
// waves are ever in flight, that the buffer is released after each column's
// last section, that rounds of a wave are issued back to back, and that done
// follows the last output word.
module tb_pu_ctrl;
  localparam int P = 3, BW = 2, RM = 4, WAVES = 4, WB = 100;
  logic clk = 0, rst_n = 0; always #5 clk = !clk;
  logic start, buf_avail, wave_free, out_fire;
  logic iss_valid, iss_first, iss_last, release_buf, busy, done, credit_stall;
  logic [15:0] m_bytes, p_cols, w_base, iss_act, iss_w; logic [7:0] b_w; logic [1:0] iss_wave;
  pu_ctrl #(.R_SA(64), .C_SA(8), .WAVES(WAVES), .OUT_W(256)) dut (.*);
  int checks = 0, failures = 0, n = 0, inflight = 0, maxin = 0, nrel = 0, ndone = 0, nstall = 0;
  int frees[$]; int cyc = 0;
  int prev_iss = -10;
  always @(posedge clk) if (rst_n) begin
    if (iss_valid) begin
      int col, sec, t;
      col = n / (BW * RM); sec = (n / RM) % BW; t = n % RM;
      checks++;
      if (iss_act != 16'(t) || iss_w != 16'(WB + sec * RM + t) || iss_first != (t == 0) ||
          iss_last != (t == RM - 1) || iss_wave != 2'(n / RM)) failures++;
      if (t != 0 && prev_iss != cyc - 1) failures++;
      checks++; if (release_buf != (t == RM - 1 && sec == BW - 1)) failures++;
      if (t == 0) begin inflight++; if (inflight > maxin) maxin = inflight; end
      if (t == RM - 1) frees.push_back(cyc + 20 + $urandom_range(0, 20));
      prev_iss = cyc; n++;
    end
    if (release_buf) nrel++;
    if (credit_stall) nstall++;
    if (done) ndone++;
    cyc++;
  end
  initial begin
    start = 0; buf_avail = 0; wave_free = 0; out_fire = 0;
    m_bytes = RM * 8; p_cols = P; b_w = BW; w_base = WB;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      // buffer model: a column becomes available 5 cycles after the previous release
      for (int p = 0; p < P; p++) begin
        repeat (5) @(negedge clk); buf_avail = 1;
        @(posedge clk iff release_buf); #1 buf_avail = 0;
      end
      // WRB credit model
      while (n < P * BW * RM || frees.size() != 0) begin
        @(negedge clk); wave_free = 0;
        if (frees.size() != 0 && frees[0] <= cyc) begin void'(frees.pop_front()); wave_free = 1; inflight--; end
      end
    join
    @(negedge clk); wave_free = 0;
    checks++; if (done || !busy) failures++;
    for (int i = 0; i < P * BW * 64 * 8 / 256; i++) begin @(negedge clk); out_fire = 1; @(negedge clk); out_fire = 0; end
    repeat (3) @(negedge clk);
    checks++; if (ndone != 1 || busy) failures++;
    checks++; if (nrel != P || n != P * BW * RM || maxin > WAVES) failures++;
    checks++; if (maxin != WAVES || nstall == 0) failures++;   // the credit limit was reached
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
