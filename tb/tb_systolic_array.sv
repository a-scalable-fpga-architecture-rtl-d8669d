// tb_systolic_array: a 4 x 4 array fed wave after wave with no gap. The bench
// plays the URAM column: row r's weight word and bias are presented r cycles
// after the round was issued. Each wave has a random number of rounds (1..5),
// random weights, activations and biases. Checks every row result
// (bias << bias_shift + sum of products over all rounds), its wave tag, and
// that it appears exactly C_SA + r cycles after the wave's last round.
module tb_systolic_array;
  localparam int R = 4, C = 4, NW = 30;
  logic clk = 0, rst_n = 0; always #5 clk = !clk;
  logic in_valid, in_first, in_last; logic [1:0] in_wave;
  logic [C*8-1:0] act_in; logic [C*8-1:0] w_row [R]; logic [7:0] bias_row [R];
  logic [5:0] bias_shift;
  logic res_valid [R]; logic [1:0] res_wave [R]; logic signed [31:0] res_acc [R];
  systolic_array #(.R_SA(R), .C_SA(C), .ACC_W(32), .WAVE_W(2)) dut (.*);

  // issue history, indexed by cycle
  int h_wave [4096]; int h_rnd [4096]; bit h_v [4096];
  byte wt [NW][8][R][C]; byte xs [NW][8][C]; byte bs [NW][R]; int nr [NW];
  int exp_cyc [NW]; int cyc = 0, checks = 0, failures = 0, nres = 0;

  // drive inputs for cycle `cyc` at the falling edge
  always @(negedge clk) begin
    for (int r = 0; r < R; r++) begin
      int k; k = cyc - r;
      w_row[r] = '0; bias_row[r] = '0;
      if (k >= 0 && h_v[k]) begin
        for (int c = 0; c < C; c++) w_row[r][c*8 +: 8] = wt[h_wave[k]][h_rnd[k]][r][c];
        bias_row[r] = bs[h_wave[k]][r];
      end
    end
    in_valid = h_v[cyc]; in_first = 0; in_last = 0; in_wave = 0; act_in = '0;
    if (h_v[cyc]) begin
      in_first = h_rnd[cyc] == 0; in_last = h_rnd[cyc] == nr[h_wave[cyc]] - 1;
      in_wave = 2'(h_wave[cyc]);
      for (int c = 0; c < C; c++) act_in[c*8 +: 8] = xs[h_wave[cyc]][h_rnd[cyc]][c];
    end
  end
  always @(posedge clk) begin
    for (int r = 0; r < R; r++) if (rst_n && res_valid[r]) begin
      int w, acc; bit found;
      found = 0; w = 0;
      for (int i = 0; i < NW; i++) if (exp_cyc[i] + r == cyc && !found) begin w = i; found = 1; end
      checks++; nres++;
      acc = int'(bs[w][r]) <<< bias_shift;
      for (int t = 0; t < nr[w]; t++) for (int c = 0; c < C; c++) acc += int'(wt[w][t][r][c]) * int'(xs[w][t][c]);
      if (!found || res_acc[r] !== acc || res_wave[r] !== 2'(w)) begin
        failures++;
        if (failures < 5) $display("row %0d cyc %0d got %0d exp %0d found %0d", r, cyc, res_acc[r], acc, found);
      end
    end
    cyc++;
  end
  initial begin
    int t0;
    bias_shift = 3;
    for (int i = 0; i < 4096; i++) h_v[i] = 0;
    t0 = 10;
    for (int w = 0; w < NW; w++) begin
      nr[w] = $urandom_range(1, 5);
      for (int r = 0; r < R; r++) bs[w][r] = byte'($urandom);
      for (int t = 0; t < nr[w]; t++) begin
        for (int c = 0; c < C; c++) xs[w][t][c] = byte'($urandom);
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) wt[w][t][r][c] = byte'($urandom);
        h_v[t0] = 1; h_wave[t0] = w; h_rnd[t0] = t;
        if (t == nr[w] - 1) exp_cyc[w] = t0 + C;       // result of row 0 is visible C cycles after the last round
        t0++;
      end
      if (w % 7 == 6) t0 += 3;                      // occasional gap between waves
    end
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (t0 + 20) @(posedge clk);
    checks++; if (nres != NW * R) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
