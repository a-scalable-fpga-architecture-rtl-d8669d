// tb_uram_weights: loads random weight words and a bias word into two URAM
// columns through the 128-bit cascade stream (one with C_SA = 8, one with
// C_SA = 4, whose words hold two entries), with random gaps in the stream.
// Then issues reads of random entries on consecutive cycles and checks that
// row r returns the right C_SA bytes and spare byte exactly r + 1 cycles after
// the read was issued. A second load runs while reads are in progress.
module tb_uram_weights;
  import accel_pkg::*;
  localparam int R = 8, DEPTH = 64;
  logic clk = 0, rst_n = 0; always #5 clk = !clk;
  logic wl_valid, wl_ready8, wl_ready4, d_valid, d_ready8, d_ready4, busy8, busy4;
  wl_cmd_t wl_cmd; logic [127:0] d_data;
  logic rd_en; logic [7:0] rd_entry;
  logic [63:0] w8 [R]; logic [7:0] b8 [R];
  logic [31:0] w4 [R]; logic [7:0] b4 [R];
  uram_weights #(.R_SA(R), .C_SA(8), .URAM_DEPTH(DEPTH)) u8 (
    .clk, .rst_n, .wl_valid, .wl_cmd, .wl_ready(wl_ready8), .d_valid, .d_data, .d_ready(d_ready8),
    .ld_busy(busy8), .rd_en, .rd_entry(rd_entry[5:0]), .rd_w(w8), .rd_bias(b8));
  uram_weights #(.R_SA(R), .C_SA(4), .URAM_DEPTH(DEPTH)) u4 (
    .clk, .rst_n, .wl_valid, .wl_cmd, .wl_ready(wl_ready4), .d_valid, .d_data, .d_ready(d_ready4),
    .ld_busy(busy4), .rd_en, .rd_entry(rd_entry[6:0]), .rd_w(w4), .rd_bias(b4));

  logic [63:0] ref_w [DEPTH][R]; logic [7:0] ref_b [DEPTH][R];
  int checks = 0, failures = 0, cyc = 0;
  int h_e [4096]; bit h_v [4096];

  task automatic load(input int base, input int n, input bit bias);
    @(negedge clk); wl_valid = 1; wl_cmd = '{base_word: 16'(base), n_words: 16'(n), is_bias: bias};
    @(negedge clk); wl_valid = 0;
    for (int w = 0; w < n; w++)
      for (int j = 0; j < R / 2; j++) begin
        logic [63:0] lo, hi;
        lo = {$urandom, $urandom}; hi = {$urandom, $urandom};
        while ($urandom_range(0, 3) == 0) begin d_valid = 0; @(negedge clk); end
        d_valid = 1; d_data = {hi, lo};
        if (bias) begin ref_b[base + w][j] = lo[7:0]; ref_b[base + w][j + R/2] = hi[7:0]; end
        else begin ref_w[base + w][j] = lo; ref_w[base + w][j + R/2] = hi; end
        @(negedge clk);
      end
    d_valid = 0;
  endtask

  always @(posedge clk) begin
    for (int r = 0; r < R; r++) begin
      int k; k = cyc - r - 1;
      if (k >= 0 && h_v[k]) begin
        int e; e = h_e[k];
        checks += 2;
        if (w8[r] !== ref_w[e][r] || (e < 32 && b8[r] !== ref_b[e][r])) failures++;
        if (w4[r] !== ref_w[e/2][r][(e%2)*32 +: 32] || b4[r] !== ref_b[e/2][r]) failures++;
      end
    end
    cyc++;
  end

  initial begin
    wl_valid = 0; wl_cmd = '0; d_valid = 0; d_data = '0; rd_en = 0; rd_entry = 0;
    for (int i = 0; i < 4096; i++) h_v[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    load(0, 32, 0);
    for (int w = 0; w < 32; w++) begin
      @(negedge clk); wl_valid = 1; wl_cmd = '{base_word: 16'(w), n_words: 16'(1), is_bias: 1'b1};
      @(negedge clk); wl_valid = 0;
      for (int j = 0; j < R / 2; j++) begin
        logic [7:0] lo, hi; lo = 8'($urandom); hi = 8'($urandom);
        d_valid = 1; d_data = {56'd0, hi, 56'd0, lo};
        ref_b[w][j] = lo; ref_b[w][j + R/2] = hi;
        @(negedge clk);
      end
      d_valid = 0;
    end
    while (busy8 || busy4) @(negedge clk);
    fork
      load(32, 16, 0);                      // load other words while reading
      for (int i = 0; i < 200; i++) begin
        @(negedge clk);
        rd_en = $urandom_range(0, 4) != 0; rd_entry = 8'($urandom_range(0, 31));
        h_v[cyc] = rd_en; h_e[cyc] = rd_entry;
      end
    join
    @(negedge clk); rd_en = 0;
    while (busy8 || busy4) @(negedge clk);
    for (int i = 0; i < 60; i++) begin
      @(negedge clk); rd_en = 1; rd_entry = 8'(32 + $urandom_range(0, 15));
      h_v[cyc] = 1; h_e[cyc] = rd_entry;
    end
    @(negedge clk); rd_en = 0; h_v[cyc] = 0;
    repeat (R + 3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
