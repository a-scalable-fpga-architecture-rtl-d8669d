// tb_scale_merge: presents finished rows staggered by one cycle per row, as
// the systolic array does, for successive waves whose spacing (rounds per wave)
// is shorter than a row-block. Checks that each block's chunk appears exactly
// one cycle after its last row, with every byte sat8(acc >>> shift) and the
// right wave tag.
module tb_scale_merge;
  localparam int R = 8, RG = 4, NBK = 2;
  logic clk = 0, rst_n = 0; always #5 clk = !clk;
  logic [5:0] shift;
  logic res_valid [R]; logic [1:0] res_wave [R]; logic signed [31:0] res_acc [R];
  logic ch_valid [NBK]; logic [1:0] ch_wave [NBK]; logic [31:0] ch_data [NBK];
  scale_merge #(.R_SA(R), .R_G(RG), .ACC_W(32), .WAVE_W(2)) dut (.*);
  int checks = 0, failures = 0, cyc = 0, nch = 0;
  // per cycle schedule of which wave each row finishes: wave start cycles
  int wstart[$]; int wacc [64][R];
  int exp_cnt = 0;
  // drive rows from the wave schedule (row r of wave w valid at wstart[w] + r)
  always @(negedge clk) begin
    for (int r = 0; r < R; r++) begin
      res_valid[r] = 0; res_wave[r] = 0; res_acc[r] = 0;
      foreach (wstart[w]) if (wstart[w] + r == cyc) begin
        res_valid[r] = 1; res_wave[r] = 2'(w); res_acc[r] = wacc[w][r];
      end
    end
  end
  always @(posedge clk) begin
    for (int g = 0; g < NBK && rst_n; g++) begin
      bit expv; int ew;
      expv = 0; ew = 0;
      foreach (wstart[w]) if (wstart[w] + g * RG + RG == cyc) begin expv = 1; ew = w; end
      if (ch_valid[g] !== expv) begin checks++; failures++; end
      if (expv) begin
        checks++; nch++;
        for (int j = 0; j < RG; j++) begin
          int v; v = wacc[ew][g*RG + j] >>> shift;
          v = (v > 127) ? 127 : (v < -128) ? -128 : v;
          if (ch_data[g][j*8 +: 8] !== 8'(v)) begin failures++; break; end
        end
        if (ch_wave[g] !== 2'(ew)) failures++;
      end
    end
    cyc++;
  end
  initial begin
    shift = 6;
    for (int w = 0; w < 64; w++) for (int r = 0; r < R; r++) wacc[w][r] = int'($urandom_range(0, 40000)) - 20000;
    for (int w = 0; w < 40; w++) wstart.push_back(10 + w * 3 + (w / 10) * 5);
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (220) @(posedge clk);
    checks++; if (nch != 40 * NBK) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
