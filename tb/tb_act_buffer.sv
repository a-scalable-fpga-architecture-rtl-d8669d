// tb_act_buffer: streams P = 6 columns of 64 bytes (two 32-byte beats each)
// into the ping-pong buffer on system-clock edges while a reader consumes each
// complete column twice (two weight sections), C_SA = 8 bytes per fast cycle,
// then releases it. Checks every entry read, that the read data appear one
// cycle after the read, and that writing of the next column overlapped reading.
module tb_act_buffer;
  localparam int P = 6, MB = 64, E = MB / 8;
  logic clk = 0, rst_n = 0, sys_ce; always #5 clk = !clk;
  always_ff @(posedge clk) sys_ce <= rst_n ? !sys_ce : 1'b0;
  logic start, in_valid, in_ready, rd_avail, rd_en, rd_release;
  logic [15:0] m_bytes, p_cols, rd_entry; logic [255:0] in_data; logic [63:0] rd_data;
  act_buffer #(.C_SA(8), .ACT_WORDS(16)) dut (.*);
  byte col [P][MB];
  int checks = 0, failures = 0, overlap = 0;
  bit reading = 0;
  always @(posedge clk) begin
    if (reading && sys_ce && in_valid && in_ready) overlap++;
  end
  initial begin
    start = 0; in_valid = 0; in_data = 0; rd_en = 0; rd_release = 0; rd_entry = 0;
    m_bytes = MB; p_cols = P;
    for (int p = 0; p < P; p++) for (int i = 0; i < MB; i++) col[p][i] = byte'($urandom);
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      for (int p = 0; p < P; p++)
        for (int bt = 0; bt < MB / 32; bt++) begin
          @(negedge clk); in_valid = 1;
          for (int b = 0; b < 32; b++) in_data[b*8 +: 8] = col[p][bt*32 + b];
          #1; while (!(sys_ce && in_ready)) begin @(negedge clk); #1; end
          @(posedge clk); #1 in_valid = 0;
        end
      for (int p = 0; p < P; p++) begin
        @(negedge clk);
        #1; while (!rd_avail) begin @(negedge clk); #1; end
        reading = 1;
        for (int s = 0; s < 2; s++)
          for (int e = 0; e < E; e++) begin
            rd_en = 1; rd_entry = 16'(e); rd_release = (s == 1 && e == E - 1);
            @(negedge clk); rd_en = 0; rd_release = 0;
            checks++;
            for (int b = 0; b < 8; b++) if (rd_data[b*8 +: 8] !== col[p][e*8 + b]) begin failures++; break; end
            repeat ($urandom_range(0, 1)) @(negedge clk);
          end
        reading = 0;
      end
    join
    @(negedge clk);
    checks++; if (overlap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
