// tb_coord_bus: sends random instructions to four PUs (two behind the SLR
// crossing registers) whenever the target queue has credit, while the PUs pop
// their queues at random. Checks that each PU receives exactly its
// instructions in order, that upper-SLR PUs see them SLR_STAGES cycles later
// than lower-SLR PUs, that no queue overflows, and that done flags come back
// with the same delays.
module tb_coord_bus;
  import accel_pkg::*;
  localparam int N = 4, ST = 2;
  logic clk = 0, rst_n = 0; always #5 clk = !clk;
  logic in_valid, in_ready; logic [1:0] in_pu; layer_cfg_t in_instr;
  logic q_valid [N]; layer_cfg_t q_instr [N]; logic q_ready [N];
  logic done_in [N], done_out [N];
  coord_bus #(.N_PU(N), .SLR1_MASK(4'b0011), .SLR_STAGES(ST), .QUEUE_DEPTH(2)) dut (.*);
  int checks = 0, failures = 0, cyc = 0, sent = 0, got = 0, n_block = 0;
  logic [15:0] q [N][$]; int t_sent [N][$];
  int done_t [N][$];
  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) begin q[in_pu].push_back(in_instr.p_cols); t_sent[in_pu].push_back(cyc); sent++; end
      if (in_valid && !in_ready) n_block++;
      for (int i = 0; i < N; i++) begin
        if (q_valid[i] && q_ready[i]) begin
          int ts; ts = t_sent[i].pop_front();
          checks++; got++;
          if (q_instr[i].p_cols !== q[i].pop_front()) failures++;
          if (cyc - ts < 1 + (i < 2 ? ST : 0)) failures++;     // cannot arrive earlier
        end
        if (done_in[i]) done_t[i].push_back(cyc);
        if (done_out[i]) begin
          checks++;
          if (done_t[i].size() == 0 || cyc - done_t[i].pop_front() != (i < 2 ? ST : 0)) failures++;
        end
      end
    end
    cyc++;
  end
  initial begin
    in_valid = 0; in_pu = 0; in_instr = '0;
    for (int i = 0; i < N; i++) begin q_ready[i] = 0; done_in[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      in_valid = (c < 550) && $urandom_range(0, 1); in_pu = 2'($urandom); in_instr = '0; in_instr.p_cols = 16'($urandom);
      for (int i = 0; i < N; i++) begin q_ready[i] = $urandom_range(0, 3) == 0; done_in[i] = $urandom_range(0, 9) == 0; end
    end
    in_valid = 0;
    for (int i = 0; i < N; i++) q_ready[i] = 1;
    repeat (10) @(negedge clk);
    checks++; if (got != sent || sent < 100 || n_block == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
