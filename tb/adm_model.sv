// adm_model: behavioural model (simulation only) of an HBM region reached
// through an AXI DataMover I/O port. It accepts read commands (byte address,
// byte length, a multiple of 32) at any time, queues them, and returns the
// bytes as 256-bit beats, at most one per system-clock edge (sys_ce). Output
// beats of the PU are captured in order into `obuf`. Testbenches fill `mem`
// directly. The `stall` input withholds data and output-ready to create
// backpressure.
module adm_model #(
  parameter int unsigned MEM_BYTES = 65536,
  parameter int unsigned OBUF_BYTES = 65536
) (
  input  logic         clk,
  input  logic         sys_ce,
  input  logic         stall,
  input  logic         cmd_valid,
  input  logic [33:0]  cmd_addr,
  input  logic [15:0]  cmd_len,
  output logic         cmd_ready,
  output logic         inp_tvalid,
  output logic [255:0] inp_tdata,
  input  logic         inp_tready,
  input  logic         out_tvalid,
  input  logic [255:0] out_tdata,
  output logic         out_tready
);
  logic [7:0] mem  [MEM_BYTES];
  logic [7:0] obuf [OBUF_BYTES];
  int unsigned ocount = 0;
  int unsigned ncmds  = 0;
  int unsigned q_addr[$];
  int unsigned q_len[$];
  int unsigned cur_addr = 0, cur_left = 0;

  assign cmd_ready  = 1'b1;
  assign out_tready = !stall;

  always_comb begin
    inp_tvalid = (cur_left != 0) && !stall;
    for (int b = 0; b < 32; b++) inp_tdata[b*8 +: 8] = mem[(cur_addr + b) % MEM_BYTES];
  end

  always @(posedge clk) begin
    if (cmd_valid) begin
      q_addr.push_back(32'(cmd_addr)); q_len.push_back(32'(cmd_len)); ncmds++;
    end
    if (sys_ce && inp_tvalid && inp_tready) begin
      cur_addr <= cur_addr + 32; cur_left <= cur_left - 32;
    end
    if ((cur_left == 0 || (cur_left == 32 && sys_ce && inp_tvalid && inp_tready)) && q_addr.size() != 0) begin
      cur_addr <= q_addr.pop_front(); cur_left <= q_len.pop_front();
    end
    if (sys_ce && out_tvalid && out_tready) begin
      for (int b = 0; b < 32; b++) obuf[(ocount + b) % OBUF_BYTES] = out_tdata[b*8 +: 8];
      ocount = ocount + 32;
    end
  end
  // Forget whatever the PU presented before its reset took effect (its outputs
  // are undefined on the first clock edges). Called once the reset is over.
  task automatic clear();
    q_addr.delete(); q_len.delete();
    cur_addr = 0; cur_left = 0; ocount = 0; ncmds = 0;
  endtask
endmodule
