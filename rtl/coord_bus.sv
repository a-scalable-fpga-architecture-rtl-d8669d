// coord_bus: instruction side of the coordination bus that links the host
// (through PCIe and the instruction controllers) to every PU. An instruction
// addressed to PU `in_pu` is placed in that PU's instruction queue. PUs placed
// in the upper SLR receive the bus through SLR_STAGES pipeline registers (the
// SLR crossing registers), and their done flags return through as many. The
// host may send when the target queue has a free credit (in_ready); credits
// count queue entries plus instructions still in the crossing pipeline, so a
// queue never overflows. Queues present instructions with valid/ready.
// The paper only names the bus, the queues and the crossing registers; the flow
// control between PUs ("sync") is not described there and is not built here.
module coord_bus
  import accel_pkg::*;
#(
  parameter int unsigned          N_PU        = 10,
  parameter logic [N_PU-1:0]      SLR1_MASK   = 10'b00000_11111,
  parameter int unsigned          SLR_STAGES  = 2,
  parameter int unsigned          QUEUE_DEPTH = 4,
  parameter int unsigned          PW          = $clog2(N_PU)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [PW-1:0] in_pu,
  input  layer_cfg_t    in_instr,
  output logic          in_ready,
  output logic          q_valid [N_PU],
  output layer_cfg_t    q_instr [N_PU],
  input  logic          q_ready [N_PU],
  input  logic          done_in [N_PU],
  output logic          done_out[N_PU]
);
  localparam int unsigned CW = $clog2(QUEUE_DEPTH + 1);
  typedef struct packed {
    logic       v;
    logic [PW-1:0] pu;
    layer_cfg_t instr;
  } bus_t;

  logic [CW-1:0] cred [N_PU];
  bus_t          pipe [SLR_STAGES + 1];
  logic          accept;

  assign in_ready = (cred[in_pu] != '0);
  assign accept   = in_valid && in_ready;
  assign pipe[0]  = '{v: accept, pu: in_pu, instr: in_instr};

  always_ff @(posedge clk) begin
    for (int s = 1; s <= SLR_STAGES; s++) pipe[s] <= rst_n ? pipe[s-1] : '0;
  end

  for (genvar i = 0; i < N_PU; i++) begin : g_pu
    localparam int unsigned D = SLR1_MASK[i] ? SLR_STAGES : 0;
    logic pop, full, empty;
    logic [CW-1:0] cnt;
    logic [D:0] dsh;
    assign pop = q_valid[i] && q_ready[i];
    sync_fifo #(.W($bits(layer_cfg_t)), .DEPTH(QUEUE_DEPTH)) u_q (
      .clk, .rst_n, .push(pipe[D].v && pipe[D].pu == PW'(i)), .din(pipe[D].instr),
      .pop, .dout(q_instr[i]), .full, .empty, .count(cnt));
    assign q_valid[i] = !empty;

    always_ff @(posedge clk) begin
      if (!rst_n) cred[i] <= CW'(QUEUE_DEPTH);
      else cred[i] <= cred[i] - CW'(accept && in_pu == PW'(i)) + CW'(pop);
    end

    // done flag return path
    assign dsh[0] = done_in[i];
    for (genvar s = 1; s <= D; s++) begin : g_d
      always_ff @(posedge clk) dsh[s] <= rst_n && dsh[s-1];
    end
    assign done_out[i] = dsh[D];
  end
endmodule
