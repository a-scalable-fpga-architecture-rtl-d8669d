// stream_width_down: the stream adjuster between an ADM and the fast clock domain.
// It accepts one IN_W-bit word per system-clock edge (cycles with sys_ce high)
// and emits IN_W/OUT_W narrower words, least significant first, one per fast
// cycle. With IN_W/OUT_W = 2 the bandwidth of F/2 x 256 b equals F x 128 b, as the
// paper's params path does; the residual path uses the same block with OUT_W = R_g bytes.
// A two-word buffer lets a new word arrive while the previous one is still being
// split, so full bandwidth is sustained. Handshake: valid/ready on both sides;
// an input transfer happens only when in_valid & in_ready & sys_ce.
module stream_width_down #(
  parameter int unsigned IN_W  = 256,
  parameter int unsigned OUT_W = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sys_ce,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  in_data,
  output logic             in_ready,
  output logic             out_valid,
  output logic [OUT_W-1:0] out_data,
  input  logic             out_ready
);
  localparam int unsigned RATIO = IN_W / OUT_W;
  localparam int unsigned IW    = (RATIO > 1) ? $clog2(RATIO) : 1;
  logic [IN_W-1:0] head;
  logic            full, empty, pop;
  logic [IW-1:0]   idx;
  logic [1:0]      cnt;

  sync_fifo #(.W(IN_W), .DEPTH(2)) u_buf (
    .clk, .rst_n, .push(in_valid && in_ready && sys_ce), .din(in_data),
    .pop, .dout(head), .full, .empty, .count(cnt));

  assign in_ready  = !full;
  assign out_valid = !empty;
  assign out_data  = head[idx*OUT_W +: OUT_W];
  assign pop       = out_valid && out_ready && (idx == IW'(RATIO - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) idx <= '0;
    else if (out_valid && out_ready) idx <= (idx == IW'(RATIO - 1)) ? '0 : idx + 1'b1;
  end
endmodule
