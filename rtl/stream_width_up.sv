// stream_width_up: the output "stream DW adapter" with clock conversion. It packs
// IN_W-bit chunks arriving at the fast clock (one per cycle at most) into
// OUT_W-bit words, first chunk in the least significant bits, and hands each
// word to the system clock domain: an output transfer happens only on cycles
// with sys_ce high (out_valid & out_ready & sys_ce). A two-word buffer decouples
// the two sides. Only whole words are emitted; a PU layer always produces a
// multiple of OUT_W bits (R_SA bytes per wave).
module stream_width_up #(
  parameter int unsigned IN_W  = 64,
  parameter int unsigned OUT_W = 256
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
  localparam int unsigned RATIO = OUT_W / IN_W;
  localparam int unsigned IW    = (RATIO > 1) ? $clog2(RATIO) : 1;
  logic [OUT_W-1:0] acc, word;
  logic [IW-1:0]    idx;
  logic             full, empty, push;
  logic [1:0]       cnt;

  always_comb begin
    word = acc;
    word[idx*IN_W +: IN_W] = in_data;
  end
  assign in_ready = (idx != IW'(RATIO - 1)) || !full;
  assign push     = in_valid && in_ready && (idx == IW'(RATIO - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx <= '0; acc <= '0;
    end else if (in_valid && in_ready) begin
      acc <= word;
      idx <= (idx == IW'(RATIO - 1)) ? '0 : idx + 1'b1;
    end
  end

  sync_fifo #(.W(OUT_W), .DEPTH(2)) u_buf (
    .clk, .rst_n, .push, .din(word), .pop(out_valid && out_ready && sys_ce),
    .dout(out_data), .full, .empty, .count(cnt));
  assign out_valid = !empty;
endmodule
