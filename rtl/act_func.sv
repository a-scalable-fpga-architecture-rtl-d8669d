// act_func: activation-function stage of the post-processing chain. It applies
// ReLU (max(0, x)) to every signed byte of an R_G-byte chunk when relu_en is
// set, and passes the chunk unchanged otherwise. It is one register slice with
// valid/ready handshake (in_ready = !out_valid || out_ready), one cycle latency.
// The paper names ReLU as the activation function; other functions are not built.
module act_func #(
  parameter int unsigned R_G = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             relu_en,
  input  logic             in_valid,
  input  logic [R_G*8-1:0] in_data,
  output logic             in_ready,
  output logic             out_valid,
  output logic [R_G*8-1:0] out_data,
  input  logic             out_ready
);
  logic [R_G*8-1:0] y;
  always_comb begin
    for (int j = 0; j < R_G; j++)
      y[j*8 +: 8] = (relu_en && in_data[j*8+7]) ? 8'd0 : in_data[j*8 +: 8];
  end
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= y;
    end
  end
endmodule
