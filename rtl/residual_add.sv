// residual_add: element-wise addition of the residual (shortcut) activations, as
// used by ResNet layers, so the shortcut never has to be re-read by a separate
// pass. It is made of R_G/4 adders in the DSP48E2 SIMD "four 12-bit" style: each
// unit adds four signed bytes sign-extended to 12-bit lanes, with no carry
// between lanes, and every lane result is saturated back to INT8.
// With res_en low the main stream passes unchanged and the residual stream is
// not consumed; with res_en high a chunk moves only when both inputs are valid.
// One register slice, valid/ready on all streams. The paper gives the unit count
// (R_g/4) and the SIMD mode; the saturation is this design's choice.
module residual_add #(
  parameter int unsigned R_G = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             res_en,
  input  logic             in_valid,
  input  logic [R_G*8-1:0] in_data,
  output logic             in_ready,
  input  logic             ra_valid,
  input  logic [R_G*8-1:0] ra_data,
  output logic             ra_ready,
  output logic             out_valid,
  output logic [R_G*8-1:0] out_data,
  input  logic             out_ready
);
  localparam int unsigned NU = R_G / 4;
  logic [R_G*8-1:0] y;
  logic             slot, go;

  // one SIMD unit: 48-bit word of four 12-bit lanes
  for (genvar u = 0; u < NU; u++) begin : g_simd
    logic [47:0] a48, b48, s48;
    always_comb begin
      for (int l = 0; l < 4; l++) begin
        a48[l*12 +: 12] = 12'($signed(in_data[(u*4+l)*8 +: 8]));
        b48[l*12 +: 12] = res_en ? 12'($signed(ra_data[(u*4+l)*8 +: 8])) : 12'd0;
        s48[l*12 +: 12] = a48[l*12 +: 12] + b48[l*12 +: 12];
        y[(u*4+l)*8 +: 8] = accel_pkg::sat8(48'($signed(s48[l*12 +: 12])));
      end
    end
  end

  assign slot     = !out_valid || out_ready;
  assign go       = slot && in_valid && (!res_en || ra_valid);
  assign in_ready = slot && (!res_en || ra_valid);
  assign ra_ready = slot && res_en && in_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (slot) begin
      out_valid <= go;
      if (go) out_data <= y;
    end
  end
endmodule
