// scale_merge: the scale/shift stage and the row-block merge at the right edge
// of the systolic array. Each row's finished dot product is scaled by a power
// of two (arithmetic right shift by `shift`) and saturated to INT8. Rows finish
// one cycle apart (row r at T + r), so inside each row-block of R_G rows row j
// is delayed R_G-1-j cycles; the R_G bytes of a block then line up and are
// emitted together as one chunk (row j in byte j), tagged with the wave ID, one
// cycle after the block's last row finished. Chunk g goes to the FIFO lane of
// row-block g. The paper names the scaling and the merge into R_g-byte chunks;
// truncating shift and saturation are this design's choices.
module scale_merge #(
  parameter int unsigned R_SA   = 64,
  parameter int unsigned R_G    = 8,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned WAVE_W = 2,
  parameter int unsigned NB     = R_SA / R_G
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [5:0]              shift,
  input  logic                    res_valid [R_SA],
  input  logic [WAVE_W-1:0]       res_wave  [R_SA],
  input  logic signed [ACC_W-1:0] res_acc   [R_SA],
  output logic                    ch_valid  [NB],
  output logic [WAVE_W-1:0]       ch_wave   [NB],
  output logic [R_G*8-1:0]        ch_data   [NB]
);
  for (genvar g = 0; g < NB; g++) begin : g_blk
    logic [7:0]        al_b [R_G];
    logic              al_v [R_G];
    logic [WAVE_W-1:0] al_w [R_G];
    for (genvar j = 0; j < R_G; j++) begin : g_r
      localparam int unsigned R = g * R_G + j;
      localparam int unsigned D = R_G - j;          // 1 scale register + R_G-1-j align
      logic [7:0]        db [D];
      logic              dv [D];
      logic [WAVE_W-1:0] dw [D];
      always_ff @(posedge clk) begin
        db[0] <= accel_pkg::sat8(48'(res_acc[R] >>> shift));
        dv[0] <= rst_n && res_valid[R];
        dw[0] <= res_wave[R];
        for (int i = 1; i < D; i++) begin
          db[i] <= db[i-1]; dv[i] <= rst_n && dv[i-1]; dw[i] <= dw[i-1];
        end
      end
      assign al_b[j] = db[D-1];
      assign al_v[j] = dv[D-1];
      assign al_w[j] = dw[D-1];
    end
    always_comb begin
      for (int j = 0; j < R_G; j++) ch_data[g][j*8 +: 8] = al_b[j];
      ch_valid[g] = al_v[R_G-1];
      ch_wave[g]  = al_w[R_G-1];
    end
  end
endmodule
