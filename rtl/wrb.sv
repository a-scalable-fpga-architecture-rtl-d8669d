// wrb: Wave Reorder Buffer. A wave is the R_SA-byte result of one systolic pass
// (one weight section times one activation column), split into NB row-block
// chunks of R_G bytes. Chunks are written in any order, each into the slot named
// by its (wave, block) tag; the read side walks the slots strictly in order
// (wave by wave, block 0 .. NB-1 within a wave) and emits one R_G-byte chunk
// per cycle when the next slot is filled. When the last block of a wave has been
// read, `wave_free` pulses: the controller uses it as a credit to start a new
// wave, so at most WAVES waves are in flight and a write never finds its slot
// occupied (asserted). `ooo` marks a write that is not for the slot the reader
// waits on, i.e. an out-of-order arrival. The paper gives the function and the
// read rate (R_g bytes per cycle); slot organisation and credits are this design's.
module wrb #(
  parameter int unsigned NB     = 8,
  parameter int unsigned R_G    = 8,
  parameter int unsigned WAVES  = 4,
  parameter int unsigned WAVE_W = $clog2(WAVES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  w_valid,
  input  logic [WAVE_W-1:0]     w_wave,
  input  logic [$clog2(NB)-1:0] w_blk,
  input  logic [R_G*8-1:0]      w_data,
  output logic                  r_valid,
  output logic [R_G*8-1:0]      r_data,
  input  logic                  r_ready,
  output logic                  wave_free,
  output logic                  ooo
);
  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned SLOTS = WAVES * NB;
  localparam int unsigned SW = $clog2(SLOTS);

  logic [R_G*8-1:0]  mem [SLOTS];
  logic [SLOTS-1:0]  vld;
  logic [WAVE_W-1:0] h_wave;
  logic [BW-1:0]     h_blk;
  logic [SW-1:0]     rslot, wslot;
  logic              rfire;

  assign rslot     = SW'(h_wave) * SW'(NB) + SW'(h_blk);
  assign wslot     = SW'(w_wave) * SW'(NB) + SW'(w_blk);
  assign r_valid   = vld[rslot];
  assign r_data    = mem[rslot];
  assign rfire     = r_valid && r_ready;
  assign wave_free = rfire && (h_blk == BW'(NB - 1));
  assign ooo       = w_valid && (wslot != rslot);

  always_ff @(posedge clk) if (w_valid) mem[wslot] <= w_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld <= '0; h_wave <= '0; h_blk <= '0;
    end else begin
      if (w_valid) vld[wslot] <= 1'b1;
      if (rfire) begin
        vld[rslot] <= 1'b0;
        if (h_blk == BW'(NB - 1)) begin
          h_blk <= '0;
          h_wave <= (h_wave == WAVE_W'(WAVES - 1)) ? '0 : h_wave + 1'b1;
        end else h_blk <= h_blk + 1'b1;
      end
    end
  end

  a_slot_free: assert property (@(posedge clk) disable iff (!rst_n)
                                w_valid |-> (!vld[wslot] || (rfire && wslot == rslot)));
endmodule
