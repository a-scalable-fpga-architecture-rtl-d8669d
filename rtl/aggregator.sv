// aggregator: collects the row-block chunks of the systolic array into one
// stream for the wave reorder buffer. Each row-block lane has a shallow FIFO
// (FIFO_DEPTH chunks) fed by scale_merge, and a register in the shift-up chain.
// Lane 0 is the output end of the chain. Every lane register, when free or
// emptying, takes the chunk of the lane below it (index + 1) if that one holds
// data, otherwise the head of its own FIFO: the multiplexer per lane of the
// paper. Chunks keep their row-block and wave tags, so the order in which they
// leave may differ from wave order; the WRB restores it.
// Interface: in_valid/in_wave/in_data per lane (no backpressure: the PU's wave
// credits bound the chunks in flight by the WRB depth, and FIFO_DEPTH >= WRB
// waves makes overflow impossible; asserted in sync_fifo); out_* with out_ready.
// The FIFO depth and the priority to the lane below are this design's choices.
module aggregator #(
  parameter int unsigned NB         = 8,
  parameter int unsigned R_G        = 8,
  parameter int unsigned WAVE_W     = 2,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid [NB],
  input  logic [WAVE_W-1:0]      in_wave  [NB],
  input  logic [R_G*8-1:0]       in_data  [NB],
  output logic                   out_valid,
  output logic [WAVE_W-1:0]      out_wave,
  output logic [$clog2(NB)-1:0]  out_blk,
  output logic [R_G*8-1:0]       out_data,
  input  logic                   out_ready
);
  localparam int unsigned BW = $clog2(NB);
  typedef struct packed {
    logic [WAVE_W-1:0] wave;
    logic [BW-1:0]     blk;
    logic [R_G*8-1:0]  data;
  } chunk_t;

  chunk_t lane   [NB];
  logic   lv     [NB];
  chunk_t head   [NB];
  logic   empty  [NB];
  logic   pop    [NB];
  logic   load   [NB];
  logic   leave  [NB];
  logic   bel    [NB];

  for (genvar i = 0; i < NB; i++) begin : g_fifo
    logic full;
    logic [$clog2(FIFO_DEPTH+1)-1:0] cnt;
    chunk_t din;
    assign din = '{wave: in_wave[i], blk: BW'(i), data: in_data[i]};
    sync_fifo #(.W($bits(chunk_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .push(in_valid[i]), .din,
      .pop(pop[i]), .dout(head[i]), .full, .empty(empty[i]), .count(cnt));
  end

  assign leave[0] = lv[0] && out_ready;
  for (genvar i = 1; i < NB; i++) begin : g_leave
    assign leave[i] = load[i-1] && lv[i];
  end
  for (genvar i = 0; i < NB; i++) begin : g_load
    logic below;   // the lane below holds a chunk: it has priority
    if (i < NB - 1) begin : g_b
      assign below = lv[i+1];
    end else begin : g_nb
      assign below = 1'b0;
    end
    assign load[i] = !lv[i] || leave[i];
    assign pop[i]  = load[i] && !empty[i] && !below;
    assign bel[i]  = below;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NB; i++) lv[i] <= 1'b0;
    end else begin
      for (int i = 0; i < NB; i++) begin
        if (load[i]) begin
          if (bel[i]) begin
            lane[i] <= lane[(i < NB - 1) ? i + 1 : i]; lv[i] <= 1'b1;
          end else if (!empty[i]) begin
            lane[i] <= head[i]; lv[i] <= 1'b1;
          end else lv[i] <= 1'b0;
        end
      end
    end
  end

  assign out_valid = lv[0];
  assign out_wave  = lane[0].wave;
  assign out_blk   = lane[0].blk;
  assign out_data  = lane[0].data;
endmodule
