// systolic_array: R_SA x C_SA array of INT8 multiply-add cells modelling DSP48E2
// slices. Each row is a processing element computing a C_SA-long dot product
// per cycle; all rows share the activation vector, which enters at the bottom
// (row 0) and climbs one row per cycle (the DSP A-input cascade). Partial sums
// travel left to right through the cells' C ports; the first column adds the
// row's bias on the first round of a wave, the last column accumulates the
// ceil(M/C_SA) rounds of a wave (P <- P + A*B + C).
// Timing, with T0 the cycle in which the issue flags and act_in are presented:
//   activation column c reaches row r at T0 + r + c (input setup skew of c);
//   row r's weight word w_row[r] / bias_row[r] must be presented at T0 + r
//   (the URAM column does this), weight byte c is delayed c cycles in the row;
//   res_valid[r] / res_acc[r] / res_wave[r] hold for one cycle at
//   T_last + C_SA + r, T_last being the T0 of the wave's last round.
// A new wave may follow the previous one with no gap. Follows the paper's
// structure; the accumulator width and the bias shift are this design's choices.
module systolic_array #(
  parameter int unsigned R_SA   = 64,
  parameter int unsigned C_SA   = 8,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned WAVE_W = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic                     in_last,
  input  logic [WAVE_W-1:0]        in_wave,
  input  logic [C_SA*8-1:0]        act_in,
  input  logic [C_SA*8-1:0]        w_row    [R_SA],
  input  logic [7:0]               bias_row [R_SA],
  input  logic [5:0]               bias_shift,
  output logic                     res_valid [R_SA],
  output logic [WAVE_W-1:0]        res_wave  [R_SA],
  output logic signed [ACC_W-1:0]  res_acc   [R_SA]
);
  typedef struct packed {
    logic              v;
    logic              first;
    logic              last;
    logic [WAVE_W-1:0] wave;
  } flag_t;

  localparam int unsigned FD = C_SA + R_SA - 1;   // flag delay line length

  // activation delay lines: column c, tap i = act_in[c] delayed by i cycles
  logic signed [7:0] adl [C_SA][FD];
  flag_t             fdl [FD];

  always_comb begin
    for (int c = 0; c < C_SA; c++) adl[c][0] = act_in[c*8 +: 8];
    fdl[0] = '{v: in_valid, first: in_first, last: in_last, wave: in_wave};
  end
  always_ff @(posedge clk) begin
    for (int i = 1; i < FD; i++) begin
      for (int c = 0; c < C_SA; c++) adl[c][i] <= adl[c][i-1];
      fdl[i] <= rst_n ? fdl[i-1] : '0;
    end
  end

  for (genvar r = 0; r < R_SA; r++) begin : g_row
    // weight skew registers: byte c of the row's word delayed c cycles
    logic signed [7:0]       wsk [C_SA][C_SA];
    logic signed [ACC_W-1:0] p   [C_SA-1];
    logic signed [ACC_W-1:0] acc;
    logic signed [ACC_W-1:0] bias_c;
    flag_t f0, fl;

    always_comb begin
      for (int c = 0; c < C_SA; c++) wsk[c][0] = w_row[r][c*8 +: 8];
      f0 = fdl[r];
      fl = fdl[r + C_SA - 1];
      bias_c = f0.first ? (ACC_W'($signed(bias_row[r])) <<< bias_shift) : '0;
    end
    always_ff @(posedge clk) begin
      for (int c = 1; c < C_SA; c++)
        for (int i = 1; i <= c; i++) wsk[c][i] <= wsk[c][i-1];
    end

    // first column: C port takes the bias
    always_ff @(posedge clk)
      p[0] <= bias_c + ACC_W'(accel_pkg::mul8(adl[0][r], wsk[0][0]));
    // middle columns: C port takes the left neighbour's P
    for (genvar c = 1; c < C_SA - 1; c++) begin : g_col
      always_ff @(posedge clk)
        p[c] <= p[c-1] + ACC_W'(accel_pkg::mul8(adl[c][r + c], wsk[c][c]));
    end
    // last column: multiply-add with accumulation over rounds
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        acc <= '0; res_valid[r] <= 1'b0; res_wave[r] <= '0;
      end else begin
        if (fl.v)
          acc <= (fl.first ? '0 : acc) + p[C_SA-2]
                 + ACC_W'(accel_pkg::mul8(adl[C_SA-1][r + C_SA - 1], wsk[C_SA-1][C_SA-1]));
        res_valid[r] <= fl.v && fl.last;
        res_wave[r]  <= fl.wave;
      end
    end
    assign res_acc[r] = acc;
  end
endmodule
