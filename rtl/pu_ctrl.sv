// pu_ctrl: the PU's computation sequencer, the loop nest of the dataflow:
//   for each activation (IM2COL) column p < P:            (buffer ping-pong)
//     for each depth-wise weight section b < B_W:          (one systolic wave)
//       for each round t < RM = M / C_SA:                  (one issue per cycle)
//         read buffer entry t and URAM entry w_base + b*RM + t
// The same activation buffer is re-read B_W times, then released so the writer
// can refill it while the other buffer is consumed. A wave only starts when the
// read buffer holds a complete column and fewer than WAVES waves are in flight
// (credits returned by the WRB's wave_free); inside a wave there is no stall.
// `done` pulses when all P*B_W*R_SA output bytes have left the PU (counted in
// OUT_W-bit words through out_fire). `busy` is high from start to done.
// The loop nest is the paper's; the credit rule and done condition are this design's.
module pu_ctrl #(
  parameter int unsigned R_SA   = 64,
  parameter int unsigned C_SA   = 8,
  parameter int unsigned WAVES  = 4,
  parameter int unsigned WAVE_W = $clog2(WAVES),
  parameter int unsigned OUT_W  = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [15:0]       m_bytes,
  input  logic [15:0]       p_cols,
  input  logic [7:0]        b_w,
  input  logic [15:0]       w_base,
  input  logic              buf_avail,
  input  logic              wave_free,
  input  logic              out_fire,
  output logic              iss_valid,
  output logic [15:0]       iss_act,
  output logic [15:0]       iss_w,
  output logic              iss_first,
  output logic              iss_last,
  output logic [WAVE_W-1:0] iss_wave,
  output logic              release_buf,
  output logic              busy,
  output logic              done,
  output logic              credit_stall
);
  logic [15:0] rm, rnd, col, sbase;
  logic [7:0]  sec;
  logic [WAVE_W:0] inflight;
  logic        issuing, all_issued;
  logic [31:0] out_words, out_cnt;

  assign rm        = m_bytes / 16'(C_SA);
  assign issuing   = busy && !all_issued && buf_avail && (rnd != 0 || inflight < (WAVE_W+1)'(WAVES));
  assign credit_stall = busy && !all_issued && buf_avail && rnd == 0 && inflight >= (WAVE_W+1)'(WAVES);
  assign iss_valid = issuing;
  assign iss_act   = rnd;
  assign iss_w     = w_base + sbase + rnd;
  assign iss_first = (rnd == 0);
  assign iss_last  = (rnd == rm - 1'b1);
  assign release_buf = issuing && iss_last && (sec == b_w - 1'b1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; all_issued <= 1'b0; rnd <= '0; col <= '0; sec <= '0;
      sbase <= '0; iss_wave <= '0; inflight <= '0; out_cnt <= '0; out_words <= '0;
    end else begin
      done <= 1'b0;
      inflight <= inflight + (WAVE_W+1)'(issuing && iss_first) - (WAVE_W+1)'(wave_free);
      if (start) begin
        busy <= 1'b1; all_issued <= (p_cols == 0) || (b_w == 0) || (m_bytes == 0);
        rnd <= '0; col <= '0; sec <= '0; sbase <= '0; out_cnt <= '0;
        out_words <= (32'(p_cols) * 32'(b_w) * R_SA * 8) / OUT_W;
      end else if (busy) begin
        if (out_fire) out_cnt <= out_cnt + 1'b1;
        if (all_issued && out_cnt == out_words) begin
          busy <= 1'b0; done <= 1'b1;
        end
        if (issuing) begin
          if (iss_last) begin
            rnd <= '0;
            iss_wave <= iss_wave + 1'b1;
            if (sec == b_w - 1'b1) begin
              sec <= '0; sbase <= '0;
              col <= col + 1'b1;
              if (col == p_cols - 1'b1) all_issued <= 1'b1;
            end else begin
              sec <= sec + 1'b1; sbase <= sbase + rm;
            end
          end else rnd <= rnd + 1'b1;
        end
      end
    end
  end
endmodule
