// pu_driver: simulation-only stimulus and checker for one PU. It owns a
// behavioural HBM/DataMover model (adm_model), generates random INT8 weights,
// biases, activations and residuals from SEED, and runs two layers:
//   layer A: GEMM, N = 2*R_SA (two weight sections), M = 32, P = 6, bias, ReLU
//            before the residual stage, output backpressure from `stall`;
//   layer B: 3x3 convolution, stride 1, padding 1, 4x4x32 input, N = R_SA,
//            through IM2COL commands, residual addition and ReLU after it.
// Layer B's weights are loaded while layer A computes. Every output byte is
// compared with a reference computed here from the same integers:
//   y = relu2(sat8(relu1(sat8((sum W*X + bias<<bias_shift) >>> out_shift)) + res)).
// Stimulus is applied on falling clock edges; 256-bit transfers only happen on
// sys_ce cycles. `finished` rises when both layers are checked.
module pu_driver
  import accel_pkg::*;
#(
  parameter int unsigned C_SA = 8,
  parameter int unsigned R_SA = 64,
  parameter int unsigned SEED = 1
) (
  input  logic              clk,
  input  logic              sys_ce,
  input  logic              rst_n,
  output logic              cfg_valid,
  output layer_cfg_t        cfg,
  input  logic              cfg_ready,
  input  logic              done,
  input  logic              io_cmd_valid,
  input  logic [ADDR_W-1:0] io_cmd_addr,
  input  logic [LEN_W-1:0]  io_cmd_len,
  output logic              io_cmd_ready,
  output logic              inp_tvalid,
  output logic [AXI_W-1:0]  inp_tdata,
  input  logic              inp_tready,
  input  logic              out_tvalid,
  input  logic [AXI_W-1:0]  out_tdata,
  output logic              out_tready,
  output logic              wl_valid,
  output wl_cmd_t           wl_cmd,
  input  logic              wl_ready,
  input  logic              wl_busy,
  output logic              prm_tvalid,
  output logic [AXI_W-1:0]  prm_tdata,
  input  logic              prm_tready,
  output logic              ra_tvalid,
  output logic [AXI_W-1:0]  ra_tdata,
  input  logic              ra_tready,
  output logic              finished,
  output int                checks,
  output int                failures
);
  localparam int R = R_SA;
  // layer A
  localparam int NA = 2 * R, MA = 32, PA = 6, BA = 2, RMA = MA / C_SA;
  // layer B: 4x4x32 IFM, 3x3 kernel, stride 1, pad 1 -> 4x4 OFM
  localparam int HI = 4, WI = 4, CI = 32, KK = 3, HO = 4, WO = 4;
  localparam int NB_ = R, MB = KK * KK * CI, PB = HO * WO, BB = 1, RMB = MB / C_SA;
  localparam int WBASE_B = 16;                        // URAM entry of layer B
  localparam int IN_A = 0, IN_B = 1024, ZERO = 2048, W_A_SH = 8, W_B_SH = 10;

  logic stall;
  int unsigned rng;
  byte wa [NA][MA];  byte ba [NA];
  byte wb [NB_][MB]; byte bb [NB_];
  byte xa [MA][PA];
  byte ifm [HI][WI][CI];
  byte res [PB*NB_];

  adm_model #(.MEM_BYTES(4096), .OBUF_BYTES(4096)) u_adm (
    .clk, .sys_ce, .stall, .cmd_valid(io_cmd_valid), .cmd_addr(io_cmd_addr), .cmd_len(io_cmd_len),
    .cmd_ready(io_cmd_ready), .inp_tvalid, .inp_tdata, .inp_tready,
    .out_tvalid, .out_tdata, .out_tready);

  function automatic byte rnd8();
    rng = rng * 1103515245 + 12345;
    return byte'(rng >> 16);
  endfunction

  function automatic byte sat(input int v);
    return (v > 127) ? 8'sd127 : (v < -128) ? -8'sd128 : byte'(v);
  endfunction

  // ---- params stream: one 256-bit beat on a sys_ce edge ----
  task automatic send_prm(input logic [255:0] d);
    @(negedge clk); prm_tvalid = 1'b1; prm_tdata = d;
    #1;
    while (!(sys_ce && prm_tready)) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 prm_tvalid = 1'b0;
  endtask

  task automatic send_wl(input int base_word, input int n_words, input bit is_bias);
    @(negedge clk);
    #1;
    while (!wl_ready) begin @(negedge clk); #1; end
    wl_valid = 1'b1; wl_cmd = '{base_word: 16'(base_word), n_words: 16'(n_words), is_bias: is_bias};
    @(posedge clk); #1 wl_valid = 1'b0;
  endtask

  // weight byte for row r of URAM word wd of a layer (entries relative to base)
  function automatic byte wbyte(input bit lb, input int r, input int wd_rel, input int k);
    int e, c, sec, t, n, m, rm;
    e = (wd_rel * 8 + k) / C_SA; c = (wd_rel * 8 + k) % C_SA;
    rm = lb ? RMB : RMA;
    sec = e / rm; t = e % rm; n = sec * R + r; m = t * C_SA + c;
    return lb ? wb[n][m] : wa[n][m];
  endfunction

  task automatic load_layer(input bit lb);
    int words, wbase, nb;
    logic [255:0] beat;
    logic [63:0]  lo, hi;
    nb    = lb ? BB : BA;
    words = (lb ? BB * RMB : BA * RMA) * C_SA / 8;
    wbase = (lb ? WBASE_B : 0) * C_SA / 8;
    send_wl(wbase, words, 1'b0);
    for (int wd = 0; wd < words; wd++)
      for (int j = 0; j < R / 2; j += 2) begin
        for (int h = 0; h < 2; h++) begin
          for (int k = 0; k < 8; k++) begin
            lo[k*8 +: 8] = wbyte(lb, j + h, wd, k);
            hi[k*8 +: 8] = wbyte(lb, j + h + R/2, wd, k);
          end
          beat[h*128 +: 128] = {hi, lo};
        end
        send_prm(beat);
      end
    // biases: spare byte of the word holding each section's first entry
    for (int s = 0; s < nb; s++) begin
      send_wl(((lb ? WBASE_B : 0) + s * (lb ? RMB : RMA)) * C_SA / 8, 1, 1'b1);
      for (int j = 0; j < R / 2; j += 2) begin
        beat = '0;
        for (int h = 0; h < 2; h++) begin
          beat[h*128 +: 8]      = lb ? bb[s*R + j + h]       : ba[s*R + j + h];
          beat[h*128 + 64 +: 8] = lb ? bb[s*R + j + h + R/2] : ba[s*R + j + h + R/2];
        end
        send_prm(beat);
      end
    end
    // the layer may only start once the write cascades have drained
    @(negedge clk);
    while (wl_busy) @(negedge clk);
  endtask

  task automatic send_cfg(input layer_cfg_t c);
    @(negedge clk);
    cfg_valid = 1'b1; cfg = c;
    #1;
    while (!cfg_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 cfg_valid = 1'b0;
  endtask

  task automatic send_res();
    logic [255:0] beat;
    for (int i = 0; i < PB * NB_; i += 32) begin
      for (int b = 0; b < 32; b++) beat[b*8 +: 8] = res[i + b];
      @(negedge clk); ra_tvalid = 1'b1; ra_tdata = beat;
      #1;
    while (!(sys_ce && ra_tready)) begin @(negedge clk); #1; end
      @(posedge clk); #1 ra_tvalid = 1'b0;
    end
  endtask

  task automatic check_a();
    for (int p = 0; p < PA; p++)
      for (int n = 0; n < NA; n++) begin
        int acc; byte y;
        acc = int'(ba[n]) <<< 2;
        for (int m = 0; m < MA; m++) acc += int'(wa[n][m]) * int'(xa[m][p]);
        y = sat(acc >>> W_A_SH);
        if (y < 0) y = 0;
        checks++;
        if (byte'(u_adm.obuf[p*NA + n]) !== y) begin
          failures++;
          if (failures < 10) $display("A mismatch p=%0d n=%0d got %0d exp %0d", p, n, byte'(u_adm.obuf[p*NA + n]), y);
        end
      end
  endtask

  task automatic check_b(input int base);
    for (int ho = 0; ho < HO; ho++)
      for (int wo = 0; wo < WO; wo++)
        for (int n = 0; n < NB_; n++) begin
          int acc, p; byte y;
          p = ho * WO + wo;
          acc = int'(bb[n]) <<< 3;
          for (int kh = 0; kh < KK; kh++)
            for (int kw = 0; kw < KK; kw++)
              for (int c = 0; c < CI; c++) begin
                int ih, iw;
                ih = ho + kh - 1; iw = wo + kw - 1;
                if (ih >= 0 && iw >= 0 && ih < HI && iw < WI)
                  acc += int'(wb[n][(kh*KK + kw)*CI + c]) * int'(ifm[ih][iw][c]);
              end
          y = sat(int'(sat(acc >>> W_B_SH)) + int'(res[p*NB_ + n]));
          if (y < 0) y = 0;
          checks++;
          if (byte'(u_adm.obuf[base + p*NB_ + n]) !== y) begin
            failures++;
            if (failures < 10) $display("B mismatch p=%0d n=%0d got %0d exp %0d", p, n, byte'(u_adm.obuf[base + p*NB_ + n]), y);
          end
        end
  endtask

  layer_cfg_t ca, cb;
  initial begin
    rng = SEED; checks = 0; failures = 0; finished = 1'b0; stall = 1'b0;
    cfg_valid = 0; cfg = '0; wl_valid = 0; wl_cmd = '0; prm_tvalid = 0; prm_tdata = '0;
    ra_tvalid = 0; ra_tdata = '0;
    for (int n = 0; n < NA; n++) begin ba[n] = rnd8(); for (int m = 0; m < MA; m++) wa[n][m] = rnd8(); end
    for (int n = 0; n < NB_; n++) begin bb[n] = rnd8(); for (int m = 0; m < MB; m++) wb[n][m] = rnd8(); end
    for (int m = 0; m < MA; m++) for (int p = 0; p < PA; p++) xa[m][p] = rnd8();
    for (int h = 0; h < HI; h++) for (int w = 0; w < WI; w++) for (int c = 0; c < CI; c++) ifm[h][w][c] = rnd8();
    for (int i = 0; i < PB*NB_; i++) res[i] = rnd8();
    for (int i = 0; i < 4096; i++) u_adm.mem[i] = 8'd0;
    for (int p = 0; p < PA; p++) for (int m = 0; m < MA; m++) u_adm.mem[IN_A + p*MA + m] = xa[m][p];
    for (int h = 0; h < HI; h++) for (int w = 0; w < WI; w++) for (int c = 0; c < CI; c++)
      u_adm.mem[IN_B + (h*WI + w)*CI + c] = ifm[h][w][c];

    ca = '0; ca.im2col = 1'b0; ca.in_base = IN_A; ca.zero_base = ZERO; ca.m_bytes = MA; ca.p_cols = PA;
    ca.b_w = BA; ca.w_base = 0; ca.out_shift = W_A_SH; ca.bias_shift = 2; ca.relu1 = 1'b1;
    cb = '0; cb.im2col = 1'b1; cb.in_base = IN_B; cb.zero_base = ZERO; cb.m_bytes = MB; cb.p_cols = PB;
    cb.b_w = BB; cb.w_base = WBASE_B; cb.hi = HI; cb.wi = WI; cb.ci = CI; cb.ho = HO; cb.wo = WO;
    cb.k = KK; cb.s = 1; cb.pad = 1; cb.out_shift = W_B_SH; cb.bias_shift = 3; cb.res_en = 1'b1; cb.relu2 = 1'b1;

    wait (rst_n === 1'b1);
    repeat (4) @(posedge clk);
    u_adm.clear();
    load_layer(1'b0);
    send_cfg(ca);
    fork
      load_layer(1'b1);                        // next layer's weights during layer A
      begin                                    // output backpressure bursts
        for (int i = 0; i < 40; i++) begin
          repeat (7) @(negedge clk); stall = 1'b1;
          repeat (5) @(negedge clk); stall = 1'b0;
        end
      end
      begin @(posedge clk iff done); end
    join
    check_a();
    fork
      send_cfg(cb);
      send_res();
      begin @(posedge clk iff done); end
    join
    repeat (4) @(posedge clk);
    check_b(PA * NA);
    finished = 1'b1;
  end
endmodule
