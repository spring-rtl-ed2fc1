// pf_conv2d -- profiled 2-D convolution, stride 1, 'same' padding.
//
// Input: a raster-order stream of H*W pixels of C_IN channels, one pixel per
// word. Output: H*W pixels of C_OUT channels,
//   y[r][c][o] = sat( sum_{kr,kc,i} x[r-PT+kr][c-PT+kc][i] * w[o][i][kr][kc] )
// with PT = (K-1)/2 rows/columns of zero padding before and K-1-PT after
// (the Keras convention, which also covers even K). Weights are
// spring_pkg::weight_raw(SEED, ((o*C_IN+i)*K+kr)*K+kc, DATA_W), biases zero,
// no activation; arithmetic as in pf_dense.
//
// Structure: input pixels are stored in a frame buffer as they arrive (one
// per cycle while the frame is incomplete). Output pixel (r,c) is computed as
// soon as the last input pixel it depends on, (min(r+PB,H-1),
// min(c+PB,W-1)) with PB = K-1-PT, has been stored, so the layer runs PB rows
// and PB+1 pixels behind its input like a line-buffer convolution.
//
// Reuse factor: the N_MAC = K*K*C_IN*C_OUT products of one output pixel are
// spread over REUSE cycles on LANES = ceil(N_MAC/REUSE) multipliers; in phase
// ph, lane l handles product m = l*REUSE + ph, where m is also the weight
// index above. Partial sums are kept in one accumulator per output channel.
// After the last phase the pixel goes to a one-word result register, from
// which it is written while the next pixel is being computed. So one pixel
// leaves every REUSE cycles at best, with one cycle of latency. REUSE = 1
// gives one pixel per cycle.
//
// The next frame is accepted once the last output pixel of the current one
// has been written; that last pixel is written together with the profile
// word, which carries this layer's input-FIFO maximum.
// The function is the standard convolution and the reuse factor is the
// hls4ml notion of multiplier sharing; the frame buffer schedule, the lane
// assignment and the weights are this design's own.
module pf_conv2d #(
  parameter int unsigned H       = 6,
  parameter int unsigned W       = 6,
  parameter int unsigned C_IN    = 1,
  parameter int unsigned C_OUT   = 2,
  parameter int unsigned K       = 3,
  parameter int unsigned REUSE   = 1,
  parameter int unsigned SEED    = 2,
  parameter int unsigned DATA_W  = spring_pkg::DATA_W,
  parameter int unsigned DATA_F  = spring_pkg::DATA_F,
  parameter int unsigned PF_W    = spring_pkg::PF_W,
  parameter int unsigned N_PF_IN = 1,
  parameter int unsigned SIZE_W  = 7
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [C_IN*DATA_W-1:0]      in_dout,
  input  logic                        in_empty_n,
  output logic                        in_read,
  input  logic [SIZE_W-1:0]           in_size,
  output logic [C_OUT*DATA_W-1:0]     out_din,
  input  logic                        out_full_n,
  output logic                        out_write,
  input  logic [N_PF_IN*PF_W-1:0]     pf_in_dout,
  input  logic                        pf_in_empty_n,
  output logic                        pf_in_read,
  output logic [(N_PF_IN+1)*PF_W-1:0] pf_out_din,
  input  logic                        pf_out_full_n,
  output logic                        pf_out_write
);
  localparam int unsigned NPIX  = H * W;
  localparam int unsigned PT    = (K - 1) / 2;
  localparam int unsigned PB    = K - 1 - PT;
  localparam int unsigned CW    = $clog2(NPIX + 1);
  localparam int unsigned RW    = (H > 1) ? $clog2(H) : 1;
  localparam int unsigned XW    = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned N_MAC = K * K * C_IN * C_OUT;
  localparam int unsigned LANES = (N_MAC + REUSE - 1) / REUSE;
  localparam int unsigned PHW   = (REUSE > 1) ? $clog2(REUSE) : 1;
  localparam int unsigned ACC_W = 2 * DATA_W + $clog2(K * K * C_IN + 1) + 1;

  logic [C_IN*DATA_W-1:0]    fbuf [NPIX];
  logic [CW-1:0]             in_cnt;
  logic [RW-1:0]             r;          // pixel being computed
  logic [XW-1:0]             c;
  logic [PHW-1:0]            ph;
  logic                      calc_done;  // every pixel of the frame computed
  logic signed [ACC_W-1:0]   acc_q [C_OUT];
  logic signed [ACC_W-1:0]   acc_n [C_OUT];
  logic [C_OUT*DATA_W-1:0]   res_q;
  logic                      res_valid, res_last;
  logic                      calc_last, final_ph, avail, calc_en, fire, commit, pf_ready, unused_b_read;
  logic [PF_W-1:0]           max_depth;
  int                        need;

  always_comb begin
    int nr;
    int nc;
    nr   = (int'(r) + int'(PB) > int'(H) - 1) ? int'(H) - 1 : int'(r) + int'(PB);
    nc   = (int'(c) + int'(PB) > int'(W) - 1) ? int'(W) - 1 : int'(c) + int'(PB);
    need = nr * int'(W) + nc;
  end

  assign calc_last = (r == RW'(H - 1)) && (c == XW'(W - 1));
  assign final_ph  = (ph == PHW'(REUSE - 1));
  assign avail     = ~calc_done && (int'(in_cnt) > need);
  assign fire      = res_valid & out_full_n & (~res_last | pf_ready);
  assign calc_en   = avail & (~final_ph | ~res_valid | fire);
  assign commit    = fire & res_last;
  assign in_read   = in_empty_n & (in_cnt < CW'(NPIX));
  assign out_write = fire;
  assign out_din   = res_q;

  always_ff @(posedge clk) begin
    if (in_read) fbuf[in_cnt] <= in_dout;
  end

  // Partial sums of the current phase.
  always_comb begin
    logic signed [DATA_W-1:0] xi;
    int m;
    int o;
    int i;
    int kr;
    int kc;
    int ir;
    int ic;
    xi = '0;
    m  = 0;
    o  = 0;
    i  = 0;
    kr = 0;
    kc = 0;
    ir = 0;
    ic = 0;
    for (int oo = 0; oo < C_OUT; oo++) acc_n[oo] = (ph == '0) ? '0 : acc_q[oo];
    for (int l = 0; l < LANES; l++) begin
      m = l * REUSE + int'(ph);
      if (m < N_MAC) begin
        kc = m % K;
        kr = (m / K) % K;
        i  = (m / (K * K)) % C_IN;
        o  = m / (K * K * C_IN);
        ir = int'(r) - int'(PT) + kr;
        ic = int'(c) - int'(PT) + kc;
        if (ir >= 0 && ir < int'(H) && ic >= 0 && ic < int'(W)) begin
          xi = fbuf[ir*W + ic][i*DATA_W +: DATA_W];
          acc_n[o] = acc_n[o] + ACC_W'(int'(xi) * spring_pkg::weight_raw(SEED, m, DATA_W));
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      in_cnt    <= '0;
      r         <= '0;
      c         <= '0;
      ph        <= '0;
      calc_done <= 1'b0;
      res_valid <= 1'b0;
      res_last  <= 1'b0;
    end else begin
      if (commit)       in_cnt <= '0;
      else if (in_read) in_cnt <= in_cnt + 1'b1;
      if (fire) res_valid <= 1'b0;
      if (commit) calc_done <= 1'b0;
      if (calc_en) begin
        if (final_ph) begin
          ph        <= '0;
          res_valid <= 1'b1;
          res_last  <= calc_last;
          for (int oo = 0; oo < C_OUT; oo++)
            res_q[oo*DATA_W +: DATA_W] <= DATA_W'(spring_pkg::requant(longint'(acc_n[oo]), DATA_F, DATA_W));
          if (c == XW'(W - 1)) begin
            c <= '0;
            if (calc_last) begin
              r         <= '0;
              calc_done <= 1'b1;
            end else begin
              r <= r + 1'b1;
            end
          end else begin
            c <= c + 1'b1;
          end
        end else begin
          ph <= ph + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (calc_en) for (int oo = 0; oo < C_OUT; oo++) acc_q[oo] <= acc_n[oo];
  end

  depth_monitor #(.SIZE_W(SIZE_W), .PF_W(PF_W)) u_mon (
    .clk, .rst, .rd(in_read), .size(in_size), .clear(commit), .max_now(max_depth));

  pf_stage #(.PF_W(PF_W), .N_A(N_PF_IN), .N_B(0), .N_NEW(1)) u_pf (
    .pf_a_dout(pf_in_dout), .pf_a_empty_n(pf_in_empty_n), .pf_a_read(pf_in_read),
    .pf_b_dout('0), .pf_b_empty_n(1'b0), .pf_b_read(unused_b_read),
    .pf_out_din, .pf_out_full_n, .pf_out_write,
    .new_vals(max_depth), .ready(pf_ready), .commit);
endmodule
