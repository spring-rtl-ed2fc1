// pf_dense -- profiled Dense (fully connected) layer.
//
// One input word carries the whole vector of N_IN elements and one output
// word the N_OUT results, so a Dense layer moves a single word per inference.
// y[o] = act( sum_i x[i] * w[o][i] ), with x, w and y in ap_fixed<DATA_W,
// DATA_W-DATA_F>; products are summed exactly, then truncated and saturated
// (ACT_LINEAR) or passed through a hard sigmoid clamp(x/4 + 1/2) (ACT_SIGMOID,
// the network's output layer). Weights are w[o][i] =
// spring_pkg::weight_raw(SEED, o*N_IN + i, DATA_W); biases are zero.
//
// Reuse factor: the N_IN*N_OUT products are spread over REUSE cycles on
// ceil(N_IN*N_OUT/REUSE) multipliers; in phase ph, lane l computes product
// m = l*REUSE + ph (output o = m / N_IN, input i = m % N_IN, which is also
// the weight index), accumulated per output.
//
// Timing: the input word is popped and registered (the size tap of the input
// FIFO is sampled then); the REUSE phases follow, one per cycle, and during
// the last one the result is offered and written together with the profile
// word (incoming elements plus this layer's input-FIFO maximum) as soon as
// the output and profile output have room and a profile word is waiting.
// So the output leaves REUSE cycles after the read at the earliest. At most
// one inference is in the layer at a time.
// The computation is the standard one and the reuse factor the hls4ml notion
// of multiplier sharing; the weights, the hard sigmoid and the lane
// assignment are this design's own.
module pf_dense #(
  parameter int unsigned       N_IN    = 16,
  parameter int unsigned       N_OUT   = 36,
  parameter spring_pkg::act_e  ACT     = spring_pkg::ACT_LINEAR,
  parameter int unsigned       REUSE   = 1,
  parameter int unsigned       SEED    = 1,
  parameter int unsigned       DATA_W  = spring_pkg::DATA_W,
  parameter int unsigned       DATA_F  = spring_pkg::DATA_F,
  parameter int unsigned       PF_W    = spring_pkg::PF_W,
  parameter int unsigned       N_PF_IN = 1,
  parameter int unsigned       SIZE_W  = 2
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [N_IN*DATA_W-1:0]      in_dout,
  input  logic                        in_empty_n,
  output logic                        in_read,
  input  logic [SIZE_W-1:0]           in_size,
  output logic [N_OUT*DATA_W-1:0]     out_din,
  input  logic                        out_full_n,
  output logic                        out_write,
  input  logic [N_PF_IN*PF_W-1:0]     pf_in_dout,
  input  logic                        pf_in_empty_n,
  output logic                        pf_in_read,
  output logic [(N_PF_IN+1)*PF_W-1:0] pf_out_din,
  input  logic                        pf_out_full_n,
  output logic                        pf_out_write
);
  localparam int unsigned N_MAC = N_IN * N_OUT;
  localparam int unsigned LANES = (N_MAC + REUSE - 1) / REUSE;
  localparam int unsigned PHW   = (REUSE > 1) ? $clog2(REUSE) : 1;
  localparam int unsigned ACC_W = 2 * DATA_W + $clog2(N_IN + 1) + 1;

  logic [N_IN*DATA_W-1:0]  x_q;
  logic                    busy, final_ph, pf_ready, commit, unused_b_read;
  logic [PHW-1:0]          ph;
  logic signed [ACC_W-1:0] acc_q [N_OUT];
  logic signed [ACC_W-1:0] acc_n [N_OUT];
  logic [PF_W-1:0]         max_depth;

  assign final_ph  = (ph == PHW'(REUSE - 1));
  assign in_read   = ~busy & in_empty_n;
  assign commit    = busy & final_ph & out_full_n & pf_ready;
  assign out_write = commit;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      ph   <= '0;
    end else if (in_read) begin
      busy <= 1'b1;
      ph   <= '0;
    end else if (busy) begin
      if (commit) begin
        busy <= 1'b0;
        ph   <= '0;
      end else if (!final_ph) begin
        ph <= ph + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_read) x_q <= in_dout;
  end

  always_ff @(posedge clk) begin
    if (busy && !final_ph) for (int o = 0; o < N_OUT; o++) acc_q[o] <= acc_n[o];
  end

  always_comb begin
    logic signed [DATA_W-1:0] xi;
    int m;
    int o;
    int i;
    xi = '0;
    m  = 0;
    o  = 0;
    i  = 0;
    for (int oo = 0; oo < N_OUT; oo++) acc_n[oo] = (ph == '0) ? '0 : acc_q[oo];
    for (int l = 0; l < LANES; l++) begin
      m = l * REUSE + int'(ph);
      if (m < N_MAC) begin
        o  = m / N_IN;
        i  = m % N_IN;
        xi = x_q[i*DATA_W +: DATA_W];
        acc_n[o] = acc_n[o] + ACC_W'(int'(xi) * spring_pkg::weight_raw(SEED, m, DATA_W));
      end
    end
  end

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      logic [31:0] y;
      if (ACT == spring_pkg::ACT_SIGMOID) y = spring_pkg::hard_sigmoid(longint'(acc_n[o]), DATA_F, DATA_W);
      else                                y = spring_pkg::requant(longint'(acc_n[o]), DATA_F, DATA_W);
      out_din[o*DATA_W +: DATA_W] = y[DATA_W-1:0];
    end
  end

  depth_monitor #(.SIZE_W(SIZE_W), .PF_W(PF_W)) u_mon (
    .clk, .rst, .rd(in_read), .size(in_size), .clear(commit), .max_now(max_depth));

  pf_stage #(.PF_W(PF_W), .N_A(N_PF_IN), .N_B(0), .N_NEW(1)) u_pf (
    .pf_a_dout(pf_in_dout), .pf_a_empty_n(pf_in_empty_n), .pf_a_read(pf_in_read),
    .pf_b_dout('0), .pf_b_empty_n(1'b0), .pf_b_read(unused_b_read),
    .pf_out_din, .pf_out_full_n, .pf_out_write,
    .new_vals(max_depth), .ready(pf_ready), .commit);
endmodule
