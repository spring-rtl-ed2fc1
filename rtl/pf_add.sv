// pf_add -- profiled Add layer: the merge point of two data streams and of
// their profile streams.
//
// One output pixel per cycle is the channel-wise sum of one pixel from input
// a and one from input b, saturated to DATA_W bits; it moves when both input
// FIFOs hold a word and the output has room. The size taps of both input FIFOs
// is sampled at every read and two maxima kept. With the last pixel of an
// inference, one profile word is read from each profile input and the merged
// word is written: the N_PF_A elements of input a first, then the N_PF_B
// elements of input b, then the depth of FIFO a, then that of FIFO b.
// Element order follows the method's merge rule (first input first); the
// saturating sum is this design's choice of overflow handling.
module pf_add #(
  parameter int unsigned N_PIX  = 36,
  parameter int unsigned CH     = 2,
  parameter int unsigned DATA_W = spring_pkg::DATA_W,
  parameter int unsigned PF_W   = spring_pkg::PF_W,
  parameter int unsigned N_PF_A = 1,
  parameter int unsigned N_PF_B = 1,
  parameter int unsigned SIZE_W = 5
) (
  input  logic                               clk,
  input  logic                               rst,
  input  logic [CH*DATA_W-1:0]               a_dout,
  input  logic                               a_empty_n,
  output logic                               a_read,
  input  logic [SIZE_W-1:0]                  a_size,
  input  logic [CH*DATA_W-1:0]               b_dout,
  input  logic                               b_empty_n,
  output logic                               b_read,
  input  logic [SIZE_W-1:0]                  b_size,
  output logic [CH*DATA_W-1:0]               out_din,
  input  logic                               out_full_n,
  output logic                               out_write,
  input  logic [N_PF_A*PF_W-1:0]             pf_a_dout,
  input  logic                               pf_a_empty_n,
  output logic                               pf_a_read,
  input  logic [N_PF_B*PF_W-1:0]             pf_b_dout,
  input  logic                               pf_b_empty_n,
  output logic                               pf_b_read,
  output logic [(N_PF_A+N_PF_B+2)*PF_W-1:0]  pf_out_din,
  input  logic                               pf_out_full_n,
  output logic                               pf_out_write
);
  localparam int unsigned CW = (N_PIX > 1) ? $clog2(N_PIX) : 1;

  logic [CW-1:0]   cnt;
  logic            last, fire, pf_ready, commit;
  logic [PF_W-1:0] max_a, max_b;

  assign last      = (cnt == CW'(N_PIX - 1));
  assign fire      = a_empty_n & b_empty_n & out_full_n & (~last | pf_ready);
  assign commit    = fire & last;
  assign a_read    = fire;
  assign b_read    = fire;
  assign out_write = fire;

  always_comb begin
    for (int c = 0; c < CH; c++) begin
      logic signed [DATA_W-1:0] xa, xb;
      xa = a_dout[c*DATA_W +: DATA_W];
      xb = b_dout[c*DATA_W +: DATA_W];
      out_din[c*DATA_W +: DATA_W] = DATA_W'(spring_pkg::sat(int'(xa) + int'(xb), DATA_W));
    end
  end

  always_ff @(posedge clk) begin
    if (rst)       cnt <= '0;
    else if (fire) cnt <= last ? '0 : cnt + 1'b1;
  end

  depth_monitor #(.SIZE_W(SIZE_W), .PF_W(PF_W)) u_mon_a (
    .clk, .rst, .rd(a_read), .size(a_size), .clear(commit), .max_now(max_a));
  depth_monitor #(.SIZE_W(SIZE_W), .PF_W(PF_W)) u_mon_b (
    .clk, .rst, .rd(b_read), .size(b_size), .clear(commit), .max_now(max_b));

  pf_stage #(.PF_W(PF_W), .N_A(N_PF_A), .N_B(N_PF_B), .N_NEW(2)) u_pf (
    .pf_a_dout, .pf_a_empty_n, .pf_a_read,
    .pf_b_dout, .pf_b_empty_n, .pf_b_read,
    .pf_out_din, .pf_out_full_n, .pf_out_write,
    .new_vals({max_b, max_a}), .ready(pf_ready), .commit);
endmodule
