// pf_relu -- profiled ReLU layer on a pixel stream.
//
// Each input word is one pixel of CH channels (DATA_W-bit two's complement);
// each output word is max(0, x) channel by channel. One pixel moves per cycle
// when the input FIFO holds a word and the output FIFO has room. An inference
// is N_PIX pixels. While it runs, the size tap of the input FIFO (in_size) is
// sampled at every read and its maximum kept; with the last pixel, in the
// same cycle, the layer reads its profile input word (N_PF_IN elements) and
// writes it out with that maximum appended. The last pixel therefore waits
// until the profile input holds a word and the profile output has room.
// The element-wise ReLU is the standard function; the one-pixel-per-cycle
// schedule and the joint last-pixel/profile write are this design's reading
// of how the generated layer behaves.
module pf_relu #(
  parameter int unsigned N_PIX   = 36,
  parameter int unsigned CH      = 2,
  parameter int unsigned DATA_W  = spring_pkg::DATA_W,
  parameter int unsigned PF_W    = spring_pkg::PF_W,
  parameter int unsigned N_PF_IN = 1,
  parameter int unsigned SIZE_W  = 5
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [CH*DATA_W-1:0]        in_dout,
  input  logic                        in_empty_n,
  output logic                        in_read,
  input  logic [SIZE_W-1:0]           in_size,
  output logic [CH*DATA_W-1:0]        out_din,
  input  logic                        out_full_n,
  output logic                        out_write,
  input  logic [N_PF_IN*PF_W-1:0]     pf_in_dout,
  input  logic                        pf_in_empty_n,
  output logic                        pf_in_read,
  output logic [(N_PF_IN+1)*PF_W-1:0] pf_out_din,
  input  logic                        pf_out_full_n,
  output logic                        pf_out_write
);
  localparam int unsigned CW = (N_PIX > 1) ? $clog2(N_PIX) : 1;

  logic [CW-1:0]   cnt;
  logic            last, fire, pf_ready, unused_b_read;
  logic [PF_W-1:0] max_depth;

  assign last      = (cnt == CW'(N_PIX - 1));
  assign fire      = in_empty_n & out_full_n & (~last | pf_ready);
  assign in_read   = fire;
  assign out_write = fire;

  always_comb begin
    for (int c = 0; c < CH; c++) begin
      logic signed [DATA_W-1:0] x;
      x = in_dout[c*DATA_W +: DATA_W];
      out_din[c*DATA_W +: DATA_W] = (x < 0) ? '0 : x;
    end
  end

  always_ff @(posedge clk) begin
    if (rst)             cnt <= '0;
    else if (fire)       cnt <= last ? '0 : cnt + 1'b1;
  end

  depth_monitor #(.SIZE_W(SIZE_W), .PF_W(PF_W)) u_mon (
    .clk, .rst, .rd(in_read), .size(in_size), .clear(fire & last), .max_now(max_depth));

  pf_stage #(.PF_W(PF_W), .N_A(N_PF_IN), .N_B(0), .N_NEW(1)) u_pf (
    .pf_a_dout(pf_in_dout), .pf_a_empty_n(pf_in_empty_n), .pf_a_read(pf_in_read),
    .pf_b_dout('0), .pf_b_empty_n(1'b0), .pf_b_read(unused_b_read),
    .pf_out_din, .pf_out_full_n, .pf_out_write,
    .new_vals(max_depth), .ready(pf_ready), .commit(fire & last));
endmodule
