// pf_clone -- profiled clone layer: the split point of the data and profile
// streams.
//
// Every input pixel is written to both outputs in the same cycle (the layer
// moves one pixel per cycle when the input holds a word and both outputs have
// room). For the profile stream the split is asymmetric: with the last pixel
// of an inference, the incoming profile word plus this layer's own input-FIFO
// maximum goes to profile output 1, and profile output 2 receives a single
// placeholder element, so that the branch behind output 2 has a profile word
// to extend. The split policy is the one the profiling method prescribes; the
// placeholder value (all ones, a value no depth takes) is this design's own.
module pf_clone #(
  parameter int unsigned     N_PIX       = 36,
  parameter int unsigned     CH          = 2,
  parameter int unsigned     DATA_W      = spring_pkg::DATA_W,
  parameter int unsigned     PF_W        = spring_pkg::PF_W,
  parameter int unsigned     N_PF_IN     = 1,
  parameter int unsigned     SIZE_W      = 5,
  parameter logic [PF_W-1:0] PLACEHOLDER = '1
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [CH*DATA_W-1:0]        in_dout,
  input  logic                        in_empty_n,
  output logic                        in_read,
  input  logic [SIZE_W-1:0]           in_size,
  output logic [CH*DATA_W-1:0]        out1_din,
  input  logic                        out1_full_n,
  output logic                        out1_write,
  output logic [CH*DATA_W-1:0]        out2_din,
  input  logic                        out2_full_n,
  output logic                        out2_write,
  input  logic [N_PF_IN*PF_W-1:0]     pf_in_dout,
  input  logic                        pf_in_empty_n,
  output logic                        pf_in_read,
  output logic [(N_PF_IN+1)*PF_W-1:0] pf_out1_din,
  input  logic                        pf_out1_full_n,
  output logic                        pf_out1_write,
  output logic [PF_W-1:0]             pf_out2_din,
  input  logic                        pf_out2_full_n,
  output logic                        pf_out2_write
);
  localparam int unsigned CW = (N_PIX > 1) ? $clog2(N_PIX) : 1;

  logic [CW-1:0]   cnt;
  logic            last, fire, pf_ready, commit, unused_b_read;
  logic [PF_W-1:0] max_depth;

  assign last       = (cnt == CW'(N_PIX - 1));
  assign fire       = in_empty_n & out1_full_n & out2_full_n & (~last | (pf_ready & pf_out2_full_n));
  assign commit     = fire & last;
  assign in_read    = fire;
  assign out1_write = fire;
  assign out2_write = fire;
  assign out1_din   = in_dout;
  assign out2_din   = in_dout;

  assign pf_out2_din   = PLACEHOLDER;
  assign pf_out2_write = commit;

  always_ff @(posedge clk) begin
    if (rst)       cnt <= '0;
    else if (fire) cnt <= last ? '0 : cnt + 1'b1;
  end

  depth_monitor #(.SIZE_W(SIZE_W), .PF_W(PF_W)) u_mon (
    .clk, .rst, .rd(in_read), .size(in_size), .clear(commit), .max_now(max_depth));

  pf_stage #(.PF_W(PF_W), .N_A(N_PF_IN), .N_B(0), .N_NEW(1)) u_pf (
    .pf_a_dout(pf_in_dout), .pf_a_empty_n(pf_in_empty_n), .pf_a_read(pf_in_read),
    .pf_b_dout('0), .pf_b_empty_n(1'b0), .pf_b_read(unused_b_read),
    .pf_out_din(pf_out1_din), .pf_out_full_n(pf_out1_full_n), .pf_out_write(pf_out1_write),
    .new_vals(max_depth), .ready(pf_ready), .commit(commit));
endmodule
