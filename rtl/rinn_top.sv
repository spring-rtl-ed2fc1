// rinn_top -- a profiled RINN streaming core: the data stream and, beside it,
// a profile stream that collects the maximum fill of every layer-input FIFO.
//
// Data path (FIFO depths in brackets; one word per vector or per pixel):
//
//   data_in -[D]- dense_in 16->X*X -[1]- reshape (X,X,1) -[C]- conv1 1->F
//     -[L]- clone --o1--[C]- conv2 F->F -[R]- relu -[A]- add.a
//                 \-o2------------------------------[A]- add.b
//   add -[C]- conv3 F->F -[16]- flatten -[D]- dense_out X*X*F->5 (sigmoid)
//     -[2]- data_out
//
// with D = DEPTH_DENSE, C = DEPTH_CONV, L = DEPTH_CLONE, R = DEPTH_RELU and
// A = DEPTH_ADD, the depths a layer of that type gets for its input FIFO.
// The graph has one split and one merge, the two cases the profile stream
// has to follow; a generated RINN has many of both but no new kinds.
//
// Profile path: one word per inference. It enters with one element at
// pf_in, and every profiled layer (dense, conv, clone, relu, add) pops the
// word of its predecessor and pushes it with its own input-FIFO maxima
// appended. The clone passes the word on along o1 and starts a fresh
// one-element word (a placeholder) along o2; the add joins the two. The
// 11 elements of pf_out_dout, element 0 in the low bits, are:
//   0 pf_in element          1 dense_in  FIFO max     2 conv1 FIFO max
//   3 clone FIFO max         4 conv2 FIFO max         5 relu FIFO max
//   6 placeholder (all ones) 7 add.a FIFO max         8 add.b FIFO max
//   9 conv3 FIFO max        10 dense_out FIFO max
// A FIFO max is the largest size-tap value seen at a read in that inference,
// that is the occupancy at the moment the layer took a word.
//
// Parameters beyond the sizes: REUSE_CONV / REUSE_DENSE are the reuse
// factors of the convolutions and dense layers (1 = fully parallel), DW/DF
// the data format ap_fixed<DW, DW-DF>, PW the profile element width.
//
// Interface: the two input streams are FIFO write ports (din/write/full_n),
// the two output streams FIFO read ports (dout/read/empty_n). Reset is
// synchronous and active high. The layer set, number formats and FIFO depths
// follow the evaluated configuration; the graph and the depths of the
// vector, flatten and profile FIFOs are this design's own.
module rinn_top #(
  parameter int unsigned IN_N        = 16,
  parameter int unsigned OUT_N       = 5,
  parameter int unsigned X           = 6,
  parameter int unsigned K           = 3,
  parameter int unsigned F           = 2,
  parameter int unsigned DEPTH_DENSE = 1,
  parameter int unsigned DEPTH_CONV  = 36,
  parameter int unsigned DEPTH_CLONE = 16,
  parameter int unsigned DEPTH_RELU  = 16,
  parameter int unsigned DEPTH_ADD   = 16,
  parameter int unsigned DEPTH_FLAT  = 16,
  parameter int unsigned DEPTH_PF    = 2,
  parameter int unsigned REUSE_CONV  = 1,
  parameter int unsigned REUSE_DENSE = 1,
  parameter int unsigned DW          = spring_pkg::DATA_W,
  parameter int unsigned DF          = spring_pkg::DATA_F,
  parameter int unsigned PW          = spring_pkg::PF_W,
  localparam int unsigned N_PF_OUT   = 11
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [IN_N*DW-1:0]     data_in_din,
  input  logic                   data_in_write,
  output logic                   data_in_full_n,
  input  logic [PW-1:0]          pf_in_din,
  input  logic                   pf_in_write,
  output logic                   pf_in_full_n,
  output logic [OUT_N*DW-1:0]    data_out_dout,
  input  logic                   data_out_read,
  output logic                   data_out_empty_n,
  output logic [N_PF_OUT*PW-1:0] pf_out_dout,
  input  logic                   pf_out_read,
  output logic                   pf_out_empty_n
);
  localparam int unsigned NPIX = X * X;
  localparam int unsigned SW_D = ((DEPTH_DENSE > 1) ? $clog2(DEPTH_DENSE) : 1) + 1;
  localparam int unsigned SW_C = ((DEPTH_CONV  > 1) ? $clog2(DEPTH_CONV)  : 1) + 1;
  localparam int unsigned SW_L = ((DEPTH_CLONE > 1) ? $clog2(DEPTH_CLONE) : 1) + 1;
  localparam int unsigned SW_R = ((DEPTH_RELU  > 1) ? $clog2(DEPTH_RELU)  : 1) + 1;
  localparam int unsigned SW_A = ((DEPTH_ADD   > 1) ? $clog2(DEPTH_ADD)   : 1) + 1;
  localparam int unsigned SW_F = ((DEPTH_FLAT  > 1) ? $clog2(DEPTH_FLAT)  : 1) + 1;
  localparam int unsigned SW_P = ((DEPTH_PF    > 1) ? $clog2(DEPTH_PF)    : 1) + 1;

  // ---------------------------------------------------------------- data FIFOs
  // Naming: <fifo>_din/_write/_full_n (producer side), <fifo>_dout/_read/
  // _empty_n/_size (consumer side).
  logic [IN_N*DW-1:0]   fin_dout;                 logic fin_read, fin_empty_n;   logic [SW_D-1:0] fin_size;
  logic [NPIX*DW-1:0]   fd1_din, fd1_dout;        logic fd1_write, fd1_full_n, fd1_read, fd1_empty_n;
  logic [DW-1:0]        frs_din, frs_dout;        logic frs_write, frs_full_n, frs_read, frs_empty_n; logic [SW_C-1:0] frs_size;
  logic [F*DW-1:0]      fc1_din, fc1_dout;        logic fc1_write, fc1_full_n, fc1_read, fc1_empty_n; logic [SW_L-1:0] fc1_size;
  logic [F*DW-1:0]      fo1_din, fo1_dout;        logic fo1_write, fo1_full_n, fo1_read, fo1_empty_n; logic [SW_C-1:0] fo1_size;
  logic [F*DW-1:0]      fc2_din, fc2_dout;        logic fc2_write, fc2_full_n, fc2_read, fc2_empty_n; logic [SW_R-1:0] fc2_size;
  logic [F*DW-1:0]      frl_din, frl_dout;        logic frl_write, frl_full_n, frl_read, frl_empty_n; logic [SW_A-1:0] frl_size;
  logic [F*DW-1:0]      fsk_din, fsk_dout;        logic fsk_write, fsk_full_n, fsk_read, fsk_empty_n; logic [SW_A-1:0] fsk_size;
  logic [F*DW-1:0]      fad_din, fad_dout;        logic fad_write, fad_full_n, fad_read, fad_empty_n; logic [SW_C-1:0] fad_size;
  logic [F*DW-1:0]      fc3_din, fc3_dout;        logic fc3_write, fc3_full_n, fc3_read, fc3_empty_n;
  logic [NPIX*F*DW-1:0] ffl_din, ffl_dout;        logic ffl_write, ffl_full_n, ffl_read, ffl_empty_n; logic [SW_D-1:0] ffl_size;
  logic [OUT_N*DW-1:0]  fout_din;                 logic fout_write, fout_full_n;

  // ------------------------------------------------------------- profile FIFOs
  logic [1*PW-1:0]  pin_dout;               logic pin_read, pin_empty_n;
  logic [2*PW-1:0]  p0_din, p0_dout;        logic p0_write, p0_full_n, p0_read, p0_empty_n;
  logic [3*PW-1:0]  p1_din, p1_dout;        logic p1_write, p1_full_n, p1_read, p1_empty_n;
  logic [4*PW-1:0]  p2_din, p2_dout;        logic p2_write, p2_full_n, p2_read, p2_empty_n;
  logic [1*PW-1:0]  p3_din, p3_dout;        logic p3_write, p3_full_n, p3_read, p3_empty_n;
  logic [5*PW-1:0]  p4_din, p4_dout;        logic p4_write, p4_full_n, p4_read, p4_empty_n;
  logic [6*PW-1:0]  p5_din, p5_dout;        logic p5_write, p5_full_n, p5_read, p5_empty_n;
  logic [9*PW-1:0]  p6_din, p6_dout;        logic p6_write, p6_full_n, p6_read, p6_empty_n;
  logic [10*PW-1:0] p7_din, p7_dout;        logic p7_write, p7_full_n, p7_read, p7_empty_n;
  logic [11*PW-1:0] pout_din;               logic pout_write, pout_full_n;

  // Sizes of FIFOs whose consumer is not profiled are left unread.
  logic [1:0]      unused_fd1_size, unused_fout_size;
  logic [SW_F-1:0] unused_fc3_size;
  logic [SW_P-1:0] unused_psize [11];

  // ------------------------------------------------------------ data channels
  stream_fifo #(.DATA_W(IN_N*DW),   .DEPTH(DEPTH_DENSE)) u_fin (.clk, .rst,
    .if_din(data_in_din), .if_write(data_in_write), .if_full_n(data_in_full_n),
    .if_dout(fin_dout), .if_read(fin_read), .if_empty_n(fin_empty_n), .size(fin_size));
  stream_fifo #(.DATA_W(NPIX*DW),   .DEPTH(1)) u_fd1 (.clk, .rst,
    .if_din(fd1_din), .if_write(fd1_write), .if_full_n(fd1_full_n),
    .if_dout(fd1_dout), .if_read(fd1_read), .if_empty_n(fd1_empty_n), .size(unused_fd1_size));
  stream_fifo #(.DATA_W(DW),        .DEPTH(DEPTH_CONV)) u_frs (.clk, .rst,
    .if_din(frs_din), .if_write(frs_write), .if_full_n(frs_full_n),
    .if_dout(frs_dout), .if_read(frs_read), .if_empty_n(frs_empty_n), .size(frs_size));
  stream_fifo #(.DATA_W(F*DW),      .DEPTH(DEPTH_CLONE)) u_fc1 (.clk, .rst,
    .if_din(fc1_din), .if_write(fc1_write), .if_full_n(fc1_full_n),
    .if_dout(fc1_dout), .if_read(fc1_read), .if_empty_n(fc1_empty_n), .size(fc1_size));
  stream_fifo #(.DATA_W(F*DW),      .DEPTH(DEPTH_CONV)) u_fo1 (.clk, .rst,
    .if_din(fo1_din), .if_write(fo1_write), .if_full_n(fo1_full_n),
    .if_dout(fo1_dout), .if_read(fo1_read), .if_empty_n(fo1_empty_n), .size(fo1_size));
  stream_fifo #(.DATA_W(F*DW),      .DEPTH(DEPTH_RELU)) u_fc2 (.clk, .rst,
    .if_din(fc2_din), .if_write(fc2_write), .if_full_n(fc2_full_n),
    .if_dout(fc2_dout), .if_read(fc2_read), .if_empty_n(fc2_empty_n), .size(fc2_size));
  stream_fifo #(.DATA_W(F*DW),      .DEPTH(DEPTH_ADD)) u_frl (.clk, .rst,
    .if_din(frl_din), .if_write(frl_write), .if_full_n(frl_full_n),
    .if_dout(frl_dout), .if_read(frl_read), .if_empty_n(frl_empty_n), .size(frl_size));
  stream_fifo #(.DATA_W(F*DW),      .DEPTH(DEPTH_ADD)) u_fsk (.clk, .rst,
    .if_din(fsk_din), .if_write(fsk_write), .if_full_n(fsk_full_n),
    .if_dout(fsk_dout), .if_read(fsk_read), .if_empty_n(fsk_empty_n), .size(fsk_size));
  stream_fifo #(.DATA_W(F*DW),      .DEPTH(DEPTH_CONV)) u_fad (.clk, .rst,
    .if_din(fad_din), .if_write(fad_write), .if_full_n(fad_full_n),
    .if_dout(fad_dout), .if_read(fad_read), .if_empty_n(fad_empty_n), .size(fad_size));
  stream_fifo #(.DATA_W(F*DW),      .DEPTH(DEPTH_FLAT)) u_fc3 (.clk, .rst,
    .if_din(fc3_din), .if_write(fc3_write), .if_full_n(fc3_full_n),
    .if_dout(fc3_dout), .if_read(fc3_read), .if_empty_n(fc3_empty_n), .size(unused_fc3_size));
  stream_fifo #(.DATA_W(NPIX*F*DW), .DEPTH(DEPTH_DENSE)) u_ffl (.clk, .rst,
    .if_din(ffl_din), .if_write(ffl_write), .if_full_n(ffl_full_n),
    .if_dout(ffl_dout), .if_read(ffl_read), .if_empty_n(ffl_empty_n), .size(ffl_size));
  stream_fifo #(.DATA_W(OUT_N*DW),  .DEPTH(2)) u_fout (.clk, .rst,
    .if_din(fout_din), .if_write(fout_write), .if_full_n(fout_full_n),
    .if_dout(data_out_dout), .if_read(data_out_read), .if_empty_n(data_out_empty_n), .size(unused_fout_size));

  // --------------------------------------------------------- profile channels
  stream_fifo #(.DATA_W(1*PW),  .DEPTH(DEPTH_PF)) u_pin (.clk, .rst,
    .if_din(pf_in_din), .if_write(pf_in_write), .if_full_n(pf_in_full_n),
    .if_dout(pin_dout), .if_read(pin_read), .if_empty_n(pin_empty_n), .size(unused_psize[0]));
  stream_fifo #(.DATA_W(2*PW),  .DEPTH(DEPTH_PF)) u_p0 (.clk, .rst,
    .if_din(p0_din), .if_write(p0_write), .if_full_n(p0_full_n),
    .if_dout(p0_dout), .if_read(p0_read), .if_empty_n(p0_empty_n), .size(unused_psize[1]));
  stream_fifo #(.DATA_W(3*PW),  .DEPTH(DEPTH_PF)) u_p1 (.clk, .rst,
    .if_din(p1_din), .if_write(p1_write), .if_full_n(p1_full_n),
    .if_dout(p1_dout), .if_read(p1_read), .if_empty_n(p1_empty_n), .size(unused_psize[2]));
  stream_fifo #(.DATA_W(4*PW),  .DEPTH(DEPTH_PF)) u_p2 (.clk, .rst,
    .if_din(p2_din), .if_write(p2_write), .if_full_n(p2_full_n),
    .if_dout(p2_dout), .if_read(p2_read), .if_empty_n(p2_empty_n), .size(unused_psize[3]));
  stream_fifo #(.DATA_W(1*PW),  .DEPTH(DEPTH_PF)) u_p3 (.clk, .rst,
    .if_din(p3_din), .if_write(p3_write), .if_full_n(p3_full_n),
    .if_dout(p3_dout), .if_read(p3_read), .if_empty_n(p3_empty_n), .size(unused_psize[4]));
  stream_fifo #(.DATA_W(5*PW),  .DEPTH(DEPTH_PF)) u_p4 (.clk, .rst,
    .if_din(p4_din), .if_write(p4_write), .if_full_n(p4_full_n),
    .if_dout(p4_dout), .if_read(p4_read), .if_empty_n(p4_empty_n), .size(unused_psize[5]));
  stream_fifo #(.DATA_W(6*PW),  .DEPTH(DEPTH_PF)) u_p5 (.clk, .rst,
    .if_din(p5_din), .if_write(p5_write), .if_full_n(p5_full_n),
    .if_dout(p5_dout), .if_read(p5_read), .if_empty_n(p5_empty_n), .size(unused_psize[6]));
  stream_fifo #(.DATA_W(9*PW),  .DEPTH(DEPTH_PF)) u_p6 (.clk, .rst,
    .if_din(p6_din), .if_write(p6_write), .if_full_n(p6_full_n),
    .if_dout(p6_dout), .if_read(p6_read), .if_empty_n(p6_empty_n), .size(unused_psize[7]));
  stream_fifo #(.DATA_W(10*PW), .DEPTH(DEPTH_PF)) u_p7 (.clk, .rst,
    .if_din(p7_din), .if_write(p7_write), .if_full_n(p7_full_n),
    .if_dout(p7_dout), .if_read(p7_read), .if_empty_n(p7_empty_n), .size(unused_psize[8]));
  stream_fifo #(.DATA_W(11*PW), .DEPTH(DEPTH_PF)) u_pout (.clk, .rst,
    .if_din(pout_din), .if_write(pout_write), .if_full_n(pout_full_n),
    .if_dout(pf_out_dout), .if_read(pf_out_read), .if_empty_n(pf_out_empty_n), .size(unused_psize[9]));
  assign unused_psize[10] = '0;

  // ------------------------------------------------------------------ layers
  pf_dense #(.N_IN(IN_N), .N_OUT(NPIX), .ACT(spring_pkg::ACT_LINEAR), .REUSE(REUSE_DENSE), .SEED(1),
             .DATA_W(DW), .DATA_F(DF), .PF_W(PW),
             .N_PF_IN(1), .SIZE_W(SW_D)) u_dense_in (.clk, .rst,
    .in_dout(fin_dout), .in_empty_n(fin_empty_n), .in_read(fin_read), .in_size(fin_size),
    .out_din(fd1_din), .out_full_n(fd1_full_n), .out_write(fd1_write),
    .pf_in_dout(pin_dout), .pf_in_empty_n(pin_empty_n), .pf_in_read(pin_read),
    .pf_out_din(p0_din), .pf_out_full_n(p0_full_n), .pf_out_write(p0_write));

  stream_reshape #(.N_PIX(NPIX), .CH(1), .DATA_W(DW)) u_reshape (.clk, .rst,
    .in_dout(fd1_dout), .in_empty_n(fd1_empty_n), .in_read(fd1_read),
    .out_din(frs_din), .out_full_n(frs_full_n), .out_write(frs_write));

  pf_conv2d #(.H(X), .W(X), .C_IN(1), .C_OUT(F), .K(K), .REUSE(REUSE_CONV), .SEED(2),
              .DATA_W(DW), .DATA_F(DF), .PF_W(PW),
              .N_PF_IN(2), .SIZE_W(SW_C)) u_conv1 (.clk, .rst,
    .in_dout(frs_dout), .in_empty_n(frs_empty_n), .in_read(frs_read), .in_size(frs_size),
    .out_din(fc1_din), .out_full_n(fc1_full_n), .out_write(fc1_write),
    .pf_in_dout(p0_dout), .pf_in_empty_n(p0_empty_n), .pf_in_read(p0_read),
    .pf_out_din(p1_din), .pf_out_full_n(p1_full_n), .pf_out_write(p1_write));

  pf_clone #(.N_PIX(NPIX), .CH(F), .DATA_W(DW), .PF_W(PW), .N_PF_IN(3), .SIZE_W(SW_L)) u_clone (.clk, .rst,
    .in_dout(fc1_dout), .in_empty_n(fc1_empty_n), .in_read(fc1_read), .in_size(fc1_size),
    .out1_din(fo1_din), .out1_full_n(fo1_full_n), .out1_write(fo1_write),
    .out2_din(fsk_din), .out2_full_n(fsk_full_n), .out2_write(fsk_write),
    .pf_in_dout(p1_dout), .pf_in_empty_n(p1_empty_n), .pf_in_read(p1_read),
    .pf_out1_din(p2_din), .pf_out1_full_n(p2_full_n), .pf_out1_write(p2_write),
    .pf_out2_din(p3_din), .pf_out2_full_n(p3_full_n), .pf_out2_write(p3_write));

  pf_conv2d #(.H(X), .W(X), .C_IN(F), .C_OUT(F), .K(K), .REUSE(REUSE_CONV), .SEED(3),
              .DATA_W(DW), .DATA_F(DF), .PF_W(PW),
              .N_PF_IN(4), .SIZE_W(SW_C)) u_conv2 (.clk, .rst,
    .in_dout(fo1_dout), .in_empty_n(fo1_empty_n), .in_read(fo1_read), .in_size(fo1_size),
    .out_din(fc2_din), .out_full_n(fc2_full_n), .out_write(fc2_write),
    .pf_in_dout(p2_dout), .pf_in_empty_n(p2_empty_n), .pf_in_read(p2_read),
    .pf_out_din(p4_din), .pf_out_full_n(p4_full_n), .pf_out_write(p4_write));

  pf_relu #(.N_PIX(NPIX), .CH(F), .DATA_W(DW), .PF_W(PW), .N_PF_IN(5), .SIZE_W(SW_R)) u_relu (.clk, .rst,
    .in_dout(fc2_dout), .in_empty_n(fc2_empty_n), .in_read(fc2_read), .in_size(fc2_size),
    .out_din(frl_din), .out_full_n(frl_full_n), .out_write(frl_write),
    .pf_in_dout(p4_dout), .pf_in_empty_n(p4_empty_n), .pf_in_read(p4_read),
    .pf_out_din(p5_din), .pf_out_full_n(p5_full_n), .pf_out_write(p5_write));

  pf_add #(.N_PIX(NPIX), .CH(F), .DATA_W(DW), .PF_W(PW), .N_PF_A(6), .N_PF_B(1), .SIZE_W(SW_A)) u_add (.clk, .rst,
    .a_dout(frl_dout), .a_empty_n(frl_empty_n), .a_read(frl_read), .a_size(frl_size),
    .b_dout(fsk_dout), .b_empty_n(fsk_empty_n), .b_read(fsk_read), .b_size(fsk_size),
    .out_din(fad_din), .out_full_n(fad_full_n), .out_write(fad_write),
    .pf_a_dout(p5_dout), .pf_a_empty_n(p5_empty_n), .pf_a_read(p5_read),
    .pf_b_dout(p3_dout), .pf_b_empty_n(p3_empty_n), .pf_b_read(p3_read),
    .pf_out_din(p6_din), .pf_out_full_n(p6_full_n), .pf_out_write(p6_write));

  pf_conv2d #(.H(X), .W(X), .C_IN(F), .C_OUT(F), .K(K), .REUSE(REUSE_CONV), .SEED(4),
              .DATA_W(DW), .DATA_F(DF), .PF_W(PW),
              .N_PF_IN(9), .SIZE_W(SW_C)) u_conv3 (.clk, .rst,
    .in_dout(fad_dout), .in_empty_n(fad_empty_n), .in_read(fad_read), .in_size(fad_size),
    .out_din(fc3_din), .out_full_n(fc3_full_n), .out_write(fc3_write),
    .pf_in_dout(p6_dout), .pf_in_empty_n(p6_empty_n), .pf_in_read(p6_read),
    .pf_out_din(p7_din), .pf_out_full_n(p7_full_n), .pf_out_write(p7_write));

  stream_flatten #(.N_PIX(NPIX), .CH(F), .DATA_W(DW)) u_flatten (.clk, .rst,
    .in_dout(fc3_dout), .in_empty_n(fc3_empty_n), .in_read(fc3_read),
    .out_din(ffl_din), .out_full_n(ffl_full_n), .out_write(ffl_write));

  pf_dense #(.N_IN(NPIX*F), .N_OUT(OUT_N), .ACT(spring_pkg::ACT_SIGMOID), .REUSE(REUSE_DENSE), .SEED(5),
             .DATA_W(DW), .DATA_F(DF), .PF_W(PW),
             .N_PF_IN(10), .SIZE_W(SW_D)) u_dense_out (.clk, .rst,
    .in_dout(ffl_dout), .in_empty_n(ffl_empty_n), .in_read(ffl_read), .in_size(ffl_size),
    .out_din(fout_din), .out_full_n(fout_full_n), .out_write(fout_write),
    .pf_in_dout(p7_dout), .pf_in_empty_n(p7_empty_n), .pf_in_read(p7_read),
    .pf_out_din(pout_din), .pf_out_full_n(pout_full_n), .pf_out_write(pout_write));
endmodule
