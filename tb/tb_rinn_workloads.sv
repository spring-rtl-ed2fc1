// tb_rinn_workloads -- runs the profiled core at the configurations of the
// parameter sweeps the profiling method was evaluated on, each through a
// rinn_harness that checks every output vector and every profile element.
//
//   kernel size 2, 3, 6 on an 8x8 reshape with 2 filters
//   filters 2, 5, 10 on a 4x4 reshape, 3x3 kernel
//   reuse factor 3, 18, 36 on a 6x6 reshape, 2 filters, 3x3 kernel
//   data ap_fixed<2,1>, <8,5>, <16,10> on a 4x4 reshape, 2 filters
//   profile precision 4, 6, 16 bits on the default network
//
// The 8x8 kernel sweep uses 128-deep conv and 64-deep add FIFOs: with a 6x6
// kernel the branch through conv2 lags the skip branch by 3 rows and 4 pixels
// (28 pixels) at the add, more than the default 16-deep add FIFO holds, and
// the network would deadlock. Passing also requires that 4-bit profile
// elements overflowed at least once (the default network's conv1 FIFO
// reaches 35) and that no configuration overflowed at 6 bits or more.
module tb_rinn_workloads;
  localparam int NCFG = 15;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic done [NCFG];
  int   ck [NCFG], fl [NCFG], ov [NCFG], cy [NCFG];

  rinn_harness #(.LABEL("kernel 2, 8x8x2"), .X(8), .K(2), .F(2), .DEPTH_CONV(128), .DEPTH_ADD(64)) h0 (clk, rst, done[0], ck[0], fl[0], ov[0], cy[0]);
  rinn_harness #(.LABEL("kernel 3, 8x8x2"), .X(8), .K(3), .F(2), .DEPTH_CONV(128), .DEPTH_ADD(64)) h1 (clk, rst, done[1], ck[1], fl[1], ov[1], cy[1]);
  rinn_harness #(.LABEL("kernel 6, 8x8x2"), .X(8), .K(6), .F(2), .DEPTH_CONV(128), .DEPTH_ADD(64)) h2 (clk, rst, done[2], ck[2], fl[2], ov[2], cy[2]);
  rinn_harness #(.LABEL("filters 2, 4x4"),  .X(4), .K(3), .F(2))  h3 (clk, rst, done[3], ck[3], fl[3], ov[3], cy[3]);
  rinn_harness #(.LABEL("filters 5, 4x4"),  .X(4), .K(3), .F(5))  h4 (clk, rst, done[4], ck[4], fl[4], ov[4], cy[4]);
  rinn_harness #(.LABEL("filters 10, 4x4"), .X(4), .K(3), .F(10)) h5 (clk, rst, done[5], ck[5], fl[5], ov[5], cy[5]);
  rinn_harness #(.LABEL("reuse 3, 6x6x2"),  .REUSE(3))  h6 (clk, rst, done[6], ck[6], fl[6], ov[6], cy[6]);
  rinn_harness #(.LABEL("reuse 18, 6x6x2"), .REUSE(18)) h7 (clk, rst, done[7], ck[7], fl[7], ov[7], cy[7]);
  rinn_harness #(.LABEL("reuse 36, 6x6x2"), .REUSE(36)) h8 (clk, rst, done[8], ck[8], fl[8], ov[8], cy[8]);
  rinn_harness #(.LABEL("ap_fixed<2,1>, 4x4x2"),   .X(4), .DW(2),  .DF(1)) h9  (clk, rst, done[9],  ck[9],  fl[9],  ov[9],  cy[9]);
  rinn_harness #(.LABEL("ap_fixed<8,5>, 4x4x2"),   .X(4), .DW(8),  .DF(3)) h10 (clk, rst, done[10], ck[10], fl[10], ov[10], cy[10]);
  rinn_harness #(.LABEL("ap_fixed<16,10>, 4x4x2"), .X(4), .DW(16), .DF(6)) h11 (clk, rst, done[11], ck[11], fl[11], ov[11], cy[11]);
  rinn_harness #(.LABEL("profile 4 bits"),  .PW(4))  h12 (clk, rst, done[12], ck[12], fl[12], ov[12], cy[12]);
  rinn_harness #(.LABEL("profile 6 bits"),  .PW(6))  h13 (clk, rst, done[13], ck[13], fl[13], ov[13], cy[13]);
  rinn_harness #(.LABEL("profile 16 bits"), .PW(16)) h14 (clk, rst, done[14], ck[14], fl[14], ov[14], cy[14]);

  int checks, failures;
  bit all_done;

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    do begin
      @(posedge clk);
      all_done = 1;
      for (int i = 0; i < NCFG; i++) if (!done[i]) all_done = 0;
    end while (!all_done);
    checks = 0; failures = 0;
    for (int i = 0; i < NCFG; i++) begin
      checks += ck[i]; failures += fl[i];
      $display("config %0d: %0d cycles, %0d checks, %0d failures, %0d overflowed elements", i, cy[i], ck[i], fl[i], ov[i]);
    end
    checks++;
    if (ov[12] == 0) begin failures++; $display("FAIL 4-bit profile never overflowed"); end
    for (int i = 0; i < NCFG; i++) begin
      if (i == 12) continue;
      checks++;
      if (ov[i] != 0) begin failures++; $display("FAIL config %0d overflowed", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
