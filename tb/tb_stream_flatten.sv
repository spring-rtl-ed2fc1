// tb_stream_flatten -- self-checking test of the pixel-to-vector packer.
//
// NFR frames of N_PIX random pixels with random gaps and output stalls.
// Checks that each output vector holds pixel p of its frame at elements
// [p*CH, p*CH+CH), that exactly one vector leaves per frame, and that no
// pixel of the next frame is read before the vector has been written.
module tb_stream_flatten;
  localparam int N_PIX = 6, CH = 2, DW = 2, NFR = 20;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic [CH*DW-1:0] in_dout;
  logic [N_PIX*CH*DW-1:0] out_din, exp_v;
  logic in_empty_n, in_read, out_full_n, out_write;

  stream_flatten #(.N_PIX(N_PIX), .CH(CH), .DATA_W(DW)) dut (.*);

  logic [CH*DW-1:0] src [NFR*N_PIX];
  int in_idx, out_idx;
  logic src_en;
  assign in_empty_n = src_en && (in_idx < NFR*N_PIX);
  assign in_dout    = src[in_idx % (NFR*N_PIX)];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    for (int i = 0; i < NFR*N_PIX; i++) src[i] = (CH*DW)'($urandom);
    in_idx = 0; out_idx = 0; src_en = 0; out_full_n = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
  end

  always @(posedge clk) begin
    if (!rst) begin
      if (in_read) begin
        chk(in_empty_n, "read while empty");
        chk(in_idx / N_PIX == out_idx, "no read of the next frame before the vector is out");
        in_idx <= in_idx + 1;
      end
      if (out_write) begin
        chk(out_full_n, "write while full");
        chk(in_idx == (out_idx + 1) * N_PIX, "vector written after its whole frame");
        for (int p = 0; p < N_PIX; p++) exp_v[p*CH*DW +: CH*DW] = src[out_idx*N_PIX + p];
        chk(out_din == exp_v, "vector value");
        out_idx <= out_idx + 1;
      end
      src_en     <= ($urandom % 3) != 0;
      out_full_n <= ($urandom % 3) != 0;
      if (out_idx == NFR) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
