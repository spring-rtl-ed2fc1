// tb_stream_reshape -- self-checking test of the vector-to-pixel unpacker.
//
// NFR random vectors of N_PIX*CH elements with random gaps and output
// stalls. Checks that the pixels come out in raster order, pixel p being
// elements [p*CH, p*CH+CH) of its vector, that a new vector is read only
// after the last pixel of the previous one, and that flags are honoured.
module tb_stream_reshape;
  localparam int N_PIX = 6, CH = 2, DW = 2, NFR = 20;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic [N_PIX*CH*DW-1:0] in_dout;
  logic [CH*DW-1:0] out_din;
  logic in_empty_n, in_read, out_full_n, out_write;

  stream_reshape #(.N_PIX(N_PIX), .CH(CH), .DATA_W(DW)) dut (.*);

  logic [N_PIX*CH*DW-1:0] src [NFR];
  int in_idx, out_idx;
  logic src_en;
  assign in_empty_n = src_en && (in_idx < NFR);
  assign in_dout    = src[in_idx % NFR];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    for (int i = 0; i < NFR; i++) src[i] = (N_PIX*CH*DW)'({$urandom, $urandom});
    in_idx = 0; out_idx = 0; src_en = 0; out_full_n = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
  end

  always @(posedge clk) begin
    if (!rst) begin
      if (in_read) begin
        chk(in_empty_n, "read while empty");
        chk(out_idx == in_idx * N_PIX, "vector read only after the previous one is out");
        in_idx <= in_idx + 1;
      end
      if (out_write) begin
        chk(out_full_n, "write while full");
        chk(out_din == src[out_idx / N_PIX][(out_idx % N_PIX)*CH*DW +: CH*DW], "pixel value");
        out_idx <= out_idx + 1;
      end
      src_en     <= ($urandom % 3) != 0;
      out_full_n <= ($urandom % 3) != 0;
      if (out_idx == NFR*N_PIX) begin
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
