// tb_pf_clone -- self-checking test of the profiled clone (split) layer.
//
// Random pixels, random gaps, random size tap, independent random stalls on
// both data outputs and both profile outputs. Checks: both outputs carry
// every input pixel, written in the same cycle; profile output 1 is the
// incoming word with the inference's maximum size-tap value appended;
// profile output 2 is the one-element placeholder (all ones); both profile
// words are written with the last pixel of the inference and never
// otherwise; flags are honoured.
module tb_pf_clone;
  localparam int N_PIX = 8, CH = 2, DW = 2, PW = 10, NPF = 2, SW = 5, NFR = 12;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic [CH*DW-1:0] in_dout, out1_din, out2_din;
  logic in_empty_n, in_read, out1_full_n, out1_write, out2_full_n, out2_write;
  logic [SW-1:0] in_size;
  logic [NPF*PW-1:0] pf_in_dout;
  logic pf_in_empty_n, pf_in_read, pf_out1_full_n, pf_out1_write, pf_out2_full_n, pf_out2_write;
  logic [(NPF+1)*PW-1:0] pf_out1_din;
  logic [PW-1:0] pf_out2_din;

  pf_clone #(.N_PIX(N_PIX), .CH(CH), .DATA_W(DW), .PF_W(PW), .N_PF_IN(NPF), .SIZE_W(SW)) dut (.*);

  logic [CH*DW-1:0]  src [NFR*N_PIX];
  logic [NPF*PW-1:0] pfsrc [NFR];
  int in_idx, out_idx, pf_idx;
  logic src_en, pf_en;
  int cur_max;

  assign in_empty_n    = src_en && (in_idx < NFR*N_PIX);
  assign in_dout       = src[in_idx % (NFR*N_PIX)];
  assign pf_in_empty_n = pf_en && (pf_idx < NFR);
  assign pf_in_dout    = pfsrc[pf_idx % NFR];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    for (int i = 0; i < NFR*N_PIX; i++) src[i] = (CH*DW)'($urandom);
    for (int i = 0; i < NFR; i++) pfsrc[i] = {PW'($urandom), PW'($urandom)};
    in_idx = 0; out_idx = 0; pf_idx = 0; cur_max = 0;
    src_en = 0; pf_en = 0; out1_full_n = 0; out2_full_n = 0; pf_out1_full_n = 0; pf_out2_full_n = 0; in_size = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
  end

  always @(posedge clk) begin
    if (!rst) begin
      if (in_read) begin
        chk(in_empty_n == 1'b1, "read while empty");
        if (int'(in_size) > cur_max) cur_max = int'(in_size);
        in_idx <= in_idx + 1;
      end
      chk(out1_write == out2_write && out1_write == in_read, "both outputs move with the input");
      if (out1_write) begin
        chk(out1_full_n && out2_full_n, "write while full");
        chk(out1_din == src[out_idx] && out2_din == src[out_idx], "cloned value");
        chk(pf_out1_write == ((out_idx % N_PIX) == N_PIX - 1), "profile write with last pixel only");
        out_idx <= out_idx + 1;
      end else begin
        chk(pf_out1_write == 1'b0, "profile write without data");
      end
      chk(pf_out1_write == pf_out2_write, "both profile outputs written together");
      if (pf_out1_write) begin
        chk(pf_out1_full_n && pf_out2_full_n && pf_in_empty_n && pf_in_read, "profile handshake");
        chk(pf_out1_din == {PW'(cur_max), pfsrc[pf_idx]}, "profile word on output 1");
        chk(pf_out2_din == '1, "placeholder on output 2");
        cur_max = 0;
        pf_idx <= pf_idx + 1;
      end
      src_en         <= ($urandom % 4) != 0;
      out1_full_n    <= ($urandom % 4) != 0;
      out2_full_n    <= ($urandom % 4) != 0;
      pf_en          <= ($urandom % 3) != 0;
      pf_out1_full_n <= ($urandom % 3) != 0;
      pf_out2_full_n <= ($urandom % 3) != 0;
      in_size        <= SW'($urandom % 17);
      if (out_idx == NFR*N_PIX && pf_idx == NFR) begin
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
