// tb_pf_relu -- self-checking test of the profiled ReLU layer.
//
// A source model offers NFR inferences of N_PIX random pixels with random
// gaps, drives a random size tap, and offers one random profile word per
// inference at random times; the sinks stall at random. Checks: every output
// pixel equals max(0,x) per channel (model computed here); each profile word
// equals the incoming word with the maximum of the size tap over that
// inference's reads appended; the profile word is written in the same cycle
// as the last pixel of its inference and never otherwise; no write while
// full, no read while empty.
module tb_pf_relu;
  localparam int N_PIX = 8, CH = 2, DW = 2, PW = 10, NPF = 2, SW = 5, NFR = 12;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic [CH*DW-1:0] in_dout, out_din;
  logic in_empty_n, in_read, out_full_n, out_write;
  logic [SW-1:0] in_size;
  logic [NPF*PW-1:0] pf_in_dout;
  logic pf_in_empty_n, pf_in_read, pf_out_full_n, pf_out_write;
  logic [(NPF+1)*PW-1:0] pf_out_din;

  pf_relu #(.N_PIX(N_PIX), .CH(CH), .DATA_W(DW), .PF_W(PW), .N_PF_IN(NPF), .SIZE_W(SW)) dut (.*);

  logic [CH*DW-1:0]  src [NFR*N_PIX];
  logic [NPF*PW-1:0] pfsrc [NFR];
  int in_idx, out_idx, pf_idx;
  logic src_en, pf_en;
  int cur_max;
  int stalls_pf = 0;

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

  function automatic logic [CH*DW-1:0] relu_ref(input logic [CH*DW-1:0] x);
    logic [CH*DW-1:0] y;
    for (int c = 0; c < CH; c++) begin
      int v;
      v = int'($signed(x[c*DW +: DW]));
      y[c*DW +: DW] = (v > 0) ? DW'(v) : '0;
    end
    return y;
  endfunction

  initial begin
    for (int i = 0; i < NFR*N_PIX; i++) src[i] = (CH*DW)'($urandom);
    for (int i = 0; i < NFR; i++) pfsrc[i] = {PW'($urandom), PW'($urandom)};
    in_idx = 0; out_idx = 0; pf_idx = 0; cur_max = 0;
    src_en = 0; pf_en = 0; out_full_n = 0; pf_out_full_n = 0; in_size = 0;
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
      if (out_write) begin
        chk(out_full_n == 1'b1, "write while full");
        chk(out_din == relu_ref(src[out_idx]), "relu value");
        chk(pf_out_write == ((out_idx % N_PIX) == N_PIX - 1), "profile write with last pixel only");
        out_idx <= out_idx + 1;
      end else begin
        chk(pf_out_write == 1'b0, "profile write without data");
      end
      if (out_full_n && in_empty_n && ((out_idx % N_PIX) == N_PIX - 1) && !out_write) stalls_pf++;
      if (pf_out_write) begin
        chk(pf_out_full_n && pf_in_empty_n && pf_in_read, "profile handshake");
        chk(pf_out_din == {PW'(cur_max), pfsrc[pf_idx]}, "profile word");
        cur_max = 0;
        pf_idx <= pf_idx + 1;
      end else begin
        chk(pf_in_read == 1'b0, "profile read without write");
      end
      src_en        <= ($urandom % 4) != 0;
      out_full_n    <= ($urandom % 4) != 0;
      pf_en         <= ($urandom % 3) != 0;
      pf_out_full_n <= ($urandom % 3) != 0;
      in_size       <= SW'($urandom % 17);
      if (out_idx == NFR*N_PIX && pf_idx == NFR) begin
        chk(stalls_pf > 0, "last pixel held by the profile path at least once");
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
