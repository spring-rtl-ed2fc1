// tb_pf_add -- self-checking test of the profiled Add (merge) layer.
//
// Two random pixel sources with independent gaps and size taps, two profile
// sources (2 and 1 elements), random stalls. Checks: each output pixel is the
// channel-wise sum of the two input pixels saturated to DATA_W bits (model
// here); the merged profile word is input a's elements, then input b's, then
// the maximum of tap a, then of tap b over the inference; it is written with
// the last pixel only; flags are honoured.
module tb_pf_add;
  localparam int N_PIX = 8, CH = 2, DW = 2, PW = 10, NA = 2, NB = 1, SW = 5, NFR = 12;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic [CH*DW-1:0] a_dout, b_dout, out_din;
  logic a_empty_n, a_read, b_empty_n, b_read, out_full_n, out_write;
  logic [SW-1:0] a_size, b_size;
  logic [NA*PW-1:0] pf_a_dout;
  logic [NB*PW-1:0] pf_b_dout;
  logic pf_a_empty_n, pf_a_read, pf_b_empty_n, pf_b_read, pf_out_full_n, pf_out_write;
  logic [(NA+NB+2)*PW-1:0] pf_out_din;

  pf_add #(.N_PIX(N_PIX), .CH(CH), .DATA_W(DW), .PF_W(PW), .N_PF_A(NA), .N_PF_B(NB), .SIZE_W(SW)) dut (.*);

  logic [CH*DW-1:0] srca [NFR*N_PIX], srcb [NFR*N_PIX];
  logic [NA*PW-1:0] pfa [NFR];
  logic [NB*PW-1:0] pfb [NFR];
  int ia, ib, out_idx, pf_idx;
  logic ena, enb, pfa_en, pfb_en;
  int max_a, max_b, sat_hits;

  assign a_empty_n    = ena && (ia < NFR*N_PIX);
  assign a_dout       = srca[ia % (NFR*N_PIX)];
  assign b_empty_n    = enb && (ib < NFR*N_PIX);
  assign b_dout       = srcb[ib % (NFR*N_PIX)];
  assign pf_a_empty_n = pfa_en && (pf_idx < NFR);
  assign pf_a_dout    = pfa[pf_idx % NFR];
  assign pf_b_empty_n = pfb_en && (pf_idx < NFR);
  assign pf_b_dout    = pfb[pf_idx % NFR];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [CH*DW-1:0] add_ref(input logic [CH*DW-1:0] x, input logic [CH*DW-1:0] y);
    logic [CH*DW-1:0] z;
    for (int c = 0; c < CH; c++) begin
      int v;
      v = int'($signed(x[c*DW +: DW])) + int'($signed(y[c*DW +: DW]));
      if (v > 1) begin v = 1; sat_hits++; end
      if (v < -2) begin v = -2; sat_hits++; end
      z[c*DW +: DW] = DW'(v);
    end
    return z;
  endfunction

  initial begin
    for (int i = 0; i < NFR*N_PIX; i++) begin srca[i] = (CH*DW)'($urandom); srcb[i] = (CH*DW)'($urandom); end
    for (int i = 0; i < NFR; i++) begin pfa[i] = {PW'($urandom), PW'($urandom)}; pfb[i] = PW'($urandom); end
    ia = 0; ib = 0; out_idx = 0; pf_idx = 0; max_a = 0; max_b = 0; sat_hits = 0;
    ena = 0; enb = 0; pfa_en = 0; pfb_en = 0; out_full_n = 0; pf_out_full_n = 0; a_size = 0; b_size = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
  end

  always @(posedge clk) begin
    if (!rst) begin
      chk(a_read == b_read && a_read == out_write, "inputs and output move together");
      if (a_read) begin
        chk(a_empty_n && b_empty_n, "read while empty");
        if (int'(a_size) > max_a) max_a = int'(a_size);
        if (int'(b_size) > max_b) max_b = int'(b_size);
        ia <= ia + 1; ib <= ib + 1;
      end
      if (out_write) begin
        chk(out_full_n == 1'b1, "write while full");
        chk(out_din == add_ref(srca[out_idx], srcb[out_idx]), "sum value");
        chk(pf_out_write == ((out_idx % N_PIX) == N_PIX - 1), "profile write with last pixel only");
        out_idx <= out_idx + 1;
      end else begin
        chk(pf_out_write == 1'b0, "profile write without data");
      end
      if (pf_out_write) begin
        chk(pf_out_full_n && pf_a_empty_n && pf_b_empty_n && pf_a_read && pf_b_read, "profile handshake");
        chk(pf_out_din == {PW'(max_b), PW'(max_a), pfb[pf_idx], pfa[pf_idx]}, "merged profile word");
        max_a = 0; max_b = 0;
        pf_idx <= pf_idx + 1;
      end else begin
        chk(!pf_a_read && !pf_b_read, "profile read without write");
      end
      ena           <= ($urandom % 4) != 0;
      enb           <= ($urandom % 4) != 0;
      out_full_n    <= ($urandom % 4) != 0;
      pfa_en        <= ($urandom % 3) != 0;
      pfb_en        <= ($urandom % 3) != 0;
      pf_out_full_n <= ($urandom % 3) != 0;
      a_size        <= SW'($urandom % 17);
      b_size        <= SW'($urandom % 17);
      if (out_idx == NFR*N_PIX && pf_idx == NFR) begin
        chk(sat_hits > 0, "saturation exercised");
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
