// tb_pf_conv2d -- self-checking test of the profiled 2-D convolution.
//
// Three instances: K=3 on a 4x5 image, 1 -> 2 channels; K=2 (even kernel,
// asymmetric 'same' padding: 0 before, 1 after) on a 3x4 image, 2 -> 1
// channels; and K=3, 2 -> 2 channels on 3x4 with reuse factor 5 (36 products
// on 8 multipliers, the last lane partly idle). Each gets NFR random frames with random gaps, random size taps
// and random stalls. Expected pixels are computed here with the weight hash
// (see tb_pf_dense) at index ((o*C_IN+i)*K+kr)*K+kc and padding PT=(K-1)/2.
// Also checked: no output pixel leaves before the last input pixel it
// depends on has been read; the profile word (incoming + maximum size tap)
// goes out with the last pixel of each frame only; pixel k of a frame leaves
// no earlier than (k+1)*REUSE cycles after the frame's first read.
module tb_pf_conv2d;
  localparam int DW = 2, PW = 10, SW = 5, NFR = 6;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int w_ref(int seed, int idx);
    logic [31:0] h;
    h = 32'(idx) * 32'h9E37_79B1 + 32'(seed) * 32'h85EB_CA77;
    h = h ^ (h >> 15);
    return int'($signed(h[9:8]));
  endfunction

  int done [3];

  for (genvar g = 0; g < 3; g++) begin : g_dut
    localparam int H = (g == 0) ? 4 : 3;
    localparam int W = (g == 0) ? 5 : 4;
    localparam int CI = (g == 0) ? 1 : 2;
    localparam int CO = (g == 1) ? 1 : 2;
    localparam int K = (g == 1) ? 2 : 3;
    localparam int RF = (g == 2) ? 5 : 1;
    localparam int SEED = 21 + g;
    localparam int NP = H * W;
    localparam int PT = (K - 1) / 2;
    localparam int PB = K - 1 - PT;

    logic [CI*DW-1:0] in_dout;
    logic [CO*DW-1:0] out_din;
    logic in_empty_n, in_read, out_full_n, out_write;
    logic [SW-1:0] in_size;
    logic [PW-1:0] pf_in_dout;
    logic pf_in_empty_n, pf_in_read, pf_out_full_n, pf_out_write;
    logic [2*PW-1:0] pf_out_din;

    pf_conv2d #(.H(H), .W(W), .C_IN(CI), .C_OUT(CO), .K(K), .REUSE(RF), .SEED(SEED), .DATA_W(DW), .DATA_F(1),
                .PF_W(PW), .N_PF_IN(1), .SIZE_W(SW)) dut (
      .clk, .rst, .in_dout, .in_empty_n, .in_read, .in_size, .out_din, .out_full_n, .out_write,
      .pf_in_dout, .pf_in_empty_n, .pf_in_read, .pf_out_din, .pf_out_full_n, .pf_out_write);

    logic [CI*DW-1:0] src [NFR*NP];
    logic [PW-1:0] pfsrc [NFR];
    int in_idx, out_idx, pf_idx, cur_max, cyc, t0;
    logic src_en, pf_en;

    assign in_empty_n    = src_en && (in_idx < NFR*NP);
    assign in_dout       = src[in_idx % (NFR*NP)];
    assign pf_in_empty_n = pf_en && (pf_idx < NFR);
    assign pf_in_dout    = pfsrc[pf_idx % NFR];

    function automatic logic [CO*DW-1:0] conv_ref(int frame, int r, int c);
      logic [CO*DW-1:0] y;
      for (int o = 0; o < CO; o++) begin
        int acc, v;
        acc = 0;
        for (int kr = 0; kr < K; kr++)
          for (int kc = 0; kc < K; kc++) begin
            int ir, ic;
            ir = r - PT + kr; ic = c - PT + kc;
            if (ir >= 0 && ir < H && ic >= 0 && ic < W)
              for (int i = 0; i < CI; i++)
                acc += int'($signed(src[frame*NP + ir*W + ic][i*DW +: DW])) * w_ref(SEED, ((o*CI + i)*K + kr)*K + kc);
          end
        v = acc >>> 1;
        if (v > 1) v = 1;
        if (v < -2) v = -2;
        y[o*DW +: DW] = DW'(v);
      end
      return y;
    endfunction

    initial begin
      for (int i = 0; i < NFR*NP; i++) src[i] = (CI*DW)'($urandom);
      for (int i = 0; i < NFR; i++) pfsrc[i] = PW'($urandom);
      in_idx = 0; out_idx = 0; pf_idx = 0; cur_max = 0; cyc = 0; t0 = 0;
      src_en = 0; pf_en = 0; out_full_n = 0; pf_out_full_n = 0; in_size = 0;
      done[g] = 0;
    end

    always @(posedge clk) begin
      if (!rst) begin
        cyc++;
        if (in_read) begin
          if (in_idx % NP == 0) t0 = cyc;
          chk(in_empty_n, "read while empty");
          if (int'(in_size) > cur_max) cur_max = int'(in_size);
          in_idx <= in_idx + 1;
        end
        if (out_write) begin
          int fr, p, r, c, need;
          fr = out_idx / NP; p = out_idx % NP; r = p / W; c = p % W;
          need = fr*NP + ((r + PB > H - 1) ? H - 1 : r + PB) * W + ((c + PB > W - 1) ? W - 1 : c + PB);
          chk(out_full_n, "write while full");
          chk(in_idx > need, "output waits for its inputs");
          chk(cyc - t0 >= (p + 1) * RF, "one pixel per REUSE cycles at most");
          chk(out_din == conv_ref(fr, r, c), "conv value");
          chk(pf_out_write == (p == NP - 1), "profile write with last pixel only");
          out_idx <= out_idx + 1;
        end else begin
          chk(!pf_out_write, "profile write without data");
        end
        if (pf_out_write) begin
          chk(pf_out_full_n && pf_in_empty_n && pf_in_read, "profile handshake");
          chk(pf_out_din == {PW'(cur_max), pfsrc[pf_idx]}, "profile word");
          cur_max = 0;
          pf_idx <= pf_idx + 1;
        end
        src_en        <= ($urandom % 4) != 0;
        out_full_n    <= ($urandom % 4) != 0;
        pf_en         <= ($urandom % 3) != 0;
        pf_out_full_n <= ($urandom % 3) != 0;
        in_size       <= SW'($urandom % 30);
        if (out_idx == NFR*NP && pf_idx == NFR) done[g] = 1;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    wait (done[0] == 1 && done[1] == 1 && done[2] == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
