// tb_pf_dense -- self-checking test of the profiled Dense layer.
//
// Three instances, linear (6 -> 4), hard-sigmoid (6 -> 3) and linear (6 -> 4)
// with reuse factor 7 (24 products on 4 multipliers), each fed NFR
// random vectors with random gaps, random size taps and random stalls.
// The expected outputs are computed here from the weight hash
//   h = idx*0x9E3779B1 + seed*0x85EBCA77; h ^= h>>15; w = signed bits [9:8]
// and fixed-point rules (ap_fixed<2,1>: exact sum of products with 2
// fractional bits, arithmetic shift by 1, saturate; sigmoid: shift by 3, add
// 1/2, clamp to [0, 0.5]). Checks the values, that each output word and its
// profile word (incoming word + size-tap value at the read) are written
// together, and that the output follows the read by at least REUSE cycles.
module tb_pf_dense;
  localparam int DW = 2, PW = 10, SW = 3, NFR = 40, N_IN = 6;
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
    localparam int N_OUT = (g == 1) ? 3 : 4;
    localparam int RF    = (g == 2) ? 7 : 1;
    localparam int SEED  = 11 + g;
    logic [N_IN*DW-1:0] in_dout;
    logic [N_OUT*DW-1:0] out_din;
    logic in_empty_n, in_read, out_full_n, out_write;
    logic [SW-1:0] in_size;
    logic [PW-1:0] pf_in_dout;
    logic pf_in_empty_n, pf_in_read, pf_out_full_n, pf_out_write;
    logic [2*PW-1:0] pf_out_din;

    pf_dense #(.N_IN(N_IN), .N_OUT(N_OUT),
               .ACT(g == 1 ? spring_pkg::ACT_SIGMOID : spring_pkg::ACT_LINEAR), .REUSE(RF),
               .SEED(SEED), .DATA_W(DW), .DATA_F(1), .PF_W(PW), .N_PF_IN(1), .SIZE_W(SW)) dut (
      .clk, .rst, .in_dout, .in_empty_n, .in_read, .in_size, .out_din, .out_full_n, .out_write,
      .pf_in_dout, .pf_in_empty_n, .pf_in_read, .pf_out_din, .pf_out_full_n, .pf_out_write);

    logic [N_IN*DW-1:0] src [NFR];
    logic [PW-1:0] pfsrc [NFR];
    int in_idx, out_idx, pf_idx, cur_max, read_cycle, cyc;
    logic src_en, pf_en;

    assign in_empty_n    = src_en && (in_idx < NFR);
    assign in_dout       = src[in_idx % NFR];
    assign pf_in_empty_n = pf_en && (pf_idx < NFR);
    assign pf_in_dout    = pfsrc[pf_idx % NFR];

    function automatic logic [N_OUT*DW-1:0] dense_ref(input logic [N_IN*DW-1:0] x);
      logic [N_OUT*DW-1:0] y;
      for (int o = 0; o < N_OUT; o++) begin
        int acc, v;
        acc = 0;
        for (int i = 0; i < N_IN; i++) acc += int'($signed(x[i*DW +: DW])) * w_ref(SEED, o*N_IN + i);
        if (g != 1) begin
          v = acc >>> 1;
          if (v > 1) v = 1;
          if (v < -2) v = -2;
        end else begin
          v = (acc >>> 3) + 1;
          if (v < 0) v = 0;
          if (v > 1) v = 1;
        end
        y[o*DW +: DW] = DW'(v);
      end
      return y;
    endfunction

    initial begin
      for (int i = 0; i < NFR; i++) begin src[i] = (N_IN*DW)'({$urandom, $urandom}); pfsrc[i] = PW'($urandom); end
      in_idx = 0; out_idx = 0; pf_idx = 0; cur_max = 0; cyc = 0; read_cycle = 0;
      src_en = 0; pf_en = 0; out_full_n = 0; pf_out_full_n = 0; in_size = 0;
      done[g] = 0;
    end

    always @(posedge clk) begin
      if (!rst) begin
        cyc++;
        if (in_read) begin
          chk(in_empty_n, "read while empty");
          if (int'(in_size) > cur_max) cur_max = int'(in_size);
          read_cycle = cyc;
          in_idx <= in_idx + 1;
        end
        chk(out_write == pf_out_write, "data and profile written together");
        if (out_write) begin
          chk(out_full_n && pf_out_full_n && pf_in_empty_n && pf_in_read, "handshake");
          chk(out_idx == in_idx - 1, "one vector in the layer");
          chk(cyc - read_cycle >= RF, "output REUSE cycles after the read");
          chk(out_din == dense_ref(src[out_idx]), "dense value");
          chk(pf_out_din == {PW'(cur_max), pfsrc[pf_idx]}, "profile word");
          cur_max = 0;
          out_idx <= out_idx + 1;
          pf_idx <= pf_idx + 1;
        end
        src_en        <= ($urandom % 3) != 0;
        out_full_n    <= ($urandom % 3) != 0;
        pf_en         <= ($urandom % 3) != 0;
        pf_out_full_n <= ($urandom % 3) != 0;
        in_size       <= SW'($urandom % 2);
        if (out_idx == NFR) done[g] = 1;
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
