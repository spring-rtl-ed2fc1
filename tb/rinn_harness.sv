// rinn_harness -- drives one rinn_top configuration through NFR inferences
// and checks it; used by tb_rinn_workloads to run several configurations.
//
// The host side writes random input vectors and one-element profile words
// (the inference number) with random gaps and reads both outputs with random
// stalls. Each output vector is compared with a reference model of the
// network for the given sizes and number format (weights from the same hash
// as the layers: h = idx*0x9E3779B1 + seed*0x85EBCA77, h ^= h>>15, weight =
// signed bits [DW+7:8]). Each profile word is compared element by element
// with FIFO maxima derived here from the push/pop counts of the profiled
// FIFOs, truncated to PW bits. The profile words are printed with LABEL.
// `overflows` counts maxima that did not fit in PW bits.
module rinn_harness #(
  parameter string       LABEL       = "default",
  parameter int unsigned X           = 6,
  parameter int unsigned K           = 3,
  parameter int unsigned F           = 2,
  parameter int unsigned DW          = 2,
  parameter int unsigned DF          = 1,
  parameter int unsigned PW          = 10,
  parameter int unsigned REUSE       = 1,
  parameter int unsigned DEPTH_CONV  = 36,
  parameter int unsigned DEPTH_ADD   = 16,
  parameter int unsigned NFR         = 4
) (
  input  logic clk,
  input  logic rst,
  output logic done,
  output int   checks,
  output int   failures,
  output int   overflows,
  output int   cycles
);
  localparam int IN_N = 16, OUT_N = 5, NP = X*X, NPF = 11;

  logic [IN_N*DW-1:0] data_in_din;  logic data_in_write, data_in_full_n;
  logic [PW-1:0] pf_in_din;         logic pf_in_write, pf_in_full_n;
  logic [OUT_N*DW-1:0] data_out_dout; logic data_out_read, data_out_empty_n;
  logic [NPF*PW-1:0] pf_out_dout;   logic pf_out_read, pf_out_empty_n;

  rinn_top #(.X(X), .K(K), .F(F), .DEPTH_CONV(DEPTH_CONV), .DEPTH_ADD(DEPTH_ADD),
             .REUSE_CONV(REUSE), .REUSE_DENSE(REUSE), .DW(DW), .DF(DF), .PW(PW)) u_top (
    .clk, .rst, .data_in_din, .data_in_write, .data_in_full_n, .pf_in_din, .pf_in_write, .pf_in_full_n,
    .data_out_dout, .data_out_read, .data_out_empty_n, .pf_out_dout, .pf_out_read, .pf_out_empty_n);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 6) $display("FAIL [%s] %s at %0t", LABEL, what, $time);
    end
  endtask

  // ------------------------------------------------------------ reference
  function automatic longint w_ref(int seed, int idx);
    logic [31:0] h;
    logic [31:0] f;
    h = 32'(idx) * 32'h9E37_79B1 + 32'(seed) * 32'h85EB_CA77;
    h = h ^ (h >> 15);
    f = (h >> 8) & ((32'd1 << DW) - 1);
    return f[DW-1] ? longint'(f) - (64'sd1 <<< DW) : longint'(f);
  endfunction
  function automatic longint q(longint acc);
    longint v, hi, lo;
    v = acc >>> DF; hi = (64'sd1 <<< (DW-1)) - 1; lo = -(64'sd1 <<< (DW-1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction
  function automatic longint sx(logic [31:0] raw);
    return raw[DW-1] ? longint'(raw & ((32'd1 << DW) - 1)) - (64'sd1 <<< DW)
                     : longint'(raw & ((32'd1 << DW) - 1));
  endfunction
  typedef longint img_t [NP][F];
  function automatic img_t conv_ref(img_t x, int ci_n, int seed);
    img_t y;
    for (int r = 0; r < X; r++)
      for (int c = 0; c < X; c++)
        for (int o = 0; o < F; o++) begin
          longint acc;
          acc = 0;
          for (int kr = 0; kr < K; kr++)
            for (int kc = 0; kc < K; kc++) begin
              int ir, ic;
              ir = r - (K-1)/2 + kr; ic = c - (K-1)/2 + kc;
              if (ir >= 0 && ir < X && ic >= 0 && ic < X)
                for (int i = 0; i < ci_n; i++)
                  acc += x[ir*X + ic][i] * w_ref(seed, ((o*ci_n + i)*K + kr)*K + kc);
            end
          y[r*X + c][o] = q(acc);
        end
    return y;
  endfunction
  function automatic logic [OUT_N*DW-1:0] net_ref(logic [IN_N*DW-1:0] vin);
    longint d1 [NP];
    img_t a, b, s, cc;
    logic [OUT_N*DW-1:0] y;
    longint hi, lo;
    hi = (64'sd1 <<< (DW-1)) - 1; lo = -(64'sd1 <<< (DW-1));
    for (int o = 0; o < NP; o++) begin
      longint acc;
      acc = 0;
      for (int i = 0; i < IN_N; i++) acc += sx(32'(vin[i*DW +: DW])) * w_ref(1, o*IN_N + i);
      d1[o] = q(acc);
    end
    for (int p = 0; p < NP; p++) for (int c = 0; c < F; c++) a[p][c] = (c == 0) ? d1[p] : 0;
    a = conv_ref(a, 1, 2);
    b = conv_ref(a, F, 3);
    for (int p = 0; p < NP; p++)
      for (int c = 0; c < F; c++) begin
        longint v;
        v = (b[p][c] > 0) ? b[p][c] : 0;
        v = v + a[p][c];
        s[p][c] = (v > hi) ? hi : (v < lo) ? lo : v;
      end
    cc = conv_ref(s, F, 4);
    for (int o = 0; o < OUT_N; o++) begin
      longint acc, v;
      acc = 0;
      for (int p = 0; p < NP; p++)
        for (int c = 0; c < F; c++) acc += cc[p][c] * w_ref(5, o*NP*F + p*F + c);
      v = (acc >>> (DF + 2)) + ((64'sd1 <<< DF) >>> 1);
      v = (v < 0) ? 0 : (v > hi) ? hi : v;
      y[o*DW +: DW] = DW'(v);
    end
    return y;
  endfunction

  // ---------------------------------------------- independent FIFO tracking
  logic push_v [9], pop_v [9];
  int occ [9], run_max [9];
  int done_max [9][$];
  always_comb begin
    push_v[0] = u_top.u_fin.push; pop_v[0] = u_top.u_fin.pop;
    push_v[1] = u_top.u_frs.push; pop_v[1] = u_top.u_frs.pop;
    push_v[2] = u_top.u_fc1.push; pop_v[2] = u_top.u_fc1.pop;
    push_v[3] = u_top.u_fo1.push; pop_v[3] = u_top.u_fo1.pop;
    push_v[4] = u_top.u_fc2.push; pop_v[4] = u_top.u_fc2.pop;
    push_v[5] = u_top.u_frl.push; pop_v[5] = u_top.u_frl.pop;
    push_v[6] = u_top.u_fsk.push; pop_v[6] = u_top.u_fsk.pop;
    push_v[7] = u_top.u_fad.push; pop_v[7] = u_top.u_fad.pop;
    push_v[8] = u_top.u_ffl.push; pop_v[8] = u_top.u_ffl.pop;
  end

  logic [IN_N*DW-1:0] vins [NFR];
  int n_in, n_pfin, n_out, n_pfout;
  logic in_en, pfin_en, dout_en, pfout_en;

  assign data_in_write = in_en && (n_in < NFR) && data_in_full_n;
  assign data_in_din   = vins[n_in % NFR];
  assign pf_in_write   = pfin_en && (n_pfin < NFR) && pf_in_full_n;
  assign pf_in_din     = PW'(n_pfin + 5);
  assign data_out_read = dout_en && data_out_empty_n;
  assign pf_out_read   = pfout_en && pf_out_empty_n;

  initial begin
    for (int i = 0; i < NFR; i++)
      for (int e = 0; e < IN_N; e++) vins[i][e*DW +: DW] = DW'($urandom);
    for (int i = 0; i < 9; i++) begin occ[i] = 0; run_max[i] = 0; end
    n_in = 0; n_pfin = 0; n_out = 0; n_pfout = 0; done = 0;
    checks = 0; failures = 0; overflows = 0; cycles = 0;
    in_en = 0; pfin_en = 0; dout_en = 0; pfout_en = 0;
  end

  task automatic close(input int i);
    done_max[i].push_back(run_max[i]);
    run_max[i] = 0;
  endtask

  function automatic int trunc(int v);
    return v & ((1 << PW) - 1);
  endfunction

  always @(posedge clk) begin
    if (!rst && !done) begin
      cycles++;
      for (int i = 0; i < 9; i++) if (pop_v[i] && occ[i] > run_max[i]) run_max[i] = occ[i];
      if (u_top.p0_write)   close(0);
      if (u_top.p1_write)   close(1);
      if (u_top.p2_write)   close(2);
      if (u_top.p4_write)   close(3);
      if (u_top.p5_write)   close(4);
      if (u_top.p6_write) begin close(5); close(6); end
      if (u_top.p7_write)   close(7);
      if (u_top.pout_write) close(8);
      for (int i = 0; i < 9; i++) occ[i] += int'(push_v[i]) - int'(pop_v[i]);

      if (data_in_write) n_in <= n_in + 1;
      if (pf_in_write) n_pfin <= n_pfin + 1;
      if (data_out_read) begin
        chk(data_out_dout == net_ref(vins[n_out]), $sformatf("output vector %0d", n_out));
        n_out <= n_out + 1;
      end
      if (pf_out_read) begin
        int e [NPF];
        int m [NPF];
        for (int j = 0; j < NPF; j++) e[j] = int'(pf_out_dout[j*PW +: PW]);
        m[1] = done_max[0][n_pfout]; m[2] = done_max[1][n_pfout]; m[3] = done_max[2][n_pfout];
        m[4] = done_max[3][n_pfout]; m[5] = done_max[4][n_pfout]; m[7] = done_max[5][n_pfout];
        m[8] = done_max[6][n_pfout]; m[9] = done_max[7][n_pfout]; m[10] = done_max[8][n_pfout];
        m[0] = n_pfout + 5; m[6] = (1 << PW) - 1;
        for (int j = 0; j < NPF; j++) begin
          chk(e[j] == trunc(m[j]), $sformatf("profile %0d element %0d", n_pfout, j));
          if (j != 0 && j != 6 && m[j] != trunc(m[j])) overflows++;
        end
        $display("[%s] profile %0d: add.a=%0d add.b=%0d conv1=%0d conv2=%0d conv3=%0d clone=%0d relu=%0d dense=%0d/%0d (true %0d %0d %0d %0d %0d %0d %0d %0d/%0d)",
                 LABEL, n_pfout, e[7], e[8], e[2], e[4], e[9], e[3], e[5], e[1], e[10],
                 m[7], m[8], m[2], m[4], m[9], m[3], m[5], m[1], m[10]);
        n_pfout <= n_pfout + 1;
      end
      in_en    <= ($urandom % 4) != 0;
      pfin_en  <= ($urandom % 2) != 0;
      dout_en  <= ($urandom % 4) != 0;
      pfout_en <= ($urandom % 3) != 0;
      if (n_out == NFR && n_pfout == NFR) done = 1;
    end
  end
endmodule
