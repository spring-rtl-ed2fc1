// tb_rinn_top -- end-to-end test of the profiled RINN core at its default
// size (16 inputs, 6x6 reshape, 3x3 kernels, 2 filters, 5 outputs).
//
// The host model writes NFR random input vectors and NFR one-element profile
// words (the inference number) with random gaps, and reads both result
// streams with random stalls. Checks:
//  * every output vector against a reference model of the whole network
//    written here (dense, reshape, three convolutions, clone, ReLU, add,
//    flatten, dense with hard sigmoid; weight hash as in tb_pf_dense);
//  * every profile word, element by element, against FIFO maxima this bench
//    tracks itself: it counts pushes and pops of each profiled FIFO and, at
//    each pop, takes the occupancy; a layer's maximum is closed when that layer
//    writes its profile word. Element 6 must be the placeholder, element 0
//    the inference number.
// It also counts how often the mechanisms of the design occur and fails if
// one never does: back-pressure on a data FIFO, a last pixel held back by
// the profile path, the split (placeholder words), the merge, and host stalls.
module tb_rinn_top;
  localparam int IN_N = 16, OUT_N = 5, X = 6, K = 3, F = 2, NP = X*X, DW = 2, PW = 10, NPF = 11;
  localparam int NFR = 10;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic [IN_N*DW-1:0] data_in_din;  logic data_in_write, data_in_full_n;
  logic [PW-1:0] pf_in_din;         logic pf_in_write, pf_in_full_n;
  logic [OUT_N*DW-1:0] data_out_dout; logic data_out_read, data_out_empty_n;
  logic [NPF*PW-1:0] pf_out_dout;   logic pf_out_read, pf_out_empty_n;

  rinn_top dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ------------------------------------------------------------ reference
  function automatic int w_ref(int seed, int idx);
    logic [31:0] h;
    h = 32'(idx) * 32'h9E37_79B1 + 32'(seed) * 32'h85EB_CA77;
    h = h ^ (h >> 15);
    return int'($signed(h[9:8]));
  endfunction
  function automatic int q(int acc);   // truncate 1 fractional bit, saturate to 2 bits
    int v;
    v = acc >>> 1;
    return (v > 1) ? 1 : (v < -2) ? -2 : v;
  endfunction
  typedef int img_t [NP][F];
  function automatic img_t conv_ref(img_t x, int ci_n, int seed);
    img_t y;
    for (int r = 0; r < X; r++)
      for (int c = 0; c < X; c++)
        for (int o = 0; o < F; o++) begin
          int acc;
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
    int d1 [NP];
    img_t a, b, s, cc;
    logic [OUT_N*DW-1:0] y;
    for (int o = 0; o < NP; o++) begin
      int acc;
      acc = 0;
      for (int i = 0; i < IN_N; i++) acc += int'($signed(vin[i*DW +: DW])) * w_ref(1, o*IN_N + i);
      d1[o] = q(acc);
    end
    for (int p = 0; p < NP; p++) begin a[p][0] = d1[p]; a[p][1] = 0; end
    a = conv_ref(a, 1, 2);                       // conv1, clone output
    b = conv_ref(a, F, 3);                       // conv2
    for (int p = 0; p < NP; p++)
      for (int c = 0; c < F; c++) begin
        int v;
        v = (b[p][c] > 0) ? b[p][c] : 0;         // relu
        v = v + a[p][c];                         // add with the skip
        s[p][c] = (v > 1) ? 1 : (v < -2) ? -2 : v;
      end
    cc = conv_ref(s, F, 4);                      // conv3
    for (int o = 0; o < OUT_N; o++) begin
      int acc, v;
      acc = 0;
      for (int p = 0; p < NP; p++)
        for (int c = 0; c < F; c++) acc += cc[p][c] * w_ref(5, o*NP*F + p*F + c);
      v = (acc >>> 3) + 1;
      y[o*DW +: DW] = DW'((v < 0) ? 0 : (v > 1) ? 1 : v);
    end
    return y;
  endfunction

  // ---------------------------------------------- independent FIFO tracking
  // index: 0 fin, 1 frs, 2 fc1, 3 fo1, 4 fc2, 5 frl, 6 fsk, 7 fad, 8 ffl
  logic push_v [9], pop_v [9];
  int occ [9], run_max [9];
  int done_max [9][$];
  always_comb begin
    push_v[0] = dut.u_fin.push; pop_v[0] = dut.u_fin.pop;
    push_v[1] = dut.u_frs.push; pop_v[1] = dut.u_frs.pop;
    push_v[2] = dut.u_fc1.push; pop_v[2] = dut.u_fc1.pop;
    push_v[3] = dut.u_fo1.push; pop_v[3] = dut.u_fo1.pop;
    push_v[4] = dut.u_fc2.push; pop_v[4] = dut.u_fc2.pop;
    push_v[5] = dut.u_frl.push; pop_v[5] = dut.u_frl.pop;
    push_v[6] = dut.u_fsk.push; pop_v[6] = dut.u_fsk.pop;
    push_v[7] = dut.u_fad.push; pop_v[7] = dut.u_fad.pop;
    push_v[8] = dut.u_ffl.push; pop_v[8] = dut.u_ffl.pop;
  end

  // ------------------------------------------------------------ host model
  logic [IN_N*DW-1:0] vins [NFR];
  int n_in, n_pfin, n_out, n_pfout;
  logic in_en, pfin_en, dout_en, pfout_en;
  int cyc = 0;
  int cnt_backpressure = 0, cnt_pf_hold = 0, cnt_split = 0, cnt_merge = 0, cnt_host_stall = 0;

  assign data_in_write = in_en && (n_in < NFR) && data_in_full_n;
  assign data_in_din   = vins[n_in % NFR];
  assign pf_in_write   = pfin_en && (n_pfin < NFR) && pf_in_full_n;
  assign pf_in_din     = PW'(n_pfin + 100);
  assign data_out_read = dout_en && data_out_empty_n;
  assign pf_out_read   = pfout_en && pf_out_empty_n;

  initial begin
    for (int i = 0; i < NFR; i++) vins[i] = (IN_N*DW)'($urandom);
    for (int i = 0; i < 9; i++) begin occ[i] = 0; run_max[i] = 0; end
    n_in = 0; n_pfin = 0; n_out = 0; n_pfout = 0;
    in_en = 0; pfin_en = 0; dout_en = 0; pfout_en = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
  end

  task automatic close(input int i);
    done_max[i].push_back(run_max[i]);
    run_max[i] = 0;
  endtask

  always @(posedge clk) begin
    if (!rst) begin
      // maxima at pops, taken from the occupancy before this edge
      for (int i = 0; i < 9; i++) if (pop_v[i] && occ[i] > run_max[i]) run_max[i] = occ[i];
      // a layer's profile write closes its FIFO maxima
      if (dut.p0_write)   close(0);
      if (dut.p1_write)   close(1);
      if (dut.p2_write)   close(2);
      if (dut.p4_write)   close(3);
      if (dut.p5_write)   close(4);
      if (dut.p6_write) begin close(5); close(6); cnt_merge++; end
      if (dut.p7_write)   close(7);
      if (dut.pout_write) close(8);
      if (dut.p3_write)   cnt_split++;
      for (int i = 0; i < 9; i++) occ[i] += int'(push_v[i]) - int'(pop_v[i]);

      // mechanisms
      if ((!dut.frs_full_n && dut.u_reshape.full_q) || (!dut.fsk_full_n && dut.u_clone.in_empty_n) ||
          (!dut.fo1_full_n && dut.u_clone.in_empty_n) || (!dut.fout_full_n && dut.u_dense_out.busy))
        cnt_backpressure++;
      cyc++;
      if ((dut.u_conv1.res_valid && dut.u_conv1.res_last && dut.u_conv1.out_full_n && !dut.u_conv1.pf_ready) ||
          (dut.u_conv3.res_valid && dut.u_conv3.res_last && dut.u_conv3.out_full_n && !dut.u_conv3.pf_ready) ||
          (dut.u_relu.last && dut.u_relu.in_empty_n && dut.u_relu.out_full_n && !dut.u_relu.pf_ready) ||
          (dut.u_add.last && dut.u_add.a_empty_n && dut.u_add.b_empty_n && dut.u_add.out_full_n && !dut.u_add.pf_ready) ||
          (dut.u_dense_in.busy && dut.u_dense_in.final_ph && dut.u_dense_in.out_full_n && !dut.u_dense_in.pf_ready))
        cnt_pf_hold++;
      if ((data_out_empty_n && !data_out_read) || (pf_out_empty_n && !pf_out_read)) cnt_host_stall++;

      // host
      if (data_in_write) n_in <= n_in + 1;
      if (pf_in_write) n_pfin <= n_pfin + 1;
      if (data_out_read && data_out_empty_n) begin
        chk(data_out_dout == net_ref(vins[n_out]), $sformatf("output vector %0d", n_out));
        n_out <= n_out + 1;
      end
      if (pf_out_read && pf_out_empty_n) begin
        int e [NPF];
        for (int j = 0; j < NPF; j++) e[j] = int'(pf_out_dout[j*PW +: PW]);
        chk(e[0] == n_pfout + 100, "profile element 0: inference number");
        chk(e[6] == 1023, "profile element 6: placeholder");
        chk(e[1] == done_max[0][n_pfout], "dense_in FIFO max");
        chk(e[2] == done_max[1][n_pfout], "conv1 FIFO max");
        chk(e[3] == done_max[2][n_pfout], "clone FIFO max");
        chk(e[4] == done_max[3][n_pfout], "conv2 FIFO max");
        chk(e[5] == done_max[4][n_pfout], "relu FIFO max");
        chk(e[7] == done_max[5][n_pfout], "add.a FIFO max");
        chk(e[8] == done_max[6][n_pfout], "add.b FIFO max");
        chk(e[9] == done_max[7][n_pfout], "conv3 FIFO max");
        chk(e[10] == done_max[8][n_pfout], "dense_out FIFO max");
        $display("profile %0d: %p", n_pfout, e);
        n_pfout <= n_pfout + 1;
      end
      in_en         <= ($urandom % 4) != 0;
      pfin_en       <= ($urandom % 2) != 0;
      dout_en       <= ($urandom % 8) != 0 && !(cyc > 300 && cyc < 1500);
      pfout_en      <= ($urandom % 3) != 0;

      if (n_out == NFR && n_pfout == NFR) begin
        $display("mechanisms: backpressure=%0d profile_hold=%0d split=%0d merge=%0d host_stall=%0d",
                 cnt_backpressure, cnt_pf_hold, cnt_split, cnt_merge, cnt_host_stall);
        chk(cnt_backpressure > 0, "back-pressure happened");
        chk(cnt_pf_hold > 0, "profile path held a last pixel");
        chk(cnt_split == NFR, "one placeholder per inference");
        chk(cnt_merge == NFR, "one merge per inference");
        chk(cnt_host_stall > 0, "host stalled the outputs");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: out=%0d pf=%0d", n_out, n_pfout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
