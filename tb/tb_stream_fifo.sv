// tb_stream_fifo -- self-checking test of the HLS-style FIFO and its size tap.
//
// Random pushes and pops (including attempts while full or empty, which the
// producer and consumer here never make: they honour the flags) against a
// queue model. Checks every popped word, the empty/full flags, and that
// `size` equals the occupancy (0 when empty) in every cycle. Runs with
// DEPTH 5 (not a power of two) and DEPTH 1.
module tb_stream_fifo;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  localparam int DW = 8;

  // instance A: depth 5
  logic [DW-1:0] a_din, a_dout;  logic a_write, a_full_n, a_read, a_empty_n; logic [3:0] a_size;
  stream_fifo #(.DATA_W(DW), .DEPTH(5)) dut_a (.clk, .rst, .if_din(a_din), .if_write(a_write),
    .if_full_n(a_full_n), .if_dout(a_dout), .if_read(a_read), .if_empty_n(a_empty_n), .size(a_size));
  // instance B: depth 1
  logic [DW-1:0] b_din, b_dout;  logic b_write, b_full_n, b_read, b_empty_n; logic [1:0] b_size;
  stream_fifo #(.DATA_W(DW), .DEPTH(1)) dut_b (.clk, .rst, .if_din(b_din), .if_write(b_write),
    .if_full_n(b_full_n), .if_dout(b_dout), .if_read(b_read), .if_empty_n(b_empty_n), .size(b_size));

  logic [DW-1:0] qa[$], qb[$];
  logic wa_req, ra_req, wb_req, rb_req;
  int fulls = 0, empties = 0;

  assign a_write = wa_req & a_full_n;
  assign a_read  = ra_req & a_empty_n;
  assign b_write = wb_req & b_full_n;
  assign b_read  = rb_req & b_empty_n;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    wa_req = 0; ra_req = 0; wb_req = 0; rb_req = 0; a_din = 0; b_din = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (4000) begin
      @(negedge clk);
      // flags and size against the model, mid-cycle
      chk(a_empty_n == (qa.size() != 0), "A empty_n");
      chk(a_full_n  == (qa.size() != 5), "A full_n");
      chk(a_size    == 4'(qa.size()), "A size");
      chk(b_empty_n == (qb.size() != 0), "B empty_n");
      chk(b_full_n  == (qb.size() != 1), "B full_n");
      chk(b_size    == 2'(qb.size()), "B size");
      if (qa.size() != 0) chk(a_dout == qa[0], "A dout");
      if (qb.size() != 0) chk(b_dout == qb[0], "B dout");
      if (qa.size() == 5) fulls++;
      if (qa.size() == 0) empties++;
      // next requests; phases bias toward filling or draining
      wa_req = ($urandom % 8) < (($time / 2000) % 2 == 0 ? 6 : 2);
      ra_req = ($urandom % 8) < (($time / 2000) % 2 == 0 ? 2 : 6);
      wb_req = $urandom % 2; rb_req = $urandom % 2;
      a_din  = DW'($urandom); b_din = DW'($urandom);
      @(posedge clk);
      if (a_read)  void'(qa.pop_front());
      if (a_write) qa.push_back(a_din);
      if (b_read)  void'(qb.pop_front());
      if (b_write) qb.push_back(b_din);
    end
    chk(fulls > 10 && empties > 10, "reached full and empty");
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
