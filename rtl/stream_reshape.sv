// stream_reshape -- unpacks one vector word into a raster stream of pixels.
//
// The Dense front layer produces its N_PIX*CH results as one word; the
// convolutions consume one pixel (CH channels) per word. This block pops the
// vector word, then writes pixel p = elements [p*CH, p*CH+CH) (channels-last,
// as a Keras Reshape to (x, x, CH)), one pixel per cycle while the output has
// room. The next vector is popped in the cycle after the last pixel leaves.
// The layer is not profiled; it has no profile ports.
module stream_reshape #(
  parameter int unsigned N_PIX  = 36,
  parameter int unsigned CH     = 1,
  parameter int unsigned DATA_W = spring_pkg::DATA_W
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic [N_PIX*CH*DATA_W-1:0]   in_dout,
  input  logic                         in_empty_n,
  output logic                         in_read,
  output logic [CH*DATA_W-1:0]         out_din,
  input  logic                         out_full_n,
  output logic                         out_write
);
  localparam int unsigned PW = CH * DATA_W;
  localparam int unsigned CW = (N_PIX > 1) ? $clog2(N_PIX) : 1;

  logic [N_PIX*PW-1:0] vec_q;
  logic                full_q;
  logic [CW-1:0]       idx;

  assign in_read   = ~full_q & in_empty_n;
  assign out_write = full_q & out_full_n;
  assign out_din   = vec_q[idx*PW +: PW];

  always_ff @(posedge clk) begin
    if (rst) begin
      full_q <= 1'b0;
      idx    <= '0;
    end else if (in_read) begin
      full_q <= 1'b1;
      idx    <= '0;
    end else if (out_write) begin
      if (idx == CW'(N_PIX - 1)) full_q <= 1'b0;
      idx <= idx + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_read) vec_q <= in_dout;
  end
endmodule
