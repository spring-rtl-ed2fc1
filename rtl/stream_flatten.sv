// stream_flatten -- packs a raster stream of pixels into one vector word.
//
// Pops N_PIX pixel words of CH channels, one per cycle, and places pixel p at
// elements [p*CH, p*CH+CH) of the vector (channels-last, as a Keras Flatten),
// then offers the vector word until the output has room. Pixels of the next
// frame are accepted once the vector has been written. Not profiled.
module stream_flatten #(
  parameter int unsigned N_PIX  = 36,
  parameter int unsigned CH     = 2,
  parameter int unsigned DATA_W = spring_pkg::DATA_W
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic [CH*DATA_W-1:0]         in_dout,
  input  logic                         in_empty_n,
  output logic                         in_read,
  output logic [N_PIX*CH*DATA_W-1:0]   out_din,
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
  assign out_din   = vec_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      full_q <= 1'b0;
      idx    <= '0;
    end else if (in_read) begin
      if (idx == CW'(N_PIX - 1)) begin
        full_q <= 1'b1;
        idx    <= '0;
      end else begin
        idx <= idx + 1'b1;
      end
    end else if (out_write) begin
      full_q <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (in_read) vec_q[idx*PW +: PW] <= in_dout;
  end
endmodule
