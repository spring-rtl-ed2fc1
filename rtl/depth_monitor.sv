// depth_monitor -- per-inference maximum of a FIFO's size() tap.
//
// In every cycle in which the layer pops its input FIFO, the FIFO's size tap
// is sampled and the running maximum kept, as a profiled layer does with
// "if (max_depth < ffsize) max_depth = ffsize" right before its read. max_now
// already includes a sample taken in the current cycle, so a layer whose last
// read coincides with its profile write reports that read too. `clear` (the
// profile write) starts a new inference at 0. The value is truncated to PF_W
// bits, i.e. it wraps like an ap_fixed without saturation.
module depth_monitor #(
  parameter int unsigned SIZE_W = 5,
  parameter int unsigned PF_W   = 10
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              rd,
  input  logic [SIZE_W-1:0] size,
  input  logic              clear,
  output logic [PF_W-1:0]   max_now
);
  logic [SIZE_W-1:0] max_q, max_c;

  always_comb begin
    max_c = max_q;
    if (rd && size > max_q) max_c = size;
    max_now = PF_W'(max_c);
  end

  always_ff @(posedge clk) begin
    if (rst || clear) max_q <= '0;
    else              max_q <= max_c;
  end
endmodule
