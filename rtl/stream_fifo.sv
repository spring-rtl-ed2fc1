// stream_fifo -- dataflow channel between two layers, with its fill pointer
// brought out as the size() tap the profiler reads.
//
// The channel is a shift-register FIFO of the kind HLS tools emit: a push
// shifts the word into slot 0, the head of the queue sits at slot mOutPtr.
// mOutPtr follows the pointer of the generated FIFO exactly: it resets to all
// ones (empty), counts up on a push without a pop and down on a pop without a
// push. It therefore equals occupancy-1. `size` presents mOutPtr+1, the
// occupancy (0 when empty), and that is what a profiled layer records (see
// depth_monitor). Taking the size from the pointer follows the method; the
// +1 is this design's reading of its measurements, in which a FIFO that
// never holds more than one word is profiled at 1, never at 0.
//
// Interface: ap_fifo style. Write side if_din/if_write/if_full_n, read side
// if_dout/if_read/if_empty_n. A write while full or a read while empty is
// ignored (and flagged by an assertion). if_dout is valid combinationally
// while if_empty_n is high; a word written in cycle t can be read in t+1.
// The slot storage and the full/empty decode are this design's choice; the
// pointer update is the one of the generated FIFO.
module stream_fifo #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned DEPTH  = 16,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [DATA_W-1:0] if_din,
  input  logic              if_write,
  output logic              if_full_n,
  output logic [DATA_W-1:0] if_dout,
  input  logic              if_read,
  output logic              if_empty_n,
  output logic [AW:0]       size
);

  logic [AW:0]       mOutPtr;
  logic [DATA_W-1:0] srl [DEPTH];
  logic              push, pop;

  assign if_empty_n = (mOutPtr != '1);
  assign if_full_n  = (mOutPtr != (AW+1)'(DEPTH - 1));
  assign push       = if_write & if_full_n;
  assign pop        = if_read & if_empty_n;
  assign size       = mOutPtr + 1'b1;
  assign if_dout    = srl[mOutPtr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (rst)
      mOutPtr <= '1;
    else if (push & ~pop)
      mOutPtr <= mOutPtr + 1'b1;
    else if (~push & pop)
      mOutPtr <= mOutPtr - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (push) begin
      srl[0] <= if_din;
      for (int i = 1; i < DEPTH; i++) srl[i] <= srl[i-1];
    end
  end

  // Producers and consumers only move a word when the flag allows it.
  a_no_write_full : assert property (@(posedge clk) disable iff (rst) if_write |-> if_full_n);
  a_no_read_empty : assert property (@(posedge clk) disable iff (rst) if_read |-> if_empty_n);

endmodule
