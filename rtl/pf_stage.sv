// pf_stage -- the profile-stream node of one layer: read, append, write.
//
// A profiled layer reads one profile word from each of its profile inputs
// (one for an ordinary layer, two for a merge), and writes one word that is
// the first input's elements, then the second input's, then the N_NEW values
// the layer collected. Element 0 sits in the least significant PF_W bits.
// The node holds no state: `ready` says that every profile input holds a
// word and the output has room; the layer then raises `commit` in the same
// cycle as its last data write of the inference, which pops the inputs and
// pushes the output. That joint condition is the extra FSM state an HLS tool
// adds for a profiled function. With N_B = 0 the second input is unused.
module pf_stage #(
  parameter int unsigned PF_W  = 10,
  parameter int unsigned N_A   = 1,
  parameter int unsigned N_B   = 0,
  parameter int unsigned N_NEW = 1,
  localparam int unsigned NB1  = (N_B > 0) ? N_B : 1,
  localparam int unsigned N_OUT = N_A + N_B + N_NEW
) (
  input  logic [N_A*PF_W-1:0]   pf_a_dout,
  input  logic                  pf_a_empty_n,
  output logic                  pf_a_read,
  input  logic [NB1*PF_W-1:0]   pf_b_dout,
  input  logic                  pf_b_empty_n,
  output logic                  pf_b_read,
  output logic [N_OUT*PF_W-1:0] pf_out_din,
  input  logic                  pf_out_full_n,
  output logic                  pf_out_write,
  input  logic [N_NEW*PF_W-1:0] new_vals,
  output logic                  ready,
  input  logic                  commit
);
  assign ready        = pf_a_empty_n & ((N_B == 0) | pf_b_empty_n) & pf_out_full_n;
  assign pf_a_read    = commit;
  assign pf_b_read    = commit & (N_B != 0);
  assign pf_out_write = commit;

  generate
    if (N_B == 0) begin : g_one
      assign pf_out_din = {new_vals, pf_a_dout};
    end else begin : g_two
      assign pf_out_din = {new_vals, pf_b_dout, pf_a_dout};
    end
  endgenerate
endmodule
