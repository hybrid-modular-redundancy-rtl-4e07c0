// hmr_dmr_checker -- bitwise checker of a dual-core lockstep (DCLS) pair.
//
// Compares every output bit of the main core with the helper core. When they match the
// main core's outputs are forwarded; on any mismatch error_o is raised and the forwarded
// word is gated to all zeros, so no request of the faulty pair reaches the system (with
// two cores it cannot be known which one is right). check_i masks bits out of the
// comparison; the unit sets it to all ones. Purely combinational: the error is visible in
// the same cycle as the mismatching outputs. Comparison, forwarding of the main core and
// gating follow the paper; gating by zeroing the whole word and the mask are this design's.
module hmr_dmr_checker #(
  parameter int unsigned Width = 32
) (
  input  logic [Width-1:0] main_i,
  input  logic [Width-1:0] helper_i,
  input  logic [Width-1:0] check_i,
  output logic [Width-1:0] data_o,
  output logic             error_o
);

  assign error_o = |((main_i ^ helper_i) & check_i);
  assign data_o  = error_o ? '0 : main_i;

endmodule
