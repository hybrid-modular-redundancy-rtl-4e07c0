// hmr_tmr_voter -- bitwise majority voter of a triple-core lockstep (TCLS) group.
//
// Every output bit is the 2-of-3 majority of the three cores, so a single faulty core is
// outvoted and the group keeps running. mismatch_o is raised whenever the three inputs are
// not identical, and fault_id_o names the core(s) that disagree with the majority in at
// least one bit: bit 0 = input a (main core), bit 1 = b, bit 2 = c. Purely combinational.
// The bitwise vote and the mismatch / fault-ID outputs follow the paper; the one-hot
// encoding of the fault ID is this design's choice.
module hmr_tmr_voter #(
  parameter int unsigned Width = 32
) (
  input  logic [Width-1:0] a_i,
  input  logic [Width-1:0] b_i,
  input  logic [Width-1:0] c_i,
  output logic [Width-1:0] data_o,
  output logic             mismatch_o,
  output logic [2:0]       fault_id_o
);

  assign data_o        = (a_i & b_i) | (a_i & c_i) | (b_i & c_i);
  assign fault_id_o[0] = |(a_i ^ data_o);
  assign fault_id_o[1] = |(b_i ^ data_o);
  assign fault_id_o[2] = |(c_i ^ data_o);
  assign mismatch_o    = |fault_id_o;

endmodule
