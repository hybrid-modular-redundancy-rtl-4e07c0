// hmr_split_lock_mux -- input distribution and output selection of the split-lock scheme.
//
// Cores are grouped in an interleaved way so that the lowest core IDs stay the visible ones
// when the whole cluster is locked: DMR group d = {d, d+N/2}, TMR group t = {t, t+N/3,
// t+2N/3}, with the lowest member as main core. For every core an input multiplexer picks
// its own system port (independent), the system port of its DMR main core, or that of its
// TMR main core, so that the cores of a group receive identical inputs (core ID included,
// so locked cores share the main core's ID). For every system port an output multiplexer
// picks the core's own outputs (independent), the DCLS checker result (main port of a DMR
// group), the TCLS voter result (main port of a TMR group) or zero (helper ports).
// Purely combinational. Grouping, muxing and the zeroed helper ports follow the paper's
// 6-core split-lock figures, generalised to NumCores.
module hmr_split_lock_mux
  import hmr_pkg::*;
#(
  parameter int unsigned NumCores = 12,
  localparam int unsigned NumDmr  = NumCores / 2,
  localparam int unsigned NumTmr  = NumCores / 3
) (
  input  hmr_mode_e [NumCores-1:0] core_mode_i,
  input  core_in_t  [NumCores-1:0] sys_in_i,
  output core_in_t  [NumCores-1:0] core_in_o,
  input  core_out_t [NumCores-1:0] core_out_i,
  input  core_out_t [NumDmr-1:0]   dmr_out_i,
  input  core_out_t [NumTmr-1:0]   tmr_out_i,
  output core_out_t [NumCores-1:0] sys_out_o
);

  for (genvar c = 0; c < NumCores; c++) begin : gen_core
    localparam int unsigned DmrMain = (NumDmr > 0) ? c % NumDmr : c;
    localparam int unsigned TmrMain = (NumTmr > 0) ? c % NumTmr : c;

    always_comb begin
      unique case (core_mode_i[c])
        MODE_TMR: core_in_o[c] = sys_in_i[TmrMain];
        MODE_DMR: core_in_o[c] = sys_in_i[DmrMain];
        default:  core_in_o[c] = sys_in_i[c];
      endcase
    end

    always_comb begin
      unique case (core_mode_i[c])
        MODE_TMR: sys_out_o[c] = (c < NumTmr) ? tmr_out_i[TmrMain] : '0;
        MODE_DMR: sys_out_o[c] = (c < NumDmr) ? dmr_out_i[DmrMain] : '0;
        default:  sys_out_o[c] = core_out_i[c];
      endcase
    end
  end

endmodule
