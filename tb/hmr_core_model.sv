// hmr_core_model -- behavioural stand-in for one cluster core, for simulation only.
//
// This is not a processor. It is a deterministic state machine whose only state is what
// the HMR unit treats as architectural state -- a PC, 31 registers and the CSR set -- and
// whose outputs are pure functions of that state and of its inputs, so that cores fed with
// identical inputs stay in lockstep and any corrupted state bit soon shows up at the
// outputs. Each running cycle it "executes" the instruction at pc: two registers derived
// from pc are rewritten (through two write ports, reported on bkp_o together with the next
// PC and the CSR values), mepc/mscratch are updated and pc advances by 4. It issues an
// instruction fetch and a data write every cycle, without waiting for grants.
// synch_rst_i clears the state to the boot address. A debug request halts the model
// HaltLatency cycles after it is first seen; while halted it accepts the restore stream
// rec_i and it resumes when the request drops. inject_i flips pc bits (inject_pc_i) or
// bits of register inject_reg_i, to emulate a radiation-induced upset.
module hmr_core_model
  import hmr_pkg::*;
#(
  parameter int unsigned HaltLatency = 4
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  logic           synch_rst_i,
  input  core_in_t       in_i,
  output core_out_t      out_o,
  output core_state_wr_t bkp_o,
  input  core_state_wr_t rec_i,
  input  logic           inject_i,
  input  logic           inject_pc_i,
  input  logic [4:0]     inject_reg_i,
  input  logic [31:0]    inject_mask_i
);

  logic [31:0] pc_q;
  logic [31:0] rf_q [32];
  csr_set_t    csr_q;
  logic        halted_q;
  logic [7:0]  dbg_cnt_q;
  logic        run;
  logic [4:0]  rd0, rd1;
  logic [31:0] res0, res1;
  csr_set_t    csr_n;

  always_comb begin
    run  = in_i.fetch_enable && !halted_q && !in_i.debug_req[0];
    rd0  = 5'(((pc_q >> 2) % 31) + 1);
    rd1  = 5'((((pc_q >> 2) + 7) % 31) + 1);
    res0 = rf_q[rd1] ^ (pc_q + in_i.core_id);
    res1 = {rf_q[rd0][26:0], rf_q[rd0][31:27]} + 32'h9E37_79B9;
    csr_n          = csr_q;
    csr_n.mepc     = pc_q;
    csr_n.mscratch = csr_q.mscratch + rf_q[rd0];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pc_q      <= 32'h0;
      for (int i = 0; i < 32; i++) rf_q[i] <= '0;
      csr_q     <= '0;
      halted_q  <= 1'b0;
      dbg_cnt_q <= '0;
    end else if (synch_rst_i) begin
      pc_q      <= in_i.boot_addr;
      for (int i = 0; i < 32; i++) rf_q[i] <= '0;
      csr_q     <= '0;
      halted_q  <= 1'b0;
      dbg_cnt_q <= '0;
    end else begin
      if (run) begin
        rf_q[rd0] <= res0;
        rf_q[rd1] <= res1;
        csr_q     <= csr_n;
        pc_q      <= pc_q + 32'd4;
      end
      // debug handshake
      if (in_i.debug_req[0] && !halted_q) begin
        dbg_cnt_q <= dbg_cnt_q + 8'd1;
        if (int'(dbg_cnt_q) + 1 >= HaltLatency) halted_q <= 1'b1;
      end else if (!in_i.debug_req[0]) begin
        dbg_cnt_q <= '0;
        halted_q  <= 1'b0;
      end
      if (halted_q) begin
        for (int p = 0; p < 2; p++) if (rec_i.rf[p].we && rec_i.rf[p].addr != '0) rf_q[rec_i.rf[p].addr] <= rec_i.rf[p].wdata;
        if (rec_i.pc_we)  pc_q  <= rec_i.pc;
        if (rec_i.csr_we) csr_q <= rec_i.csr;
      end
      // upset injection (takes precedence)
      if (inject_i) begin
        if (inject_pc_i) pc_q <= pc_q ^ inject_mask_i;
        else if (inject_reg_i != '0) rf_q[inject_reg_i] <= rf_q[inject_reg_i] ^ inject_mask_i;
      end
    end
  end

  always_comb begin
    out_o            = '0;
    out_o.debug_halt = halted_q;
    out_o.busy       = run;
    out_o.instr_req  = run;
    out_o.instr_addr = pc_q;
    out_o.data_req   = run;
    out_o.data_addr  = rf_q[rd0];
    out_o.data_we    = 1'b1;
    out_o.data_be    = 4'hF;
    out_o.data_wdata = rf_q[rd1];
    bkp_o             = '0;
    bkp_o.rf[0].we    = run;
    bkp_o.rf[0].addr  = rd0;
    bkp_o.rf[0].wdata = res0;
    bkp_o.rf[1].we    = run;
    bkp_o.rf[1].addr  = rd1;
    bkp_o.rf[1].wdata = res1;
    bkp_o.pc_we       = run;
    bkp_o.pc          = pc_q + 32'd4;
    bkp_o.csr_we      = run;
    bkp_o.csr         = csr_n;
  end

endmodule
