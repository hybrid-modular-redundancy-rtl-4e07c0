// hmr_rapid_recovery -- hardwired recovery engine of one lockstep group.
//
// Contains the four parts of the rapid recovery region: recovery PC, recovery RF and
// recovery CSRs (all ECC protected) and the recovery controller. bkp_i is the architectural
// state write stream of the group as it leaves the checker or voter (or of the main core
// alone while the group is split); it is copied into the backup registers every cycle.
// A mismatch (error_i), the start pulse that follows it and a running recovery block the
// copy, so the backup keeps the last state that all cores agreed on before the mismatch.
// Blocking in the start cycle matters when the mismatch lasts a single cycle (a TMR upset
// that is outvoted and then overwritten): without it the backup would take the next
// instruction's writes while missing those of the mismatching cycle, and the restore would
// produce a state that never existed. On start_i the controller clears the cores, halts them
// in debug mode and drives rec_o: the RF write ports with the backed-up registers, and the
// PC and CSR values, which the cores write into their own state. Backup in the same cycle
// as the core's write, blocking on error and the restore sequence follow the paper.
// EccEnable selects the ECC of the three register blocks at design time, as the paper
// allows; with it off the words are stored unprotected.
module hmr_rapid_recovery
  import hmr_pkg::*;
#(
  parameter bit EccEnable = 1'b1  // ECC protection of the backup registers
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  core_state_wr_t bkp_i,
  input  logic           error_i,
  input  logic           start_i,
  input  logic           halted_i,
  output core_state_wr_t rec_o,
  output logic           clear_o,
  output logic           debug_req_o,
  output logic           busy_o,
  output logic           ecc_err_o
);

  logic                        bkp_en;
  logic [1:0]                  rf_we;
  logic [1:0][RfAddrWidth-1:0] rf_addr, bkp_waddr;
  logic [1:0][XLEN-1:0]        rf_rdata, bkp_wdata;
  logic [1:0]                  bkp_we, rf_ecc_err;
  logic                        pc_we, csr_we, pc_ecc_err, csr_ecc_err;
  logic [XLEN-1:0]             pc;
  csr_set_t                    csr;

  assign bkp_en = !error_i && !start_i && !busy_o;

  for (genvar p = 0; p < 2; p++) begin : gen_wport
    assign bkp_we[p]    = bkp_i.rf[p].we;
    assign bkp_waddr[p] = bkp_i.rf[p].addr;
    assign bkp_wdata[p] = bkp_i.rf[p].wdata;
  end

  hmr_recovery_rf #(.DataWidth(XLEN), .NumRegs(NumRfRegs), .EccEnable(EccEnable)) i_rf (
    .clk_i, .rst_ni,
    .en_i      (bkp_en),
    .we_i      (bkp_we),
    .waddr_i   (bkp_waddr),
    .wdata_i   (bkp_wdata),
    .raddr_i   (rf_addr),
    .rdata_o   (rf_rdata),
    .ecc_err_o (rf_ecc_err)
  );

  hmr_recovery_pc #(.DataWidth(XLEN), .EccEnable(EccEnable)) i_pc (
    .clk_i, .rst_ni,
    .en_i      (bkp_en),
    .pc_we_i   (bkp_i.pc_we),
    .pc_i      (bkp_i.pc),
    .pc_o      (pc),
    .ecc_err_o (pc_ecc_err)
  );

  hmr_recovery_csr #(.DataWidth(XLEN), .EccEnable(EccEnable)) i_csr (
    .clk_i, .rst_ni,
    .en_i      (bkp_en),
    .csr_we_i  (bkp_i.csr_we),
    .csr_i     (bkp_i.csr),
    .csr_o     (csr),
    .ecc_err_o (csr_ecc_err)
  );

  hmr_rr_ctrl #(.NumRegs(NumRfRegs)) i_ctrl (
    .clk_i, .rst_ni,
    .start_i,
    .halted_i,
    .state_o     (),
    .busy_o,
    .clear_o,
    .debug_req_o,
    .rf_we_o     (rf_we),
    .rf_addr_o   (rf_addr),
    .pc_we_o     (pc_we),
    .csr_we_o    (csr_we)
  );

  always_comb begin
    for (int unsigned p = 0; p < 2; p++) begin
      rec_o.rf[p].we    = rf_we[p];
      rec_o.rf[p].addr  = rf_addr[p];
      rec_o.rf[p].wdata = rf_rdata[p];
    end
    rec_o.pc_we  = pc_we;
    rec_o.pc     = pc;
    rec_o.csr_we = csr_we;
    rec_o.csr    = csr;
  end

  assign ecc_err_o = busy_o && (|(rf_ecc_err & rf_we) || pc_ecc_err || csr_ecc_err);

endmodule
