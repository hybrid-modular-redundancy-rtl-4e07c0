// hmr_pkg -- types and constants shared by the Hybrid Modular Redundancy (HMR) unit.
//
// The HMR unit sits between the cores of a multi-core cluster and the rest of the cluster.
// Every signal a core exchanges with the system is carried in two packed structs:
// core_in_t (system -> core) and core_out_t (core -> system). The signal names and widths
// of these structs are the ones printed on the core boundary in the paper's DCLS/TCLS block
// diagrams (control, instruction and data groups on the input side; status, instruction and
// data groups on the output side). The rapid recovery extension additionally needs the
// core's register-file, program-counter and CSR write ports; they travel in
// core_state_wr_t, used both for the backup stream (core -> unit) and for the restore
// stream (unit -> core). The list of backed-up CSRs and the register-bus format are this
// design's own choice.
package hmr_pkg;

  localparam int unsigned XLEN          = 32;
  localparam int unsigned NumRfRegs     = 31;  // x1..x31, x0 is hard-wired to zero
  localparam int unsigned RfAddrWidth   = 5;
  localparam int unsigned DebugReqWidth = 2;   // width printed for debug_req on the core boundary
  localparam int unsigned IrqAckWidth   = 5;   // width printed for interrupt_ack
  localparam int unsigned RegAddrWidth  = 12;  // 4 KiB register window of the unit

  // Per-core redundancy mode.
  typedef enum logic [1:0] {
    MODE_IND = 2'd0,  // independent core
    MODE_DMR = 2'd1,  // member of a dual-core lockstep group
    MODE_TMR = 2'd2   // member of a triple-core lockstep group
  } hmr_mode_e;

  // States of the split-lock / software recovery controller of one group.
  typedef enum logic [1:0] {
    GRP_SPLIT  = 2'd0,  // cores run independently
    GRP_LOCKED = 2'd1,  // cores run in lockstep as one virtual core
    GRP_UNLOAD = 2'd2,  // cores are saving their state to the stack
    GRP_RELOAD = 2'd3   // cores are reloading the saved state
  } grp_state_e;

  // States of the rapid recovery routine.
  typedef enum logic [1:0] {
    RR_IDLE    = 2'd0,
    RR_CLEAR   = 2'd1,
    RR_HALT    = 2'd2,
    RR_RESTORE = 2'd3
  } rr_state_e;

  // System -> core signals (control, instruction and data groups).
  typedef struct packed {
    logic                     fetch_enable;
    logic [31:0]              boot_addr;
    logic [31:0]              core_id;
    logic [DebugReqWidth-1:0] debug_req;
    logic [31:0]              irq;
    logic                     instr_gnt;
    logic [31:0]              instr_rdata;
    logic                     instr_rvalid;
    logic                     data_gnt;
    logic [31:0]              data_rdata;
    logic                     data_rvalid;
  } core_in_t;

  // Core -> system signals (status, instruction and data groups).
  typedef struct packed {
    logic                   debug_halt;
    logic [IrqAckWidth-1:0] irq_ack;
    logic                   busy;
    logic                   instr_req;
    logic [31:0]            instr_addr;
    logic                   data_req;
    logic [31:0]            data_addr;
    logic                   data_we;
    logic [3:0]             data_be;
    logic [31:0]            data_wdata;
  } core_out_t;

  // One register-file write port.
  typedef struct packed {
    logic                   we;
    logic [RfAddrWidth-1:0] addr;
    logic [XLEN-1:0]        wdata;
  } rf_wport_t;

  // Control and status registers kept by the rapid recovery extension.
  typedef struct packed {
    logic [XLEN-1:0] mstatus;
    logic [XLEN-1:0] mie;
    logic [XLEN-1:0] mtvec;
    logic [XLEN-1:0] mscratch;
    logic [XLEN-1:0] mepc;
    logic [XLEN-1:0] mcause;
  } csr_set_t;

  localparam int unsigned NumCsr = $bits(csr_set_t) / XLEN;

  // Architectural state write stream: RF (two write ports), PC and CSRs.
  typedef struct packed {
    rf_wport_t [1:0] rf;
    logic            pc_we;
    logic [XLEN-1:0] pc;
    logic            csr_we;
    csr_set_t        csr;
  } core_state_wr_t;

  // Everything of one core that the checkers and voters compare.
  typedef struct packed {
    core_out_t      out;
    core_state_wr_t state;
  } core_cmp_t;

  localparam int unsigned CmpWidth = $bits(core_cmp_t);

  // Peripheral register port (request and response).
  typedef struct packed {
    logic                    req;
    logic [RegAddrWidth-1:0] addr;
    logic                    we;
    logic [31:0]             wdata;
  } reg_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } reg_rsp_t;

  // Register map (byte offsets).
  localparam logic [RegAddrWidth-1:0] REG_AVAIL      = 12'h000;
  localparam logic [RegAddrWidth-1:0] REG_DMR_ENABLE = 12'h004;
  localparam logic [RegAddrWidth-1:0] REG_TMR_ENABLE = 12'h008;
  localparam logic [RegAddrWidth-1:0] REG_DMR_CONFIG = 12'h00C;
  localparam logic [RegAddrWidth-1:0] REG_TMR_CONFIG = 12'h010;
  localparam logic [RegAddrWidth-1:0] REG_CORE_MODE  = 12'h014;
  localparam logic [RegAddrWidth-1:0] REG_DMR_STATE  = 12'h018;
  localparam logic [RegAddrWidth-1:0] REG_TMR_STATE  = 12'h01C;
  localparam logic [RegAddrWidth-1:0] REG_SP_BASE    = 12'h100;  // + 4 * core
  localparam logic [RegAddrWidth-1:0] REG_MISM_BASE  = 12'h200;  // + 4 * core

  // Bits of the DMR_CONFIG / TMR_CONFIG registers.
  localparam int unsigned CFG_RAPID_RECOVERY = 0;  // recover with hardware instead of software
  localparam int unsigned CFG_SPLIT_SETBACK  = 1;  // clear helper cores when the group splits
  localparam int unsigned CFG_LOCK_SETBACK   = 2;  // clear all cores when entering RELOAD
  localparam int unsigned CFG_RELOAD_SETBACK = 3;  // clear again on an error during RELOAD
  localparam int unsigned CFG_DELAY_RESYNCH  = 4;  // TMR: keep running after a first mismatch
  localparam int unsigned CfgWidth           = 5;

  // Number of Hamming parity bits for a SECDED code over DataWidth bits
  // (one more overall parity bit is added on top).
  function automatic int unsigned ecc_parity_bits(int unsigned data_width);
    int unsigned p;
    p = 1;
    while ((1 << p) < data_width + p + 1) p++;
    return p;
  endfunction

endpackage
