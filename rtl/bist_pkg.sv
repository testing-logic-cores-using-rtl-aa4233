// bist_pkg: widths, encodings and the command word shared by the BIST engine
// and its P1500 wrapper.
//
// The port widths of the three modules under test (BIT_NODE, CHECK_NODE and
// CONTROL_UNIT of a serial LDPC decoder), the 20-bit ALFSR, the 4-bit
// constrained port, the 16-bit MISRs, the 12-bit pattern counter and the
// 2-bit result select are the published figures of the design. The wrapper
// instruction encoding, the command encoding, the layout of the 16-bit
// command word and the status word are this implementation's own choices.
package bist_pkg;

  // Modules under test: input / output port widths.
  localparam int BN_IN_W  = 54;
  localparam int BN_OUT_W = 55;
  localparam int CN_IN_W  = 53;
  localparam int CN_OUT_W = 53;
  localparam int CU_IN_W  = 45;
  localparam int CU_OUT_W = 44;

  // BIST engine sizes.
  localparam int ALFSR_W = 20;
  localparam int CG_W    = 4;
  localparam int MISR_W  = 16;
  localparam int PC_W    = 12;
  localparam int SEL_W   = 2;

  // Internal-XOR feedback constants (polynomial without its leading term).
  localparam logic [ALFSR_W-1:0] ALFSR_POLY = 20'h00009;  // x^20 + x^3 + 1
  localparam logic [ALFSR_W-1:0] ALFSR_SEED = 20'h00001;
  localparam logic [MISR_W-1:0]  MISR_POLY  = 16'h002D;   // x^16 + x^5 + x^3 + x^2 + 1

  // Result select codes of the Output Selector.
  typedef enum logic [SEL_W-1:0] {
    SEL_BN     = 2'd0,
    SEL_CN     = 2'd1,
    SEL_CU     = 2'd2,
    SEL_STATUS = 2'd3
  } result_sel_e;

  // Commands carried by the Wrapper Control Data Register.
  typedef enum logic [1:0] {
    CMD_NOP    = 2'd0,
    CMD_RESET  = 2'd1,  // abort any test, clear results, pulse core reset
    CMD_START  = 2'd2,  // run the BIST for 'count' patterns (0 means 4096)
    CMD_SELECT = 2'd3   // choose the result the WDR will capture
  } bist_cmd_e;

  typedef struct packed {
    bist_cmd_e         cmd;
    result_sel_e       sel;
    logic [PC_W-1:0]   count;
  } wcdr_t;

  localparam int WCDR_W = $bits(wcdr_t);  // 16
  localparam int WDR_W  = MISR_W;         // 16

  // Status word returned when SEL_STATUS is selected.
  typedef struct packed {
    logic            test_enable;
    logic            end_test;
    logic [1:0]      zero;
    logic [PC_W-1:0] pattern_counter;
  } status_t;

  // Wrapper instructions.
  localparam int WIR_W = 3;
  typedef enum logic [WIR_W-1:0] {
    WS_BYPASS = 3'd0,
    WS_EXTEST = 3'd1,
    WS_INTEST = 3'd2,
    WS_WCDR   = 3'd3,
    WS_WDR    = 3'd4
  } wir_instr_e;

endpackage
