// qsim_pkg: types and constants shared by the data-stationary quantum-circuit
// emulator.
//
// A gate instruction names a target line (TO) and up to two control lines
// (FM1, FM2) of the address field. The opcode says how many of the control
// lines are real: an unconditional NOT (UNC) uses none, a single-controlled
// NOT (SCN) uses FM1, a double-controlled NOT (DCN) uses FM1 and FM2. A
// control that is not used reads the hard-wired TRUE row of the bus.
//
// The gate classes UNC/SCN/DCN and the TO/FM1/FM2 naming follow the paper.
// The opcode encoding, the 6-bit line index (enough for address fields of up
// to 64 bits, which covers the 32- and 35-bit sizes discussed) and the 2-bit
// two's-complement coding of the data values +1/-1/0 are this design's own.
package qsim_pkg;

  // Width of a line index inside an instruction.
  localparam int unsigned IDX_W = 6;

  typedef enum logic [1:0] {
    OP_NOP = 2'd0,  // no gate: no TO line fires
    OP_UNC = 2'd1,  // unconditional NOT on line TO
    OP_SCN = 2'd2,  // NOT on TO when line FM1 is 1
    OP_DCN = 2'd3   // NOT on TO when lines FM1 and FM2 are both 1
  } opcode_e;

  typedef struct packed {
    opcode_e          op;
    logic [IDX_W-1:0] to;
    logic [IDX_W-1:0] fm1;
    logic [IDX_W-1:0] fm2;
  } gate_instr_t;

  // Data field coding (two's complement in M = 2 bits).
  localparam logic [1:0] DATA_ZERO  = 2'b00;
  localparam logic [1:0] DATA_PLUS  = 2'b01;
  localparam logic [1:0] DATA_MINUS = 2'b11;

endpackage
