// instruction_decoder: turns one gate instruction into the TO, FM1 and FM2
// row lines shared by every word of the core memory.
//
// For a gate on target line t, TO row t fires. The control rows depend on the
// gate class: UNC selects the hard-wired TRUE row (row N) for both FM1 and
// FM2, SCN selects row fm1 for FM1 and TRUE for FM2, DCN selects rows fm1 and
// fm2. A NOP, or no valid instruction, fires no TO row, so no word changes.
//
// Interface and timing: purely combinational; the core applies the gate at
// the end of the cycle in which instr_valid is high. Assertions check that a
// gate names lines inside the address field and that target and controls are
// different lines.
//
// From the paper: the TO/FM1/FM2 rows and using TRUE for FM2 in an SCN (and,
// by the same reasoning, for both controls in a UNC). The instruction format
// is this design's own.
module instruction_decoder
  import qsim_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic        clk,          // used only by the assertions
  input  logic        instr_valid,
  input  gate_instr_t instr,
  output logic [N-1:0] to_line,
  output logic [N:0]   fm1_line,
  output logic [N:0]   fm2_line
);

  localparam int unsigned TRUE_ROW = N;

  always_comb begin
    to_line  = '0;
    fm1_line = '0;
    fm2_line = '0;
    if (instr_valid && instr.op != OP_NOP) begin
      for (int unsigned r = 0; r < N; r++) begin
        to_line[r] = (int'(instr.to) == int'(r));
        // UNC: no real control on FM1; SCN and DCN: FM1 reads line fm1
        fm1_line[r] = (instr.op != OP_UNC) && (int'(instr.fm1) == int'(r));
        // only a DCN has a real second control
        fm2_line[r] = (instr.op == OP_DCN) && (int'(instr.fm2) == int'(r));
      end
      fm1_line[TRUE_ROW] = (instr.op == OP_UNC);
      fm2_line[TRUE_ROW] = (instr.op != OP_DCN);
    end
  end

  // A gate must name lines of the address field, and its target must not be
  // one of its controls.
  a_to_range : assert property (@(posedge clk)
    (instr_valid && instr.op != OP_NOP) |-> (int'(instr.to) < int'(N)));
  a_scn_ctrl : assert property (@(posedge clk)
    (instr_valid && (instr.op == OP_SCN || instr.op == OP_DCN)) |->
      (int'(instr.fm1) < int'(N) && instr.fm1 != instr.to));
  a_dcn_ctrl : assert property (@(posedge clk)
    (instr_valid && instr.op == OP_DCN) |->
      (int'(instr.fm2) < int'(N) && instr.fm2 != instr.to && instr.fm2 != instr.fm1));

endmodule
