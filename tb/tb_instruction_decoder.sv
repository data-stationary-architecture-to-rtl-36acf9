// tb_instruction_decoder: checks the row lines the decoder fires for every
// gate class against a reference written from the gate definitions: UNC fires
// TO only, with both controls on the TRUE row; SCN adds FM1 on its control
// line; DCN uses FM1 and FM2. A NOP or an invalid cycle fires nothing.
// Exhaustive over small line numbers, then random at the default width.
module tb_instruction_decoder;
  import qsim_pkg::*;

  localparam int unsigned N = 28;

  logic        clk = 1'b0;
  logic        instr_valid;
  gate_instr_t instr;
  logic [N-1:0] to_line;
  logic [N:0]   fm1_line, fm2_line;
  int checks = 0, failures = 0;

  instruction_decoder #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input opcode_e op, input int t, input int f1, input int f2, input logic v);
    logic [N-1:0] e_to;
    logic [N:0]   e_f1, e_f2;
    instr_valid = v;
    instr.op  = op;
    instr.to  = IDX_W'(t);
    instr.fm1 = IDX_W'(f1);
    instr.fm2 = IDX_W'(f2);
    @(negedge clk);
    e_to = '0; e_f1 = '0; e_f2 = '0;
    if (v && op != OP_NOP) begin
      e_to = N'(1) << t;
      case (op)
        OP_UNC: begin e_f1 = (N+1)'(1) << N;  e_f2 = (N+1)'(1) << N;  end
        OP_SCN: begin e_f1 = (N+1)'(1) << f1; e_f2 = (N+1)'(1) << N;  end
        default: begin e_f1 = (N+1)'(1) << f1; e_f2 = (N+1)'(1) << f2; end
      endcase
    end
    checks++;
    if (to_line !== e_to || fm1_line !== e_f1 || fm2_line !== e_f2) begin
      failures++;
      $display("FAIL op=%s to=%0d fm1=%0d fm2=%0d v=%0b: TO=%h FM1=%h FM2=%h expected %h %h %h",
               op.name(), t, f1, f2, v, to_line, fm1_line, fm2_line, e_to, e_f1, e_f2);
    end
  endtask

  initial begin
    instr_valid = 1'b0;
    instr = '0;
    @(negedge clk);
    // exhaustive over the lines 0..5
    for (int t = 0; t < 6; t++)
      for (int a = 0; a < 6; a++)
        for (int b = 0; b < 6; b++) begin
          if (t == a || t == b || a == b) continue;
          check(OP_UNC, t, a, b, 1'b1);
          check(OP_SCN, t, a, b, 1'b1);
          check(OP_DCN, t, a, b, 1'b1);
          check(OP_NOP, t, a, b, 1'b1);
          check(OP_DCN, t, a, b, 1'b0);
        end
    // random gates over the whole field
    for (int i = 0; i < 2000; i++) begin
      int t, a, b;
      t = int'($urandom_range(N-1));
      do a = int'($urandom_range(N-1)); while (a == t);
      do b = int'($urandom_range(N-1)); while (b == t || b == a);
      check(opcode_e'($urandom_range(3)), t, a, b, 1'($urandom_range(1)));
    end
    // the highest line as target and control
    check(OP_DCN, N-1, 0, 1, 1'b1);
    check(OP_SCN, 0, N-1, 1, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
