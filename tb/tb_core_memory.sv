// tb_core_memory: checks the data-stationary core on the 4-line example
// circuit (16 words) and on random circuits.
//
// 1. For each gate of the 4-line wiring example (UNC on A0; SCN A2->A0; SCN
//    A2->A3; DCN A2,A1->A0) the core is loaded with word p holding address p,
//    the gate is applied once, and every word's new address field is compared
//    with the interchange table of that example, typed in below.
// 2. Random gate sequences on random loads, compared with a reference that
//    applies each gate to each word's address in software.
// Also checked: the data never changes, a gate takes exactly one cycle (the
// word read right after shows the change), and reads return one cycle late.
module tb_core_memory;
  import qsim_pkg::*;

  localparam int unsigned N = 4;
  localparam int unsigned M = 2;
  localparam int unsigned L = 2**N;

  logic         clk = 1'b0;
  logic         rst_n;
  logic         instr_valid;
  gate_instr_t  instr;
  logic         io_en, io_we;
  logic [N-1:0] io_word, io_waddr;
  logic [M-1:0] io_wdata;
  logic         io_rvalid;
  logic [N-1:0] io_raddr;
  logic [M-1:0] io_rdata;
  int checks = 0, failures = 0;

  logic [N-1:0] ref_addr [L];
  logic [M-1:0] ref_data [L];

  core_memory #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Interchange table of the 4-line example: new address of each original
  // address after the gate (a blank table cell means unchanged).
  localparam logic [3:0] T_UNC_A0  [16] = '{4'b0001, 4'b0000, 4'b0011, 4'b0010, 4'b0101, 4'b0100, 4'b0111, 4'b0110,
                                           4'b1001, 4'b1000, 4'b1011, 4'b1010, 4'b1101, 4'b1100, 4'b1111, 4'b1110};
  localparam logic [3:0] T_SCN_A2A0 [16] = '{4'b0000, 4'b0001, 4'b0010, 4'b0011, 4'b0101, 4'b0100, 4'b0111, 4'b0110,
                                           4'b1000, 4'b1001, 4'b1010, 4'b1011, 4'b1101, 4'b1100, 4'b1111, 4'b1110};
  localparam logic [3:0] T_SCN_A2A3 [16] = '{4'b0000, 4'b0001, 4'b0010, 4'b0011, 4'b1100, 4'b1101, 4'b1110, 4'b1111,
                                           4'b1000, 4'b1001, 4'b1010, 4'b1011, 4'b0100, 4'b0101, 4'b0110, 4'b0111};
  localparam logic [3:0] T_DCN      [16] = '{4'b0000, 4'b0001, 4'b0010, 4'b0011, 4'b0100, 4'b0101, 4'b0111, 4'b0110,
                                           4'b1000, 4'b1001, 4'b1010, 4'b1011, 4'b1100, 4'b1101, 4'b1111, 4'b1110};

  task automatic write_word(input int p, input logic [N-1:0] a, input logic [M-1:0] d);
    io_en = 1'b1; io_we = 1'b1; io_word = N'(p); io_waddr = a; io_wdata = d;
    @(posedge clk); #1;
    io_en = 1'b0; io_we = 1'b0;
    ref_addr[p] = a;
    ref_data[p] = d;
  endtask

  task automatic load_identity();
    for (int p = 0; p < int'(L); p++) write_word(p, N'(p), M'($urandom));
  endtask

  task automatic gate(input opcode_e op, input int t, input int f1, input int f2);
    instr_valid = 1'b1;
    instr.op = op; instr.to = IDX_W'(t); instr.fm1 = IDX_W'(f1); instr.fm2 = IDX_W'(f2);
    @(posedge clk); #1;
    instr_valid = 1'b0;
    instr.op = OP_NOP;
    // reference: apply the gate to each word's address
    for (int p = 0; p < int'(L); p++) begin
      logic c1, c2;
      c1 = (op == OP_UNC) ? 1'b1 : ref_addr[p][f1];
      c2 = (op == OP_DCN) ? ref_addr[p][f2] : 1'b1;
      if (op != OP_NOP && c1 && c2) ref_addr[p][t] = ~ref_addr[p][t];
    end
  endtask

  task automatic read_word(input int p, output logic [N-1:0] a, output logic [M-1:0] d);
    io_en = 1'b1; io_we = 1'b0; io_word = N'(p);
    @(posedge clk); #1;
    io_en = 1'b0;
    checks++;
    if (!io_rvalid) begin failures++; $display("FAIL read of word %0d: no rvalid one cycle later", p); end
    a = io_raddr;
    d = io_rdata;
  endtask

  task automatic compare_all(input string what);
    logic [N-1:0] a;
    logic [M-1:0] d;
    for (int p = 0; p < int'(L); p++) begin
      read_word(p, a, d);
      checks++;
      if (a !== ref_addr[p] || d !== ref_data[p]) begin
        failures++;
        $display("FAIL %s word %0d: addr %b data %b, expected %b %b", what, p, a, d, ref_addr[p], ref_data[p]);
      end
    end
  endtask

  task automatic table_check(input string what, input logic [3:0] tbl [16]);
    logic [N-1:0] a;
    logic [M-1:0] d;
    for (int p = 0; p < 16; p++) begin
      read_word(p, a, d);
      checks++;
      if (a !== tbl[p]) begin
        failures++;
        $display("FAIL %s: original address %b became %b, table says %b", what, 4'(p), a, tbl[p]);
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; instr_valid = 1'b0; instr = '0;
    io_en = 1'b0; io_we = 1'b0; io_word = '0; io_waddr = '0; io_wdata = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. the interchange table, one gate at a time
    load_identity(); gate(OP_UNC, 0, 0, 0); table_check("UNC TO=A0", T_UNC_A0);
    load_identity(); gate(OP_SCN, 0, 2, 0); table_check("SCN FM=A2 TO=A0", T_SCN_A2A0);
    load_identity(); gate(OP_SCN, 3, 2, 0); table_check("SCN FM=A2 TO=A3", T_SCN_A2A3);
    load_identity(); gate(OP_DCN, 0, 2, 1); table_check("DCN FM=A2,A1 TO=A0", T_DCN);

    // one gate per cycle: two back-to-back UNCs on A0 restore the identity
    load_identity();
    gate(OP_UNC, 0, 0, 0);
    gate(OP_UNC, 0, 0, 0);
    compare_all("back-to-back gates");

    // 2. random circuits on random loads
    for (int run = 0; run < 40; run++) begin
      for (int p = 0; p < int'(L); p++) write_word(p, N'($urandom), M'($urandom));
      for (int g = 0; g < 12; g++) begin
        int t, a, b;
        t = int'($urandom_range(N-1));
        do a = int'($urandom_range(N-1)); while (a == t);
        do b = int'($urandom_range(N-1)); while (b == t || b == a);
        gate(opcode_e'($urandom_range(3)), t, a, b);
      end
      compare_all("random circuit");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
