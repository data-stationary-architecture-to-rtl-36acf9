// tb_qsim_large: the two worked examples on a large core (N = 17, 131,072
// words). The default N = 28 cannot be simulated: every cycle evaluates all
// 2**28 words and one load alone takes 2**28 cycles.
//
// The 3-line XOR example and the 4-line wiring example run on the low lines;
// all other lines stay in |0>, so all words above the used ones hold 0. The
// checks: the start vector in a sample of words across the whole core, the
// XOR result (+8 at |111>, symmetric, balanced), the wiring example's full
// transformed vector against a reference computed from the definition, and
// that a gate still takes one cycle with 131,072 words.
module tb_qsim_large;
  import qsim_pkg::*;

  localparam int unsigned N = 17;
  localparam int unsigned M = 2;
  localparam int unsigned L = 2**N;
  localparam int unsigned NL_W = $clog2(N + 1);
  localparam int unsigned VW = N + 2;

  logic                 clk = 1'b0;
  logic                 rst_n, pre_start, post_start;
  logic [NL_W-1:0]      nlines;
  logic [N-1:0]         basis;
  logic                 instr_valid, instr_ready;
  gate_instr_t          instr;
  logic                 host_io_en, host_io_we, host_io_ready, host_io_rvalid;
  logic [N-1:0]         host_io_word, host_io_waddr, host_io_raddr;
  logic [M-1:0]         host_io_wdata, host_io_rdata;
  logic                 pre_busy, pre_done, post_busy, post_done;
  logic [N:0]           nonzero_count;
  logic [N-1:0]         peak_index;
  logic signed [VW-1:0] peak_value, coef_one, res_rd_val;
  logic                 is_basis, is_constant, is_symmetric, is_balanced;
  logic                 res_rd_en, res_rd_valid;
  logic [N-1:0]         res_rd_idx;
  int checks = 0, failures = 0;

  qsim_top #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic load(input int n, input int k);
    int cycles;
    nlines = NL_W'(n); basis = N'(k);
    pre_start = 1'b1;
    @(posedge clk); #1;
    pre_start = 1'b0;
    cycles = 1;
    while (!pre_done) begin @(posedge clk); #1; cycles++; end
    expect_eq("load time", cycles, L + 1);
  endtask

  task automatic gate(input opcode_e op, input int t, input int f1, input int f2);
    instr_valid = 1'b1;
    instr.op = op; instr.to = IDX_W'(t); instr.fm1 = IDX_W'(f1); instr.fm2 = IDX_W'(f2);
    @(posedge clk); #1;
    expect_eq("gate accepted in one cycle", instr_ready, 1);
    instr_valid = 1'b0;
  endtask

  task automatic readout(input int n);
    nlines = NL_W'(n);
    post_start = 1'b1;
    @(posedge clk); #1;
    post_start = 1'b0;
    while (!post_done) begin @(posedge clk); #1; end
  endtask

  initial begin
    int y [16];
    int h;
    rst_n = 1'b0; pre_start = 1'b0; post_start = 1'b0; nlines = '0; basis = '0;
    instr_valid = 1'b0; instr = '0;
    host_io_en = 1'b0; host_io_we = 1'b0; host_io_word = '0; host_io_waddr = '0; host_io_wdata = '0;
    res_rd_en = 1'b0; res_rd_idx = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // XOR example on lines A2..A0
    load(3, 1);
    for (int s = 0; s < 40; s++) begin
      int p;
      p = (s < 8) ? s : int'($urandom_range(L - 1));
      host_io_en = 1'b1; host_io_we = 1'b0; host_io_word = N'(p);
      @(posedge clk); #1;
      host_io_en = 1'b0;
      expect_eq($sformatf("start word %0d address", p), host_io_raddr, p);
      expect_eq($sformatf("start word %0d value", p), int'(signed'(host_io_rdata)),
                (p >= 8) ? 0 : ((p & 1) ? -1 : 1));
    end
    gate(OP_SCN, 0, 1, 0);
    gate(OP_SCN, 0, 2, 0);
    readout(3);
    expect_eq("xor peak index", peak_index, 7);
    expect_eq("xor peak value", peak_value, 8);
    expect_eq("xor symmetric", is_symmetric, 1);
    expect_eq("xor balanced", is_balanced, 1);
    expect_eq("xor not constant", is_constant, 0);

    // 4-line wiring example from |0001>
    load(4, 1);
    gate(OP_UNC, 0, 0, 0);
    gate(OP_SCN, 0, 2, 0);
    gate(OP_SCN, 3, 2, 0);
    gate(OP_DCN, 0, 2, 1);
    readout(4);
    // reference: apply the four gates to the 16-entry vector
    for (int j = 0; j < 16; j++) y[j] = (j & 1) ? -1 : 1;
    begin
      int t [16];
      for (int j = 0; j < 16; j++) t[j ^ 1] = y[j];
      y = t;
      for (int j = 0; j < 16; j++) t[((j >> 2) & 1) ? (j ^ 1) : j] = y[j];
      y = t;
      for (int j = 0; j < 16; j++) t[((j >> 2) & 1) ? (j ^ 8) : j] = y[j];
      y = t;
      for (int j = 0; j < 16; j++) t[(((j >> 2) & 1) && ((j >> 1) & 1)) ? (j ^ 1) : j] = y[j];
      y = t;
    end
    for (int i = 0; i < 16; i++) begin
      h = 0;
      for (int j = 0; j < 16; j++) h += ($countones(i & j) % 2) ? -y[j] : y[j];
      res_rd_en = 1'b1; res_rd_idx = N'(i);
      @(posedge clk); #1;
      res_rd_en = 1'b0;
      expect_eq($sformatf("wiring example entry %0d", i), res_rd_val, h);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
