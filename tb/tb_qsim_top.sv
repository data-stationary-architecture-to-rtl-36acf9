// tb_qsim_top: end-to-end runs of the whole emulator.
//
// Each run loads a start vector (through pre-processing, or word by word
// through the host port), streams gates, starts the read-out and compares
// every transformed entry and every result flag with a reference. The
// reference keeps the state vector as a plain array, applies each gate as a
// permutation of its entries and computes the Hadamard transform from the
// definition, so it shares nothing with the address-field mechanism.
//
// Runs: the 3-line XOR example (two SCNs; expect +8 at |111>, symmetric,
// balanced), the constant function, the AND function, the 4-line wiring
// example (UNC, SCN, SCN, DCN), random circuits, and host-loaded vectors.
// Mechanisms counted (each must occur): UNC, SCN and DCN gates, gates held
// off while a unit owns the core port, back-to-back gates one per cycle,
// host writes and reads, host requests ignored while busy, and the constant,
// symmetric, balanced and "none of these" outcomes.
module tb_qsim_top;
  import qsim_pkg::*;

  localparam int unsigned N = 5;
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
  int n_unc = 0, n_scn = 0, n_dcn = 0, n_stall = 0, n_b2b = 0;
  int n_hwrite = 0, n_hread = 0, n_hblock = 0;
  int n_const = 0, n_sym = 0, n_bal = 0, n_none = 0;

  int y [L];   // reference state vector, indexed by address

  qsim_top #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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

  // pre-processing start; the first gate of the circuit is offered at once,
  // so it has to wait for the port
  task automatic start_pre(input int n, input int k);
    nlines = NL_W'(n);
    basis = N'(k);
    pre_start = 1'b1;
    @(posedge clk); #1;
    pre_start = 1'b0;
    for (int j = 0; j < int'(L); j++)
      y[j] = (j >= (1 << n)) ? 0 : (($countones(j & k) % 2) ? -1 : 1);
  endtask

  task automatic gate(input opcode_e op, input int t, input int f1, input int f2);
    int nxt [L];
    instr_valid = 1'b1;
    instr.op = op; instr.to = IDX_W'(t); instr.fm1 = IDX_W'(f1); instr.fm2 = IDX_W'(f2);
    @(posedge clk);
    while (!instr_ready) begin
      n_stall++;
      @(posedge clk);
    end
    #1;
    instr_valid = 1'b0;
    case (op)
      OP_UNC: n_unc++;
      OP_SCN: n_scn++;
      OP_DCN: n_dcn++;
      default: ;
    endcase
    for (int j = 0; j < int'(L); j++) begin
      logic c1, c2;
      int d;
      c1 = (op == OP_UNC) ? 1'b1 : 1'((j >> f1) & 1);
      c2 = (op == OP_DCN) ? 1'((j >> f2) & 1) : 1'b1;
      d = (op != OP_NOP && c1 && c2) ? (j ^ (1 << t)) : j;
      nxt[d] = y[j];
    end
    y = nxt;
  endtask

  task automatic host_write(input int p, input int a, input int v);
    host_io_en = 1'b1; host_io_we = 1'b1;
    host_io_word = N'(p); host_io_waddr = N'(a); host_io_wdata = M'(v);
    @(posedge clk); #1;
    host_io_en = 1'b0; host_io_we = 1'b0;
    n_hwrite++;
  endtask

  task automatic post_and_check(input string name, input int n);
    int h [L];
    int nz, pk, pkv;
    int cycles;
    logic b, c, s, bal;
    for (int i = 0; i < (1 << n); i++) begin
      h[i] = 0;
      for (int j = 0; j < (1 << n); j++) h[i] += ($countones(i & j) % 2) ? -y[j] : y[j];
    end
    nz = 0; pk = 0; pkv = 0;
    for (int i = 0; i < (1 << n); i++) begin
      if (h[i] != 0) nz++;
      if ((h[i] < 0 ? -h[i] : h[i]) > (pkv < 0 ? -pkv : pkv)) begin pk = i; pkv = h[i]; end
    end
    b = (nz == 1); c = b && pk == 1; s = b && pk != 1; bal = (h[1] == 0);
    nlines = NL_W'(n);
    post_start = 1'b1;
    @(posedge clk); #1;
    post_start = 1'b0;
    // a host request during the read-out must be ignored
    host_io_en = 1'b1; host_io_we = 1'b1; host_io_word = '0; host_io_waddr = '1; host_io_wdata = '0;
    if (!host_io_ready) n_hblock++;
    @(posedge clk); #1;
    host_io_en = 1'b0; host_io_we = 1'b0;
    cycles = 2;
    while (!post_done) begin @(posedge clk); #1; cycles++; end
    // done comes one cycle after the last busy cycle
    expect_eq({name, " read-out cycles"}, cycles, L + 3 + n * (1 << (n - 1)) + (1 << n));
    expect_eq({name, " nonzero"}, nonzero_count, nz);
    expect_eq({name, " peak index"}, peak_index, pk);
    expect_eq({name, " peak value"}, peak_value, pkv);
    expect_eq({name, " coef |0..01>"}, coef_one, h[1]);
    expect_eq({name, " is_basis"}, is_basis, b);
    expect_eq({name, " is_constant"}, is_constant, c);
    expect_eq({name, " is_symmetric"}, is_symmetric, s);
    expect_eq({name, " is_balanced"}, is_balanced, bal);
    if (c) n_const++;
    if (s) n_sym++;
    if (bal) n_bal++;
    if (!c && !s && !bal) n_none++;
    for (int i = 0; i < (1 << n); i++) begin
      res_rd_en = 1'b1; res_rd_idx = N'(i);
      @(posedge clk); #1;
      res_rd_en = 1'b0;
      expect_eq($sformatf("%s entry %0d", name, i), res_rd_val, h[i]);
    end
  endtask

  task automatic wait_pre();
    while (pre_busy) begin @(posedge clk); #1; end
  endtask

  task automatic random_gate(input int n);
    int t, a, b;
    t = int'($urandom_range(n - 1));
    do a = int'($urandom_range(n - 1)); while (a == t);
    do b = int'($urandom_range(n - 1)); while (b == t || b == a);
    gate(opcode_e'($urandom_range(3, 1)), t, a, b);
  endtask

  initial begin
    rst_n = 1'b0; pre_start = 1'b0; post_start = 1'b0; nlines = '0; basis = '0;
    instr_valid = 1'b0; instr = '0;
    host_io_en = 1'b0; host_io_we = 1'b0; host_io_word = '0; host_io_waddr = '0; host_io_wdata = '0;
    res_rd_en = 1'b0; res_rd_idx = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // XOR example: |001>, SCN A1->A0, SCN A2->A0
    start_pre(3, 1);
    gate(OP_SCN, 0, 1, 0);
    gate(OP_SCN, 0, 2, 0);
    post_and_check("xor", 3);
    expect_eq("xor gives +8|111>", (peak_index == 7 && peak_value == 8 && is_symmetric && is_balanced), 1);

    // constant function
    start_pre(3, 1);
    wait_pre();
    post_and_check("constant", 3);
    expect_eq("constant gives 8|001>", (is_constant && peak_value == 8), 1);

    // AND function
    start_pre(3, 1);
    gate(OP_DCN, 0, 2, 1);
    post_and_check("and", 3);

    // the 4-line wiring example, gates back to back
    start_pre(4, 1);
    wait_pre();
    begin
      int t0;
      t0 = $time;
      gate(OP_UNC, 0, 0, 0);
      gate(OP_SCN, 0, 2, 0);
      gate(OP_SCN, 3, 2, 0);
      gate(OP_DCN, 0, 2, 1);
      expect_eq("four gates take four cycles", ($time - t0) / 10, 4);
      n_b2b++;
    end
    post_and_check("wiring example", 4);

    // random circuits on all lines and on fewer lines
    for (int r = 0; r < 12; r++) begin
      int n;
      n = int'($urandom_range(N, 3));
      start_pre(n, int'($urandom_range((1 << n) - 1)));
      for (int g = 0; g < 10; g++) random_gate(n);
      post_and_check("random", n);
    end

    // host-loaded vectors: a shuffled placement of random +1/-1/0 values
    for (int r = 0; r < 4; r++) begin
      int perm [];
      logic [N-1:0] ra;
      logic [M-1:0] rd;
      perm = new[L];
      for (int p = 0; p < int'(L); p++) perm[p] = p;
      perm.shuffle();
      for (int p = 0; p < int'(L); p++) begin
        int v;
        v = (perm[p] < 16) ? int'($urandom_range(2)) - 1 : 0;
        host_write(p, perm[p], v);
        y[perm[p]] = v;
      end
      for (int g = 0; g < 8; g++) random_gate(4);
      // read one word back through the host port
      host_io_en = 1'b1; host_io_we = 1'b0; host_io_word = N'(r);
      @(posedge clk); #1;
      host_io_en = 1'b0;
      checks++;
      if (!host_io_rvalid) begin failures++; $display("FAIL host read: no rvalid"); end
      else begin
        n_hread++;
        expect_eq("host read data matches the vector entry at its address",
                  int'(signed'(host_io_rdata)), y[host_io_raddr]);
      end
      post_and_check("host-loaded", 4);
    end

    // every mechanism must have happened
    expect_eq("UNC gates seen", n_unc > 0, 1);
    expect_eq("SCN gates seen", n_scn > 0, 1);
    expect_eq("DCN gates seen", n_dcn > 0, 1);
    expect_eq("gates held off while the port was busy", n_stall > 0, 1);
    expect_eq("back-to-back gates", n_b2b > 0, 1);
    expect_eq("host writes", n_hwrite > 0, 1);
    expect_eq("host reads", n_hread > 0, 1);
    expect_eq("host requests ignored while busy", n_hblock > 0, 1);
    expect_eq("constant outcomes", n_const > 0, 1);
    expect_eq("symmetric outcomes", n_sym > 0, 1);
    expect_eq("balanced outcomes", n_bal > 0, 1);
    expect_eq("other outcomes", n_none > 0, 1);
    $display("mechanisms: UNC=%0d SCN=%0d DCN=%0d stall_cycles=%0d back_to_back=%0d host_writes=%0d host_reads=%0d host_blocked=%0d constant=%0d symmetric=%0d balanced=%0d other=%0d",
             n_unc, n_scn, n_dcn, n_stall, n_b2b, n_hwrite, n_hread, n_hblock, n_const, n_sym, n_bal, n_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
