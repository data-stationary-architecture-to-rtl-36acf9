// tb_post_processing: checks sorting, the Walsh-Hadamard transform and the
// decoding flags against a reference computed directly from the definition
// H[i][j] = (-1)^popcount(i & j).
//
// A stand-in core holds (address, data) words and answers reads one cycle
// late, like the real I/O port. Cases: the worked XOR example after its two
// gates (must give +8 at |111>, symmetric and balanced), the constant
// function (+8 at |001>), the AND function, and random permuted vectors. The
// busy time must be L + 2 + n*2**(n-1) + 2**n cycles.
module tb_post_processing;
  import qsim_pkg::*;

  localparam int unsigned N = 4;
  localparam int unsigned M = 2;
  localparam int unsigned L = 2**N;
  localparam int unsigned NL_W = $clog2(N + 1);
  localparam int unsigned VW = N + 2;

  logic                 clk = 1'b0;
  logic                 rst_n, start, busy, done;
  logic [NL_W-1:0]      nlines;
  logic                 io_en, io_we;
  logic [N-1:0]         io_word;
  logic                 io_rvalid;
  logic [N-1:0]         io_raddr;
  logic [M-1:0]         io_rdata;
  logic [N:0]           nonzero_count;
  logic [N-1:0]         peak_index;
  logic signed [VW-1:0] peak_value, coef_one, rd_val;
  logic                 is_basis, is_constant, is_symmetric, is_balanced;
  logic                 rd_en, rd_valid;
  logic [N-1:0]         rd_idx;
  int checks = 0, failures = 0;

  logic [N-1:0] w_addr [L];
  int           w_val  [L];
  int           busy_cycles;

  post_processing #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stand-in core port
  always @(posedge clk) begin
    io_rvalid <= io_en && !io_we;
    if (io_en && !io_we) begin
      io_raddr <= w_addr[io_word];
      io_rdata <= M'(w_val[io_word]);
    end
    if (busy) busy_cycles++;
  end

  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(input string name, input int n);
    int y [L];
    int h [L];
    int nz, pk, pkv;
    logic b, c, s, bal;
    // reference
    for (int p = 0; p < int'(L); p++) y[w_addr[p]] = w_val[p];
    nz = 0; pk = 0; pkv = 0;
    for (int i = 0; i < (1 << n); i++) begin
      h[i] = 0;
      for (int j = 0; j < (1 << n); j++)
        h[i] += ($countones(i & j) % 2) ? -y[j] : y[j];
      if (h[i] != 0) nz++;
      if ((h[i] < 0 ? -h[i] : h[i]) > (pkv < 0 ? -pkv : pkv)) begin pk = i; pkv = h[i]; end
    end
    b = (nz == 1); c = b && pk == 1; s = b && pk != 1; bal = (h[1] == 0);
    // run the unit
    busy_cycles = 0;
    nlines = NL_W'(n);
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    wait (done);
    @(posedge clk); #1;
    expect_eq({name, " cycles"}, busy_cycles, L + 2 + n * (1 << (n - 1)) + (1 << n));
    expect_eq({name, " nonzero"}, nonzero_count, nz);
    expect_eq({name, " peak index"}, peak_index, pk);
    expect_eq({name, " peak value"}, peak_value, pkv);
    expect_eq({name, " coef |0..01>"}, coef_one, h[1]);
    expect_eq({name, " is_basis"}, is_basis, b);
    expect_eq({name, " is_constant"}, is_constant, c);
    expect_eq({name, " is_symmetric"}, is_symmetric, s);
    expect_eq({name, " is_balanced"}, is_balanced, bal);
    for (int i = 0; i < (1 << n); i++) begin
      rd_en = 1'b1; rd_idx = N'(i);
      @(posedge clk); #1;
      rd_en = 1'b0;
      expect_eq($sformatf("%s entry %0d", name, i), rd_val, h[i]);
    end
  endtask

  task automatic load(input int addr_of [], input int val_of []);
    for (int p = 0; p < int'(L); p++) begin
      w_addr[p] = (p < addr_of.size()) ? N'(addr_of[p]) : N'(p);
      w_val[p]  = (p < val_of.size()) ? val_of[p] : 0;
    end
  endtask

  initial begin
    int perm [];
    int vals [];
    rst_n = 1'b0; start = 1'b0; nlines = '0; rd_en = 1'b0; rd_idx = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // worked XOR example, words as left by the two gates
    load('{0, 1, 3, 2, 5, 4, 6, 7}, '{1, -1, 1, -1, 1, -1, 1, -1});
    run("xor example", 3);
    expect_eq("xor example gives +8 at |111>", (peak_index == 7 && peak_value == 8), 1);
    expect_eq("xor example symmetric and balanced", (is_symmetric && is_balanced), 1);
    // constant function: no gate at all
    load('{0, 1, 2, 3, 4, 5, 6, 7}, '{1, -1, 1, -1, 1, -1, 1, -1});
    run("constant", 3);
    expect_eq("constant gives 8 at |001>", (is_constant && peak_value == 8), 1);
    // AND function: DCN A2,A1 -> A0 swaps words 6 and 7
    load('{0, 1, 2, 3, 4, 5, 7, 6}, '{1, -1, 1, -1, 1, -1, 1, -1});
    run("and", 3);
    // random permutations, random +1/-1/0 data
    for (int r = 0; r < 20; r++) begin
      perm = new[L];
      vals = new[L];
      for (int p = 0; p < int'(L); p++) perm[p] = p;
      perm.shuffle();
      for (int p = 0; p < int'(L); p++) vals[p] = int'($urandom_range(2)) - 1;
      load(perm, vals);
      run("random", int'($urandom_range(N, 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
