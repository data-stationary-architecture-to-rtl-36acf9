// tb_pre_processing: checks the start vector written into the core.
//
// A stand-in core captures the writes. For each start (n lines, basis state
// k) every word p must be written exactly once, with address field p and data
// (-1)^popcount(p & k) for p < 2**n and 0 above; the loader must take L
// cycles. The first case is the worked example: three lines, |001>, which
// must read 1 -1 1 -1 1 -1 1 -1 and then zeros.
module tb_pre_processing;
  import qsim_pkg::*;

  localparam int unsigned N = 5;
  localparam int unsigned M = 2;
  localparam int unsigned L = 2**N;
  localparam int unsigned NL_W = $clog2(N + 1);

  logic            clk = 1'b0;
  logic            rst_n, start, busy, done;
  logic [NL_W-1:0] nlines;
  logic [N-1:0]    basis;
  logic            io_en, io_we;
  logic [N-1:0]    io_word, io_waddr;
  logic [M-1:0]    io_wdata;
  int checks = 0, failures = 0;

  logic [N-1:0]    cap_addr [L];
  logic [M-1:0]    cap_data [L];
  int              cap_hits [L];
  int              busy_cycles;

  pre_processing #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (busy) busy_cycles++;
    if (io_en && io_we) begin
      cap_addr[io_word] <= io_waddr;
      cap_data[io_word] <= io_wdata;
      cap_hits[io_word] <= cap_hits[io_word] + 1;
    end
  end

  function automatic int decode(input logic [M-1:0] d);
    return int'(signed'(d));
  endfunction

  task automatic run(input int n, input int k, input int expect_vec [], input bit use_vec);
    for (int p = 0; p < int'(L); p++) cap_hits[p] = 0;
    busy_cycles = 0;
    nlines = NL_W'(n);
    basis  = N'(k);
    start  = 1'b1;
    @(posedge clk); #1;
    start  = 1'b0;
    wait (done);
    @(posedge clk); #1;
    checks++;
    if (busy_cycles != int'(L)) begin
      failures++;
      $display("FAIL n=%0d k=%0d: loading took %0d cycles, expected %0d", n, k, busy_cycles, L);
    end
    for (int p = 0; p < int'(L); p++) begin
      int e;
      if (use_vec && p < expect_vec.size()) e = expect_vec[p];
      else if (p >= (1 << n)) e = 0;
      else e = ($countones(p & k) % 2) ? -1 : 1;
      checks++;
      if (cap_hits[p] != 1 || cap_addr[p] != N'(p) || decode(cap_data[p]) != e) begin
        failures++;
        $display("FAIL n=%0d k=%0d word %0d: hits %0d addr %0d value %0d, expected 1 %0d %0d",
                 n, k, p, cap_hits[p], cap_addr[p], decode(cap_data[p]), p, e);
      end
    end
  endtask

  initial begin
    int ex [];
    rst_n = 1'b0; start = 1'b0; nlines = '0; basis = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    checks++;
    if (busy || io_en) begin failures++; $display("FAIL busy or writing after reset"); end

    // worked example: three lines, |001>
    ex = '{1, -1, 1, -1, 1, -1, 1, -1, 0, 0, 0, 0, 0, 0, 0, 0};
    run(3, 1, ex, 1'b1);
    // other starts
    run(3, 0, ex, 1'b0);
    run(N, 5'b10110, ex, 1'b0);
    for (int i = 0; i < 10; i++) begin
      int n;
      n = int'($urandom_range(N, 1));
      run(n, int'($urandom_range((1 << n) - 1)), ex, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
