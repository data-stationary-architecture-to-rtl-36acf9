// post_processing: reads the core out in address order, applies a
// Walsh-Hadamard transform and classifies the result.
//
// After the gates, word p of the core holds (address a_p, data d_p): the
// state vector has d_p at position a_p. The unit works in three phases.
//  1. Sort. It reads the L core words one per cycle through the core's I/O
//     port and writes d_p, sign-extended, into buffer entry a_p. The address
//     fields are a permutation of 0..L-1, so every entry is written once.
//  2. Transform. An in-place fast Walsh-Hadamard transform without
//     normalisation over the first 2**n entries (n = lines in use): for each
//     line s < n and each pair (i, i + 2**s) with bit s of i clear, the pair
//     (a, b) becomes (a + b, a - b). One butterfly per cycle.
//  3. Scan. It walks the 2**n results and finds the number of non-zero
//     entries, the entry of largest magnitude and the entry at |0..01>.
// The flags apply the decoding rules of the Deutsch-Jozsa style function
// test: the result is a single basis vector (is_basis); a single basis
// vector at |0..01> means the function is constant (is_constant); at any
// other basis state it is symmetric or anti-symmetric (is_symmetric); no
// component at |0..01> means balanced (is_balanced).
//
// Interface and timing: start (while idle) latches n; busy stays high for
// L + 2 + n*2**(n-1) + 2**n cycles; done pulses once, after which the result
// outputs hold until the next start. rd_en/rd_idx read the transformed entry
// rd_idx into rd_val one cycle later (rd_valid). Entries are N+2 bits, two's
// complement, enough for the largest magnitude 2**N.
//
// From the paper: post-processing outside the core, sorting the words into
// address order, the unnormalised Hadamard transform (its example ends as
// 8|111>) and the three decoding rules. The phase sequence, the one-butterfly
// per cycle schedule, the buffer and the result format are this design's own.
module post_processing
  import qsim_pkg::*;
#(
  parameter int unsigned N = 28,
  parameter int unsigned M = 2,
  localparam int unsigned NL_W = $clog2(N + 1),
  localparam int unsigned VW   = N + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [NL_W-1:0]      nlines,
  output logic                 busy,
  output logic                 done,
  // to the core's I/O port (reads only)
  output logic                 io_en,
  output logic                 io_we,
  output logic [N-1:0]         io_word,
  input  logic                 io_rvalid,
  input  logic [N-1:0]         io_raddr,
  input  logic [M-1:0]         io_rdata,
  // result summary
  output logic [N:0]           nonzero_count,
  output logic [N-1:0]         peak_index,
  output logic signed [VW-1:0] peak_value,
  output logic signed [VW-1:0] coef_one,
  output logic                 is_basis,
  output logic                 is_constant,
  output logic                 is_symmetric,
  output logic                 is_balanced,
  // read-out of the transformed vector
  input  logic                 rd_en,
  input  logic [N-1:0]         rd_idx,
  output logic                 rd_valid,
  output logic signed [VW-1:0] rd_val
);

  localparam int unsigned L = 2**N;

  typedef enum logic [2:0] {S_IDLE, S_SORT, S_XFORM, S_SCAN, S_DONE} state_e;

  state_e                 state;
  logic signed [VW-1:0]   vec [L];
  logic [N-1:0]           cnt;       // word / pair / entry counter
  logic                   issue_end; // all sort reads issued
  logic [NL_W-1:0]        n_q;
  logic [NL_W-1:0]        stage;
  logic [N-1:0]           bf_i, bf_j;
  logic signed [VW-1:0]   bf_a, bf_b;
  logic [N-1:0]           half_last; // 2**(n-1) - 1
  logic [N-1:0]           full_last; // 2**n - 1
  logic signed [VW-1:0]   sc_v, sc_abs, pk_abs;

  function automatic logic signed [VW-1:0] absval(logic signed [VW-1:0] v);
    return (v < 0) ? -v : v;
  endfunction

  always_comb begin
    half_last = '0;
    full_last = '0;
    for (int unsigned b = 0; b < N; b++) begin
      full_last[b] = (b < int'(n_q));
      if (b + 1 < N) half_last[b] = (b + 1 < int'(n_q));
    end
  end

  // Butterfly indices: insert a 0 at bit position 'stage' of cnt.
  always_comb begin
    bf_i = '0;
    for (int unsigned b = 0; b < N; b++) begin
      if (b < int'(stage))       bf_i[b] = cnt[b];
      else if (b > int'(stage))  bf_i[b] = cnt[b-1];
    end
    bf_j = bf_i;
    bf_j[stage] = 1'b1;
    bf_a = vec[bf_i];
    bf_b = vec[bf_j];
    sc_v   = vec[cnt];
    sc_abs = absval(sc_v);
    pk_abs = absval(peak_value);
  end

  always_comb begin
    io_en   = (state == S_SORT) && !issue_end;
    io_we   = 1'b0;
    io_word = cnt;
  end

  assign busy = (state == S_SORT) || (state == S_XFORM) || (state == S_SCAN);

  // Buffer writes (no reset: every used entry is written during the sort).
  always_ff @(posedge clk) begin
    if (state == S_SORT && io_rvalid)
      vec[io_raddr] <= VW'(signed'(io_rdata));
    else if (state == S_XFORM) begin
      vec[bf_i] <= bf_a + bf_b;
      vec[bf_j] <= bf_a - bf_b;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      done          <= 1'b0;
      cnt           <= '0;
      issue_end     <= 1'b0;
      n_q           <= '0;
      stage         <= '0;
      nonzero_count <= '0;
      peak_index    <= '0;
      peak_value    <= '0;
      coef_one      <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            state         <= S_SORT;
            n_q           <= nlines;
            cnt           <= '0;
            issue_end     <= 1'b0;
            nonzero_count <= '0;
            peak_index    <= '0;
            peak_value    <= '0;
            coef_one      <= '0;
          end
        end
        S_SORT: begin
          if (!issue_end) begin
            cnt <= cnt + 1'b1;
            if (cnt == '1) issue_end <= 1'b1;
          end else if (!io_rvalid) begin
            // last read answered in the previous cycle
            cnt   <= '0;
            stage <= '0;
            state <= (n_q == '0) ? S_SCAN : S_XFORM;
          end
        end
        S_XFORM: begin
          if (cnt == half_last) begin
            cnt <= '0;
            if (int'(stage) + 1 == int'(n_q)) state <= S_SCAN;
            else stage <= stage + 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_SCAN: begin
          if (sc_v != 0) nonzero_count <= nonzero_count + 1'b1;
          if (sc_abs > pk_abs) begin
            peak_value <= sc_v;
            peak_index <= cnt;
          end
          if (cnt == N'(1)) coef_one <= sc_v;
          if (cnt == full_last) begin
            state <= S_DONE;
            done  <= 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    is_basis     = (state == S_DONE) && (nonzero_count == (N+1)'(1));
    is_constant  = is_basis && (peak_index == N'(1));
    is_symmetric = is_basis && (peak_index != N'(1));
    is_balanced  = (state == S_DONE) && (coef_one == 0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_val   <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) rd_val <= vec[rd_idx];
    end
  end

  a_start_idle : assert property (@(posedge clk) start |-> !busy);

endmodule
