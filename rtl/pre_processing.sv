// pre_processing: forms the starting state vector and loads it into the core.
//
// The emulated circuit starts in a basis state |k> on its lowest n lines and
// in |0> on all higher lines. A Hadamard transform on the n lines turns |k>
// into the vector y[j] = (-1)^popcount(j & k) for j < 2**n (the common
// factor 2**(-n/2) is dropped), and the higher lines leave y[j] = 0 for
// j >= 2**n. So every entry is +1, -1 or 0 and fits the 2-bit data field.
//
// How it works: after start, a counter walks the L = 2**N core words and
// writes word p with address field p and data y[p], one word per cycle
// through the core's I/O port. busy is high for exactly L cycles; done
// pulses in the cycle after the last write. Data coding: 01 = +1, 11 = -1,
// 00 = 0.
//
// From the paper: the pre-processing step outside the core, the Hadamard
// transform of a basis state without normalisation (its example: |001>
// becomes 1 -1 1 -1 1 -1 1 -1) and loading the result into the core. The
// sequential one-word-per-cycle loader, the closed-form entry formula and
// the start/busy/done handshake are this design's own.
module pre_processing
  import qsim_pkg::*;
#(
  parameter int unsigned N = 28,
  parameter int unsigned M = 2,
  localparam int unsigned NL_W = $clog2(N + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [NL_W-1:0] nlines,   // n: lines the algorithm uses (1..N)
  input  logic [N-1:0]    basis,    // k: starting basis state
  output logic            busy,
  output logic            done,
  // to the core's I/O port
  output logic            io_en,
  output logic            io_we,
  output logic [N-1:0]    io_word,
  output logic [N-1:0]    io_waddr,
  output logic [M-1:0]    io_wdata
);

  logic [N-1:0]    p;
  logic [NL_W-1:0] n_q;
  logic [N-1:0]    k_q;
  logic [N-1:0]    hi_mask;   // address bits above the n used lines

  always_comb begin
    hi_mask = '0;
    for (int unsigned b = 0; b < N; b++) hi_mask[b] = (b >= int'(n_q));
  end

  always_comb begin
    io_en    = busy;
    io_we    = busy;
    io_word  = p;
    io_waddr = p;
    if ((p & hi_mask) != '0)   io_wdata = M'(DATA_ZERO);
    else if (^(p & k_q))       io_wdata = M'(signed'(DATA_MINUS));
    else                       io_wdata = M'(DATA_PLUS);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      p    <= '0;
      n_q  <= '0;
      k_q  <= '0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        p <= p + 1'b1;
        if (p == '1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end else if (start) begin
        busy <= 1'b1;
        p    <= '0;
        n_q  <= nlines;
        k_q  <= basis;
      end
    end
  end

  a_nlines : assert property (@(posedge clk) (start && !busy) |-> (nlines >= 1 && int'(nlines) <= int'(N)));

endmodule
