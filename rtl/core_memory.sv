// core_memory: the data-stationary core, L = 2**N words that together hold
// a state vector.
//
// Each word (one entry of the arrays below) holds an N-bit address field and
// an M-bit data value. Reading the data values in the order of their address
// fields gives the state vector. A quantum gate is a permutation of that
// vector; instead of moving the data, the core toggles the target bit of the
// address field in every word whose control bits allow it, all words in the
// same clock cycle. The data only moves when the core is read out.
//
// How a word decides. The instruction decoder drives three row lines per
// address bit, shared by all words: TO (toggle this bit), FM1 and FM2 (read
// this bit onto the word's first or second control bus). FM1 and FM2 have an
// extra row N that is wired to constant TRUE, selected by a gate that needs
// fewer controls. A control bus carries the OR of the word's bits whose FM row
// is selected. If both buses read 1, the bits whose TO row fires are inverted.
//
// Multiplexed I/O port. One port serves all words. A request names a word by
// its physical position p (0 to L-1), which has nothing to do with the
// address field it holds. A write replaces the word's address field and data;
// a read returns both one cycle later with io_rvalid.
//
// Interface and timing: a gate presented with instr_valid is applied at that
// cycle's rising edge (one cycle per gate, whatever L is). A gate and an I/O
// write in the same cycle are not allowed (asserted). The synchronous,
// active-low reset clears the read port only; the words are meant to be
// loaded before use.
//
// From the paper: the word layout, the L = 2**N words, the TO/FM1/FM2 rows
// with a hard-wired TRUE, the flip rule, the parallel update and one
// multiplexed I/O port. The clocked update, the port protocol and the
// one-cycle read latency are this design's own. The default N = 28 is below
// the paper's example of 32: neither compiler accepts an array of 2**30 or
// more words.
module core_memory
  import qsim_pkg::*;
#(
  parameter int unsigned N = 28,  // address field width; L = 2**N words
  parameter int unsigned M = 2    // data width
) (
  input  logic         clk,
  input  logic         rst_n,
  // gate instructions
  input  logic         instr_valid,
  input  gate_instr_t  instr,
  // multiplexed I/O port
  input  logic         io_en,
  input  logic         io_we,
  input  logic [N-1:0] io_word,
  input  logic [N-1:0] io_waddr,
  input  logic [M-1:0] io_wdata,
  output logic         io_rvalid,
  output logic [N-1:0] io_raddr,
  output logic [M-1:0] io_rdata
);

  localparam int unsigned L = 2**N;

  logic [N-1:0] to_line;
  logic [N:0]   fm1_line, fm2_line;

  logic [N-1:0] addr_field [L];  // address field of word p
  logic [M-1:0] data_field [L];  // data of word p (never moved by a gate)

  instruction_decoder #(.N(N)) u_id (
    .clk, .instr_valid, .instr, .to_line, .fm1_line, .fm2_line
  );

  // Every word evaluates its two control buses and toggles in parallel.
  always_ff @(posedge clk) begin
    for (int unsigned p = 0; p < L; p++) begin
      if (|(fm1_line & {1'b1, addr_field[p[N-1:0]]}) &&
          |(fm2_line & {1'b1, addr_field[p[N-1:0]]}))
        addr_field[p[N-1:0]] <= addr_field[p[N-1:0]] ^ to_line;
    end
    if (io_en && io_we) begin
      addr_field[io_word] <= io_waddr;
      data_field[io_word] <= io_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      io_rvalid <= 1'b0;
      io_raddr  <= '0;
      io_rdata  <= '0;
    end else begin
      io_rvalid <= io_en && !io_we;
      if (io_en && !io_we) begin
        io_raddr <= addr_field[io_word];
        io_rdata <= data_field[io_word];
      end
    end
  end

  a_no_gate_during_write : assert property (@(posedge clk)
    !(rst_n && instr_valid && instr.op != OP_NOP && io_en && io_we));

endmodule
