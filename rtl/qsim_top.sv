// qsim_top: data-stationary emulator of quantum circuits, from the starting
// state to the decoded answer.
//
// The chain is pre-processing -> core memory -> post-processing. The user
// side supplies the starting basis state and the number of lines in use,
// then a stream of gate instructions, then asks for the read-out; the result
// summary and the transformed vector are the outputs a display would show.
//
//   pre_start  : pre_processing writes the Hadamard-transformed start vector
//                into all L = 2**N words (L cycles).
//   instr_*    : one gate per cycle, applied to every word in parallel;
//                accepted only while instr_ready (no load or read-out).
//   post_start : post_processing sorts the words by address field,
//                transforms and classifies (see post_processing).
//   host_io_*  : direct access to the core's multiplexed I/O port, e.g. to
//                load another vector or inspect words; served only while
//                neither processing unit runs (host_io_ready).
//
// Port ownership of the core's single I/O port: pre_processing while it is
// busy, post_processing while it is busy, else the host. Starting one unit
// while the other runs is not allowed (asserted).
//
// From the paper: the block chain (user inputs, pre-processing, core memory,
// post-processing, results), the parallel gate application and the single
// multiplexed I/O port. The port arbitration and the valid/ready gate stream
// are this design's own. N defaults to 28 rather than the paper's example of
// 32 (see core_memory).
module qsim_top
  import qsim_pkg::*;
#(
  parameter int unsigned N = 28,
  parameter int unsigned M = 2,
  localparam int unsigned NL_W = $clog2(N + 1),
  localparam int unsigned VW   = N + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // user inputs
  input  logic                 pre_start,
  input  logic                 post_start,
  input  logic [NL_W-1:0]      nlines,
  input  logic [N-1:0]         basis,
  input  logic                 instr_valid,
  output logic                 instr_ready,
  input  gate_instr_t          instr,
  // direct host access to the core I/O port
  input  logic                 host_io_en,
  input  logic                 host_io_we,
  input  logic [N-1:0]         host_io_word,
  input  logic [N-1:0]         host_io_waddr,
  input  logic [M-1:0]         host_io_wdata,
  output logic                 host_io_ready,
  output logic                 host_io_rvalid,
  output logic [N-1:0]         host_io_raddr,
  output logic [M-1:0]         host_io_rdata,
  // status
  output logic                 pre_busy,
  output logic                 pre_done,
  output logic                 post_busy,
  output logic                 post_done,
  // results
  output logic [N:0]           nonzero_count,
  output logic [N-1:0]         peak_index,
  output logic signed [VW-1:0] peak_value,
  output logic signed [VW-1:0] coef_one,
  output logic                 is_basis,
  output logic                 is_constant,
  output logic                 is_symmetric,
  output logic                 is_balanced,
  input  logic                 res_rd_en,
  input  logic [N-1:0]         res_rd_idx,
  output logic                 res_rd_valid,
  output logic signed [VW-1:0] res_rd_val
);

  // pre-processing port requests
  logic         pre_io_en, pre_io_we;
  logic [N-1:0] pre_io_word, pre_io_waddr;
  logic [M-1:0] pre_io_wdata;
  // post-processing port requests
  logic         post_io_en, post_io_we;
  logic [N-1:0] post_io_word;
  // core port
  logic         io_en, io_we, io_rvalid;
  logic [N-1:0] io_word, io_waddr, io_raddr;
  logic [M-1:0] io_wdata, io_rdata;
  logic         host_rd_pending;
  logic         core_instr_valid;

  pre_processing #(.N(N), .M(M)) u_pre (
    .clk, .rst_n,
    .start (pre_start), .nlines, .basis,
    .busy (pre_busy), .done (pre_done),
    .io_en (pre_io_en), .io_we (pre_io_we), .io_word (pre_io_word),
    .io_waddr (pre_io_waddr), .io_wdata (pre_io_wdata)
  );

  always_comb begin
    host_io_ready = !pre_busy && !post_busy;
    instr_ready   = !pre_busy && !post_busy;
    core_instr_valid = instr_valid && instr_ready;
    if (pre_busy) begin
      io_en = pre_io_en;  io_we = pre_io_we;  io_word = pre_io_word;
      io_waddr = pre_io_waddr;  io_wdata = pre_io_wdata;
    end else if (post_busy) begin
      io_en = post_io_en; io_we = post_io_we; io_word = post_io_word;
      io_waddr = '0;  io_wdata = '0;
    end else begin
      io_en = host_io_en; io_we = host_io_we; io_word = host_io_word;
      io_waddr = host_io_waddr;  io_wdata = host_io_wdata;
    end
  end

  core_memory #(.N(N), .M(M)) u_core (
    .clk, .rst_n,
    .instr_valid (core_instr_valid), .instr,
    .io_en, .io_we, .io_word, .io_waddr, .io_wdata,
    .io_rvalid, .io_raddr, .io_rdata
  );

  post_processing #(.N(N), .M(M)) u_post (
    .clk, .rst_n,
    .start (post_start), .nlines,
    .busy (post_busy), .done (post_done),
    .io_en (post_io_en), .io_we (post_io_we), .io_word (post_io_word),
    .io_rvalid (io_rvalid && !host_rd_pending), .io_raddr, .io_rdata,
    .nonzero_count, .peak_index, .peak_value, .coef_one,
    .is_basis, .is_constant, .is_symmetric, .is_balanced,
    .rd_en (res_rd_en), .rd_idx (res_rd_idx),
    .rd_valid (res_rd_valid), .rd_val (res_rd_val)
  );

  // A read answered next cycle belongs to the host if the host issued it.
  always_ff @(posedge clk) begin
    if (!rst_n) host_rd_pending <= 1'b0;
    else        host_rd_pending <= host_io_ready && host_io_en && !host_io_we;
  end

  assign host_io_rvalid = io_rvalid && host_rd_pending;
  assign host_io_raddr  = io_raddr;
  assign host_io_rdata  = io_rdata;

  a_one_unit : assert property (@(posedge clk)
    !(rst_n && ((pre_start && post_busy) || (post_start && pre_busy) || (pre_start && post_start))));

endmodule
