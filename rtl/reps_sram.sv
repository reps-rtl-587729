// reps_sram: simple dual-port memory for per-connection REPS state.
//
// One synchronous read port and one write port, written as an array so that
// synthesis maps it to block RAM. A read issued in cycle t (rd_en_i) delivers
// rd_data_o in cycle t+1 and holds it until the next read. A read and a write
// to the same address in the same cycle return the old word (read before
// write); the user forwards the new word itself. Contents are not reset.
// The REPS FPGA engine keeps all connections' REPS buffers in one such memory
// (256 connections x 8 EVs x 2 bytes = 4 KB); depth and width are parameters.
module reps_sram #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 128,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rd_en_i,
  input  logic [AW-1:0]    rd_addr_i,
  output logic [WIDTH-1:0] rd_data_o,
  input  logic             wr_en_i,
  input  logic [AW-1:0]    wr_addr_i,
  input  logic [WIDTH-1:0] wr_data_i
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en_i)
      rd_data_o <= mem[rd_addr_i];
    if (wr_en_i)
      mem[wr_addr_i] <= wr_data_i;
  end

endmodule
