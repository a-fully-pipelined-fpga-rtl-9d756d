// des_mem: the Descriptor Cache (DES_MEM). It holds one block of up to DEPTH
// (33, the paper's figure) alpha descriptors of 2080 bits each, so that every
// beta descriptor fetched from memory can be compared with all of them, one
// per cycle, while the next beta descriptor streams in.
// Single clock, one write port and one synchronous read port in read-first
// mode: reading and writing the same slot in one cycle returns the old
// descriptor. The control unit relies on this to overwrite slot j with the
// next block in the very cycle slot j is read for the last time.
// Timing: rd_data is the slot addressed at the previous clock edge.
module des_mem
  import sift_pkg::*;
#(
  parameter int unsigned DEPTH = BLOCK_MAX,
  parameter int unsigned W     = DESC_W,
  parameter int unsigned AW    = 6
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    assert (!wr_en || wr_addr < AW'(DEPTH)) else $error("des_mem: write address %0d out of range", wr_addr);
  end
endmodule
