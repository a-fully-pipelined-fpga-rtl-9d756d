// min_mem: the Minimum(s) Cache (MIN_MEM), DEPTH words of 64 bits, one per
// alpha descriptor of the current block; each word is {min, sec_min, coord}.
// It is a simple dual-port RAM (one block RAM in the paper's Table 1):
//  - read port: rd_addr sampled at a clock edge, rd_data valid after it
//    (synchronous read). It feeds the previous minima back to MIN_FIND.
//  - write port: wr_data stored at wr_addr when wr_en; the same word also
//    appears on wr_dout one cycle later (write-first read-back of the write
//    port). That read-back feeds Match_Check, which is why the paper's
//    Fig. 2 shows MIN_MEM as one pipeline stage between MIN_FIND and
//    Match_Check.
// The memory is not reset; the core never reads a word it has not written in
// the same block, because the first beta of every block takes the flush
// constant instead (see sift_match_core).
// Reading and writing the same word in one cycle returns the old word; the
// control unit keeps accesses to one word at least 4 cycles apart.
module min_mem
  import sift_pkg::*;
#(
  parameter int unsigned DEPTH = BLOCK_MAX,
  parameter int unsigned AW    = 6
) (
  input  logic        clk,
  input  logic [AW-1:0] rd_addr,
  output min_entry_t    rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  min_entry_t    wr_data,
  output min_entry_t    wr_dout
);
  min_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
    wr_dout <= wr_data;
  end

  always_ff @(posedge clk) begin
    assert (!wr_en || wr_addr < AW'(DEPTH)) else $error("min_mem: write address %0d out of range", wr_addr);
  end
endmodule
