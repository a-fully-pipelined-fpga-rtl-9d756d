// min_find: the MIN_FIND core. It keeps the smallest and second smallest
// angle seen so far for one alpha descriptor, updating them "on the fly"
// with the comparison scheme of the paper's Algorithm 2:
//   cur <  prev.min                  -> min = cur,      sec = prev.min
//   prev.min <= cur < prev.sec_min   -> min = prev.min, sec = cur
//   otherwise                        -> unchanged
// The 32-bit coordinate field follows the minimum: it takes cur_coord when
// cur becomes the new minimum (own choice; the paper packs a 32-bit location
// with the 16-bit angle into the 48-bit MIN_FIND input and the 64-bit
// MIN_MEM word but does not say when it is replaced).
// Timing: one register stage (z^-1 in the paper's Fig. 2); out_valid follows
// in_valid by one cycle.
module min_find
  import sift_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [ANGLE_W-1:0] cur,
  input  logic [COORD_W-1:0] cur_coord,
  input  min_entry_t         prev,
  output logic               out_valid,
  output min_entry_t         result
);
  min_entry_t nxt;
  always_comb begin
    nxt = prev;
    if (cur < prev.min) begin
      nxt.min     = cur;
      nxt.sec_min = prev.min;
      nxt.coord   = cur_coord;
    end else if (cur < prev.sec_min) begin
      nxt.sec_min = cur;
    end
  end

  always_ff @(posedge clk) result <= nxt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
