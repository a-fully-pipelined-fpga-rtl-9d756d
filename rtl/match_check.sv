// match_check: the Match_Check core. It applies the ratio test
//     match  <=>  min < 0.6 * sec_min
// without a multiplier, exactly as drawn in the paper's Fig. 5. 0.6 is taken
// as binary 0.10011 (= 0.59375), so the test becomes
//     {min, 5'b0}  <  sec_min*16 + sec_min*2 + sec_min      (21 bits each)
// Stage 1: min is padded to 21 bits; sec_min + {sec_min,0} (18 bits) is summed;
//          sec_min is delayed.
// Stage 2: {sec_min,4'b0} (20 bits) is added to the 18-bit sum (21 bits);
//          the padded min is delayed again.
// Stage 3: comparator, registered.
// The location that accompanies the minima is delayed alongside, so
// out_coord and match leave together, 3 cycles after the inputs.
module match_check
  import sift_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [ANGLE_W-1:0] min,
  input  logic [ANGLE_W-1:0] sec_min,
  input  logic [COORD_W-1:0] in_coord,
  output logic               out_valid,
  output logic               match,
  output logic [COORD_W-1:0] out_coord
);
  logic [20:0] min_s1, min_s2;
  logic [17:0] sum3_s1;          // sec_min * 3
  logic [15:0] sec_s1;
  logic [20:0] sum19_s2;         // sec_min * 19

  always_ff @(posedge clk) begin
    // stage 1
    min_s1  <= {min, 5'b00000};
    sum3_s1 <= 18'(sec_min) + 18'({sec_min, 1'b0});
    sec_s1  <= sec_min;
    // stage 2
    min_s2   <= min_s1;
    sum19_s2 <= 21'({sec_s1, 4'b0000}) + 21'(sum3_s1);
    // stage 3
    match    <= (min_s2 < sum19_s2);
  end

  shift_delay #(.WIDTH(COORD_W), .DEPTH(LAT_CHECK)) u_zc (
    .clk(clk), .rst_n(rst_n), .d(in_coord), .q(out_coord)
  );
  shift_delay #(.WIDTH(1), .DEPTH(LAT_CHECK), .RST_TAGS(1'b1)) u_zv (
    .clk(clk), .rst_n(rst_n), .d(in_valid), .q(out_valid)
  );
endmodule
