// sift_match_core: SIFT keypoint descriptor matching core (top level).
//
// For every descriptor of an image alpha it finds, over all descriptors of a
// database image beta, the smallest and second smallest angle
// arccos(alpha . beta) and declares a match when min < 0.6 * sec_min (Lowe's
// ratio test with binary 0.10011 for 0.6). One dot product is computed per
// clock cycle.
//
// Data flow (the paper's Fig. 2):
//   64-bit alpha beats -> desc_assembler -> alpha FIFO (33) -> DES_MEM (33)
//   64-bit beta beats  -> desc_assembler -> beta FIFO (2)   -> Register
//   DES_MEM[aidx] , Register -> Dot_Product (10) -> Cosine_Inverse (52)
//        -> MIN_FIND (1) <-> MIN_MEM (1) -> Match_Check (3) -> match
// Locations ride beside the data on Z^-n delay lines: the alpha location
// goes with the angle into MIN_FIND/MIN_MEM and out of Match_Check, the beta
// location goes along its own delay line to beta_xy, as drawn in Fig. 2.
// A multiplexer in front of MIN_FIND passes the flush constant 2^64-1 instead
// of the MIN_MEM word for the first beta of each alpha block.
//
// Because the memory delivers 8 bytes per clock, one 2080-bit beta
// descriptor arrives every 33 cycles; it is compared with the up to 33 cached
// alpha descriptors in those 33 cycles, so the single dot-product pipeline is
// kept full. A whole job takes about ceil(num_alpha/33) * num_beta * 33
// cycles. The beta image has to be streamed once per alpha block.
//
// Interface:
//   start (one cycle, while idle) with num_alpha, num_beta, block_size.
//   a_beat_* / b_beat_*: valid/ready streams of 64-bit beats; 33 beats per
//     descriptor, element i in bits [16i+15:16i], location {x,y} in bits
//     [2079:2048]. The beta stream must deliver the beta image
//     ceil(num_alpha/block_size) times.
//   match_valid pulses once per alpha descriptor, with match, alpha_xy and
//     beta_xy (the beta descriptor that was in the pipeline with it, i.e. the
//     last one of the beta image), min_angle and sec_angle.
//   done pulses one cycle after the last result.
// Angles are unsigned Q1.15 radians. Reset is active low, asynchronous.
module sift_match_core
  import sift_pkg::*;
#(
  parameter int unsigned BLOCK        = BLOCK_MAX,  // DES_MEM and MIN_MEM depth
  parameter int unsigned A_FIFO_DEPTH = 33,
  parameter int unsigned B_FIFO_DEPTH = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [15:0]        num_alpha,
  input  logic [15:0]        num_beta,
  input  logic [5:0]         block_size,
  output logic               busy,
  output logic               done,
  input  logic               a_beat_valid,
  output logic               a_beat_ready,
  input  logic [BEAT_W-1:0]  a_beat_data,
  input  logic               b_beat_valid,
  output logic               b_beat_ready,
  input  logic [BEAT_W-1:0]  b_beat_data,
  output logic               match_valid,
  output logic               match,
  output logic [COORD_W-1:0] alpha_xy,
  output logic [COORD_W-1:0] beta_xy,
  output logic [ANGLE_W-1:0] min_angle,
  output logic [ANGLE_W-1:0] sec_angle
);
  // ---------------------------------------------------------------- inputs
  logic              a_desc_valid, a_desc_ready, b_desc_valid, b_desc_ready;
  logic [DESC_W-1:0] a_desc, b_desc;

  desc_assembler u_asm_a (
    .clk, .rst_n, .beat_valid(a_beat_valid), .beat_ready(a_beat_ready),
    .beat_data(a_beat_data), .desc_valid(a_desc_valid),
    .desc_ready(a_desc_ready), .desc_data(a_desc)
  );
  desc_assembler u_asm_b (
    .clk, .rst_n, .beat_valid(b_beat_valid), .beat_ready(b_beat_ready),
    .beat_data(b_beat_data), .desc_valid(b_desc_valid),
    .desc_ready(b_desc_ready), .desc_data(b_desc)
  );

  logic              afifo_valid, afifo_pop, bfifo_valid, bfifo_pop;
  logic [DESC_W-1:0] afifo_data, bfifo_data;
  logic [$clog2(A_FIFO_DEPTH+1)-1:0] afifo_count;
  logic [$clog2(B_FIFO_DEPTH+1)-1:0] bfifo_count;

  desc_fifo #(.W(DESC_W), .DEPTH(A_FIFO_DEPTH)) u_fifo_a (
    .clk, .rst_n, .in_valid(a_desc_valid), .in_ready(a_desc_ready),
    .in_data(a_desc), .out_valid(afifo_valid), .pop(afifo_pop),
    .out_data(afifo_data), .count(afifo_count)
  );
  desc_fifo #(.W(DESC_W), .DEPTH(B_FIFO_DEPTH)) u_fifo_b (
    .clk, .rst_n, .in_valid(b_desc_valid), .in_ready(b_desc_ready),
    .in_data(b_desc), .out_valid(bfifo_valid), .pop(bfifo_pop),
    .out_data(bfifo_data), .count(bfifo_count)
  );

  // ---------------------------------------------------------- control unit
  logic       des_wr_en;
  logic [5:0] des_wr_addr, des_rd_addr;
  tag_t       tag_s0;

  control_unit #(.BLOCK(BLOCK)) u_ctrl (
    .clk, .rst_n, .start, .num_alpha, .num_beta, .block_size, .busy, .done,
    .a_valid(afifo_valid), .a_pop(afifo_pop),
    .des_wr_en, .des_wr_addr,
    .b_valid(bfifo_valid), .b_pop(bfifo_pop),
    .issue(tag_s0), .des_rd_addr
  );

  // ------------------------------------------------- DES_MEM and Register
  logic [DESC_W-1:0] alpha_s1, beta_s1;
  tag_t              tag_s1;

  des_mem #(.DEPTH(BLOCK)) u_des_mem (
    .clk, .wr_en(des_wr_en), .wr_addr(des_wr_addr), .wr_data(afifo_data),
    .rd_addr(des_rd_addr), .rd_data(alpha_s1)
  );

  // The beta Register: loaded when a sweep starts, held for the sweep.
  always_ff @(posedge clk) begin
    if (bfifo_pop) beta_s1 <= bfifo_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tag_s1 <= '0;
    else        tag_s1 <= tag_s0;
  end

  // ------------------------------------------- Dot_Product, Cosine_Inverse
  logic [DOT_W-1:0]   dp;
  logic [ANGLE_W-1:0] angle;

  dot_product u_dot (
    .clk, .a(alpha_s1[VEC_W-1:0]), .b(beta_s1[VEC_W-1:0]), .dp(dp)
  );
  cosine_inverse u_acos (.clk, .x(dp), .theta(angle));

  // Z^-62 delay lines for the locations and the tag (Fig. 2: z^-10, z^-52).
  // The tag is tapped one stage early to address MIN_MEM's synchronous read.
  localparam int unsigned LAT_DA = LAT_DOT + LAT_ACOS;
  logic [COORD_W-1:0] axy_mf, bxy_mf;
  tag_t               tag_pre, tag_mf;

  shift_delay #(.WIDTH(COORD_W), .DEPTH(LAT_DA)) u_z_axy (
    .clk, .rst_n, .d(alpha_s1[VEC_W +: COORD_W]), .q(axy_mf)
  );
  shift_delay #(.WIDTH(COORD_W), .DEPTH(LAT_DA)) u_z_bxy (
    .clk, .rst_n, .d(beta_s1[VEC_W +: COORD_W]), .q(bxy_mf)
  );
  shift_delay #(.WIDTH($bits(tag_t)), .DEPTH(LAT_DA - 1), .RST_TAGS(1'b1)) u_z_tag (
    .clk, .rst_n, .d(tag_s1), .q(tag_pre)
  );
  shift_delay #(.WIDTH($bits(tag_t)), .DEPTH(1), .RST_TAGS(1'b1)) u_z_tag1 (
    .clk, .rst_n, .d(tag_pre), .q(tag_mf)
  );

  // ---------------------------------------------------- MIN_FIND, MIN_MEM
  min_entry_t mm_rd, mf_prev, mf_out, mm_out;
  logic       mf_valid;
  tag_t       tag_mm, tag_mc;

  // flush multiplexer: first beta of a block starts from 2^64-1
  assign mf_prev = tag_mf.first ? MIN_EMPTY : mm_rd;

  min_find u_min_find (
    .clk, .rst_n, .in_valid(tag_mf.valid), .cur(angle), .cur_coord(axy_mf),
    .prev(mf_prev), .out_valid(mf_valid), .result(mf_out)
  );

  shift_delay #(.WIDTH($bits(tag_t)), .DEPTH(LAT_MIN), .RST_TAGS(1'b1)) u_z_tag2 (
    .clk, .rst_n, .d(tag_mf), .q(tag_mm)
  );

  min_mem #(.DEPTH(BLOCK)) u_min_mem (
    .clk, .rd_addr(tag_pre.aidx), .rd_data(mm_rd),
    .wr_en(mf_valid), .wr_addr(tag_mm.aidx), .wr_data(mf_out), .wr_dout(mm_out)
  );

  shift_delay #(.WIDTH($bits(tag_t)), .DEPTH(1), .RST_TAGS(1'b1)) u_z_tag3 (
    .clk, .rst_n, .d(tag_mm), .q(tag_mc)
  );

  // ------------------------------------------------------------ Match_Check
  match_check u_match (
    .clk, .rst_n, .in_valid(tag_mc.valid && tag_mc.last),
    .min(mm_out.min), .sec_min(mm_out.sec_min), .in_coord(mm_out.coord),
    .out_valid(match_valid), .match(match), .out_coord(alpha_xy)
  );

  // minima delayed with Match_Check so they leave with the decision
  shift_delay #(.WIDTH(2*ANGLE_W), .DEPTH(LAT_CHECK)) u_z_minima (
    .clk, .rst_n, .d({mm_out.min, mm_out.sec_min}), .q({min_angle, sec_angle})
  );

  // beta location: z^-1 (MIN_FIND), z^-1 (MIN_MEM), z^-3 (Match_Check)
  shift_delay #(.WIDTH(COORD_W), .DEPTH(LAT_MIN + 1 + LAT_CHECK)) u_z_bxy2 (
    .clk, .rst_n, .d(bxy_mf), .q(beta_xy)
  );

  // ------------------------------------------------------------ assertions
  a_issue_needs_beta: assert property (@(posedge clk) disable iff (!rst_n)
    bfifo_pop |-> bfifo_valid);
  a_write_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    des_wr_en |-> (des_wr_addr < 6'(BLOCK)));
endmodule
