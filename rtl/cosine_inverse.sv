// cosine_inverse: the Cosine_Inverse core (paper Fig. 4). It computes
// theta = arccos(x) as the angle of the point (x, sqrt(1 - x^2)):
//   stage 1-3   x^2 on a 3-stage multiplier
//   stage 4     1 - x^2
//   stage 5-41  Square_Root (37 stages)
//   stage 42-52 Polar_Sys CORDIC (11 stages), with u = x delayed 41 stages
// for 52 pipeline stages in all, the paper's figure. The magnitude output of
// Polar_Sys is left unused, as in the paper.
// Formats (own choice): x is the 32-bit Q2.30 dot product; it is truncated to
// Q1.23 and clamped at 1.0 (values above 1.0 are rounding artefacts of a
// normalised pair). 24 bits rather than 16 inside, because arccos is steep
// near x = 1: a Q1.15 x alone would give up to 8e-3 rad error for the small
// angles that matter most. theta is unsigned Q1.15 radians, 0 .. 51472
// (pi/2), the 16-bit output of the paper.
// Interface: one x per cycle in, theta LAT_ACOS = 52 cycles later.
module cosine_inverse
  import sift_pkg::*;
#(
  parameter int unsigned SQRT_LAT  = 37,
  parameter int unsigned POLAR_LAT = 11,
  parameter int unsigned XW        = 24   // internal x width, unsigned Q1.(XW-1)
) (
  input  logic               clk,
  input  logic [DOT_W-1:0]   x,
  output logic [ANGLE_W-1:0] theta
);
  localparam int unsigned MUL_LAT = 3;
  localparam int unsigned SUB_LAT = 1;
  localparam int unsigned SW      = 2 * XW;                 // Q2.(2XW-2)
  localparam logic [SW-1:0] ONE_SQ = SW'(1) << (2*XW - 2);

  // Q2.30 -> Q1.(XW-1) with clamp at 1.0
  logic [XW-1:0] xr;
  assign xr = (x >= 32'h4000_0000) ? (XW'(1) << (XW-1)) : x[30 -: XW];

  // x^2: operand register, product register, output register (3 stages)
  logic [XW-1:0] m_in;
  logic [SW-1:0] m_p, m_out;
  always_ff @(posedge clk) begin
    m_in  <= xr;
    m_p   <= SW'(m_in) * SW'(m_in);
    m_out <= m_p;
  end

  // 1 - x^2 (1 stage); xr <= 1.0 so this never goes negative
  logic [SW-1:0] one_minus;
  always_ff @(posedge clk) one_minus <= ONE_SQ - m_out;

  logic [XW-1:0] v_root;
  square_root #(.IN_W(SW), .LAT(SQRT_LAT)) u_sqrt (
    .clk(clk), .rad(one_minus), .root(v_root)
  );

  logic [XW-1:0] u_del;
  shift_delay #(.WIDTH(XW), .DEPTH(MUL_LAT + SUB_LAT + SQRT_LAT)) u_zu (
    .clk(clk), .rst_n(1'b1), .d(xr), .q(u_del)
  );

  logic [XW+1:0] rho_unused;
  polar_sys #(.ITER(POLAR_LAT), .IN_W(XW)) u_polar (
    .clk(clk), .u(u_del), .v(v_root), .rho(rho_unused), .theta(theta)
  );
endmodule
