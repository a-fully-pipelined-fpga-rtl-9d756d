// polar_sys: the Polar_Sys box of the Cosine_Inverse core (paper Fig. 4), a
// vectoring CORDIC that turns a Cartesian point (u, v) into its angle
// theta = atan(v/u) and its magnitude rho.
// The paper uses a vendor CORDIC core and gives its latency, 11 stages. Here
// each of the 11 stages is one CORDIC micro-rotation i = 0..10: if y >= 0 the
// vector is turned clockwise by atan(2^-i), else anticlockwise, and the turned
// angle is accumulated in z. After the last stage y is near zero and z holds
// the angle. Residual angle error is about atan(2^-10) = 1e-3 rad.
// Formats (own choice): u, v unsigned Q1.(IN_W-1) in the first quadrant; theta
// unsigned Q1.15 radians in [0, pi/2]; rho unsigned Q3.(IN_W-1) and NOT divided by
// the CORDIC gain K = 1.6468 (the cosine path leaves rho unused, as in Fig. 4).
// Internally x, y, z carry two extra fraction bits; the angle table holds
// round(atan(2^-i) * 2^17).
// Interface: one (u, v) per cycle in, (rho, theta) LAT = ITER cycles later.
module polar_sys #(
  parameter int unsigned ITER = 11,  // pipeline stages = micro-rotations (<= 16)
  parameter int unsigned IN_W = 16   // u, v width: unsigned Q1.(IN_W-1)
) (
  input  logic            clk,
  input  logic [IN_W-1:0] u,
  input  logic [IN_W-1:0] v,
  output logic [IN_W+1:0] rho,
  output logic [15:0]     theta
);
  localparam int unsigned W = (IN_W > 16 ? IN_W : 16) + 5;  // signed, 2 guard bits

  typedef logic signed [W-1:0] sw_t;

  // round(atan(2^-i) * 2^17), i = 0..15
  localparam int unsigned ATAN_TAB [16] = '{
    102944, 60771, 32110, 16299, 8181, 4095, 2048, 1024,
    512,    256,   128,   64,    32,   16,   8,    4 };

  sw_t xq [ITER];
  sw_t yq [ITER];
  sw_t zq [ITER];

  always_ff @(posedge clk) begin
    sw_t x, y, z, xn, yn, zn;
    for (int i = 0; i < ITER; i++) begin
      if (i == 0) begin
        x = sw_t'({u, 2'b00});
        y = sw_t'({v, 2'b00});
        // the angle is independent of the input scale; z is in 2^-17 rad
        z = '0;
      end else begin
        x = xq[i-1];
        y = yq[i-1];
        z = zq[i-1];
      end
      if (y >= 0) begin
        xn = x + (y >>> i);
        yn = y - (x >>> i);
        zn = z + sw_t'(ATAN_TAB[i]);
      end else begin
        xn = x - (y >>> i);
        yn = y + (x >>> i);
        zn = z - sw_t'(ATAN_TAB[i]);
      end
      xq[i] <= xn;
      yq[i] <= yn;
      zq[i] <= zn;
    end
  end

  // Round away the two guard bits and clamp into the output ranges.
  sw_t z_r, x_r;
  assign z_r = (zq[ITER-1] + sw_t'(2)) >>> 2;
  assign x_r = (xq[ITER-1] + sw_t'(2)) >>> 2;
  assign theta = (z_r < 0) ? '0 : (z_r > sw_t'(16'hFFFF)) ? 16'hFFFF : z_r[15:0];
  assign rho   = (x_r < 0) ? '0 : x_r[IN_W+1:0];
endmodule
