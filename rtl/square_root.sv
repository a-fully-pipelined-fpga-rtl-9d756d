// square_root: the Square_Root box of the Cosine_Inverse core (paper Fig. 4).
// It returns floor(sqrt(rad)) of a 32-bit unsigned radicand as a 16-bit root.
// Read as fixed point, a Q2.30 radicand gives a Q1.15 root.
// The paper uses a vendor CORDIC core here and gives only its latency, 37
// stages. This design keeps that latency but uses the plain restoring
// digit-by-digit method, one result bit per pipeline stage (16 stages), followed
// by LAT-16 delay stages, so the timing seen from outside is the paper's.
// Each bit stage: rem = 4*rem + next two radicand bits; if rem >= 4*root+1
// then subtract it and append a 1 to root, else append a 0.
// Interface: rad enters every cycle; root leaves LAT cycles later.
module square_root #(
  parameter int unsigned IN_W = 32,
  parameter int unsigned LAT  = 37
) (
  input  logic              clk,
  input  logic [IN_W-1:0]   rad,
  output logic [IN_W/2-1:0] root
);
  localparam int unsigned RW   = IN_W / 2;   // root bits = iteration count
  localparam int unsigned REMW = RW + 3;   // remainder never exceeds 2*root + 1

  logic [IN_W-1:0] xs   [RW];   // radicand bits not yet consumed (shifted up)
  logic [REMW-1:0] rem  [RW];
  logic [RW-1:0]   rt   [RW];

  typedef struct packed {
    logic [IN_W-1:0] x;
    logic [REMW-1:0] r;
    logic [RW-1:0]   q;
  } step_t;

  function automatic step_t step(input logic [IN_W-1:0] xin,
                                 input logic [REMW-1:0] r,
                                 input logic [RW-1:0]   q);
    logic [REMW-1:0] rr, trial;
    step_t o;
    rr    = {r[REMW-3:0], xin[IN_W-1 -: 2]};
    trial = REMW'({q, 2'b01});
    o.x   = xin << 2;
    if (rr >= trial) begin
      o.r = rr - trial;
      o.q = {q[RW-2:0], 1'b1};
    end else begin
      o.r = rr;
      o.q = {q[RW-2:0], 1'b0};
    end
    return o;
  endfunction

  always_ff @(posedge clk) begin
    step_t s;
    s = step(rad, '0, '0);
    xs[0] <= s.x; rem[0] <= s.r; rt[0] <= s.q;
    for (int i = 1; i < RW; i++) begin
      s = step(xs[i-1], rem[i-1], rt[i-1]);
      xs[i] <= s.x; rem[i] <= s.r; rt[i] <= s.q;
    end
  end

  shift_delay #(.WIDTH(RW), .DEPTH(LAT - RW)) u_pad (
    .clk(clk), .rst_n(1'b1), .d(rt[RW-1]), .q(root)
  );
endmodule
