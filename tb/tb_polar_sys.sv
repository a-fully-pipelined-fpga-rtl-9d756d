// Testbench for polar_sys: random first-quadrant points (u, v) in Q1.15,
// one per cycle. After exactly 11 cycles theta must equal atan2(v, u) within
// 0.0025 rad (the 11-step CORDIC's residual plus rounding) and rho must equal
// K * sqrt(u^2 + v^2) within 0.5 %, K being the CORDIC gain.
module tb_polar_sys;
  localparam int LAT = 11;
  localparam real SCALE = 32768.0;
  localparam real K = 1.6467600;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] u, v, theta;
  logic [17:0] rho;
  polar_sys dut (.clk, .u, .v, .rho, .theta);

  logic [15:0] uq [$], vq [$];

  initial begin
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      if (t >= LAT) begin
        real fu, fv, th, exp_th, r, exp_r;
        fu = real'(uq[t-LAT]) / SCALE;
        fv = real'(vq[t-LAT]) / SCALE;
        th = real'(theta) / SCALE;
        exp_th = $atan2(fv, fu);
        r = real'(rho) / SCALE;
        exp_r = K * $sqrt(fu*fu + fv*fv);
        checks++;
        if (th - exp_th > 0.0025 || exp_th - th > 0.0025) begin
          failures++;
          $display("FAIL theta t=%0d u=%0d v=%0d th=%f exp=%f", t, uq[t-LAT], vq[t-LAT], th, exp_th);
        end
        checks++;
        if (r - exp_r > 0.005*exp_r + 0.001 || exp_r - r > 0.005*exp_r + 0.001) begin
          failures++;
          $display("FAIL rho t=%0d r=%f exp=%f", t, r, exp_r);
        end
      end
      case (t % 6)
        0: begin u = 16'h8000; v = 16'h0000; end              // angle 0
        1: begin u = 16'h0000; v = 16'h8000; end              // angle pi/2
        default: begin
          real ang;
          ang = ($urandom % 10000) / 10000.0 * 1.5707963;
          u = 16'($rtoi($cos(ang) * SCALE));
          v = 16'($rtoi($sin(ang) * SCALE));
        end
      endcase
      uq.push_back(u);
      vq.push_back(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
