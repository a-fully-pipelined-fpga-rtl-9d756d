// Testbench for cosine_inverse: random dot products x in Q2.30 (0 .. 1.0,
// plus values above 1.0 that must clamp to angle 0), one per cycle. After
// exactly 52 cycles, the paper's pipeline depth, theta must equal acos(x)
// within 0.003 rad.
module tb_cosine_inverse;
  localparam int LAT = 52;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] x;
  logic [15:0] theta;
  cosine_inverse dut (.clk, .x, .theta);

  logic [31:0] xq [$];

  initial begin
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      if (t >= LAT) begin
        real fx, th, exp_th;
        fx = real'(xq[t-LAT]) / 1073741824.0;
        if (fx > 1.0) fx = 1.0;
        th = real'(theta) / 32768.0;
        exp_th = $acos(fx);
        checks++;
        if (th - exp_th > 0.003 || exp_th - th > 0.003) begin
          failures++;
          $display("FAIL t=%0d x=%f theta=%f exp=%f", t, fx, th, exp_th);
        end
      end
      case (t % 8)
        0: x = 32'h4000_0000;              // 1.0 -> 0
        1: x = 32'd0;                      // 0 -> pi/2
        2: x = 32'h4000_0000 + 32'($urandom % 4096); // slightly above 1.0
        3: x = 32'h4000_0000 - 32'($urandom % 65536); // near 1.0
        default: x = 32'($urandom) >> 2;
      endcase
      xq.push_back(x);
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
