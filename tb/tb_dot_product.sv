// Testbench for dot_product at full size (128 x 16-bit elements). Random
// operand pairs enter every cycle; each result is compared with the integer
// sum of products (saturated to 32 bits) exactly 10 cycles later, the
// pipeline depth the paper gives. Includes all-ones operands (saturation),
// zero operands and unit-length descriptors.
module tb_dot_product;
  localparam int N = 128, EW = 16, LAT = 10;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N*EW-1:0] a, b;
  logic [31:0] dp;
  dot_product dut (.clk, .a, .b, .dp);

  longint unsigned expq [$];

  function automatic longint unsigned ref_dot(input logic [N*EW-1:0] x, input logic [N*EW-1:0] y);
    longint unsigned s = 0;
    for (int i = 0; i < N; i++) s += longint'(x[i*EW +: EW]) * longint'(y[i*EW +: EW]);
    return (s > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : s;
  endfunction

  initial begin
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      if (t >= LAT) begin
        checks++;
        if (64'(dp) != expq[t-LAT]) begin
          failures++;
          $display("FAIL t=%0d dp=%h exp=%h", t, dp, expq[t-LAT]);
        end
      end
      case (t % 5)
        0: begin a = '1; b = '1; end
        1: begin a = '0; for (int i = 0; i < N; i++) b[i*EW +: EW] = 16'($urandom); end
        2: begin  // unit-length-ish: one element 1.0
             a = '0; b = '0; a[(t%N)*EW +: EW] = 16'h8000; b[(t%N)*EW +: EW] = 16'h8000;
           end
        default: for (int i = 0; i < N; i++) begin
             a[i*EW +: EW] = 16'($urandom) >> 3;   // typical SIFT sizes
             b[i*EW +: EW] = 16'($urandom) >> 3;
           end
      endcase
      expq.push_back(ref_dot(a, b));
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
