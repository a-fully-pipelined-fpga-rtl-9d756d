// Testbench for square_root: random 32-bit radicands (and the corner cases
// 0, 1, 2^30, 2^32-1) enter one per cycle; each root must satisfy
// root^2 <= rad < (root+1)^2 and appear exactly 37 cycles later.
module tb_square_root;
  localparam int LAT = 37;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] rad;
  logic [15:0] root;
  square_root dut (.clk, .rad, .root);

  logic [31:0] radq [$];

  initial begin
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      if (t >= LAT) begin
        longint unsigned r, x;
        r = longint'(root);
        x = longint'(radq[t-LAT]);
        checks++;
        if (!(r*r <= x && (r+1)*(r+1) > x)) begin
          failures++;
          $display("FAIL t=%0d rad=%0d root=%0d", t, x, r);
        end
      end
      case (t % 7)
        0: rad = 32'd0;
        1: rad = 32'h4000_0000;
        2: rad = 32'hFFFF_FFFF;
        3: rad = 32'($urandom) >> 2;
        default: rad = 32'($urandom);
      endcase
      if (t == 5) rad = 32'd1;
      radq.push_back(rad);
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
