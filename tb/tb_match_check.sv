// Testbench for match_check: random (min, sec_min) pairs, one per cycle,
// including pairs on both sides of the 0.59375 ratio and all-ones inputs.
// Exactly 3 cycles later match must equal the rational test
// min / sec_min < 19/32 (computed in real arithmetic), and the location must
// come out unchanged with it.
module tb_match_check;
  localparam int LAT = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_match = 0;

  logic        in_valid, out_valid, match;
  logic [15:0] min, sec_min;
  logic [31:0] in_coord, out_coord;
  match_check dut (.clk, .rst_n, .in_valid, .min, .sec_min, .in_coord, .out_valid, .match, .out_coord);

  bit          expq [$];
  logic [31:0] cq [$];
  bit          vq [$];

  initial begin
    in_valid = 0; min = 0; sec_min = 0; in_coord = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      if (t >= LAT) begin
        checks++;
        if (out_valid !== vq[t-LAT]) begin failures++; $display("FAIL valid t=%0d", t); end
        if (vq[t-LAT]) begin
          checks++;
          if (match !== expq[t-LAT] || out_coord !== cq[t-LAT]) begin
            failures++;
            $display("FAIL t=%0d match=%0d exp=%0d", t, match, expq[t-LAT]);
          end
          if (match) n_match++;
        end
      end
      in_valid = ($urandom % 4) != 0;
      sec_min  = 16'($urandom);
      case (t % 4)
        0: min = 16'($urandom);
        1: min = 16'((longint'(sec_min) * 19) / 32);                  // at the boundary
        2: min = 16'((longint'(sec_min) * 19) / 32 + ($urandom % 3)); // just above
        default: min = 16'($urandom % (32'(sec_min) + 1));
      endcase
      if (t == 7) begin min = 16'hFFFF; sec_min = 16'hFFFF; end
      in_coord = 32'($urandom);
      vq.push_back(in_valid);
      cq.push_back(in_coord);
      expq.push_back(real'(min) < 0.59375 * real'(sec_min));
    end
    checks++;
    if (n_match == 0) begin failures++; $display("FAIL: no match seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
