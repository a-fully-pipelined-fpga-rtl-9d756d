// Testbench for shift_delay: drives random words into an 8-bit, 5-stage
// delay line and checks that each word comes out exactly 5 cycles later, and
// that a tag line with RST_TAGS clears to zero on reset.
module tb_shift_delay;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] d, q, qt;
  shift_delay #(.WIDTH(8), .DEPTH(5)) dut (.clk, .rst_n, .d, .q);
  shift_delay #(.WIDTH(8), .DEPTH(5), .RST_TAGS(1'b1)) dut_t (.clk, .rst_n, .d, .q(qt));

  logic [7:0] hist [$];

  initial begin
    d = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++; if (qt !== 8'h00) begin failures++; $display("FAIL: tag line not cleared by reset"); end
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      if (hist.size() >= 5) begin
        checks++;
        if (q !== hist[hist.size()-5] || qt !== hist[hist.size()-5]) begin
          failures++;
          $display("FAIL t=%0d q=%h qt=%h exp=%h", t, q, qt, hist[hist.size()-5]);
        end
      end
      d = 8'($urandom);
      hist.push_back(d);
    end
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
