// Testbench for min_find: random angle streams for several independent
// "alpha slots" are fed through MIN_FIND with the previous entry supplied by
// the testbench, as MIN_MEM would. The output one cycle later must equal a
// model that keeps the two smallest values seen so far (sorting-based, not
// the comparison scheme), and the coordinate of the smallest. Ties and the
// flush constant 16'hFFFF are exercised.
module tb_min_find;
  import sift_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               in_valid, out_valid;
  logic [15:0]        cur;
  logic [31:0]        cur_coord;
  min_entry_t         prev, result;

  min_find dut (.clk, .rst_n, .in_valid, .cur, .cur_coord, .prev, .out_valid, .result);

  initial begin
    in_valid = 0; cur = 0; cur_coord = 0; prev = MIN_EMPTY;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int seq = 0; seq < 40; seq++) begin
      int unsigned vals [$];
      min_entry_t st;
      st = MIN_EMPTY;
      vals.delete();
      for (int k = 0; k < 20; k++) begin
        int unsigned v;
        int unsigned sorted [$];
        sorted.delete();
        v = (seq % 4 == 0) ? ($urandom % 8) : ($urandom % 51473);  // ties when small range
        @(negedge clk);
        in_valid = 1; cur = 16'(v); cur_coord = 32'(seq * 100 + k); prev = st;
        vals.push_back(v);
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid) begin failures++; $display("FAIL: out_valid missing"); end
        // model: two smallest of all values so far (second = FFFF if only one)
        sorted = vals;
        sorted.sort();
        checks++;
        if (result.min != 16'(sorted[0]) ||
            result.sec_min != ((sorted.size() > 1) ? 16'(sorted[1]) : 16'hFFFF)) begin
          failures++;
          $display("FAIL seq=%0d k=%0d min=%0d sec=%0d exp=%0d,%0d", seq, k,
                   result.min, result.sec_min, sorted[0], (sorted.size() > 1) ? sorted[1] : 65535);
        end
        // coordinate of the first occurrence of the minimum
        begin
          int first_k;
          first_k = -1;
          foreach (vals[i]) if (vals[i] == sorted[0] && first_k < 0) first_k = i;
          checks++;
          if (result.coord != 32'(seq * 100 + first_k)) begin
            failures++;
            $display("FAIL coord seq=%0d k=%0d got=%0d exp=%0d", seq, k, result.coord, seq*100+first_k);
          end
        end
        st = result;
      end
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL: out_valid without input"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
