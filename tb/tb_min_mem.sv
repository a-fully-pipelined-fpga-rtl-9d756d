// Testbench for min_mem: fills all 33 words, then runs random reads and
// writes against an array model. Checks the synchronous read (data one
// cycle after the address), the write-port read-back (wr_dout one cycle
// after the write) and read-first behaviour when both ports hit one word.
module tb_min_mem;
  import sift_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [5:0]  rd_addr, wr_addr;
  logic        wr_en;
  min_entry_t  rd_data, wr_data, wr_dout;
  min_entry_t  model [33];

  min_mem dut (.clk, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data, .wr_dout);

  initial begin
    wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = '0;
    for (int i = 0; i < 33; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(i); wr_data = {16'($urandom), 16'($urandom), 32'($urandom)};
      model[i] = wr_data;
    end
    for (int t = 0; t < 400; t++) begin
      min_entry_t exp_rd, exp_wd;
      logic       we;
      @(negedge clk);
      rd_addr = 6'($urandom % 33);
      we      = ($urandom % 2) == 1;
      wr_en   = we;
      wr_addr = (t % 5 == 0) ? rd_addr : 6'($urandom % 33);
      wr_data = {16'($urandom), 16'($urandom), 32'($urandom)};
      exp_rd  = model[rd_addr];            // read-first: old value
      exp_wd  = wr_data;
      if (we) model[wr_addr] = wr_data;
      @(negedge clk);
      wr_en = 0;
      checks++;
      if (rd_data != exp_rd) begin failures++; $display("FAIL rd t=%0d got=%h exp=%h", t, rd_data, exp_rd); end
      checks++;
      if (wr_dout != exp_wd) begin failures++; $display("FAIL wr_dout t=%0d", t); end
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
