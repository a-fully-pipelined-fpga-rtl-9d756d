// Testbench for des_mem at full size (33 x 2080 bits): writes random
// descriptors, then random reads and writes against an array model, checking
// the synchronous read and the read-first rule (a slot read and written in
// the same cycle returns the old descriptor).
module tb_des_mem;
  import sift_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              wr_en;
  logic [5:0]        wr_addr, rd_addr;
  logic [DESC_W-1:0] wr_data, rd_data;
  logic [DESC_W-1:0] model [33];

  des_mem dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  function automatic logic [DESC_W-1:0] rnd_desc();
    logic [DESC_W-1:0] d;
    for (int i = 0; i < DESC_W / 32; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    wr_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    for (int i = 0; i < 33; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(i); wr_data = rnd_desc(); model[i] = wr_data;
    end
    for (int t = 0; t < 300; t++) begin
      logic [DESC_W-1:0] exp_rd;
      @(negedge clk);
      rd_addr = 6'($urandom % 33);
      wr_en   = ($urandom % 2) == 1;
      wr_addr = (t % 3 == 0) ? rd_addr : 6'($urandom % 33);
      wr_data = rnd_desc();
      exp_rd  = model[rd_addr];
      if (wr_en) model[wr_addr] = wr_data;
      @(negedge clk);
      wr_en = 0;
      checks++;
      if (rd_data != exp_rd) begin failures++; $display("FAIL t=%0d addr=%0d", t, rd_addr); end
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
