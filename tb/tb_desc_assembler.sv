// Testbench for desc_assembler: streams random descriptors as 33 beats of
// 64 bits (the upper 32 bits of beat 33 are padding) and checks every
// assembled 2080-bit descriptor. Phase 1 has a consumer that is always
// ready and a source that is always valid: a descriptor must come out every
// 33 cycles exactly (8 bytes per clock). Phase 2 adds random gaps on both
// sides.
module tb_desc_assembler;
  import sift_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              beat_valid, beat_ready, desc_valid, desc_ready;
  logic [63:0]       beat_data;
  logic [DESC_W-1:0] desc_data;

  desc_assembler dut (.clk, .rst_n, .beat_valid, .beat_ready, .beat_data,
                      .desc_valid, .desc_ready, .desc_data);

  logic [DESC_W-1:0] sent [$];
  int phase = 1;
  int last_out = -1, cyc = 0, n_out = 0;

  // source
  initial begin
    beat_valid = 0; beat_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      logic [33*64-1:0] d;
      d = '0;
      for (int i = 0; i < DESC_W / 32; i++) d[i*32 +: 32] = $urandom;
      sent.push_back(d[DESC_W-1:0]);
      for (int b = 0; b < 33; b++) begin
        @(negedge clk);
        while (phase == 2 && ($urandom % 3) == 0) begin beat_valid = 0; @(negedge clk); end
        beat_valid = 1; beat_data = d[b*64 +: 64];
        @(posedge clk);
        while (!beat_ready) @(posedge clk);
      end
      if (n == 29) phase = 2;
    end
    @(negedge clk);
    beat_valid = 0;
  end

  // sink
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    desc_ready = 1;
    forever begin
      @(negedge clk);
      desc_ready = (phase == 1) ? 1'b1 : (($urandom % 2) == 0);
    end
  end
  always @(posedge clk) begin
    if (rst_n && desc_valid && desc_ready) begin
      logic [DESC_W-1:0] exp_d;
      exp_d = sent.pop_front();
      checks++;
      if (desc_data != exp_d) begin failures++; $display("FAIL descriptor %0d", n_out); end
      if (n_out >= 1 && n_out < 29) begin
        checks++;
        if (cyc - last_out != 33) begin failures++; $display("FAIL rate: %0d cycles", cyc - last_out); end
      end
      last_out <= cyc;
      n_out <= n_out + 1;
      if (n_out == 59) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
