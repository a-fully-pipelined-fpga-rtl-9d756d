// Testbench for desc_fifo with the paper's sizes: a 33-deep and a 2-deep
// FIFO of 2080-bit descriptors, each driven with random pushes and pops
// against a queue model. Checks data order, out_valid, in_ready (full) and
// count, and that both "full" and "empty" are reached.
module tb_desc_fifo;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_full = 0, n_empty = 0;

  localparam int W = 2080;

  logic         iv [2], ir [2], ov [2], pp [2];
  logic [W-1:0] id [2], od [2];
  logic [5:0]   cnt0;
  logic [1:0]   cnt1;

  desc_fifo #(.W(W), .DEPTH(33)) dut0 (.clk, .rst_n, .in_valid(iv[0]), .in_ready(ir[0]),
    .in_data(id[0]), .out_valid(ov[0]), .pop(pp[0]), .out_data(od[0]), .count(cnt0));
  desc_fifo #(.W(W), .DEPTH(2)) dut1 (.clk, .rst_n, .in_valid(iv[1]), .in_ready(ir[1]),
    .in_data(id[1]), .out_valid(ov[1]), .pop(pp[1]), .out_data(od[1]), .count(cnt1));

  logic [W-1:0] q0 [$], q1 [$];

  initial begin
    for (int f = 0; f < 2; f++) begin iv[f] = 0; pp[f] = 0; id[f] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      // check visible state against models
      for (int f = 0; f < 2; f++) begin
        int depth, sz, c;
        depth = (f == 0) ? 33 : 2;
        sz = (f == 0) ? q0.size() : q1.size();
        c  = (f == 0) ? int'(cnt0) : int'(cnt1);
        checks++;
        if (ov[f] !== (sz != 0) || ir[f] !== (sz != depth) || c != sz) begin
          failures++; $display("FAIL flags f=%0d t=%0d size=%0d cnt=%0d", f, t, sz, c);
        end
        if (sz != 0) begin
          checks++;
          if (od[f] != ((f == 0) ? q0[0] : q1[0])) begin failures++; $display("FAIL data f=%0d t=%0d", f, t); end
        end
        if (sz == depth) n_full++;
        if (sz == 0) n_empty++;
      end
      // new stimulus; phases bias towards filling or draining
      for (int f = 0; f < 2; f++) begin
        int bias;
        bias = ((t / 200) % 2 == 0) ? 3 : 1;
        iv[f] = ($urandom % 4) < bias;
        pp[f] = ov[f] && (($urandom % 4) < (4 - bias));
        for (int i = 0; i < W / 32; i++) id[f][i*32 +: 32] = $urandom;
        if (pp[f]) begin if (f == 0) void'(q0.pop_front()); else void'(q1.pop_front()); end
        if (iv[f] && ir[f]) begin if (f == 0) q0.push_back(id[f]); else q1.push_back(id[f]); end
      end
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("FAIL: full/empty not reached"); end
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
