// Testbench for control_unit. The FIFOs, DES_MEM and beta Register around it
// are modelled with descriptor ID numbers: the alpha FIFO delivers IDs
// 0..num_alpha-1, the beta FIFO delivers the beta image (IDs 0..num_beta-1)
// once per alpha block, each paced like a 64-bit memory (one descriptor per
// 33 cycles) or faster. For every issued tag the testbench checks that DES_MEM
// holds the expected alpha descriptor in the addressed slot (so a refill
// never overwrites a slot too early), that first/last are right, that every
// (alpha, beta) pair is issued exactly once, that the same slot is never
// issued twice within MIN_SWEEP cycles, and that done comes DRAIN cycles
// after the last issue. With 33-descriptor blocks and a 33-cycle beta pace a
// new sweep must start every 33 cycles in steady state. Counts the refill
// overlap, beta stalls, short blocks and padded sweeps.
module tb_control_unit;
  import sift_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_overlap = 0, n_stall = 0, n_pad = 0, n_short = 0;

  logic        start, busy, done;
  logic [15:0] num_alpha, num_beta;
  logic [5:0]  block_size;
  logic        a_valid, a_pop, des_wr_en, b_valid, b_pop;
  logic [5:0]  des_wr_addr, des_rd_addr;
  tag_t        issue;

  control_unit dut (.clk, .rst_n, .start, .num_alpha, .num_beta, .block_size, .busy, .done,
    .a_valid, .a_pop, .des_wr_en, .des_wr_addr, .b_valid, .b_pop, .issue, .des_rd_addr);

  // environment state
  int a_next, a_avail, a_total;        // alpha ids
  int b_sent, b_avail, b_total, b_timer, beta_pace;
  int a_pace = 33;
  int des [64];
  int cur_beta, cur_beta_idx;
  int last_issue_cyc [64];
  int cyc = 0;
  int n_issued, last_issue_time, last_bpop, n_bpop;
  bit seen [int];
  int exp_blk_base, exp_blk_size, bs_eff;

  always_comb begin
    a_valid = (a_avail > 0);
    b_valid = (b_avail > 0);
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && busy) begin
      // --- beta register
      if (b_pop) begin
        checks++;
        if (!b_valid) begin failures++; $display("FAIL pop of empty beta FIFO"); end
        cur_beta_idx = cur_beta % int'(num_beta);
        cur_beta++;
        b_avail--;
        if (n_bpop > 2 && beta_pace == 33 && int'(block_size) == 33 && dut.blk == 33 && cur_beta_idx != 0) begin
          checks++;
          if (cyc - last_bpop != 33) begin failures++; $display("FAIL sweep interval %0d", cyc - last_bpop); end
        end
        last_bpop = cyc;
        n_bpop++;
      end
      // --- issue checks (read-first: before this cycle's write)
      if (issue.valid) begin
        int aid, key;
        aid = des[des_rd_addr];
        key = aid * 65536 + cur_beta_idx;
        checks++;
        if (des_rd_addr != issue.aidx) begin failures++; $display("FAIL rd_addr/aidx"); end
        checks++;
        if (aid != exp_blk_base + int'(issue.aidx)) begin
          failures++; $display("FAIL cyc=%0d slot %0d holds alpha %0d, expected %0d", cyc, issue.aidx, aid, exp_blk_base + int'(issue.aidx));
        end
        checks++;
        if (seen.exists(key)) begin failures++; $display("FAIL pair issued twice"); end
        seen[key] = 1;
        checks++;
        if (issue.first != (cur_beta_idx == 0) || issue.last != (cur_beta_idx == int'(num_beta) - 1)) begin
          failures++; $display("FAIL first/last cyc=%0d beta=%0d", cyc, cur_beta_idx);
        end
        checks++;
        if (last_issue_cyc[issue.aidx] >= 0 && cyc - last_issue_cyc[issue.aidx] < 3) begin
          failures++; $display("FAIL slot %0d reissued after %0d cycles", issue.aidx, cyc - last_issue_cyc[issue.aidx]);
        end
        last_issue_cyc[issue.aidx] = cyc;
        n_issued++;
        last_issue_time = cyc;
        if (int'(issue.aidx) == exp_blk_size - 1 && issue.last) begin
          exp_blk_base += exp_blk_size;
          exp_blk_size = (int'(num_alpha) - exp_blk_base < bs_eff) ? int'(num_alpha) - exp_blk_base : bs_eff;
        end
      end else if (dut.state == dut.S_RUN && dut.in_sweep) begin
        n_pad++;
      end
      if (dut.state == dut.S_RUN && !dut.in_sweep && !b_valid) n_stall++;
      // --- writes into DES_MEM
      if (des_wr_en) begin
        checks++;
        if (!a_valid) begin failures++; $display("FAIL pop of empty alpha FIFO"); end
        if (dut.state == dut.S_RUN) n_overlap++;
        des[des_wr_addr] = a_next;
        a_next++;
        a_avail--;
      end
    end
    // --- sources: alpha FIFO (33 deep, paced 33), beta FIFO (2 deep, paced)
    if (rst_n) begin
      if (a_next + a_avail < a_total && a_avail < 33 && (cyc % a_pace) == 0) a_avail++;
      b_timer++;
      if (b_sent < b_total && b_avail < 2 && b_timer >= beta_pace) begin
        b_avail++; b_sent++; b_timer = 0;
      end
    end
  end

  task automatic run_job(input int na, input int nb, input int bs, input int pace, input int apace);
    int nblk, t0, t_done, exp_cycles;
    bs_eff = bs;
    a_pace = apace;
    nblk = (na + bs - 1) / bs;
    a_next = 0; a_avail = 0; a_total = na;
    b_sent = 0; b_avail = 0; b_total = nb * nblk; b_timer = 0; beta_pace = pace;
    cur_beta = 0; cur_beta_idx = 0; n_issued = 0; n_bpop = 0;
    exp_blk_base = 0; exp_blk_size = (na < bs) ? na : bs;
    seen.delete();
    foreach (last_issue_cyc[i]) last_issue_cyc[i] = -100;
    foreach (des[i]) des[i] = -1;
    if (na % bs != 0 && nblk > 1) n_short++;
    @(negedge clk);
    num_alpha = 16'(na); num_beta = 16'(nb); block_size = 6'(bs); start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    t_done = cyc;
    checks++;
    if (n_issued != na * nb) begin failures++; $display("FAIL job %0d x %0d: %0d issues", na, nb, n_issued); end
    checks++;
    if (t_done - last_issue_time != 1 + LAT_DOT + LAT_ACOS + LAT_MIN + 1 + LAT_CHECK + 1) begin
      failures++; $display("FAIL drain time %0d", t_done - last_issue_time);
    end
    // time: one sweep per beta descriptor, paced by the beta stream
    exp_cycles = nblk * nb * ((pace > bs) ? pace : ((bs > 3) ? bs : 3));
    checks++;
    if (t_done - t0 > ((exp_cycles > na * 33) ? exp_cycles : na * 33) + 33 * 33 + 200) begin
      failures++; $display("FAIL job took %0d cycles", t_done - t0);
    end
    $display("INFO job alpha=%0d beta=%0d block=%0d pace=%0d: %0d cycles (%0d per sweep budget)",
             na, nb, bs, pace, t_done - t0, exp_cycles);
  endtask

  initial begin
    start = 0; num_alpha = 0; num_beta = 0; block_size = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job(70, 5, 33, 33, 33);  // two full blocks and a short one
    run_job(70, 5, 33, 33, 1);   // alpha FIFO always full: refill right behind the sweep
    run_job(33, 3, 33, 1, 33);   // beta faster than the sweep
    run_job(5, 4, 2, 1, 1);      // tiny blocks: padded sweeps
    run_job(1, 1, 33, 33, 33);
    run_job(40, 2, 33, 50, 33);  // beta slower than the sweep: stalls
    checks++;
    if (n_overlap == 0 || n_stall == 0 || n_pad == 0 || n_short == 0) begin
      failures++; $display("FAIL mechanism not seen: overlap=%0d stall=%0d pad=%0d short=%0d", n_overlap, n_stall, n_pad, n_short);
    end
    $display("INFO overlap=%0d stall=%0d pad=%0d short=%0d", n_overlap, n_stall, n_pad, n_short);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
