// End-to-end testbench for sift_match_core at its default parameters
// (33-descriptor caches, 128 x 16-bit elements, 64-bit streams).
// Builds a beta (database) image of random unit-length descriptors and an
// alpha image in which about half the descriptors are noisy copies of beta
// descriptors (true matches) and the rest are random. The descriptors are
// streamed in 64-bit beats, the beta image once per alpha block. Every
// result is compared with the bit-exact reference of sift_ref_pkg: min and
// second-min angle, the 19/32 ratio decision, alpha and beta locations; the
// angles are also compared with real arccos (tolerance 0.003 rad).
// Three jobs:
//   A  70 x 40, blocks of 33 (33 + 33 + 4): steady state, one sweep per 33 cycles, DES_MEM
//      refilled while the last beta is swept; total time is checked against
//      blocks * beta * 33 cycles plus the first block's load.
//   B  40 x 36, blocks of 33 (33 + 7), beta stream with random gaps: stalls.
//   C  5 x 4, blocks of 2: short sweeps padded to 3 cycles.
// Counts, and requires at least once: flush multiplexer, refill overlap,
// beta stall, short block, padded sweep, alpha back-pressure, match and
// no-match results.
module tb_sift_match_core;
  import sift_pkg::*;
  import sift_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic               start, busy, done;
  logic [15:0]        num_alpha, num_beta;
  logic [5:0]         block_size;
  logic               a_beat_valid, a_beat_ready, b_beat_valid, b_beat_ready;
  logic [63:0]        a_beat_data, b_beat_data;
  logic               match_valid, match;
  logic [31:0]        alpha_xy, beta_xy;
  logic [15:0]        min_angle, sec_angle;

  sift_match_core dut (.*);

  desc_t A [$], B [$];
  int    results;
  int    exp_min [int], exp_sec [int];
  bit    exp_match [int];
  int    n_flush = 0, n_overlap = 0, n_stall = 0, n_short = 0, n_pad = 0;
  int    n_backpressure = 0, n_match = 0, n_nomatch = 0;
  localparam logic [1:0] ST_RUN = 2'd2;   // encoding of control_unit S_RUN

  // ---------------------------------------------------- mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.tag_mf.valid && dut.tag_mf.first) n_flush++;
    if (dut.des_wr_en && dut.u_ctrl.state == ST_RUN) n_overlap++;
    if (dut.u_ctrl.state == ST_RUN && !dut.u_ctrl.in_sweep && !dut.bfifo_valid) n_stall++;
    if (dut.u_ctrl.sweep_go && dut.u_ctrl.pos == 0 && dut.u_ctrl.blk < dut.u_ctrl.bs) n_short++;
    if (dut.u_ctrl.sweep_go && !dut.tag_s0.valid) n_pad++;
    if (a_beat_valid && !a_beat_ready) n_backpressure++;
  end

  // ---------------------------------------------------------- stream drivers
  task automatic send_stream(input bit is_a, input int reps, input bit with_gaps);
    int n;
    n = is_a ? A.size() : B.size();
    for (int r = 0; r < reps; r++)
      for (int k = 0; k < n; k++) begin
        logic [33*64-1:0] d;
        d = '0;
        d[DESC_W-1:0] = is_a ? A[k] : B[k];
        for (int b = 0; b < 33; b++) begin
          if (with_gaps) while (($urandom % 2) == 0) begin
            @(negedge clk);
            if (is_a) a_beat_valid = 0; else b_beat_valid = 0;
          end
          @(negedge clk);
          if (is_a) begin a_beat_valid = 1; a_beat_data = d[b*64 +: 64]; end
          else      begin b_beat_valid = 1; b_beat_data = d[b*64 +: 64]; end
          @(posedge clk);
          while (!(is_a ? a_beat_ready : b_beat_ready)) @(posedge clk);
        end
      end
    @(negedge clk);
    if (is_a) a_beat_valid = 0; else b_beat_valid = 0;
  endtask

  // ------------------------------------------------------- result checking
  always @(posedge clk) if (rst_n && match_valid) begin
    int k;
    k = int'(alpha_xy[31:16]) - 16'hA000;
    checks++;
    if (k < 0 || k >= A.size() || !exp_min.exists(k)) begin
      failures++; $display("FAIL result for unknown alpha %h", alpha_xy);
    end else begin
      checks++;
      if (min_angle != 16'(exp_min[k]) || sec_angle != 16'(exp_sec[k])) begin
        failures++;
        $display("FAIL alpha %0d: min=%0d sec=%0d expected %0d %0d", k, min_angle, sec_angle, exp_min[k], exp_sec[k]);
      end
      checks++;
      if (match != exp_match[k]) begin failures++; $display("FAIL alpha %0d: match=%0d", k, match); end
      checks++;
      if (beta_xy != B[B.size()-1][VEC_W +: COORD_W]) begin failures++; $display("FAIL beta_xy %h", beta_xy); end
      if (match) n_match++; else n_nomatch++;
      exp_min.delete(k);
    end
    results++;
  end

  // ------------------------------------------------------------------- jobs
  task automatic run_job(input int na, input int nb, input int bs, input bit with_gaps);
    int nblk, t0, t1, budget;
    A.delete(); B.delete(); exp_min.delete(); exp_sec.delete(); exp_match.delete();
    for (int j = 0; j < nb; j++) B.push_back(random_desc({16'hB000 + 16'(j), 16'(j * 7)}));
    for (int k = 0; k < na; k++) begin
      logic [31:0] xy;
      xy = {16'hA000 + 16'(k), 16'(k * 3)};
      if (k % 2 == 0) A.push_back(noisy_copy(B[$urandom % nb], xy, 600));
      else            A.push_back(random_desc(xy));
    end
    // reference results
    for (int k = 0; k < na; k++) begin
      int m1, m2;
      m1 = 65535; m2 = 65535;
      for (int j = 0; j < nb; j++) begin
        int t;
        real ra;
        t = int'(ref_angle(ref_dot(A[k], B[j])));
        ra = real_angle(A[k], B[j]);
        checks++;
        if (real'(t) / 32768.0 - ra > 0.003 || ra - real'(t) / 32768.0 > 0.003) begin
          failures++; $display("FAIL reference angle off: %f vs %f", real'(t) / 32768.0, ra);
        end
        if (t < m1) begin m2 = m1; m1 = t; end
        else if (t < m2) m2 = t;
      end
      exp_min[k] = m1; exp_sec[k] = m2;
      exp_match[k] = (m1 * 32 < m2 * 19);
    end
    nblk = (na + bs - 1) / bs;
    results = 0;
    @(negedge clk);
    num_alpha = 16'(na); num_beta = 16'(nb); block_size = 6'(bs); start = 1;
    t0 = cyc;
    fork
      send_stream(1'b1, 1, 1'b0);
      send_stream(1'b0, nblk, with_gaps);
      begin
        @(negedge clk);
        start = 0;
        while (!done) @(negedge clk);
      end
    join
    t1 = cyc;
    checks++;
    if (results != na || exp_min.size() != 0) begin
      failures++; $display("FAIL job %0dx%0d: %0d results, %0d missing", na, nb, results, exp_min.size());
    end
    // time: first block load (33 beats per alpha descriptor) plus one
    // 33-cycle sweep per beta descriptor and block, plus the pipeline
    budget = ((na < bs) ? na : bs) * 33 + nblk * nb * 33 + 33 + 100;
    if (!with_gaps) begin
      checks++;
      if (t1 - t0 > budget) begin failures++; $display("FAIL job took %0d cycles, budget %0d", t1 - t0, budget); end
    end
    $display("INFO job %0d x %0d block %0d: %0d cycles (budget %0d)", na, nb, bs, t1 - t0, budget);
  endtask

  initial begin
    start = 0; num_alpha = 0; num_beta = 0; block_size = 0;
    a_beat_valid = 0; b_beat_valid = 0; a_beat_data = '0; b_beat_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_job(70, 40, 33, 1'b0);
    run_job(40, 36, 33, 1'b1);
    run_job(5, 4, 2, 1'b0);
    $display("INFO flush=%0d overlap=%0d stall=%0d short=%0d pad=%0d backpressure=%0d match=%0d nomatch=%0d",
             n_flush, n_overlap, n_stall, n_short, n_pad, n_backpressure, n_match, n_nomatch);
    checks++;
    if (n_flush == 0 || n_overlap == 0 || n_stall == 0 || n_short == 0 || n_pad == 0 ||
        n_backpressure == 0 || n_match == 0 || n_nomatch == 0) begin
      failures++; $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
