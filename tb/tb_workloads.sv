// Workload testbench for sift_match_core at its default parameters: the
// image sizes of the paper's evaluation. A database image of 1021 descriptors
// is matched against alpha images of 579, 638 and 882 descriptors and
// against itself (self-matching). The descriptors are synthetic (random
// unit-length SIFT-like histograms; about half of each alpha image are noisy
// copies of database descriptors), since the original images are not part of
// this design. Every result is checked bit for bit against sift_ref_pkg, every
// self-match must be a match, and the run time at 100 MHz is printed next to
// the paper's measured time and must lie within 1 % of
// ceil(n_alpha/33) * n_beta * 33 cycles.
module tb_workloads;
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
  int    n_match = 0, n_nomatch = 0;
  bit    self_match = 0;

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
  task automatic run_job(input int na, input int nb, input int bs, input bit with_gaps, input real paper_ms);
    int nblk, t0, t1, budget;
    real model_cycles;
    A.delete(); B.delete(); exp_min.delete(); exp_sec.delete(); exp_match.delete();
    for (int j = 0; j < nb; j++) B.push_back(random_desc({16'hB000 + 16'(j), 16'(j * 7)}));
    for (int k = 0; k < na; k++) begin
      logic [31:0] xy;
      xy = {16'hA000 + 16'(k), 16'(k * 3)};
      if (self_match) begin
        desc_t d;
        d = B[k];
        d[VEC_W +: COORD_W] = xy;
        A.push_back(d);
      end
      else if (k % 2 == 0) A.push_back(noisy_copy(B[$urandom % nb], xy, 600));
      else                 A.push_back(random_desc(xy));
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
      if (self_match) begin
        checks++;
        if (!exp_match[k]) begin failures++; $display("FAIL descriptor %0d does not match itself", k); end
      end
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
    model_cycles = real'(nblk) * real'(nb) * 33.0;
    checks++;
    if (real'(t1 - t0) > 1.01 * model_cycles || real'(t1 - t0) < model_cycles) begin
      failures++; $display("FAIL job took %0d cycles, model %0.0f", t1 - t0, model_cycles);
    end
    $display("INFO %0d x %0d descriptors: %0d cycles = %0.3f ms at 100 MHz (paper: %0.2f ms)",
             na, nb, t1 - t0, real'(t1 - t0) / 1.0e5, paper_ms);
  endtask
  initial begin
    start = 0; num_alpha = 0; num_beta = 0; block_size = 0;
    a_beat_valid = 0; b_beat_valid = 0; a_beat_data = '0; b_beat_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_job(579, 1021, 33, 1'b0, 6.08);
    run_job(638, 1021, 33, 1'b0, 6.75);
    run_job(882, 1021, 33, 1'b0, 9.11);
    self_match = 1;
    run_job(1021, 1021, 33, 1'b0, 10.46);
    $display("INFO matches=%0d no-matches=%0d", n_match, n_nomatch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
