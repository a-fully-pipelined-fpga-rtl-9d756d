// control_unit: the Control Unit of the matching core. It schedules the whole
// comparison of an alpha image (num_alpha descriptors) against a beta image
// (num_beta descriptors):
//   * the alpha descriptors are taken in blocks of block_size (at most 33);
//     the last block may be shorter;
//   * LOAD: a block is moved from the alpha FIFO into DES_MEM, one per cycle;
//   * RUN: for every beta descriptor, it is popped from the beta FIFO into the
//     beta Register and then "swept" past the cached block: one dot product
//     per cycle, slot 0 .. blk-1 of DES_MEM. Each sweep issues a tag
//     {valid, aidx, first, last} that travels with the data: "first" (first
//     beta of the block) makes MIN_FIND start from the flush constant,
//     "last" (last beta) marks the result that goes to Match_Check;
//   * during the sweep of the last beta of a block, DES_MEM slot j is
//     refilled with the next block as soon as it has been read for the last
//     time (the overlap the paper describes), so the next block can start
//     with little or no LOAD time;
//   * when a beta descriptor is not yet in its FIFO, the sweep waits (stall),
//     which is what paces the core at one beta per 33 cycles from a 64-bit
//     memory port;
//   * after the last issue the unit counts DRAIN cycles (the pipeline depth)
//     and then raises done for one cycle, the cycle after the last result
//     leaves Match_Check.
// A sweep lasts at least MIN_SWEEP cycles (idle slots are issued with
// valid = 0); this keeps two updates of the same MIN_MEM word far enough
// apart for the read-modify-write loop through MIN_FIND. With the paper's
// 33-descriptor blocks this never acts. This rule, the run-time inputs and the
// handshakes are this design's choices; the paper only states what the unit
// controls.
// Interface timing: a tag and des_rd_addr are issued in the same cycle
// (stage S0); beta_load in that cycle loads the beta Register at the clock
// edge, so both DES_MEM data and the Register are valid in stage S1.
module control_unit
  import sift_pkg::*;
#(
  parameter int unsigned BLOCK     = BLOCK_MAX,   // DES_MEM depth
  parameter int unsigned MIN_SWEEP = 3,
  parameter int unsigned DRAIN     = 1 + LAT_DOT + LAT_ACOS + LAT_MIN + 1 + LAT_CHECK
) (
  input  logic        clk,
  input  logic        rst_n,
  // job
  input  logic        start,
  input  logic [15:0] num_alpha,
  input  logic [15:0] num_beta,
  input  logic [5:0]  block_size,   // 1 .. BLOCK; 0 or larger is taken as BLOCK
  output logic        busy,
  output logic        done,
  // alpha FIFO -> DES_MEM
  input  logic        a_valid,
  output logic        a_pop,
  output logic        des_wr_en,
  output logic [5:0]  des_wr_addr,
  // beta FIFO -> Register
  input  logic        b_valid,
  output logic        b_pop,        // also loads the beta Register
  // pipeline issue
  output tag_t        issue,
  output logic [5:0]  des_rd_addr
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN, S_DRAIN} state_t;
  state_t state;

  logic [5:0]  bs;            // effective block size
  logic [15:0] n_beta;
  logic [15:0] alpha_left;    // alpha descriptors not yet placed in a block
  logic [5:0]  blk;           // size of the block being processed
  logic [5:0]  nxt_blk;       // size of the following block (0 = none)
  logic [5:0]  fill_idx;      // next DES_MEM slot to fill
  logic [5:0]  fill_tgt;      // slots to fill for the block being loaded
  logic [15:0] beta_cnt;
  logic        in_sweep;
  logic [5:0]  sweep_pos;     // cycle within the sweep
  logic [7:0]  drain_cnt;

  logic [5:0] sweep_len;
  assign sweep_len = (blk > 6'(MIN_SWEEP)) ? blk : 6'(MIN_SWEEP);

  function automatic logic [5:0] min_blk(input logic [15:0] left, input logic [5:0] b);
    return (left < 16'(b)) ? left[5:0] : b;
  endfunction

  // Block size and first block of a new job
  logic [5:0] b, first_blk;
  assign b         = (block_size == 0 || block_size > 6'(BLOCK)) ? 6'(BLOCK) : block_size;
  assign first_blk = min_blk(num_alpha, b);

  // Sweep issue in this cycle
  logic sweep_go, sweep_start, sweep_end, last_beta;
  logic [5:0] pos;            // slot addressed this cycle
  assign last_beta   = (beta_cnt == n_beta - 16'd1);
  assign sweep_start = (state == S_RUN) && !in_sweep && b_valid;
  assign sweep_go    = sweep_start || ((state == S_RUN) && in_sweep);
  assign pos         = in_sweep ? sweep_pos : 6'd0;
  assign sweep_end   = sweep_go && (pos == sweep_len - 6'd1);

  // Refill of DES_MEM: in LOAD, or in the last sweep once the slot is free
  logic fill_ok, refill_window;
  assign refill_window = (state == S_RUN) && last_beta && sweep_go &&
                         ((fill_idx <= pos) || (fill_idx >= blk));
  assign fill_ok = a_valid && (fill_idx < fill_tgt) &&
                   ((state == S_LOAD) || refill_window);

  // the block being filled is complete after this cycle
  logic load_done;
  assign load_done = (fill_idx + 6'(fill_ok)) == fill_tgt;

  assign a_pop       = fill_ok;
  assign des_wr_en   = fill_ok;
  assign des_wr_addr = fill_idx;
  assign b_pop       = sweep_start;
  assign des_rd_addr = pos;
  assign busy        = (state != S_IDLE);

  always_comb begin
    issue       = '0;
    issue.valid = sweep_go && (pos < blk);
    issue.aidx  = pos;
    issue.first = (beta_cnt == 16'd0);
    issue.last  = last_beta;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      bs         <= 6'(BLOCK);
      n_beta     <= '0;
      alpha_left <= '0;
      blk        <= '0;
      nxt_blk    <= '0;
      fill_idx   <= '0;
      fill_tgt   <= '0;
      beta_cnt   <= '0;
      in_sweep   <= 1'b0;
      sweep_pos  <= '0;
      drain_cnt  <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (fill_ok) fill_idx <= fill_idx + 6'd1;
      unique case (state)
        S_IDLE: if (start) begin
          bs         <= b;
          n_beta     <= num_beta;
          blk        <= first_blk;
          alpha_left <= num_alpha - 16'(first_blk);
          nxt_blk    <= min_blk(num_alpha - 16'(first_blk), b);
          fill_idx   <= '0;
          fill_tgt   <= first_blk;
          beta_cnt   <= '0;
          in_sweep   <= 1'b0;
          if (num_alpha == 0 || num_beta == 0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_LOAD;
          end
        end
        S_LOAD: if (load_done) begin
          state    <= S_RUN;
          fill_idx <= '0;          // from now on: refill target is the next block
          fill_tgt <= nxt_blk;
        end
        S_RUN: if (sweep_go) begin
          if (!sweep_end) begin
            in_sweep  <= 1'b1;
            sweep_pos <= pos + 6'd1;
          end else begin
            in_sweep  <= 1'b0;
            sweep_pos <= '0;
            if (!last_beta) begin
              beta_cnt <= beta_cnt + 16'd1;
            end else if (nxt_blk != 0) begin
              // next block: part of it may already sit in DES_MEM
              beta_cnt   <= '0;
              blk        <= nxt_blk;
              alpha_left <= alpha_left - 16'(nxt_blk);
              nxt_blk    <= min_blk(alpha_left - 16'(nxt_blk), bs);
              if (load_done) begin
                // the whole next block arrived during this sweep
                fill_idx <= '0;
                fill_tgt <= min_blk(alpha_left - 16'(nxt_blk), bs);
              end else begin
                state <= S_LOAD;
              end
            end else begin
              // count the padding slots after the last real issue as drained
              drain_cnt <= 8'(sweep_len - blk);
              state     <= S_DRAIN;
            end
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 8'd1;
          if (drain_cnt == 8'(DRAIN - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
