// desc_fifo: a first-word-fall-through FIFO for whole descriptors. The core
// has two of them, as in the paper's Fig. 2: 33 entries for alpha
// descriptors (it holds the next block while the current one is processed)
// and 2 entries for beta descriptors (one being received, one waiting).
// Handshake (own choice, valid/ready style):
//   push side: in_valid & in_ready moves in_data in; in_ready = !full.
//   pop side:  out_valid means out_data holds the oldest entry; pop removes
//              it at the clock edge. Popping an empty FIFO is an error.
// A push and a pop may happen in the same cycle, even when full is not set.
module desc_fifo #(
  parameter int unsigned W     = 2080,
  parameter int unsigned DEPTH = 33
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         pop,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic          push, do_pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign do_pop    = pop && out_valid;
  assign out_data  = mem[rp];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push)   wp <= inc(wp);
      if (do_pop) rp <= inc(rp);
      count <= count + CW'(push) - CW'(do_pop);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> out_valid)
    else $error("desc_fifo: pop while empty");
endmodule
