// shift_delay: the "Z^-n" box of the paper's block diagrams, a shift register
// of DEPTH pipeline stages that delays a WIDTH-bit word by exactly DEPTH
// clock cycles. The core uses it to keep descriptor coordinates and control
// tags aligned with the Dot_Product and Cosine_Inverse pipelines.
// Interface: d is sampled on every rising clock edge; q is d from DEPTH cycles
// earlier. DEPTH = 0 is a plain wire. The stages have no reset (data only);
// when the delayed word is a control tag, RST_TAGS = 1 clears the stages on
// the active-low asynchronous reset.
module shift_delay #(
  parameter int unsigned WIDTH    = 32,
  parameter int unsigned DEPTH    = 10,
  parameter bit          RST_TAGS = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_sr
    logic [WIDTH-1:0] stage [DEPTH];
    if (RST_TAGS) begin : g_rst
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
        end else begin
          stage[0] <= d;
          for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
        end
      end
    end else begin : g_norst
      always_ff @(posedge clk) begin
        stage[0] <= d;
        for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[DEPTH-1];
  end
endmodule
