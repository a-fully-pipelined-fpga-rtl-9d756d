// desc_assembler: builds 2080-bit descriptors from the 64-bit (8-byte) beats
// that the external memory delivers per clock, the bandwidth the paper
// assumes. 2080 bits take 33 beats (32.5 rounded up), which is where the
// paper's 33-cycle descriptor fetch time and its 33-deep caches come from.
// Beat k fills bits [64k+63:64k] of the descriptor; of the 33rd beat only the
// low 32 bits are used (own choice of order: little-endian, elements first,
// location last, matching sift_pkg's layout).
// Handshake (valid/ready): a beat moves when beat_valid & beat_ready. After
// the 33rd beat the descriptor is offered on desc_valid/desc_data until the
// consumer takes it with desc_ready; beats are held off meanwhile unless the
// descriptor leaves in the same cycle, so a ready consumer sees one
// descriptor every 33 cycles with no gaps.
module desc_assembler
  import sift_pkg::*;
#(
  parameter int unsigned BW = BEAT_W,
  parameter int unsigned DW = DESC_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          beat_valid,
  output logic          beat_ready,
  input  logic [BW-1:0] beat_data,
  output logic          desc_valid,
  input  logic          desc_ready,
  output logic [DW-1:0] desc_data
);
  localparam int unsigned BEATS = (DW + BW - 1) / BW;   // 33
  localparam int unsigned CW    = $clog2(BEATS);

  logic [BEATS*BW-1:0] shreg;
  logic [CW-1:0]       cnt;
  logic                full;
  logic                take;

  assign desc_valid = full;
  assign desc_data  = shreg[DW-1:0];
  assign beat_ready = !full || desc_ready;
  assign take       = beat_valid && beat_ready;

  always_ff @(posedge clk) begin
    if (take) shreg[cnt*BW +: BW] <= beat_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      full <= 1'b0;
    end else begin
      if (full && desc_ready) full <= 1'b0;
      if (take) begin
        if (cnt == CW'(BEATS-1)) begin
          cnt  <= '0;
          full <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
