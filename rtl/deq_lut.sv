// deq_lut: dequantisation table of one MU. It maps an 8-bit quantised MWL
// partial back to its 32-bit floating-point value (q/beta), as a 256-entry
// table that the host fills offline through the write port. Read latency is
// one cycle. The table and its 2^n size follow the reference design; the
// write port and one table per gate are this design's choices.
module deq_lut #(
  parameter int NBITS = 8
) (
  input  logic             clk,
  input  logic             we,
  input  logic [NBITS-1:0] waddr,
  input  logic [31:0]      wdata,
  input  logic [NBITS-1:0] q,
  output logic [31:0]      y
);
  logic [31:0] tbl [2**NBITS];

  always_ff @(posedge clk) begin
    if (we) tbl[waddr] <= wdata;
    y <= tbl[q];
  end
endmodule
