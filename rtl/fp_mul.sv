// fp_mul: pipelined 32-bit floating-point multiplier (FMUL, and each of the
// N multipliers of the dot-product unit). y = a * b, LAT cycles after
// in_valid; epur_pkg::fp_mul_f does the arithmetic (24x24 significand
// product, truncation, denormals flushed). The 4-cycle default is the MUL
// latency of the reference design; the algorithm is this design's choice.
module fp_mul
  import epur_pkg::*;
#(
  parameter int LAT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [31:0] y
);
  logic [31:0] pipe [LAT];
  logic        vpipe [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        vpipe[i] <= 1'b0;
        pipe[i]  <= '0;
      end
    end else begin
      vpipe[0] <= in_valid;
      pipe[0]  <= fp_mul_f(a, b);
      for (int i = 1; i < LAT; i++) begin
        vpipe[i] <= vpipe[i-1];
        pipe[i]  <= pipe[i-1];
      end
    end
  end

  assign y         = pipe[LAT-1];
  assign out_valid = vpipe[LAT-1];
endmodule
