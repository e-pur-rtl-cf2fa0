// fp_rcp: pipelined floating-point reciprocal (FRECP of the MU), y = 1/a.
// The significand is inverted by integer division (2^47 / 1.f), the
// exponent is negated. Division in the MU programs (sigmoid and tanh) is
// a reciprocal followed by a multiply. The reference design gives no
// latency for this unit; 4 cycles is this design's choice.
module fp_rcp
  import epur_pkg::*;
#(
  parameter int LAT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
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
      pipe[0]  <= fp_rcp_f(a);
      for (int i = 1; i < LAT; i++) begin
        vpipe[i] <= vpipe[i-1];
        pipe[i]  <= pipe[i-1];
      end
    end
  end

  assign y         = pipe[LAT-1];
  assign out_valid = vpipe[LAT-1];
endmodule
