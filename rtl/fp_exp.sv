// fp_exp: pipelined floating-point exponential (FEXP of the MU), y = e^a.
// It computes 2^(a*log2 e): the integer part of the product becomes the
// exponent field, and 2^frac comes from the series of e^(frac*ln2) up to the
// 8th power in 30-bit fixed point (relative error below 1e-6). The 5-cycle default is
// the EXP latency the reference design gives; the method is this design's.
module fp_exp
  import epur_pkg::*;
#(
  parameter int LAT = 5
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
      pipe[0]  <= fp_exp_f(a);
      for (int i = 1; i < LAT; i++) begin
        vpipe[i] <= vpipe[i-1];
        pipe[i]  <= pipe[i-1];
      end
    end
  end

  assign y         = pipe[LAT-1];
  assign out_valid = vpipe[LAT-1];
endmodule
