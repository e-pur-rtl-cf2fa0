// fp_add: pipelined 32-bit floating-point adder/subtractor (FADD of the MU).
// y = a + b, or a - b when sub is set, LAT cycles after in_valid. The
// arithmetic (align, add, normalise, truncate; denormals flushed to zero) is
// epur_pkg::fp_add_f. The default latency of 2 cycles is the ADD latency the
// reference design reports; the internal algorithm is this design's own.
// The result is computed in the first stage and carried through LAT-1
// registers, which a synthesis tool may retime.
module fp_add
  import epur_pkg::*;
#(
  parameter int LAT = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        sub,
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
      pipe[0]  <= fp_add_f(a, sub ? fp_neg_f(b) : b);
      for (int i = 1; i < LAT; i++) begin
        vpipe[i] <= vpipe[i-1];
        pipe[i]  <= pipe[i-1];
      end
    end
  end

  assign y         = pipe[LAT-1];
  assign out_valid = vpipe[LAT-1];
endmodule
