// fp_cmp: floating-point comparator (FCMP of the MU). y = {lt, eq, gt} of a
// against b, LAT cycles after in_valid; +0 and -0 compare equal. The MU uses
// it to saturate quantised MWL partials. The latency of 1 is this design's
// choice: the reference design names the unit but gives no latency.
module fp_cmp
  import epur_pkg::*;
#(
  parameter int LAT = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [2:0] y
);
  logic [2:0] pipe [LAT];
  logic        vpipe [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        vpipe[i] <= 1'b0;
        pipe[i]  <= '0;
      end
    end else begin
      vpipe[0] <= in_valid;
      pipe[0]  <= fp_cmp_f(a, b);
      for (int i = 1; i < LAT; i++) begin
        vpipe[i] <= vpipe[i-1];
        pipe[i]  <= pipe[i-1];
      end
    end
  end

  assign y         = pipe[LAT-1];
  assign out_valid = vpipe[LAT-1];
endmodule
