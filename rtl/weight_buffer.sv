// weight_buffer: weight scratchpad of one Computation Unit. It holds the
// recurrent weight matrix W_h of this CU's gate, one row of N FP32 words per
// access (rows k*kh .. k*kh+kh-1 belong to neuron k), and per-neuron pairs
// {bias, peephole weight} at a configurable word address. The size (2 MB per
// CU) and the N-wide access follow the reference design's MWL configuration;
// the layout and the three ports are this design's choices:
//   - wide read port for the dot-product unit (row address, data next cycle)
//   - word read port for the MU (bias and peephole weight, data next cycle)
//   - row write port for the host (loading a layer from main memory)
module weight_buffer #(
  parameter int BYTES = 2097152,
  parameter int N     = 16,
  localparam int ROWS = BYTES / (4 * N),
  localparam int RA_W = $clog2(ROWS),
  localparam int WA_W = $clog2(ROWS * N)
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [RA_W-1:0]         waddr,
  input  logic [N-1:0][31:0]      wdata,
  input  logic [RA_W-1:0]         raddr,
  output logic [N-1:0][31:0]      rdata,
  input  logic [WA_W-1:0]         saddr,
  output logic [31:0]             sdata
);
  logic [N-1:0][31:0] mem [ROWS];
  logic [N-1:0][31:0] srow;
  logic [$clog2(N)-1:0] scol;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
    srow  <= mem[saddr[WA_W-1:$clog2(N)]];
    scol  <= saddr[$clog2(N)-1:0];
  end
  assign sdata = srow[scol];
endmodule
