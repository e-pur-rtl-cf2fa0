// row_buffer: the small MWL buffer of one Computation Unit. During the
// forward-connection step it holds one row of W_x, the forward weights of the
// neuron being evaluated, which is reused for every element of the input
// sequence before the next row replaces it. 4 KB holds a row of up to 1024
// FP32 weights (the reference design's size). Rows of N words are written by
// the weight stream from main memory and read by the dot-product unit with
// one cycle of latency.
module row_buffer #(
  parameter int BYTES = 4096,
  parameter int N     = 16,
  localparam int ROWS = BYTES / (4 * N),
  localparam int RA_W = $clog2(ROWS)
) (
  input  logic               clk,
  input  logic               we,
  input  logic [RA_W-1:0]    waddr,
  input  logic [N-1:0][31:0] wdata,
  input  logic [RA_W-1:0]    raddr,
  output logic [N-1:0][31:0] rdata
);
  logic [N-1:0][31:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
