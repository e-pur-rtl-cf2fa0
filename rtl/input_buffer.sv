// input_buffer: input scratchpad of one Computation Unit. It holds the
// layer's previous output h_{t-1}, which the dot-product unit reads N words
// at a time for the recurrent connections, and the cell state c_{t-1}[k],
// which the MU reads one word at a time for peephole connections and the
// cell update. h_t arrives from the output-gate MU while h_{t-1} is still
// being read, so h has two banks used alternately (bank = step parity); c
// needs one bank because c_t[k] is written only after every CU has read
// c_{t-1}[k]. The reference design gives 4 KB per CU, one 1024-word FP32
// vector; holding two h banks and c triples that, which is this design's
// choice. All reads have one cycle of latency.
module input_buffer #(
  parameter int DEPTH = 1024,
  parameter int N     = 16,
  localparam int ROWS = DEPTH / N,
  localparam int A_W  = $clog2(DEPTH),
  localparam int RA_W = $clog2(ROWS)
) (
  input  logic               clk,
  // h_t write (one word) and h row read
  input  logic               h_we,
  input  logic               h_wbank,
  input  logic [A_W-1:0]     h_waddr,
  input  logic [31:0]        h_wdata,
  input  logic               h_rbank,
  input  logic [RA_W-1:0]    h_raddr,
  output logic [N-1:0][31:0] h_rdata,
  // cell state
  input  logic               c_we,
  input  logic [A_W-1:0]     c_waddr,
  input  logic [31:0]        c_wdata,
  input  logic [A_W-1:0]     c_raddr,
  output logic [31:0]        c_rdata
);
  logic [N-1:0][31:0] hmem [2][ROWS];
  logic [31:0]        cmem [DEPTH];

  always_ff @(posedge clk) begin
    if (h_we) hmem[h_wbank][h_waddr[A_W-1:$clog2(N)]][h_waddr[$clog2(N)-1:0]] <= h_wdata;
    h_rdata <= hmem[h_rbank][h_raddr];
    if (c_we) cmem[c_waddr] <= c_wdata;
    c_rdata <= cmem[c_raddr];
  end
endmodule
