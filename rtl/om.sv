// om: on-chip memory for intermediate results, shared by the four CUs.
// It is split into three regions of equal size (word addresses):
//   half 0 and half 1: layer outputs h_t in FP32. A pass reads its input x_t
//     from one half and writes h_t to the other; the roles swap per layer,
//     because the previous layer's outputs must survive the whole sequence.
//   partials: MWL forward-connection results, 8 bits per gate, one 32-bit word
//     per (step, neuron) with byte lane g belonging to gate g.
// Storage is four byte-lane arrays of N-word rows, so each gate's lane can be
// read and written independently while a full FP32 word uses all four.
// Ports (all reads one cycle of latency):
//   rd_*   : N-word row read, broadcasting x_t to the four dot-product units
//   lrd_*  : per-lane byte read, the MWL partial of gate g (shares the lane
//            read port with rd_*, the two are never used together)
//   hw_*   : single FP32 word write (h_t from the output-gate MU)
//   lwe_*  : per-lane byte write (quantised partial of gate g)
//   host_* : N-word row write and read for the host (loading x, reading h)
// The 6 MB size and the two halves follow the reference design; the third
// region for partials and the byte-lane layout are this design's choices.
module om
  import epur_pkg::*;
#(
  parameter int BYTES = 6291456,
  parameter int N     = 16,
  localparam int WORDS = BYTES / 4,
  localparam int ROWS  = WORDS / N,
  localparam int WA_W  = $clog2(WORDS),
  localparam int RA_W  = $clog2(ROWS),
  localparam int CB    = $clog2(N)
) (
  input  logic                           clk,
  input  logic                           rd_en,
  input  logic [RA_W-1:0]                rd_row,
  output logic [N-1:0][31:0]             rd_data,
  input  logic [NGATES-1:0][WA_W-1:0]    lrd_addr,
  output logic [NGATES-1:0][7:0]         lrd_data,
  input  logic                           hw_en,
  input  logic [WA_W-1:0]                hw_addr,
  input  logic [31:0]                    hw_data,
  input  logic [NGATES-1:0]              lwe,
  input  logic [NGATES-1:0][WA_W-1:0]    lw_addr,
  input  logic [NGATES-1:0][7:0]         lw_data,
  input  logic                           host_we,
  input  logic                           host_re,
  input  logic [RA_W-1:0]                host_row,
  input  logic [N-1:0][31:0]             host_wdata
);
  logic [CB-1:0] lcol_q [NGATES];

  for (genvar g = 0; g < NGATES; g++) begin : g_lane
    logic [N-1:0][7:0] mem [ROWS];
    logic [N-1:0][7:0] rrow;
    logic [RA_W-1:0]   wrow, rrow_a;
    logic [N-1:0]      wmask;
    logic [N-1:0][7:0] wdat;

    always_comb begin
      wrow  = '0;
      wmask = '0;
      wdat  = '0;
      if (host_we) begin
        wrow  = host_row;
        wmask = '1;
        for (int i = 0; i < N; i++) wdat[i] = host_wdata[i][8*g +: 8];
      end else if (hw_en) begin
        wrow            = hw_addr[WA_W-1:CB];
        wmask[hw_addr[CB-1:0]] = 1'b1;
        for (int i = 0; i < N; i++) wdat[i] = hw_data[8*g +: 8];
      end else if (lwe[g]) begin
        wrow            = lw_addr[g][WA_W-1:CB];
        wmask[lw_addr[g][CB-1:0]] = 1'b1;
        for (int i = 0; i < N; i++) wdat[i] = lw_data[g];
      end
      if (rd_en)        rrow_a = rd_row;
      else if (host_re) rrow_a = host_row;
      else              rrow_a = lrd_addr[g][WA_W-1:CB];
    end

    always_ff @(posedge clk) begin
      for (int i = 0; i < N; i++)
        if (wmask[i]) mem[wrow][i] <= wdat[i];
      rrow      <= mem[rrow_a];
      lcol_q[g] <= lrd_addr[g][CB-1:0];
    end

    for (genvar i = 0; i < N; i++) begin : g_col
      assign rd_data[i][8*g +: 8] = rrow[i];
    end
    assign lrd_data[g] = rrow[lcol_q[g]];
  end

  // Only one write source may drive the array in a cycle.
  always_ff @(posedge clk) begin
    assert ($onehot0({host_we, hw_en, |lwe}))
      else $error("om: more than one write source in a cycle");
    assert (!(rd_en && host_re)) else $error("om: two row reads in a cycle");
  end
endmodule
