// dpu: Dot Product Unit of a Computation Unit. It computes the dot product
// of two vectors of length M = K*N by taking one pair of N-element
// sub-vectors per cycle: N floating-point multipliers form the element-wise
// products, a log2(N)-level adder tree reduces them (one level per cycle),
// and an accumulator register adds the K partial sums. `first` marks the
// first sub-vector of a dot product (the accumulator restarts) and `last`
// the final one (the result is emitted). The forward and recurrent dot
// products of one neuron can be issued as one run of sub-vectors, so the
// second is added onto the first in the accumulator. A tag travels with each
// sub-vector and comes out with the result.
// Timing: fully pipelined, one sub-vector per cycle, result MUL_LAT +
// log2(N) + 1 cycles after the last sub-vector. The structure (multipliers,
// reduction tree, accumulator) follows the reference design; tree and
// accumulator latencies of one cycle per adder are this design's choice.
module dpu
  import epur_pkg::*;
#(
  parameter int N       = 16,
  parameter int MUL_LAT = 4,
  parameter int TAG_W   = $bits(dtag_t),
  localparam int LV     = $clog2(N)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               first,
  input  logic               last,
  input  logic [TAG_W-1:0]   tag,
  input  logic [N-1:0][31:0] w,
  input  logic [N-1:0][31:0] x,
  output logic               out_valid,
  output logic [31:0]        out,
  output logic [TAG_W-1:0]   out_tag
);
  typedef struct packed {
    logic             v;
    logic             first;
    logic             last;
    logic [TAG_W-1:0] tag;
  } ctl_t;

  // ---------------- multipliers
  logic [N-1:0][31:0] prod;
  logic [N-1:0]       pv;
  for (genvar i = 0; i < N; i++) begin : g_mul
    fp_mul #(.LAT(MUL_LAT)) u_mul (
      .clk, .rst_n, .in_valid(in_valid), .a(w[i]), .b(x[i]),
      .out_valid(pv[i]), .y(prod[i]));
  end

  ctl_t ctl_m [MUL_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MUL_LAT; i++) ctl_m[i] <= '0;
    end else begin
      ctl_m[0] <= '{v: in_valid, first: first, last: last, tag: tag};
      for (int i = 1; i < MUL_LAT; i++) ctl_m[i] <= ctl_m[i-1];
    end
  end

  // ---------------- reduction tree, level l holds N>>(l+1) sums
  logic [N-1:0][31:0] lvl [LV+1];
  ctl_t               ctl_t_q [LV+1];
  assign lvl[0]     = prod;
  assign ctl_t_q[0] = ctl_m[MUL_LAT-1];

  for (genvar l = 0; l < LV; l++) begin : g_lvl
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        lvl[l+1]     <= '0;
        ctl_t_q[l+1] <= '0;
      end else begin
        lvl[l+1] <= '0;
        for (int i = 0; i < (N >> (l + 1)); i++)
          lvl[l+1][i] <= fp_add_f(lvl[l][2*i], lvl[l][2*i+1]);
        ctl_t_q[l+1] <= ctl_t_q[l];
      end
    end
  end

  // ---------------- accumulator
  logic [31:0] acc;
  ctl_t        c;
  logic [31:0] sum;
  assign c   = ctl_t_q[LV];
  assign sum = c.first ? lvl[LV][0] : fp_add_f(acc, lvl[LV][0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out       <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= c.v && c.last;
      if (c.v) acc <= sum;
      if (c.v && c.last) begin
        out     <= sum;
        out_tag <= c.tag;
      end
    end
  end

  // the multiplier valids run in step with the control pipeline
  always_ff @(posedge clk) assert (!rst_n || pv[0] == ctl_m[MUL_LAT-1].v)
    else $error("dpu: multiplier pipeline out of step");
endmodule
