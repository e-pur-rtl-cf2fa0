// cu: Computation Unit, the hardware for one LSTM gate (input, forget, cell
// updater or output, set by GATE). It holds the gate's weight buffer, its
// input buffer, the MWL row buffer, a Dot Product Unit and a
// Multifunctional Unit.
// Each cycle the controller may issue one sub-vector (N elements) of a dot
// product. The operands are read with one cycle of latency and enter the
// DPU the next cycle:
//   phase 0 (MWL step 1): weights from the row buffer (row W_x[k]) and x_t
//     from the OM broadcast row om_x;
//   phase 1 (MWL step 2): weights from the weight buffer (W_h) and h_{t-1}
//     from the input buffer, replaced by zeros at the first step of a pass.
// The DPU result goes to the MU with its tag. `ready` tells the controller
// that the MU FIFO has room for one more dot product counting those still
// in the DPU; the controller only starts a new dot product when every CU is
// ready. `busy` is high while a dot product or an MU program is in progress.
// h_t and c_t arriving from the output and cell-updater MUs are written into
// the input buffer through h_in_* and c_in_*.
module cu
  import epur_pkg::*;
#(
  parameter gate_e GATE     = G_INPUT,
  parameter int    N        = 16,
  parameter int    WB_BYTES = 2097152,
  parameter int    RB_BYTES = 4096,
  parameter int    IB_DEPTH = 1024,
  parameter int    OM_WA_W  = 21,
  parameter int    OM_PART_BASE = 1048576,
  parameter int    MU_FIFO  = 8,
  localparam int   WB_RA_W  = $clog2(WB_BYTES / (4 * N)),
  localparam int   WB_WA_W  = $clog2(WB_BYTES / 4),
  localparam int   RB_RA_W  = $clog2(RB_BYTES / (4 * N)),
  localparam int   IB_A_W   = $clog2(IB_DEPTH),
  localparam int   IB_RA_W  = $clog2(IB_DEPTH / N)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  layer_cfg_t         cfg,
  // issue from the controller
  input  logic               iss_valid,
  input  logic               iss_first,
  input  logic               iss_last,
  input  dtag_t              iss_tag,
  input  logic [WB_RA_W-1:0] iss_wrow,
  input  logic [IB_RA_W-1:0] iss_hrow,
  input  logic               iss_hbank,
  input  logic [N-1:0][31:0] om_x,
  output logic               ready,
  output logic               busy,
  // host loads
  input  logic               wb_we,
  input  logic [WB_RA_W-1:0] wb_waddr,
  input  logic [N-1:0][31:0] wb_wdata,
  input  logic               rb_we,
  input  logic [RB_RA_W-1:0] rb_waddr,
  input  logic [N-1:0][31:0] rb_wdata,
  input  logic               lut_we,
  input  logic [7:0]         lut_waddr,
  input  logic [31:0]        lut_wdata,
  // h_t / c_t into the input buffer
  input  logic               h_in_valid,
  input  logic               h_in_bank,
  input  logic [IB_A_W-1:0]  h_in_k,
  input  logic [31:0]        h_in_data,
  input  logic               c_in_valid,
  input  logic [IB_A_W-1:0]  c_in_k,
  input  logic [31:0]        c_in_data,
  // OM byte lane of this gate
  output logic [OM_WA_W-1:0] om_raddr,
  input  logic [7:0]         om_rdata,
  output logic               om_we,
  output logic [OM_WA_W-1:0] om_waddr,
  output logic [7:0]         om_wdata,
  // MU links and broadcasts
  input  logic [1:0]         recv_valid,
  input  logic [1:0][31:0]   recv_data,
  output logic [1:0]         recv_pop,
  output logic               send_valid,
  output logic [31:0]        send_data,
  input  logic               send_ready,
  output logic               c_out_valid,
  output logic [31:0]        c_out_data,
  output logic               h_out_valid,
  output logic [31:0]        h_out_data,
  output dtag_t              out_tag
);
  logic [N-1:0][31:0] wb_row, rb_row, ib_row, w_op, x_op;
  logic [WB_WA_W-1:0] wb_saddr;
  logic [31:0]        wb_sdata, c_rdata, dpu_out;
  logic [IB_A_W-1:0]  c_raddr;
  logic               dpu_v;
  dtag_t              dpu_tag;
  logic [$clog2(MU_FIFO):0] mu_used;
  logic               mu_busy;

  weight_buffer #(.BYTES(WB_BYTES), .N(N)) u_wb (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata),
    .raddr(iss_wrow), .rdata(wb_row), .saddr(wb_saddr), .sdata(wb_sdata));

  row_buffer #(.BYTES(RB_BYTES), .N(N)) u_rb (
    .clk, .we(rb_we), .waddr(rb_waddr), .wdata(rb_wdata),
    .raddr(iss_wrow[RB_RA_W-1:0]), .rdata(rb_row));

  input_buffer #(.DEPTH(IB_DEPTH), .N(N)) u_ib (
    .clk,
    .h_we(h_in_valid), .h_wbank(h_in_bank), .h_waddr(h_in_k), .h_wdata(h_in_data),
    .h_rbank(iss_hbank), .h_raddr(iss_hrow), .h_rdata(ib_row),
    .c_we(c_in_valid), .c_waddr(c_in_k), .c_wdata(c_in_data),
    .c_raddr(c_raddr), .c_rdata(c_rdata));

  // issue stage aligned with the one-cycle memory reads
  logic  d_valid, d_first, d_last;
  dtag_t d_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0; d_first <= 1'b0; d_last <= 1'b0; d_tag <= '0;
    end else begin
      d_valid <= iss_valid;
      d_first <= iss_first;
      d_last  <= iss_last;
      d_tag   <= iss_tag;
    end
  end

  assign w_op = d_tag.phase ? wb_row : rb_row;
  assign x_op = !d_tag.phase ? om_x : (d_tag.first_step ? '0 : ib_row);

  dpu #(.N(N)) u_dpu (
    .clk, .rst_n, .in_valid(d_valid), .first(d_first), .last(d_last), .tag(d_tag),
    .w(w_op), .x(x_op), .out_valid(dpu_v), .out(dpu_out), .out_tag(dpu_tag));

  mu #(.GATE(GATE), .FIFO_DEPTH(MU_FIFO), .OM_WA_W(OM_WA_W), .OM_PART_BASE(OM_PART_BASE),
       .WB_WA_W(WB_WA_W), .IB_A_W(IB_A_W)) u_mu (
    .clk, .rst_n, .cfg,
    .dpu_valid(dpu_v), .dpu_data(dpu_out), .dpu_tag(dpu_tag),
    .fifo_used(mu_used), .busy(mu_busy),
    .wb_saddr, .wb_sdata, .c_raddr, .c_rdata,
    .om_raddr, .om_rdata, .om_we, .om_waddr, .om_wdata,
    .lut_we, .lut_waddr, .lut_wdata,
    .recv_valid, .recv_data, .recv_pop, .send_valid, .send_data, .send_ready,
    .c_out_valid, .c_out_data, .h_out_valid, .h_out_data, .out_tag);

  // dot products started but not yet delivered to the MU
  logic [7:0] inflight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + 8'(iss_valid && iss_first) - 8'(dpu_v);
  end
  assign ready = (32'(mu_used) + 32'(inflight)) < MU_FIFO;
  assign busy  = mu_busy || (inflight != 0);
endmodule
