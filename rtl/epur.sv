// epur: top level of the LSTM processing unit. Four Computation Units, one
// per LSTM gate (input, forget, cell updater, output), share an on-chip
// memory for intermediate results (OM) and exchange values over dedicated
// links:
//   i_t  input  CU -> cell-updater CU    (mu_link)
//   f_t  forget CU -> cell-updater CU    (mu_link)
//   c_t  cell-updater CU -> output CU, followed by tanh(c_t)   (mu_link)
//   c_t  cell-updater CU -> input buffers of input, forget and cell-updater
//        CUs, where it is c_{t-1} of the next step
//   h_t  output CU -> input buffers of all four CUs and the OM
//   x_t  OM -> all four DPUs (row broadcast during MWL step 1)
// The broadcasts take LINK_LAT cycles, like the MU links.
// A host (outside this design) runs one layer pass at a time: it loads the
// recurrent weights, biases and peephole weights of each gate into the
// weight buffers (wb_*), the dequantisation tables (lut_*), the input
// sequence of the first layer into an OM half (om_host_*), sets cfg and
// pulses start. During step 1 the design asks for each neuron's forward
// weights (wrow_req with wrow_k) and the host answers with cfg.kx beats of
// one N-word row per gate (wrow_valid, wrow_data). done pulses when h_t for
// the whole sequence is in the other OM half, where the next layer (or a
// backward pass writing to another column offset) reads it.
// OM map in 32-bit words: half 0 at 0, half 1 at OM_WORDS/3, MWL partials
// at 2*OM_WORDS/3. Row addresses of om_host_row count N-word rows.
// The organisation into four gate CUs, the OM with its double buffering and
// the links follow the reference design; the host interface, the link
// latency of the broadcasts and the memory map are this design's choices.
// Lint notes: every CU instantiates the same MU, so ports a gate does not
// use (links, c and h outputs of the other gates) are left unconnected or
// unread here; and the assertions in several blocks sample rst_n in clocked
// blocks, which lint reports as rst_n being used both synchronously and
// asynchronously. Neither affects the circuit.
module epur
  import epur_pkg::*;
#(
  parameter int N        = 16,
  parameter int WB_BYTES = 2097152,
  parameter int RB_BYTES = 4096,
  parameter int IB_DEPTH = 1024,
  parameter int OM_BYTES = 6291456,
  parameter int LINK_LAT = 2,
  localparam int WB_RA_W = $clog2(WB_BYTES / (4 * N)),
  localparam int RB_RA_W = $clog2(RB_BYTES / (4 * N)),
  localparam int IB_A_W  = $clog2(IB_DEPTH),
  localparam int IB_RA_W = $clog2(IB_DEPTH / N),
  localparam int OM_WORDS = OM_BYTES / 4,
  localparam int OM_WA_W = $clog2(OM_WORDS),
  localparam int OM_RA_W = $clog2(OM_WORDS / N),
  localparam int OM_REGION_WORDS = OM_WORDS / 3,
  localparam int OM_REGION_ROWS  = OM_REGION_WORDS / N
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  layer_cfg_t                    cfg,
  output logic                          busy,
  output logic                          done,
  // weight buffer loads
  input  logic [NGATES-1:0]             wb_we,
  input  logic [WB_RA_W-1:0]            wb_waddr,
  input  logic [N-1:0][31:0]            wb_wdata,
  // forward weight row stream (MWL step 1)
  output logic                          wrow_req,
  output logic [10:0]                   wrow_k,
  input  logic                          wrow_valid,
  input  logic [NGATES-1:0][N-1:0][31:0] wrow_data,
  // dequantisation tables
  input  logic [NGATES-1:0]             lut_we,
  input  logic [7:0]                    lut_waddr,
  input  logic [31:0]                   lut_wdata,
  // host access to the OM
  input  logic                          om_host_we,
  input  logic                          om_host_re,
  input  logic [OM_RA_W-1:0]            om_host_row,
  input  logic [N-1:0][31:0]            om_host_wdata,
  output logic [N-1:0][31:0]            om_host_rdata,
  // one flag per cycle spent waiting: {dependency, weight row, MU room}
  output logic [2:0]                    events
);
  // ---------------- controller
  logic [NGATES-1:0] cu_ready, cu_busy;
  logic              h_written, rb_we, iss_valid, iss_first, iss_last, iss_hbank;
  logic [RB_RA_W-1:0] rb_waddr;
  dtag_t             iss_tag;
  logic [WB_RA_W-1:0] iss_wrow;
  logic [IB_RA_W-1:0] iss_hrow;
  logic              om_rd_en;
  logic [OM_RA_W-1:0] om_rd_row, om_row_mux;
  logic [N-1:0][31:0] om_rd_data;

  epur_ctrl #(.WB_RA_W(WB_RA_W), .RB_RA_W(RB_RA_W), .IB_RA_W(IB_RA_W),
              .OM_RA_W(OM_RA_W), .OM_REGION_ROWS(OM_REGION_ROWS)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .cu_ready, .cu_busy, .h_written,
    .wrow_req, .wrow_k, .wrow_valid, .rb_we, .rb_waddr,
    .iss_valid, .iss_first, .iss_last, .iss_tag, .iss_wrow, .iss_hrow, .iss_hbank,
    .om_rd_en, .om_rd_row, .events);

  // ---------------- OM
  logic [NGATES-1:0][OM_WA_W-1:0] lrd_addr, lw_addr;
  logic [NGATES-1:0][7:0]         lrd_data, lw_data;
  logic [NGATES-1:0]              lwe;
  logic                           hw_en;
  logic [OM_WA_W-1:0]             hw_addr;
  logic [31:0]                    hw_data;

  assign om_row_mux = om_rd_en ? om_rd_row : om_host_row;
  om #(.BYTES(OM_BYTES), .N(N)) u_om (
    .clk, .rd_en(om_rd_en), .rd_row(om_row_mux), .rd_data(om_rd_data),
    .lrd_addr, .lrd_data, .hw_en, .hw_addr, .hw_data, .lwe, .lw_addr, .lw_data,
    .host_we(om_host_we), .host_re(om_host_re), .host_row(om_host_row),
    .host_wdata(om_host_wdata));
  assign om_host_rdata = om_rd_data;

  // ---------------- CUs and links
  logic [NGATES-1:0][1:0]       recv_valid, recv_pop;
  logic [NGATES-1:0][1:0][31:0] recv_data;
  logic [NGATES-1:0]            send_valid, send_ready, c_out_valid, h_out_valid;
  logic [NGATES-1:0][31:0]      send_data, c_out_data, h_out_data;
  dtag_t                        out_tag [NGATES];

  // h_t and c_t broadcasts, LINK_LAT cycles
  logic [LINK_LAT-1:0] hb_v, cb_v;
  logic [31:0]         hb_d [LINK_LAT];
  logic [31:0]         cb_d [LINK_LAT];
  dtag_t               hb_t [LINK_LAT];
  dtag_t               cb_t [LINK_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hb_v <= '0;
      cb_v <= '0;
      for (int i = 0; i < LINK_LAT; i++) begin
        hb_d[i] <= '0; hb_t[i] <= '0; cb_d[i] <= '0; cb_t[i] <= '0;
      end
    end else begin
      hb_v[0] <= h_out_valid[G_OUTPUT];
      hb_d[0] <= h_out_data[G_OUTPUT];
      hb_t[0] <= out_tag[G_OUTPUT];
      cb_v[0] <= c_out_valid[G_CELL];
      cb_d[0] <= c_out_data[G_CELL];
      cb_t[0] <= out_tag[G_CELL];
      for (int i = 1; i < LINK_LAT; i++) begin
        hb_v[i] <= hb_v[i-1]; hb_d[i] <= hb_d[i-1]; hb_t[i] <= hb_t[i-1];
        cb_v[i] <= cb_v[i-1]; cb_d[i] <= cb_d[i-1]; cb_t[i] <= cb_t[i-1];
      end
    end
  end
  assign h_written = hb_v[LINK_LAT-1];
  assign hw_en     = hb_v[LINK_LAT-1];
  assign hw_data   = hb_d[LINK_LAT-1];
  assign hw_addr   = OM_WA_W'(32'(!cfg.src_half) * OM_REGION_WORDS
                     + 32'(hb_t[LINK_LAT-1].t) * 32'(cfg.h_stride)
                     + 32'(cfg.h_col) + 32'(hb_t[LINK_LAT-1].k));

  for (genvar g = 0; g < NGATES; g++) begin : g_cu
    cu #(.GATE(gate_e'(g)), .N(N), .WB_BYTES(WB_BYTES), .RB_BYTES(RB_BYTES),
         .IB_DEPTH(IB_DEPTH), .OM_WA_W(OM_WA_W),
         .OM_PART_BASE(2 * OM_REGION_WORDS)) u_cu (
      .clk, .rst_n, .cfg,
      .iss_valid, .iss_first, .iss_last, .iss_tag, .iss_wrow, .iss_hrow, .iss_hbank,
      .om_x(om_rd_data), .ready(cu_ready[g]), .busy(cu_busy[g]),
      .wb_we(wb_we[g]), .wb_waddr, .wb_wdata,
      .rb_we, .rb_waddr, .rb_wdata(wrow_data[g]),
      .lut_we(lut_we[g]), .lut_waddr, .lut_wdata,
      .h_in_valid(hb_v[LINK_LAT-1]), .h_in_bank(hb_t[LINK_LAT-1].s[0]),
      .h_in_k(IB_A_W'(hb_t[LINK_LAT-1].k)), .h_in_data(hb_d[LINK_LAT-1]),
      .c_in_valid(cb_v[LINK_LAT-1] && (g != G_OUTPUT)),
      .c_in_k(IB_A_W'(cb_t[LINK_LAT-1].k)), .c_in_data(cb_d[LINK_LAT-1]),
      .om_raddr(lrd_addr[g]), .om_rdata(lrd_data[g]),
      .om_we(lwe[g]), .om_waddr(lw_addr[g]), .om_wdata(lw_data[g]),
      .recv_valid(recv_valid[g]), .recv_data(recv_data[g]), .recv_pop(recv_pop[g]),
      .send_valid(send_valid[g]), .send_data(send_data[g]), .send_ready(send_ready[g]),
      .c_out_valid(c_out_valid[g]), .c_out_data(c_out_data[g]),
      .h_out_valid(h_out_valid[g]), .h_out_data(h_out_data[g]), .out_tag(out_tag[g]));
  end

  // i_t, f_t -> cell updater; c_t, tanh(c_t) -> output gate
  mu_link #(.LAT(LINK_LAT)) u_link_i (
    .clk, .rst_n, .in_valid(send_valid[G_INPUT]), .in_data(send_data[G_INPUT]),
    .in_ready(send_ready[G_INPUT]), .out_valid(recv_valid[G_CELL][0]),
    .out_data(recv_data[G_CELL][0]), .out_pop(recv_pop[G_CELL][0]));
  mu_link #(.LAT(LINK_LAT)) u_link_f (
    .clk, .rst_n, .in_valid(send_valid[G_FORGET]), .in_data(send_data[G_FORGET]),
    .in_ready(send_ready[G_FORGET]), .out_valid(recv_valid[G_CELL][1]),
    .out_data(recv_data[G_CELL][1]), .out_pop(recv_pop[G_CELL][1]));
  mu_link #(.LAT(LINK_LAT)) u_link_c (
    .clk, .rst_n, .in_valid(send_valid[G_CELL]), .in_data(send_data[G_CELL]),
    .in_ready(send_ready[G_CELL]), .out_valid(recv_valid[G_OUTPUT][0]),
    .out_data(recv_data[G_OUTPUT][0]), .out_pop(recv_pop[G_OUTPUT][0]));

  // inputs of links that the programs never use
  assign recv_valid[G_INPUT]     = '0;
  assign recv_data[G_INPUT]      = '0;
  assign recv_valid[G_FORGET]    = '0;
  assign recv_data[G_FORGET]     = '0;
  assign recv_valid[G_OUTPUT][1] = 1'b0;
  assign recv_data[G_OUTPUT][1]  = '0;
  assign send_ready[G_OUTPUT]    = 1'b1;
endmodule
