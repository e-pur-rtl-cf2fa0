// tb_mu: self-checking testbench of the Multifunctional Unit. Four MUs, one
// per gate program, are connected as in the full design (i_t and f_t links
// to the cell-updater MU, c_t link to the output MU, c_t written back as the
// next c_{t-1}); the weight buffer, input buffer, OM lanes are simple
// behavioural memories here, and the DPU results are random values fed in
// directly. Phase 0 checks that every forward partial is stored as
// round(beta*o) with saturation. Phase 1 (run twice, with and without
// peephole connections) checks every h_t against the LSTM cell equations
// evaluated in real arithmetic from the same inputs, the partials being
// taken back through the dequantisation tables.
module tb_mu;
  import tb_util_pkg::*;
  import epur_pkg::*;
  localparam int H = 6, T = 4, FIFO = 8;
  localparam int OM_WA_W = 21, PB = 1048576, WB_WA_W = 19, IB_A_W = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  layer_cfg_t cfg;

  logic [3:0]          dpu_valid;
  logic [31:0]         dpu_data [4];
  dtag_t               dpu_tag;
  logic [3:0][$clog2(FIFO):0] used;
  logic [3:0]          busy;
  logic [3:0][WB_WA_W-1:0] wb_saddr;
  logic [3:0][31:0]    wb_sdata, c_rdata, send_data, c_out_data, h_out_data;
  logic [3:0][IB_A_W-1:0] c_raddr;
  logic [3:0][OM_WA_W-1:0] om_raddr, om_waddr;
  logic [3:0][7:0]     om_rdata, om_wdata;
  logic [3:0]          om_we, send_valid, send_ready, c_out_valid, h_out_valid;
  logic [3:0][1:0]     recv_valid, recv_pop;
  logic [3:0][1:0][31:0] recv_data;
  dtag_t               out_tag [4];
  logic                lut_we = 1'b0;
  logic [3:0]          lut_sel = '0;
  logic [7:0]          lut_waddr = '0;
  logic [31:0]         lut_wdata = '0;

  // behavioural memories
  real    wbv [4][2*H];          // {bias, peephole} per neuron
  logic [7:0] lane [4][T*H];
  logic [31:0] cmem [H];
  real    fx [4][T][H], rx [4][T][H];
  int     checks = 0, failures = 0, nh = 0;
  real    beta = 31.75;

  always #5 clk = ~clk;

  for (genvar g = 0; g < 4; g++) begin : g_mu
    mu #(.GATE(gate_e'(g)), .FIFO_DEPTH(FIFO), .OM_WA_W(OM_WA_W), .OM_PART_BASE(PB),
         .WB_WA_W(WB_WA_W), .IB_A_W(IB_A_W)) dut (
      .clk, .rst_n, .cfg, .dpu_valid(dpu_valid[g]), .dpu_data(dpu_data[g]), .dpu_tag,
      .fifo_used(used[g]), .busy(busy[g]),
      .wb_saddr(wb_saddr[g]), .wb_sdata(wb_sdata[g]), .c_raddr(c_raddr[g]), .c_rdata(c_rdata[g]),
      .om_raddr(om_raddr[g]), .om_rdata(om_rdata[g]), .om_we(om_we[g]), .om_waddr(om_waddr[g]),
      .om_wdata(om_wdata[g]), .lut_we(lut_we && lut_sel[g]), .lut_waddr, .lut_wdata,
      .recv_valid(recv_valid[g]), .recv_data(recv_data[g]), .recv_pop(recv_pop[g]),
      .send_valid(send_valid[g]), .send_data(send_data[g]), .send_ready(send_ready[g]),
      .c_out_valid(c_out_valid[g]), .c_out_data(c_out_data[g]),
      .h_out_valid(h_out_valid[g]), .h_out_data(h_out_data[g]), .out_tag(out_tag[g]));

    always_ff @(posedge clk) begin
      wb_sdata[g] <= r2fp(wbv[g][(int'(wb_saddr[g]) - 100) % (2*H)]);
      c_rdata[g]  <= cmem[c_raddr[g] % H];
      om_rdata[g] <= lane[g][(int'(om_raddr[g]) - PB) % (T*H)];
      if (om_we[g]) lane[g][int'(om_waddr[g]) - PB] <= om_wdata[g];
    end
  end
  always_ff @(posedge clk) if (c_out_valid[G_CELL]) cmem[out_tag[G_CELL].k] <= c_out_data[G_CELL];

  mu_link u_li (.clk, .rst_n, .in_valid(send_valid[0]), .in_data(send_data[0]), .in_ready(send_ready[0]),
                .out_valid(recv_valid[2][0]), .out_data(recv_data[2][0]), .out_pop(recv_pop[2][0]));
  mu_link u_lf (.clk, .rst_n, .in_valid(send_valid[1]), .in_data(send_data[1]), .in_ready(send_ready[1]),
                .out_valid(recv_valid[2][1]), .out_data(recv_data[2][1]), .out_pop(recv_pop[2][1]));
  mu_link u_lc (.clk, .rst_n, .in_valid(send_valid[2]), .in_data(send_data[2]), .in_ready(send_ready[2]),
                .out_valid(recv_valid[3][0]), .out_data(recv_data[3][0]), .out_pop(recv_pop[3][0]));
  assign recv_valid[0] = '0; assign recv_data[0] = '0;
  assign recv_valid[1] = '0; assign recv_data[1] = '0;
  assign recv_valid[3][1] = 1'b0; assign recv_data[3][1] = '0;
  assign send_ready[3] = 1'b1;

  function automatic int qref(real v);
    real x; int m;
    x = beta * v;
    m = int'($floor(((x < 0.0) ? -x : x) + 0.5));
    if (m > 127) m = 127;
    return (x < 0.0) ? -m : m;
  endfunction
  function automatic real sigm(real v); return 1.0 / (1.0 + $exp(-v)); endfunction

  // expected h_t
  real hexp [T][H];
  task automatic reference(bit pp);
    real c [H];
    for (int k = 0; k < H; k++) c[k] = 0.0;
    for (int s = 0; s < T; s++)
      for (int k = 0; k < H; k++) begin
        real p [4], ig, fg, gg, og;
        for (int g = 0; g < 4; g++)
          p[g] = real'(qref(fx[g][s][k])) / beta + rx[g][s][k] + wbv[g][2*k];
        ig = sigm(p[0] + (pp ? wbv[0][2*k+1] * c[k] : 0.0));
        fg = sigm(p[1] + (pp ? wbv[1][2*k+1] * c[k] : 0.0));
        gg = $tanh(p[2]);
        c[k] = fg * c[k] + ig * gg;
        og = sigm(p[3] + (pp ? wbv[3][2*k+1] * c[k] : 0.0));
        hexp[s][k] = og * $tanh(c[k]);
      end
  endtask

  always @(posedge clk) if (rst_n && h_out_valid[G_OUTPUT]) begin
    real e;
    e = hexp[out_tag[G_OUTPUT].s][out_tag[G_OUTPUT].k];
    checks++; nh++;
    if (!near(fp2r(h_out_data[G_OUTPUT]), e, 1e-4, 1e-5)) begin
      failures++;
      if (failures < 10) $display("MISMATCH h s=%0d k=%0d got %g exp %g", out_tag[G_OUTPUT].s,
                                  out_tag[G_OUTPUT].k, fp2r(h_out_data[G_OUTPUT]), e);
    end
  end

  task automatic feed(bit ph);
    for (int a = 0; a < T * H; a++) begin
      int s, k;
      if (!ph) begin k = a / T; s = a % T; end   // step 1: neuron by neuron
      else     begin s = a / H; k = a % H; end   // step 2: step by step
      @(negedge clk);
      while (!(used[0] < FIFO - 1 && used[1] < FIFO - 1 && used[2] < FIFO - 1 && used[3] < FIFO - 1)) @(negedge clk);
      dpu_valid = '1;
      for (int g = 0; g < 4; g++) dpu_data[g] = r2fp(ph ? rx[g][s][k] : fx[g][s][k]);
      dpu_tag = '{phase: ph, first_step: (s == 0), k: 11'(k), s: 20'(s), t: 20'(s)};
      @(negedge clk) dpu_valid = '0;
    end
    @(negedge clk);
    while (busy != '0) @(negedge clk);
  endtask

  initial begin
    dpu_valid = '0;
    for (int g = 0; g < 4; g++) dpu_data[g] = '0;
    dpu_tag = '0;
    cfg = '0;
    cfg.n_hid = 11'(H); cfg.seq_len = 20'(T); cfg.wb_param = 19'd100; cfg.peephole = 1'b1;
    for (int g = 0; g < 4; g++) cfg.beta[g] = r2fp(beta);
    for (int g = 0; g < 4; g++) begin
      for (int i = 0; i < 2 * H; i++) wbv[g][i] = urand_r(-0.5, 0.5);
      for (int s = 0; s < T; s++) for (int k = 0; k < H; k++) begin
        fx[g][s][k] = urand_r(-3.0, 3.0);
        if ((s + k + g) % 7 == 0) fx[g][s][k] = 6.0;   // saturates at 127
        rx[g][s][k] = urand_r(-1.0, 1.0);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // dequantisation tables
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      lut_we = 1'b1; lut_sel = '1; lut_waddr = 8'(i); lut_wdata = r2fp(real'($signed(8'(i))) / beta);
    end
    @(negedge clk) lut_we = 1'b0;
    // MWL step 1: partials
    feed(1'b0);
    for (int g = 0; g < 4; g++) for (int s = 0; s < T; s++) for (int k = 0; k < H; k++) begin
      checks++;
      if ($signed(lane[g][s * H + k]) != qref(fx[g][s][k])) failures++;
    end
    // MWL step 2 with and without peephole connections
    for (int pp = 1; pp >= 0; pp--) begin
      cfg.peephole = pp[0];
      reference(pp[0]);
      nh = 0;
      feed(1'b1);
      checks++;
      if (nh != T * H) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
