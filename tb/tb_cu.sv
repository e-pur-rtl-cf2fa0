// tb_cu: self-checking testbench of a Computation Unit (the input-gate CU,
// default sizes). The testbench plays the controller, the OM and the other
// CUs:
//   step 1: for each neuron it loads W_x[k] into the row buffer and issues
//     W_x[k].x_s for three steps with x_s broadcast one cycle after the
//     issue, as the OM does; each stored 8-bit partial is checked against
//     round(beta * dot) computed with reals;
//   step 2: it loads W_h, biases and peephole weights into the weight
//     buffer and writes h and c into the input buffer, then issues
//     W_h[k].h for step 0 (h taken as zero) and step 1; each i_t the MU
//     sends is checked against sigmoid(partial + W_h.h + w_c*c + b).
// New dot products are only started while `ready` is high, and the test
// requires that ready dropped at least once (the MU is slower than the DPU).
module tb_cu;
  import tb_util_pkg::*;
  import epur_pkg::*;
  localparam int N = 16, H = 8, NI = 32, KX = 2, T = 3;
  localparam int OM_WA_W = 21, PB = 1048576;
  logic clk = 1'b0, rst_n = 1'b0;
  layer_cfg_t cfg;
  logic iss_valid = 1'b0, iss_first = 1'b0, iss_last = 1'b0, iss_hbank = 1'b0;
  dtag_t iss_tag = '0;
  logic [14:0] iss_wrow = '0;
  logic [5:0]  iss_hrow = '0;
  logic [N-1:0][31:0] om_x = '0, xrow_next = '0;
  logic ready, busy;
  logic wb_we = 1'b0, rb_we = 1'b0, lut_we = 1'b0;
  logic [14:0] wb_waddr = '0;
  logic [5:0]  rb_waddr = '0;
  logic [N-1:0][31:0] wb_wdata = '0, rb_wdata = '0;
  logic [7:0] lut_waddr = '0;
  logic [31:0] lut_wdata = '0;
  logic h_in_valid = 1'b0, h_in_bank = 1'b0, c_in_valid = 1'b0;
  logic [9:0] h_in_k = '0, c_in_k = '0;
  logic [31:0] h_in_data = '0, c_in_data = '0;
  logic [OM_WA_W-1:0] om_raddr, om_waddr;
  logic [7:0] om_rdata, om_wdata;
  logic om_we;
  logic [1:0] recv_pop;
  logic send_valid, c_out_valid, h_out_valid;
  logic [31:0] send_data, c_out_data, h_out_data;
  dtag_t out_tag;

  cu #(.GATE(G_INPUT)) dut (.clk, .rst_n, .cfg, .iss_valid, .iss_first, .iss_last, .iss_tag,
    .iss_wrow, .iss_hrow, .iss_hbank, .om_x, .ready, .busy, .wb_we, .wb_waddr, .wb_wdata,
    .rb_we, .rb_waddr, .rb_wdata, .lut_we, .lut_waddr, .lut_wdata,
    .h_in_valid, .h_in_bank, .h_in_k, .h_in_data, .c_in_valid, .c_in_k, .c_in_data,
    .om_raddr, .om_rdata, .om_we, .om_waddr, .om_wdata,
    .recv_valid(2'b00), .recv_data('0), .recv_pop, .send_valid, .send_data, .send_ready(1'b1),
    .c_out_valid, .c_out_data, .h_out_valid, .h_out_data, .out_tag);

  always #5 clk = ~clk;

  real wx [H][NI], x [T][NI], wh [H][N], hv [N], cv [H], b [H], pw [H];
  logic [7:0] lane [T*H];
  int checks = 0, failures = 0, not_ready = 0, nsend = 0;
  real beta = 127.0 / 4.0;

  function automatic real fp(real r); return fp2r(r2fp(r)); endfunction
  function automatic int qref(real v);
    real xx; int m;
    xx = beta * v;
    m = int'($floor(((xx < 0.0) ? -xx : xx) + 0.5));
    if (m > 127) m = 127;
    return (xx < 0.0) ? -m : m;
  endfunction

  // OM model for this gate's lane; x broadcast one cycle after the issue
  always_ff @(posedge clk) begin
    om_rdata <= lane[(int'(om_raddr) - PB) % (T*H)];
    if (om_we) lane[int'(om_waddr) - PB] <= om_wdata;
    om_x <= xrow_next;
  end
  always @(posedge clk) if (rst_n && iss_valid && iss_first && !ready) failures++;
  always @(posedge clk) if (rst_n && !ready) not_ready++;

  // expected i_t for step 2
  always @(posedge clk) if (rst_n && send_valid) begin
    int k, s;
    real pre, dot;
    k = int'(out_tag.k); s = int'(out_tag.s);
    dot = 0.0;
    if (s > 0) for (int i = 0; i < N; i++) dot += wh[k][i] * hv[i];
    pre = real'($signed(lane[s * H + k])) / beta + dot + (s > 0 ? pw[k] * cv[k] : 0.0) + b[k];
    checks++; nsend++;
    if (!near(fp2r(send_data), 1.0 / (1.0 + $exp(-pre)), 1e-4, 1e-5)) begin
      failures++;
      if (failures < 10) $display("MISMATCH i_t k=%0d s=%0d got %g exp %g", k, s, fp2r(send_data),
                                  1.0 / (1.0 + $exp(-pre)));
    end
  end

  task automatic issue(bit ph, int s, int k, int j, int kn, int wrow);
    @(negedge clk);
    while (j == 0 && !ready) @(negedge clk);
    iss_valid = 1'b1; iss_first = (j == 0); iss_last = (j == kn - 1);
    iss_tag = '{phase: ph, first_step: (s == 0), k: 11'(k), s: 20'(s), t: 20'(s)};
    iss_wrow = 15'(wrow); iss_hrow = 6'(j); iss_hbank = 1'b0;
    for (int i = 0; i < N; i++) xrow_next[i] = r2fp(x[s][j * N + i]);
  endtask

  initial begin
    cfg = '0;
    cfg.n_hid = 11'(H); cfg.kx = 7'(KX); cfg.kh = 7'd1; cfg.seq_len = 20'(T);
    cfg.peephole = 1'b1; cfg.wb_param = 19'(512 * N);
    cfg.beta[0] = r2fp(beta);
    for (int k = 0; k < H; k++) begin
      for (int i = 0; i < NI; i++) wx[k][i] = fp(urand_r(-0.5, 0.5));
      for (int i = 0; i < N; i++) wh[k][i] = (i < H) ? fp(urand_r(-0.5, 0.5)) : 0.0;
      b[k] = fp(urand_r(-0.3, 0.3)); pw[k] = fp(urand_r(-0.5, 0.5)); cv[k] = fp(urand_r(-1.0, 1.0));
    end
    for (int i = 0; i < N; i++) hv[i] = (i < H) ? fp(urand_r(-1.0, 1.0)) : 0.0;
    for (int s = 0; s < T; s++) for (int i = 0; i < NI; i++) x[s][i] = fp(urand_r(-1.0, 1.0));
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      lut_we = 1'b1; lut_waddr = 8'(i); lut_wdata = r2fp(real'($signed(8'(i))) / beta);
    end
    @(negedge clk) lut_we = 1'b0;
    // ---- step 1
    for (int k = 0; k < H; k++) begin
      for (int j = 0; j < KX; j++) begin
        @(negedge clk);
        rb_we = 1'b1; rb_waddr = 6'(j);
        for (int i = 0; i < N; i++) rb_wdata[i] = r2fp(wx[k][j * N + i]);
      end
      @(negedge clk) rb_we = 1'b0;
      for (int s = 0; s < T; s++) for (int j = 0; j < KX; j++) issue(1'b0, s, k, j, KX, j);
      @(negedge clk) iss_valid = 1'b0;
      while (busy) @(negedge clk);   // the row buffer is rewritten next
    end
    for (int k = 0; k < H; k++) for (int s = 0; s < T; s++) begin
      real d;
      d = 0.0;
      for (int i = 0; i < NI; i++) d += wx[k][i] * x[s][i];
      checks++;
      if ($signed(lane[s * H + k]) != qref(d)) begin
        failures++;
        if (failures < 10) $display("MISMATCH partial k=%0d s=%0d got %0d exp %0d", k, s, $signed(lane[s * H + k]), qref(d));
      end
    end
    // ---- step 2: weights, parameters, h and c
    for (int k = 0; k < H; k++) begin
      @(negedge clk);
      wb_we = 1'b1; wb_waddr = 15'(k);
      for (int i = 0; i < N; i++) wb_wdata[i] = r2fp(wh[k][i]);
    end
    @(negedge clk);
    wb_waddr = 15'd512;
    for (int i = 0; i < N; i++) wb_wdata[i] = (i % 2 == 0) ? r2fp(b[i / 2]) : r2fp(pw[i / 2]);
    @(negedge clk) wb_we = 1'b0;
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      h_in_valid = 1'b1; h_in_bank = 1'b0; h_in_k = 10'(k); h_in_data = r2fp(hv[k]);
      c_in_valid = (k < H); c_in_k = 10'(k); c_in_data = (k < H) ? r2fp(cv[k]) : '0;
    end
    @(negedge clk) begin h_in_valid = 1'b0; c_in_valid = 1'b0; end
    for (int s = 0; s < 2; s++) begin
      for (int k = 0; k < H; k++) issue(1'b1, s, k, 0, 1, k);
      @(negedge clk) iss_valid = 1'b0;
      while (busy) @(negedge clk);
    end
    checks++;
    if (nsend != 2 * H || not_ready == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
