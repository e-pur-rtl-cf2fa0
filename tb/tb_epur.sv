// tb_epur: end-to-end testbench of the LSTM processing unit at its default
// sizes (2 MB weight buffers, 4 KB row buffers, 6 MB OM). A host model runs
// a small two-layer network:
//   layer 1: 20 inputs, 24 LSTM neurons, peephole connections, forward pass,
//            input sequence in OM half 0, output to half 1;
//   layer 2: bidirectional, 16 neurons per direction, no peepholes, reading
//            half 1 and writing the forward pass to columns 0..15 and the
//            backward pass (reverse time order) to columns 16..31 of half 0.
// For every pass the host loads W_h, biases and peephole weights into the
// four weight buffers, answers each forward-row request after a random
// delay, and reads back h_t. The reference is the LSTM cell in real
// arithmetic, with the forward partials quantised to 8 bits exactly as the
// design does (round(beta*o), saturated at +-127, then o' = q/beta).
// Mechanisms counted and required at least once: stall on MU FIFO room,
// wait for a forward weight row, wait on the recurrent dependency, quantiser
// saturation, a backward pass, peephole on and off, and both OM halves as
// source.
module tb_epur;
  import tb_util_pkg::*;
  import epur_pkg::*;
  localparam int N = 16;
  localparam int OM_WORDS = 6291456 / 4, REGION = OM_WORDS / 3, REGION_ROWS = REGION / N;
  localparam int OM_RA_W = $clog2(OM_WORDS / N);
  localparam int T = 5;
  localparam int MAXI = 32, MAXH = 32;
  localparam int WB_PARAM_ROW = 1024;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  layer_cfg_t cfg;
  logic [3:0]  wb_we = '0;
  logic [14:0] wb_waddr = '0;
  logic [N-1:0][31:0] wb_wdata = '0;
  logic wrow_req, wrow_valid = 1'b0;
  logic [10:0] wrow_k;
  logic [3:0][N-1:0][31:0] wrow_data = '0;
  logic [3:0]  lut_we = '0;
  logic [7:0]  lut_waddr = '0;
  logic [31:0] lut_wdata = '0;
  logic om_host_we = 1'b0, om_host_re = 1'b0;
  logic [OM_RA_W-1:0] om_host_row = '0;
  logic [N-1:0][31:0] om_host_wdata = '0, om_host_rdata;
  logic [2:0] events;

  epur dut (.clk, .rst_n, .start, .cfg, .busy, .done, .wb_we, .wb_waddr, .wb_wdata,
            .wrow_req, .wrow_k, .wrow_valid, .wrow_data, .lut_we, .lut_waddr, .lut_wdata,
            .om_host_we, .om_host_re, .om_host_row, .om_host_wdata, .om_host_rdata, .events);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int ev_mu = 0, ev_row = 0, ev_dep = 0, n_sat = 0, n_rev = 0, n_pp_on = 0, n_pp_off = 0;
  int n_src [2] = '{0, 0};
  real beta = 127.0 / 3.0;

  always @(posedge clk) if (rst_n) begin
    ev_mu  += int'(events[0]);
    ev_row += int'(events[1]);
    ev_dep += int'(events[2]);
  end

  // network state (reals, rounded to FP32 where the design stores FP32)
  real x   [T][MAXI];          // pass input
  real wx  [4][MAXH][MAXI];
  real wh  [4][MAXH][MAXH];
  real bb  [4][MAXH];
  real pw  [4][MAXH];
  real hout [T][MAXH];         // reference outputs of the pass

  function automatic real fp(real r); return fp2r(r2fp(r)); endfunction
  function automatic real sigm(real v); return 1.0 / (1.0 + $exp(-v)); endfunction
  function automatic int qref(real v);
    real xx; int m;
    xx = beta * v;
    m = int'($floor(((xx < 0.0) ? -xx : xx) + 0.5));
    if (m > 127) begin m = 127; n_sat++; end
    return (xx < 0.0) ? -m : m;
  endfunction

  task automatic make_weights(int ni, int nh, real scale);
    for (int g = 0; g < 4; g++)
      for (int k = 0; k < nh; k++) begin
        // neuron 1 gets large forward weights so that its partials saturate
        for (int i = 0; i < ni; i++) wx[g][k][i] = fp(urand_r(-scale, scale) * ((k == 1) ? 5.0 : 1.0));
        for (int i = 0; i < nh; i++) wh[g][k][i] = fp(urand_r(-0.4, 0.4));
        bb[g][k] = fp(urand_r(-0.3, 0.3));
        pw[g][k] = fp(urand_r(-0.5, 0.5));
      end
  endtask

  task automatic reference(int ni, int nh, bit rev, bit pp);
    real c [MAXH], hp [MAXH];
    for (int k = 0; k < nh; k++) begin c[k] = 0.0; hp[k] = 0.0; end
    for (int s = 0; s < T; s++) begin
      int t;
      real hn [MAXH];
      t = rev ? T - 1 - s : s;
      for (int k = 0; k < nh; k++) begin
        real p [4], ig, fg, gg, og;
        for (int g = 0; g < 4; g++) begin
          real fw, rc;
          fw = 0.0; rc = 0.0;
          for (int i = 0; i < ni; i++) fw += wx[g][k][i] * x[t][i];
          for (int i = 0; i < nh; i++) rc += wh[g][k][i] * hp[i];
          p[g] = real'(qref(fw)) / beta + rc + bb[g][k];
        end
        ig = sigm(p[0] + (pp ? pw[0][k] * c[k] : 0.0));
        fg = sigm(p[1] + (pp ? pw[1][k] * c[k] : 0.0));
        gg = $tanh(p[2]);
        c[k] = fg * c[k] + ig * gg;
        og = sigm(p[3] + (pp ? pw[3][k] * c[k] : 0.0));
        hn[k] = og * $tanh(c[k]);
        hout[t][k] = hn[k];
      end
      for (int k = 0; k < nh; k++) hp[k] = hn[k];
    end
  endtask

  task automatic load_pass_weights(int nh);
    int kh;
    kh = (nh + N - 1) / N;
    for (int g = 0; g < 4; g++) begin
      for (int k = 0; k < nh; k++)
        for (int j = 0; j < kh; j++) begin
          @(negedge clk);
          wb_we = 4'(1 << g); wb_waddr = 15'(k * kh + j);
          for (int i = 0; i < N; i++) wb_wdata[i] = (j * N + i < nh) ? r2fp(wh[g][k][j * N + i]) : '0;
        end
      for (int r = 0; r < (2 * nh + N - 1) / N; r++) begin
        @(negedge clk);
        wb_we = 4'(1 << g); wb_waddr = 15'(WB_PARAM_ROW + r);
        for (int i = 0; i < N; i++) begin
          int w, k;
          w = r * N + i; k = w / 2;
          wb_wdata[i] = (k >= nh) ? '0 : ((w % 2 == 0) ? r2fp(bb[g][k]) : r2fp(pw[g][k]));
        end
      end
    end
    @(negedge clk) wb_we = '0;
  endtask

  // answers forward-row requests after a random delay
  int cur_ni = 0;
  initial forever begin
    @(negedge clk);
    if (wrow_req) begin
      int kx, k;
      kx = (cur_ni + N - 1) / N;
      k  = int'(wrow_k);
      repeat ($urandom_range(0, 3)) @(negedge clk);
      for (int j = 0; j < kx; j++) begin
        wrow_valid = 1'b1;
        for (int g = 0; g < 4; g++)
          for (int i = 0; i < N; i++)
            wrow_data[g][i] = (j * N + i < cur_ni) ? r2fp(wx[g][k][j * N + i]) : '0;
        @(negedge clk);
      end
      wrow_valid = 1'b0;
    end
  end

  task automatic run_pass(int ni, int nh, bit rev, bit pp, bit src, int hcol, int hstride);
    cfg = '0;
    cfg.n_hid = 11'(nh); cfg.kx = 7'((ni + N - 1) / N); cfg.kh = 7'((nh + N - 1) / N);
    cfg.seq_len = 20'(T); cfg.reverse = rev; cfg.peephole = pp; cfg.src_half = src;
    cfg.h_stride = 19'(hstride); cfg.h_col = 19'(hcol); cfg.wb_param = 19'(WB_PARAM_ROW * N);
    for (int g = 0; g < 4; g++) cfg.beta[g] = r2fp(beta);
    cur_ni = ni;
    load_pass_weights(nh);
    reference(ni, nh, rev, pp);
    if (rev) n_rev++;
    if (pp) n_pp_on++; else n_pp_off++;
    n_src[src]++;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (!done) @(negedge clk);
    // read h_t back from the destination half
    for (int t = 0; t < T; t++)
      for (int k = 0; k < nh; k++) begin
        int a;
        a = (src ? 0 : REGION) + t * hstride + hcol + k;
        @(negedge clk) begin om_host_re = 1'b1; om_host_row = OM_RA_W'(a / N); end
        @(negedge clk) om_host_re = 1'b0;
        checks++;
        if (!near(fp2r(om_host_rdata[a % N]), hout[t][k], 1e-3, 1e-4)) begin
          failures++;
          if (failures < 10) $display("MISMATCH t=%0d k=%0d got %g exp %g", t, k,
                                      fp2r(om_host_rdata[a % N]), hout[t][k]);
        end
      end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // dequantisation tables: q/beta
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      lut_we = '1; lut_waddr = 8'(i); lut_wdata = r2fp(real'($signed(8'(i))) / beta);
    end
    @(negedge clk) lut_we = '0;

    // ---- layer 1: input sequence into half 0
    for (int t = 0; t < T; t++) for (int i = 0; i < MAXI; i++) x[t][i] = (i < 20) ? fp(urand_r(-1.0, 1.0)) : 0.0;
    for (int t = 0; t < T; t++)
      for (int j = 0; j < 2; j++) begin
        @(negedge clk);
        om_host_we = 1'b1; om_host_row = OM_RA_W'(t * 2 + j);
        for (int i = 0; i < N; i++) om_host_wdata[i] = r2fp(x[t][j * N + i]);
      end
    @(negedge clk) om_host_we = 1'b0;
    make_weights(20, 24, 0.6);
    run_pass(20, 24, 1'b0, 1'b1, 1'b0, 0, 32);

    // ---- layer 2 (bidirectional) reads layer 1's h_t from half 1
    for (int t = 0; t < T; t++) for (int i = 0; i < MAXI; i++) x[t][i] = (i < 24) ? fp2r(r2fp(hout[t][i])) : 0.0;
    // use the design's own layer-1 outputs as the next input, like the hardware
    for (int t = 0; t < T; t++)
      for (int k = 0; k < 24; k++) begin
        int a;
        a = REGION + t * 32 + k;
        @(negedge clk) begin om_host_re = 1'b1; om_host_row = OM_RA_W'(a / N); end
        @(negedge clk) om_host_re = 1'b0;
        x[t][k] = fp2r(om_host_rdata[a % N]);
      end
    make_weights(24, 16, 0.5);
    run_pass(24, 16, 1'b0, 1'b0, 1'b1, 0, 32);
    make_weights(24, 16, 0.5);
    run_pass(24, 16, 1'b1, 1'b0, 1'b1, 16, 32);

    $display("mechanisms: mu_stall=%0d row_wait=%0d dep_wait=%0d saturations=%0d reverse=%0d peephole_on=%0d peephole_off=%0d src0=%0d src1=%0d",
             ev_mu, ev_row, ev_dep, n_sat, n_rev, n_pp_on, n_pp_off, n_src[0], n_src[1]);
    checks++; if (ev_mu == 0)    failures++;
    checks++; if (ev_row == 0)   failures++;
    checks++; if (ev_dep == 0)   failures++;
    checks++; if (n_sat == 0)    failures++;
    checks++; if (n_rev == 0)    failures++;
    checks++; if (n_pp_on == 0 || n_pp_off == 0) failures++;
    checks++; if (n_src[0] == 0 || n_src[1] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
