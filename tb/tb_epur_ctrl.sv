// tb_epur_ctrl: self-checking testbench of the layer sequencer. The
// testbench models the CUs (random ready, busy while results are pending,
// one h_t value written back a random time after each recurrent dot
// product) and main memory (forward rows after a random delay). It checks
// the complete issue sequence of a backward pass (H = 5 neurons, kx = 3,
// kh = 2, T = 4) against the MWL order: step 1 neuron by neuron over the
// whole sequence with x rows in reverse time order from OM half 1, then
// step 2 step by step; that no new dot product starts while a CU is not
// ready; that no step-2 issue for step s uses h_{s-1} before all of it was
// written back; and that done comes once, after the last h_t.
module tb_epur_ctrl;
  import epur_pkg::*;
  localparam int H = 5, KX = 3, KH = 2, T = 4, RR = 32768;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  layer_cfg_t cfg;
  logic [3:0] cu_ready = '1, cu_busy = '0;
  logic h_written = 1'b0, wrow_req, wrow_valid = 1'b0, rb_we;
  logic [10:0] wrow_k;
  logic [5:0] rb_waddr, iss_hrow;
  logic iss_valid, iss_first, iss_last, iss_hbank, om_rd_en;
  dtag_t iss_tag;
  logic [14:0] iss_wrow;
  logic [16:0] om_rd_row;
  logic [2:0] events;

  epur_ctrl dut (.clk, .rst_n, .start, .cfg, .busy, .done, .cu_ready, .cu_busy, .h_written,
    .wrow_req, .wrow_k, .wrow_valid, .rb_we, .rb_waddr, .iss_valid, .iss_first, .iss_last,
    .iss_tag, .iss_wrow, .iss_hrow, .iss_hbank, .om_rd_en, .om_rd_row, .events);

  always #5 clk = ~clk;

  typedef struct { bit ph; int k, s, t, j, wrow, orow; bit first, last, hbank; } iss_t;
  iss_t exp_q [$];
  int checks = 0, failures = 0, ndone = 0, pending = 0, hw_total = 0, rb_beats = 0;
  int h_due [$];          // cycles at which h_t values are written back
  int cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // CU model
  always @(posedge clk) if (rst_n) begin
    if (iss_valid) begin
      iss_t e;
      e = exp_q.pop_front();
      checks++;
      if (iss_tag.phase != e.ph || int'(iss_tag.k) != e.k || int'(iss_tag.s) != e.s ||
          int'(iss_tag.t) != e.t || iss_first != e.first || iss_last != e.last ||
          (e.ph && (int'(iss_wrow) != e.wrow || int'(iss_hrow) != e.j || iss_hbank != e.hbank)) ||
          (!e.ph && (!om_rd_en || int'(om_rd_row) != e.orow || int'(iss_wrow) != e.j)) ||
          (iss_first && !(&cu_ready)) || (e.ph && e.s > 0 && hw_total < e.s * H)) begin
        failures++;
        if (failures < 10) $display("BAD ISSUE ph=%0d k=%0d s=%0d j=%0d (exp k=%0d s=%0d j=%0d)",
                                    iss_tag.phase, iss_tag.k, iss_tag.s, iss_hrow, e.k, e.s, e.j);
      end
      if (iss_last) begin
        pending++;
        if (iss_tag.phase) h_due.push_back(cyc + int'($urandom_range(5, 40)));
        else h_due.push_back(-(cyc + int'($urandom_range(5, 40))));
      end
    end
    if (rb_we) rb_beats++;
    if (done) ndone++;
  end

  always @(negedge clk) begin
    h_written = 1'b0;
    if (h_due.size() != 0 && (h_due[0] < 0 ? -h_due[0] : h_due[0]) <= cyc) begin
      h_written = (h_due[0] > 0);
      if (h_written) hw_total++;
      void'(h_due.pop_front());
      pending--;
    end
    cu_busy   = (pending != 0) ? 4'hF : 4'h0;
    cu_ready  = ($urandom_range(0, 3) == 0) ? 4'b1011 : 4'b1111;
  end

  // memory model for forward rows
  initial forever begin
    @(negedge clk);
    if (wrow_req) begin
      repeat ($urandom_range(0, 4)) @(negedge clk);
      for (int j = 0; j < KX; j++) begin
        wrow_valid = 1'b1;
        @(negedge clk);
      end
      wrow_valid = 1'b0;
    end
  end

  initial begin
    cfg = '0;
    cfg.n_hid = 11'(H); cfg.kx = 7'(KX); cfg.kh = 7'(KH); cfg.seq_len = 20'(T);
    cfg.reverse = 1'b1; cfg.src_half = 1'b1;
    for (int k = 0; k < H; k++) for (int s = 0; s < T; s++) for (int j = 0; j < KX; j++)
      exp_q.push_back('{ph: 1'b0, k: k, s: s, t: T - 1 - s, j: j, wrow: j,
                        orow: RR + (T - 1 - s) * KX + j, first: (j == 0), last: (j == KX - 1), hbank: 1'b0});
    for (int s = 0; s < T; s++) for (int k = 0; k < H; k++) for (int j = 0; j < KH; j++)
      exp_q.push_back('{ph: 1'b1, k: k, s: s, t: T - 1 - s, j: j, wrow: k * KH + j,
                        orow: 0, first: (j == 0), last: (j == KH - 1), hbank: !s[0]});
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += 3;
    if (exp_q.size() != 0) failures++;
    if (ndone != 1 || busy) failures++;
    if (rb_beats != H * KX || hw_total != T * H) failures++;
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
