// tb_dpu: self-checking testbench of the Dot Product Unit (N = 16). It
// issues back-to-back dot products of random length K (1..6 sub-vectors),
// one sub-vector per cycle with no gaps, and compares each result with a
// dot product computed in real arithmetic. It also checks the tag and that
// each result appears MUL_LAT + log2(N) + 1 cycles after its last
// sub-vector, i.e. that the reduction takes log2(N) cycles.
module tb_dpu;
  import tb_util_pkg::*;
  import epur_pkg::*;
  localparam int N = 16, MUL_LAT = 4, LATENCY = MUL_LAT + 4 + 1;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, first = 1'b0, last = 1'b0, out_valid;
  logic [$bits(dtag_t)-1:0] tag = '0, out_tag;
  logic [N-1:0][31:0] w = '0, x = '0;
  logic [31:0] out;
  int checks = 0, failures = 0, cyc = 0;
  real exp_q [$], mag_q [$];
  int  t_q [$], tag_q [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  dpu #(.N(N), .MUL_LAT(MUL_LAT)) dut (.clk, .rst_n, .in_valid, .first, .last, .tag, .w, .x,
                                      .out_valid, .out, .out_tag);

  always @(posedge clk) if (rst_n && out_valid) begin
    real e, m;
    int  t0, tg;
    e = exp_q.pop_front(); m = mag_q.pop_front();
    t0 = t_q.pop_front(); tg = tag_q.pop_front();
    checks++;
    if (!near(fp2r(out), e, 0.0, 1e-6 * m + 1e-9) || cyc - t0 != LATENCY || int'(out_tag) != tg) begin
      failures++;
      if (failures < 10) $display("MISMATCH got %g exp %g lat %0d", fp2r(out), e, cyc - t0);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int d = 0; d < 150; d++) begin
      int  k;
      real acc, mag;
      k = int'($urandom_range(1, 6));
      acc = 0.0; mag = 0.0;
      for (int j = 0; j < k; j++) begin
        @(negedge clk);
        in_valid = 1'b1;
        first = (j == 0);
        last  = (j == k - 1);
        tag   = ($bits(dtag_t))'(d * 5 + 1);
        for (int i = 0; i < N; i++) begin
          w[i] = r2fp(urand_r(-1.0, 1.0));
          x[i] = r2fp((d % 10 == 0) ? 0.0 : urand_r(-2.0, 2.0));
          acc += fp2r(w[i]) * fp2r(x[i]);
          mag += (fp2r(w[i]) * fp2r(x[i]) < 0.0) ? -fp2r(w[i]) * fp2r(x[i]) : fp2r(w[i]) * fp2r(x[i]);
        end
      end
      exp_q.push_back(acc); mag_q.push_back(mag);
      t_q.push_back(cyc); tag_q.push_back(d * 5 + 1);
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LATENCY + 3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
