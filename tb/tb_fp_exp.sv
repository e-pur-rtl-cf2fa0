// tb_fp_exp: self-checking testbench of fp_exp. It feeds random operands every
// cycle, compares each result with a reference computed in real arithmetic
// (e^a) and checks that every result appears exactly LAT=5 cycles after
// its operands.
module tb_fp_exp;
  import tb_util_pkg::*;
  localparam int LAT = 5;
  localparam int NV  = 400;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [31:0] a = '0, b = '0, y;
  logic        out_valid;
  int checks = 0, failures = 0;
  real exp_q [$];
  int  t_q [$];
  int  cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  fp_exp #(.LAT(LAT)) dut (.clk, .rst_n, .in_valid, .a(a), .out_valid, .y);

  always @(posedge clk) if (rst_n && out_valid) begin
    real e, g;
    int  t0;
    e  = exp_q.pop_front();
    t0 = t_q.pop_front();
    g  = fp2r(y);
    checks++;
    if (!near(g, e, 1e-5, 0.0) || (cyc - t0) != LAT) begin
      failures++;
      if (failures < 10) $display("MISMATCH got %g exp %g latency %0d", g, e, cyc - t0);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NV; i++) begin
      real ra, rb;
      ra = urand_r(-20.0, 20.0);
      rb = urand_r(-20.0, 20.0);
      if (i % 7 == 3) rb = ra * 0.999;    // near-cancellation cases
      @(negedge clk);
      in_valid = 1'b1;
      a = r2fp(ra);
      b = r2fp(rb);
      exp_q.push_back($exp(fp2r(a)));
      t_q.push_back(cyc);
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 3) @(posedge clk);
    if (exp_q.size() != 0) failures++;
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
