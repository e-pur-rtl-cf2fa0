// tb_quant8: self-checking testbench of quant8. Random scaled partials in
// [-200, 200] (so both saturation directions occur) and exact halves are
// quantised; the 8-bit result, due one cycle later, is checked against
// round-half-away-from-zero and saturation at +-127 computed with reals.
module tb_quant8;
  import tb_util_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [31:0] a = '0;
  logic [7:0]  q;
  logic        out_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  quant8 dut (.clk, .rst_n, .in_valid, .a, .out_valid, .q);

  function automatic int ref_q(real r);
    int m;
    real x;
    x = (r < 0.0) ? -r : r;
    m = int'($floor(x + 0.5));
    if (m > 127) m = 127;
    return (r < 0.0) ? -m : m;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      real r;
      int  e;
      r = urand_r(-200.0, 200.0);
      if (i % 4 == 0) r = urand_r(-3.0, 3.0);
      if (i % 9 == 0) r = real'($urandom_range(0, 40)) - 20.5;   // exact halves
      @(negedge clk);
      in_valid = 1'b1;
      a = r2fp(r);
      e = ref_q(fp2r(a));
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || $signed(q) != e) begin
        failures++;
        if (failures < 10) $display("MISMATCH a=%g got %0d exp %0d", fp2r(a), $signed(q), e);
      end
    end
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
