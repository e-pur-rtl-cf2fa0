// tb_fp_cmp: self-checking testbench of fp_cmp. Random pairs (including
// equal values, +0/-0 and opposite signs) are compared and {lt, eq, gt} is
// checked against real comparison, with the result due LAT cycles later.
module tb_fp_cmp;
  import tb_util_pkg::*;
  localparam int LAT = 1;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [31:0] a = '0, b = '0;
  logic [2:0]  y;
  logic        out_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  fp_cmp #(.LAT(LAT)) dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .y);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      real ra, rb;
      logic [2:0] e;
      ra = urand_r(-10.0, 10.0);
      rb = (i % 5 == 0) ? ra : urand_r(-10.0, 10.0);
      if (i % 11 == 0) begin ra = 0.0; rb = -0.0; end
      @(negedge clk);
      in_valid = 1'b1;
      a = r2fp(ra);
      b = r2fp(rb);
      if (i % 11 == 0) b = 32'h8000_0000;
      e = {fp2r(a) < fp2r(b), fp2r(a) == fp2r(b), fp2r(a) > fp2r(b)};
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || y != e) begin
        failures++;
        if (failures < 10) $display("MISMATCH a=%g b=%g got %b exp %b", fp2r(a), fp2r(b), y, e);
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
