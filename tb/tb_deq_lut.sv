// tb_deq_lut: self-checking testbench of deq_lut. The table is filled with
// q/beta for a chosen beta, as the host would, then every code is looked up
// (one-cycle latency) and compared with the value written.
module tb_deq_lut;
  import tb_util_pkg::*;
  logic clk = 1'b0, we = 1'b0;
  logic [7:0]  waddr = '0, q = '0;
  logic [31:0] wdata = '0, y;
  int checks = 0, failures = 0;
  real beta = 127.0 / 20.0;

  always #5 clk = ~clk;
  deq_lut dut (.clk, .we, .waddr, .wdata, .q, .y);

  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = 8'(i); wdata = r2fp(real'($signed(8'(i))) / beta);
    end
    @(negedge clk) we = 1'b0;
    for (int i = 0; i < 256; i++) begin
      int c;
      c = (i * 37 + 11) % 256;
      @(negedge clk) q = 8'(c);
      @(negedge clk);
      checks++;
      if (!near(fp2r(y), real'($signed(8'(c))) / beta, 1e-6, 1e-9)) begin
        failures++;
        if (failures < 10) $display("MISMATCH q=%0d got %g", $signed(8'(c)), fp2r(y));
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
