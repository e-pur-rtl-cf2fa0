// tb_weight_buffer: self-checking testbench of weight_buffer at its full
// 2 MB size. Random rows at random addresses are written, then read back
// through the wide port and, word by word, through the MU word port; both
// reads must return the data one cycle after the address. A shadow
// associative array holds the expected contents.
module tb_weight_buffer;
  localparam int N = 16;
  localparam int ROWS = 2097152 / (4 * N);
  logic clk = 1'b0, we = 1'b0;
  logic [$clog2(ROWS)-1:0]   waddr = '0, raddr = '0;
  logic [$clog2(ROWS*N)-1:0] saddr = '0;
  logic [N-1:0][31:0] wdata = '0, rdata;
  logic [31:0] sdata;
  logic [N-1:0][31:0] shadow [int];
  int addrs [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  weight_buffer #(.BYTES(2097152), .N(N)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata, .saddr, .sdata);

  initial begin
    for (int i = 0; i < 200; i++) begin
      int r;
      r = (i == 0) ? ROWS - 1 : int'($urandom_range(0, ROWS - 1));
      @(negedge clk);
      we = 1'b1; waddr = r[$clog2(ROWS)-1:0];
      for (int w = 0; w < N; w++) wdata[w] = $urandom;
      shadow[r] = wdata;
      addrs.push_back(r);
    end
    @(negedge clk) we = 1'b0;
    foreach (addrs[i]) begin
      int r, c;
      r = addrs[i];
      c = int'($urandom_range(0, N - 1));
      @(negedge clk);
      raddr = r[$clog2(ROWS)-1:0];
      saddr = ($clog2(ROWS*N))'(r * N + c);
      @(negedge clk);
      checks += 2;
      if (rdata != shadow[r]) failures++;
      if (sdata != shadow[r][c]) failures++;
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
