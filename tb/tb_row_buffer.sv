// tb_row_buffer: self-checking testbench of row_buffer (4 KB). A full
// 1024-weight row is streamed in as 64 rows of 16 words, then every row is
// read back in a scrambled order with one cycle of latency; a second row
// then overwrites the first, as happens from one neuron to the next.
module tb_row_buffer;
  localparam int N = 16;
  localparam int ROWS = 4096 / (4 * N);
  logic clk = 1'b0, we = 1'b0;
  logic [$clog2(ROWS)-1:0] waddr = '0, raddr = '0;
  logic [N-1:0][31:0] wdata = '0, rdata;
  logic [N-1:0][31:0] shadow [ROWS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  row_buffer #(.BYTES(4096), .N(N)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        we = 1'b1; waddr = r[$clog2(ROWS)-1:0];
        for (int w = 0; w < N; w++) wdata[w] = $urandom;
        shadow[r] = wdata;
      end
      @(negedge clk) we = 1'b0;
      for (int i = 0; i < ROWS; i++) begin
        int r;
        r = (i * 29 + pass) % ROWS;
        @(negedge clk) raddr = r[$clog2(ROWS)-1:0];
        @(negedge clk);
        checks++;
        if (rdata != shadow[r]) failures++;
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
