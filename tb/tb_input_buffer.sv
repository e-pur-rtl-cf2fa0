// tb_input_buffer: self-checking testbench of input_buffer. It writes a
// 1024-element h vector into bank 0 word by word, then the next one into
// bank 1 while reading bank 0 rows (the two banks must not disturb each
// other), and exercises the cell-state bank with interleaved writes and
// reads. All reads return data one cycle after the address.
module tb_input_buffer;
  localparam int N = 16, DEPTH = 1024;
  logic clk = 1'b0;
  logic h_we = 1'b0, h_wbank = 1'b0, h_rbank = 1'b0, c_we = 1'b0;
  logic [9:0]  h_waddr = '0, c_waddr = '0, c_raddr = '0;
  logic [5:0]  h_raddr = '0;
  logic [31:0] h_wdata = '0, c_wdata = '0, c_rdata;
  logic [N-1:0][31:0] h_rdata;
  logic [31:0] hv [2][DEPTH];
  logic [31:0] cv [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  input_buffer #(.DEPTH(DEPTH), .N(N)) dut (.clk, .h_we, .h_wbank, .h_waddr, .h_wdata,
    .h_rbank, .h_raddr, .h_rdata, .c_we, .c_waddr, .c_wdata, .c_raddr, .c_rdata);

  initial begin
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk);
      h_we = 1'b1; h_wbank = 1'b0; h_waddr = k[9:0]; h_wdata = $urandom; hv[0][k] = h_wdata;
      c_we = 1'b1; c_waddr = k[9:0]; c_wdata = $urandom; cv[k] = c_wdata;
    end
    @(negedge clk) begin h_we = 1'b0; c_we = 1'b0; end
    // write bank 1 while reading bank 0
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk);
      h_we = 1'b1; h_wbank = 1'b1; h_waddr = k[9:0]; h_wdata = $urandom; hv[1][k] = h_wdata;
      h_rbank = 1'b0; h_raddr = 6'(k % (DEPTH / N));
      c_raddr = 10'((k * 7) % DEPTH);
      @(negedge clk);
      h_we = 1'b0;
      checks += 2;
      for (int w = 0; w < N; w++) if (h_rdata[w] != hv[0][(k % (DEPTH / N)) * N + w]) begin
        failures++;
        break;
      end
      if (c_rdata != cv[(k * 7) % DEPTH]) failures++;
    end
    for (int r = 0; r < DEPTH / N; r++) begin
      @(negedge clk) begin h_rbank = 1'b1; h_raddr = r[5:0]; end
      @(negedge clk);
      checks++;
      for (int w = 0; w < N; w++) if (h_rdata[w] != hv[1][r * N + w]) begin
        failures++;
        break;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
